// tb_lora_merge: self-checking test of the output adder.
// Random ADC codes, LoRA values, gains and shifts are applied one per cycle
// (with idle gaps); each result, one cycle later, is compared with
// y = sat32(adc * gain + (lora >>> shift)) computed in 64-bit arithmetic in
// the bench, or adc * gain when the LoRA branch is disabled. Large operands
// force saturation in both directions.
module tb_lora_merge;
  localparam int unsigned ADC_W = 14, Y_W = 32, IX_W = 7;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic [IX_W-1:0] in_idx = '0;
  logic [ADC_W-1:0] adc = '0;
  logic signed [Y_W-1:0] lora = '0;
  logic signed [15:0] gain = '0;
  logic [4:0] lora_shift = '0;
  logic lora_en = 1'b0;
  logic out_valid, sat_flag;
  logic [IX_W-1:0] out_idx;
  logic signed [Y_W-1:0] y;
  int checks = 0, failures = 0;
  int n_sat = 0;

  lora_merge #(.ADC_W(ADC_W), .Y_W(Y_W), .IX_W(IX_W)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 600; t++) begin
      longint e, hi, lo;
      bit en;
      @(negedge clk);
      in_valid = 1'b1;
      in_idx = IX_W'(t);
      adc = ADC_W'($urandom);
      gain = 16'($urandom);
      if (t % 4 == 0) gain = 16'($urandom_range(4));
      lora = $signed($urandom);
      lora_shift = 5'($urandom);
      en = 1'($urandom);
      if (t % 50 == 0) begin adc = '1; gain = 16'sh7fff; lora = 32'sh7fffffff; lora_shift = 0; en = 1; end
      if (t % 50 == 1) begin adc = '1; gain = -16'sh7fff; lora = -32'sh7fffffff; lora_shift = 0; en = 1; end
      lora_en = en;
      e = longint'(adc) * longint'(gain) + (en ? (longint'(lora) >>> lora_shift) : 64'sd0);
      hi = 64'sh7fffffff; lo = -64'sh80000000;
      @(negedge clk);
      in_valid = 1'b0;
      check(out_valid && out_idx == IX_W'(t), $sformatf("t%0d valid/index", t));
      check(longint'(y) == (e > hi ? hi : e < lo ? lo : e), $sformatf("t%0d y=%0d expected %0d", t, y, e));
      check(sat_flag == (e > hi || e < lo), $sformatf("t%0d sat flag", t));
      if (sat_flag) n_sat++;
      @(posedge clk);
      #1 check(!out_valid, "out_valid without input");
    end
    check(n_sat > 0, "saturation never exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
