// tb_rm_crossbar: self-checking test of the resistive-memory array model.
// Cells are addressed by shifting {row, column} into the model's
// shift-register chain. The bench checks: ready rises about COLS cycles after
// reset and every cell then reads G_INIT; a SET pulse raises a cell by amp-2..amp+2 and a RESET pulse lowers it
// likewise, clipped to 0..G_MAX; programming one cell leaves the others
// alone; and the analogue product of random DAC codes equals
// min(2^ADC_W - 1, sum_i G[i][j] * x[i] >> ADC_SHIFT) for every column,
// computed here from the conductances the bench tracked, with mvm_done
// arriving COLS cycles after mvm_start. One column is then raised to G_MAX
// and a full-scale input must clip its ADC code.
module tb_rm_crossbar;
  localparam int unsigned ROWS = 8, COLS = 6, DAC_W = 16, ADC_W = 14, G_W = 8;
  localparam int unsigned G_MAX = 240, G_INIT = 20, ADC_SHIFT = 11, SR_W = 16;

  logic clk = 1'b0, rst_n = 1'b0, ready;
  logic sr_ser = 1'b0, sr_clk_en = 1'b0, sr_latch = 1'b0;
  logic [SR_W-1:0] sel_addr;
  logic mvm_start = 1'b0, mvm_busy, mvm_done;
  logic [ROWS-1:0][DAC_W-1:0] dac_code = '0;
  logic [COLS-1:0][ADC_W-1:0] adc_code;
  logic pulse_valid = 1'b0, pulse_set = 1'b0;
  logic [3:0] pulse_amp = '0;
  logic verify_req = 1'b0, verify_valid;
  logic [G_W-1:0] verify_g;
  int checks = 0, failures = 0;

  rm_crossbar #(.ROWS(ROWS), .COLS(COLS), .DAC_W(DAC_W), .ADC_W(ADC_W), .G_W(G_W), .G_MAX(G_MAX),
                .G_INIT(G_INIT), .ADC_SHIFT(ADC_SHIFT), .SR_W(SR_W)) dut (.*);

  always #5 clk = ~clk;

  int gref [ROWS][COLS];
  int n_clip = 0;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic select(input int r, input int c);
    logic [SR_W-1:0] w;
    w = SR_W'((r << 3) | c);   // COLS <= 8 -> column field is 3 bits
    for (int b = SR_W - 1; b >= 0; b--) begin
      @(negedge clk);
      sr_ser = w[b]; sr_clk_en = 1'b1;
    end
    @(negedge clk);
    sr_clk_en = 1'b0; sr_latch = 1'b1;
    @(negedge clk);
    sr_latch = 1'b0;
    check(sel_addr == w, $sformatf("address latched %h expected %h", sel_addr, w));
  endtask

  task automatic verify(output int g);
    @(negedge clk);
    verify_req = 1'b1;
    @(negedge clk);
    verify_req = 1'b0;
    check(verify_valid, "verify_valid missing");
    g = int'(verify_g);
  endtask

  task automatic pulse(input int r, input int c, input bit set, input int amp);
    int g, lo, hi;
    select(r, c);
    @(negedge clk);
    pulse_valid = 1'b1; pulse_set = set; pulse_amp = 4'(amp);
    @(negedge clk);
    pulse_valid = 1'b0;
    verify(g);
    lo = set ? gref[r][c] + amp - 2 : gref[r][c] - amp - 2;
    hi = set ? gref[r][c] + amp + 2 : gref[r][c] - amp + 2;
    if (lo < 0) lo = 0;
    if (hi < 0) hi = 0;
    if (lo > int'(G_MAX)) lo = G_MAX;
    if (hi > int'(G_MAX)) hi = G_MAX;
    check(g >= lo && g <= hi, $sformatf("cell %0d,%0d %s amp %0d: %0d -> %0d", r, c, set ? "SET" : "RESET", amp, gref[r][c], g));
    gref[r][c] = g;
  endtask

  task automatic mvm(input bit full);
    longint acc, e;
    int cyc;
    for (int r = 0; r < ROWS; r++) dac_code[r] = full ? 16'hFFFF : DAC_W'($urandom);
    @(negedge clk);
    mvm_start = 1'b1;
    @(negedge clk);
    mvm_start = 1'b0;
    cyc = 1;
    while (!mvm_done) begin
      @(negedge clk);
      cyc++;
    end
    check(cyc == COLS + 1, $sformatf("conversion took %0d cycles", cyc));
    for (int c = 0; c < COLS; c++) begin
      acc = 0;
      for (int r = 0; r < ROWS; r++) acc += longint'(gref[r][c]) * longint'(dac_code[r]);
      e = acc >>> ADC_SHIFT;
      if (e > (1 << ADC_W) - 1) begin
        e = (1 << ADC_W) - 1;
        n_clip++;
      end
      check(longint'(adc_code[c]) == e, $sformatf("column %0d adc %0d expected %0d", c, adc_code[c], e));
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int g;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    begin
      automatic int w = 0;
      while (!ready) begin
        @(negedge clk);
        w++;
      end
      check(w >= COLS - 1 && w <= COLS + 1, $sformatf("ready %0d cycles after reset", w));
    end
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        select(r, c);
        verify(g);
        check(g == int'(G_INIT), $sformatf("cell %0d,%0d reset value %0d", r, c, g));
        gref[r][c] = g;
      end
    // program a pattern with random pulses
    for (int t = 0; t < 150; t++)
      pulse($urandom_range(ROWS - 1), $urandom_range(COLS - 1), ($urandom_range(3) != 0), 1 + $urandom_range(14));
    // clip at the bottom and top
    for (int t = 0; t < 20; t++) pulse(0, 0, 1'b0, 15);
    check(gref[0][0] == 0, "RESET did not clip at 0");
    for (int t = 0; t < 25; t++) pulse(1, 1, 1'b1, 15);
    check(gref[1][1] == int'(G_MAX), "SET did not clip at G_MAX");
    // the other cells must not have moved
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        select(r, c);
        verify(g);
        check(g == gref[r][c], $sformatf("cell %0d,%0d disturbed", r, c));
      end
    for (int t = 0; t < 10; t++) mvm(1'b0);
    // raise the last column to G_MAX so that a full-scale input clips the ADC
    for (int r = 0; r < ROWS; r++)
      while (gref[r][COLS-1] < int'(G_MAX)) pulse(r, COLS - 1, 1'b1, 15);
    mvm(1'b1);
    check(n_clip > 0, "ADC never clipped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
