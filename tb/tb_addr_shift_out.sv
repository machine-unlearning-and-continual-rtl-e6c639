// tb_addr_shift_out: self-checking test of the address serialiser.
// A reference shift-register chain (shift on sr_clk_en, copy on sr_latch) is
// built in the bench; for random words it checks that the latched word equals
// the word sent, that exactly WORD_W shift clocks and one latch happen, that
// done arrives WORD_W + 2 cycles after start, and that a start while busy is
// ignored.
module tb_addr_shift_out;
  localparam int unsigned W = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0;
  logic [W-1:0] word = '0;
  logic busy, done, sr_ser, sr_clk_en, sr_latch;
  int checks = 0, failures = 0;

  addr_shift_out #(.WORD_W(W)) dut (.*);

  always #5 clk = ~clk;

  logic [W-1:0] chain, latched;
  int n_shift, n_latch;
  always @(posedge clk) begin
    if (sr_clk_en) chain <= {chain[W-2:0], sr_ser};
    if (sr_latch)  latched <= chain;
    if (sr_clk_en) n_shift <= n_shift + 1;
    if (sr_latch)  n_latch <= n_latch + 1;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    chain = '0; latched = '0; n_shift = 0; n_latch = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 40; t++) begin
      logic [W-1:0] w;
      int lat;
      w = W'($urandom);
      if (t == 0) w = 16'h8001;
      if (t == 1) w = 16'h7FFE;
      @(negedge clk);
      n_shift = 0; n_latch = 0;
      word = w; start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      word = ~w;
      // a start while busy must be ignored
      if (t % 3 == 0) begin
        start = 1'b1;
        @(negedge clk);
        start = 1'b0;
        lat = 2;
      end else lat = 1;
      while (!done) begin
        @(negedge clk);
        lat++;
      end
      check(lat == W + 2, $sformatf("latency %0d, expected %0d", lat, W + 2));
      check(latched == w, $sformatf("latched %h, sent %h", latched, w));
      check(n_shift == W && n_latch == 1, $sformatf("shifts %0d latches %0d", n_shift, n_latch));
      @(negedge clk);
      check(!busy, "busy after done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
