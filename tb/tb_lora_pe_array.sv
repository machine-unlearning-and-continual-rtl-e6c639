// tb_lora_pe_array: self-checking test of the LoRA digital computing unit.
// The bench acts as input buffer and SRAM (data one cycle after each read)
// and computes the expected branch output itself:
//   h[r] = sum_k A[r][k] * x[k];  hq[r] = clip16(h[r] >>> H_SHIFT);
//   y[d] = sum_r B[d][r] * hq[r].
// It checks every streamed y value and index, the output order, that done
// coincides with the last output, and that a pass takes K + D + 4 cycles.
// One pass uses full-scale operands so that the requantisation clips.
module tb_lora_pe_array;
  localparam int unsigned K = 10, D = 7, RANK = 6, X_W = 16, W_W = 8, H_SHIFT = 8, Y_W = 32;
  localparam int unsigned IX_W = 4, DI_W = $clog2(D);

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic busy, a_rd_en, b_rd_en, y_valid, done;
  logic [IX_W-1:0] rd_idx, y_idx;
  logic [X_W-1:0] x_data;
  logic [RANK-1:0][W_W-1:0] a_word, b_word;
  logic signed [Y_W-1:0] y_data;
  int checks = 0, failures = 0;

  lora_pe_array #(.K(K), .D(D), .RANK(RANK), .X_W(X_W), .W_W(W_W), .H_SHIFT(H_SHIFT), .Y_W(Y_W)) dut (.*);

  always #5 clk = ~clk;

  logic [X_W-1:0] xm [K];
  logic signed [W_W-1:0] am [RANK][K];
  logic signed [W_W-1:0] bm [D][RANK];

  always_ff @(posedge clk) begin
    if (a_rd_en) begin
      x_data <= xm[rd_idx];
      for (int r = 0; r < RANK; r++) a_word[r] <= am[r][rd_idx];
    end
    if (b_rd_en)
      for (int r = 0; r < RANK; r++) b_word[r] <= bm[rd_idx[DI_W-1:0]][r];
  end

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

  task automatic pass(input int mode);
    longint h [RANK];
    longint hq [RANK];
    longint ey [D];
    int nout, cyc;
    bit done_seen;
    for (int k = 0; k < K; k++) begin
      xm[k] = (mode == 1) ? 16'hFFFF : X_W'($urandom);
      for (int r = 0; r < RANK; r++) am[r][k] = (mode == 1) ? ((r % 2 == 1) ? -8'sd128 : 8'sd127) : W_W'($urandom);
    end
    for (int d = 0; d < D; d++)
      for (int r = 0; r < RANK; r++) bm[d][r] = W_W'($urandom);
    for (int r = 0; r < RANK; r++) begin
      h[r] = 0;
      for (int k = 0; k < K; k++) h[r] += longint'(am[r][k]) * longint'(xm[k]);
      hq[r] = h[r] >>> H_SHIFT;
      if (hq[r] > 32767) hq[r] = 32767;
      if (hq[r] < -32768) hq[r] = -32768;
    end
    for (int d = 0; d < D; d++) begin
      ey[d] = 0;
      for (int r = 0; r < RANK; r++) ey[d] += longint'(bm[d][r]) * hq[r];
    end
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1; nout = 0; done_seen = 0;
    while (!done_seen) begin
      if (y_valid) begin
        check(int'(y_idx) == nout, $sformatf("mode%0d output %0d has index %0d", mode, nout, y_idx));
        check(longint'(y_data) == ey[nout], $sformatf("mode%0d y[%0d]=%0d expected %0d", mode, nout, y_data, ey[nout]));
        nout++;
      end
      if (done) begin
        done_seen = 1;
        check(y_valid && nout == D, "done not with last output");
        check(cyc == K + D + 4, $sformatf("pass took %0d cycles, expected %0d", cyc, K + D + 4));
      end else begin
        @(negedge clk);
        cyc++;
      end
    end
    @(negedge clk);
    check(!busy, "busy after done");
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 20; t++) pass(0);
    pass(1);
    pass(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
