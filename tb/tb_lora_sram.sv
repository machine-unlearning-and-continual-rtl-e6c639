// tb_lora_sram: self-checking test of the adapter SRAM.
// Fills A and B of every slot with random signed weights lane by lane while
// keeping a copy in the bench, then reads back through the two PE-array ports
// (whole RANK-wide words, one cycle latency) and the host port (single
// elements), including slot selection and a read in the same cycle as a write
// to the same word (must return the old data).
module tb_lora_sram;
  localparam int unsigned K = 16, D = 12, RANK = 6, W_W = 8, SLOTS = 2;
  localparam int unsigned IX_W = 4, LN_W = 3, SL_W = 1;

  logic clk = 1'b0;
  logic wr_en = 1'b0, wr_mat = 1'b0;
  logic [SL_W-1:0] wr_slot = '0, rd_slot = '0, hr_slot = '0;
  logic [IX_W-1:0] wr_idx = '0, a_rd_idx = '0, b_rd_idx = '0, hr_idx = '0;
  logic [LN_W-1:0] wr_lane = '0, hr_lane = '0;
  logic signed [W_W-1:0] wr_data = '0, hr_data;
  logic a_rd_en = 1'b0, b_rd_en = 1'b0, hr_en = 1'b0, hr_mat = 1'b0;
  logic [RANK-1:0][W_W-1:0] a_rd_word, b_rd_word;
  int checks = 0, failures = 0;

  lora_sram #(.K(K), .D(D), .RANK(RANK), .W_W(W_W), .SLOTS(SLOTS)) dut (.*);

  always #5 clk = ~clk;

  logic [W_W-1:0] ref_a [SLOTS][K][RANK];
  logic [W_W-1:0] ref_b [SLOTS][D][RANK];

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic wr(input bit m, input int s, input int i, input int l, input logic [W_W-1:0] v);
    @(negedge clk);
    wr_en = 1'b1; wr_mat = m; wr_slot = SL_W'(s); wr_idx = IX_W'(i); wr_lane = LN_W'(l); wr_data = v;
    if (!m) ref_a[s][i][l] = v; else ref_b[s][i][l] = v;
    @(negedge clk);
    wr_en = 1'b0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < SLOTS; s++) begin
      for (int i = 0; i < K; i++) for (int l = 0; l < RANK; l++) wr(0, s, i, l, W_W'($urandom));
      for (int i = 0; i < D; i++) for (int l = 0; l < RANK; l++) wr(1, s, i, l, W_W'($urandom));
    end
    // PE-array ports, whole words
    for (int s = 0; s < SLOTS; s++) begin
      for (int i = 0; i < K; i++) begin
        @(negedge clk);
        rd_slot = SL_W'(s); a_rd_en = 1'b1; a_rd_idx = IX_W'(i);
        b_rd_en = (i < D); b_rd_idx = IX_W'(i % D);
        @(negedge clk);
        a_rd_en = 1'b0; b_rd_en = 1'b0;
        for (int l = 0; l < RANK; l++) begin
          check(a_rd_word[l] == ref_a[s][i][l], $sformatf("A s%0d k%0d lane%0d", s, i, l));
          if (i < D) check(b_rd_word[l] == ref_b[s][i][l], $sformatf("B s%0d d%0d lane%0d", s, i, l));
        end
      end
    end
    // host port, single elements
    for (int t = 0; t < 100; t++) begin
      int s, i, l;
      bit m;
      m = 1'($urandom); s = $urandom_range(SLOTS - 1); l = $urandom_range(RANK - 1);
      i = m ? $urandom_range(D - 1) : $urandom_range(K - 1);
      @(negedge clk);
      hr_en = 1'b1; hr_mat = m; hr_slot = SL_W'(s); hr_idx = IX_W'(i); hr_lane = LN_W'(l);
      @(negedge clk);
      hr_en = 1'b0;
      check(hr_data == (m ? ref_b[s][i][l] : ref_a[s][i][l]), $sformatf("host read m%0d s%0d i%0d l%0d", m, s, i, l));
    end
    // read during a write of the same word returns the old value
    @(negedge clk);
    rd_slot = 1'b1; a_rd_en = 1'b1; a_rd_idx = 4'd3;
    wr_en = 1'b1; wr_mat = 1'b0; wr_slot = 1'b1; wr_idx = 4'd3; wr_lane = 3'd2; wr_data = ~ref_a[1][3][2];
    @(negedge clk);
    wr_en = 1'b0; a_rd_en = 1'b0;
    check(a_rd_word[2] == ref_a[1][3][2], "read-during-write returned new data");
    ref_a[1][3][2] = ~ref_a[1][3][2];
    @(negedge clk);
    a_rd_en = 1'b1;
    @(negedge clk);
    a_rd_en = 1'b0;
    check(a_rd_word[2] == ref_a[1][3][2], "write not visible on the next read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
