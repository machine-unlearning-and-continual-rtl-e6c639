// tb_face_unlearning_workload: the face-recognition workflow of the published
// system, run on the layer at its default sizes (128x128 array, rank 6, two
// adapter slots, no parameter overrides).
//
// The small MLP-Mixer used for face classification has three weight maps:
// a per-patch MLP of 20x16, a mixer layer of 32x16 and an output layer of
// 6x20 (outputs x inputs, the sizes printed with its conductance maps). All
// three are deployed side by side in one array, each in its own block of rows
// (inputs) and columns (outputs), with conductances of 10 to 80 uS (codes 20
// to 160) as in those maps. A layer is evaluated by driving only its own rows;
// the other rows are held at zero so the other blocks add nothing. The low-rank
// adapter is attached to the output layer: A is non-zero only on its 20 input
// rows and B only on its 6 output columns. The orientation of the maps and the
// block placement are this bench's own choices.
//
// Sequence and checks:
//   1. deployment: the 952 weights are programmed by write-and-verify and read
//      back; every one must be within the 2 uS tolerance;
//   2. learning: adapter slot 0 is written; each layer is run on random inputs
//      and every output compared with a reference built from the read-back
//      conductances and the adapter;
//   3. unlearning of class 2: only the adapter row of that class is
//      rewritten; class 2's output must change and the other five must stay
//      bit-identical;
//   4. continual learning of a new class: a new adapter goes into slot 1 and
//      is selected; then slot 0 is selected again and must give the
//      unlearning result back unchanged;
//   5. throughout steps 2 to 4 no programming pulse may reach the array, and
//      the backbone cells must read back as deployed.
// It prints the number of programming pulses against adapter words written,
// the update-cost comparison behind the design.
module tb_face_unlearning_workload;
  import rm_dlora_pkg::*;

  localparam int unsigned ROWS = ARRAY_ROWS, COLS = ARRAY_COLS, RANK = LORA_RANK;
  localparam int unsigned H_SHIFT = 8, ADC_SHIFT = 16;
  localparam int unsigned NL = 3;
  // per layer: first row, inputs, first column, outputs
  localparam int unsigned R0 [NL] = '{0, 16, 32};
  localparam int unsigned NI [NL] = '{16, 16, 20};
  localparam int unsigned C0 [NL] = '{0, 20, 52};
  localparam int unsigned NO [NL] = '{20, 32, 6};
  localparam int unsigned OUT_L = 2;   // the layer carrying the adapter

  logic clk = 1'b0, rst_n = 1'b0;
  logic cmd_valid = 1'b0, cmd_ready, rsp_valid;
  cmd_t cmd = '0;
  rsp_t rsp;
  logic mon_pulse_valid, mon_pulse_set, mon_mvm_start, mon_lora_busy;
  logic [15:0] mon_sel_addr;
  int checks = 0, failures = 0;

  rm_dlora_top dut (.*);

  always #5 clk = ~clk;

  int n_pulses = 0, n_lora_words = 0, n_cells = 0;
  always @(posedge clk) if (mon_pulse_valid) n_pulses <= n_pulses + 1;

  int          gref [ROWS][COLS];
  logic [15:0] xref [ROWS];
  int          aref [2][RANK][ROWS];
  int          bref [2][COLS][RANK];
  longint      yout [COLS];
  int          slot = 0;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic send(input op_e op, input int a, input int b, input logic [31:0] data,
                      input bit slot_f, input bit mat, output rsp_t r);
    @(negedge clk);
    cmd_valid = 1'b1;
    cmd = '{op: op, slot: slot_f, mat: mat, idx_a: IDX_BITS'(a), idx_b: IDX_BITS'(b), data: data};
    check(cmd_ready, "controller not ready for a new command");
    @(negedge clk);
    cmd_valid = 1'b0;
    while (!rsp_valid) @(negedge clk);
    r = rsp;
    check(r.op == op, "response opcode");
  endtask

  task automatic config_slot(input int s);
    rsp_t r;
    slot = s;
    // gain 1, no LoRA shift, adapter on, tolerance 4 codes (2 uS)
    send(OP_CONFIG, 0, 0, {8'(TOL_2US), 2'(s), 1'b1, 5'd0, 16'd1}, 0, 0, r);
  endtask

  task automatic write_lora(input int s, input bit mat, input int i, input int q, input int v);
    rsp_t r;
    if (mat) bref[s][i][q] = v; else aref[s][q][i] = v;
    send(OP_LORA_WRITE, i, q, 32'(v), 1'(s), mat, r);
    n_lora_words++;
  endtask

  // adapter for the output layer only; everything else is written as zero
  task automatic write_adapter(input int s);
    for (int k = 0; k < int'(ROWS); k++)
      for (int q = 0; q < int'(RANK); q++)
        write_lora(s, 0, k, q, (k >= int'(R0[OUT_L]) && k < int'(R0[OUT_L] + NI[OUT_L]))
                               ? int'($signed(8'($urandom))) : 0);
    for (int d = 0; d < int'(COLS); d++)
      for (int q = 0; q < int'(RANK); q++)
        write_lora(s, 1, d, q, (d >= int'(C0[OUT_L]) && d < int'(C0[OUT_L] + NO[OUT_L]))
                               ? int'($signed(8'($urandom))) : 0);
  endtask

  // run layer l on fresh inputs (or on the inputs already loaded) and check it
  task automatic run_layer(input int l, input bit new_x);
    rsp_t r;
    longint h [RANK];
    longint adc, lo;
    if (new_x)
      for (int k = 0; k < int'(ROWS); k++) begin
        xref[k] = (k >= int'(R0[l]) && k < int'(R0[l] + NI[l])) ? 16'($urandom) : 16'd0;
        send(OP_X_WRITE, k, 0, 32'(xref[k]), 0, 0, r);
      end
    send(OP_INFER, 0, 0, 0, 0, 0, r);
    check(int'(r.data) == int'(ROWS + 2 * COLS + 6), "inference cycle count");
    for (int q = 0; q < int'(RANK); q++) begin
      h[q] = 0;
      for (int k = 0; k < int'(ROWS); k++) h[q] += longint'(aref[slot][q][k]) * longint'(xref[k]);
      h[q] = h[q] >>> H_SHIFT;
      if (h[q] > 32767) h[q] = 32767;
      if (h[q] < -32768) h[q] = -32768;
    end
    for (int d = int'(C0[l]); d < int'(C0[l] + NO[l]); d++) begin
      adc = 0;
      for (int k = 0; k < int'(ROWS); k++) adc += longint'(gref[k][d]) * longint'(xref[k]);
      adc = adc >> ADC_SHIFT;
      if (adc > 16383) adc = 16383;
      lo = 0;
      for (int q = 0; q < int'(RANK); q++) lo += longint'(bref[slot][d][q]) * h[q];
      send(OP_Y_READ, d, 0, 0, 0, 0, r);
      yout[d] = longint'($signed(r.data));
      check(yout[d] == adc + lo, $sformatf("layer %0d out %0d: %0d expected %0d", l, d - int'(C0[l]), yout[d], adc + lo));
    end
  endtask

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rsp_t r;
    int deploy_pulses;
    longint y_ul [COLS];
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    while (!cmd_ready) @(negedge clk);
    config_slot(0);

    // 1. deployment of the three maps; all other cells keep the reset value
    for (int k = 0; k < int'(ROWS); k++)
      for (int d = 0; d < int'(COLS); d++) gref[k][d] = int'(20);
    for (int l = 0; l < int'(NL); l++)
      for (int k = int'(R0[l]); k < int'(R0[l] + NI[l]); k++)
        for (int d = int'(C0[l]); d < int'(C0[l] + NO[l]); d++) begin
          int tgt;
          tgt = 20 + $urandom_range(140);
          send(OP_PROGRAM, k, d, 32'(tgt), 0, 0, r);
          check(r.ok, $sformatf("cell %0d,%0d did not converge", k, d));
          send(OP_VERIFY, k, d, 0, 0, 0, r);
          gref[k][d] = int'(r.data);
          check(gref[k][d] - tgt <= 4 && tgt - gref[k][d] <= 4, $sformatf("cell %0d,%0d = %0d, target %0d", k, d, gref[k][d], tgt));
          n_cells++;
        end
    deploy_pulses = n_pulses;

    // 2. learning
    write_adapter(0);
    for (int l = 0; l < int'(NL); l++) run_layer(l, 1'b1);

    // 3. unlearning of class 2: rewrite the adapter row of that output only
    begin
      longint y_before [COLS];
      for (int d = 0; d < int'(COLS); d++) y_before[d] = yout[d];
      for (int q = 0; q < int'(RANK); q++)
        write_lora(0, 1, int'(C0[OUT_L]) + 2, q, (q % 2 == 0) ? -128 : 127);
      run_layer(OUT_L, 1'b0);
      for (int c = 0; c < int'(NO[OUT_L]); c++) begin
        int d;
        d = int'(C0[OUT_L]) + c;
        if (c == 2) check(yout[d] != y_before[d], "unlearned class output unchanged");
        else        check(yout[d] == y_before[d], $sformatf("retained class %0d changed", c));
      end
      for (int d = 0; d < int'(COLS); d++) y_ul[d] = yout[d];
    end

    // 4. continual learning in slot 1, then back to slot 0
    write_adapter(1);
    config_slot(1);
    run_layer(OUT_L, 1'b0);
    config_slot(0);
    run_layer(OUT_L, 1'b0);
    for (int c = 0; c < int'(NO[OUT_L]); c++)
      check(yout[int'(C0[OUT_L]) + c] == y_ul[int'(C0[OUT_L]) + c], "slot 0 not preserved");
    for (int l = 0; l < int'(NL); l++) if (l != int'(OUT_L)) run_layer(l, 1'b1);

    // 5. the backbone was never touched after deployment
    check(n_pulses == deploy_pulses, $sformatf("%0d pulses after deployment", n_pulses - deploy_pulses));
    for (int t = 0; t < 64; t++) begin
      int l, k, d;
      l = $urandom_range(NL - 1);
      k = int'(R0[l]) + $urandom_range(NI[l] - 1);
      d = int'(C0[l]) + $urandom_range(NO[l] - 1);
      send(OP_VERIFY, k, d, 0, 0, 0, r);
      check(int'(r.data) == gref[k][d], $sformatf("backbone cell %0d,%0d changed", k, d));
    end

    $display("deployment: %0d cells, %0d programming pulses; adapter updates: %0d SRAM words, %0d pulses",
             n_cells, deploy_pulses, n_lora_words, n_pulses - deploy_pulses);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
