// tb_rm_dlora_top_full: the end-to-end sequence of tb_rm_dlora_top run on the
// top at its default sizes (128x128 array, rank 6, two adapter slots, no
// parameter overrides). All 16384 backbone cells are programmed by
// write-and-verify and read back, both adapters are written in full, and
// every one of the 128 outputs of each inference is compared with the bench's
// reference: learning (adapter 0), unlearning (adapter 0 partly rewritten),
// continual learning (adapter 1), backbone only, and a full-scale input.
// At these sizes the ADC does not clip (the largest column sum stays below
// full scale), so that mechanism is left to the reduced-size bench.
module tb_rm_dlora_top_full;
  import rm_dlora_pkg::*;

  // the top's default sizes, repeated here for the reference model
  localparam int unsigned ROWS = 128, COLS = 128, RANK = 6, SLOTS = 2, MAX_ITER = 64;
  localparam int unsigned H_SHIFT = 8, ADC_SHIFT = 16, G_MAX = 240, G_INIT = 20;

  logic clk = 1'b0, rst_n = 1'b0;
  logic cmd_valid = 1'b0, cmd_ready, rsp_valid;
  cmd_t cmd = '0;
  rsp_t rsp;
  logic mon_pulse_valid, mon_pulse_set, mon_mvm_start, mon_lora_busy;
  logic [15:0] mon_sel_addr;
  localparam int unsigned RA_W = $clog2(ROWS), CA_W = $clog2(COLS);
  int checks = 0, failures = 0;

  rm_dlora_top dut (.*);

  always #5 clk = ~clk;

  // mechanism counters
  int n_set = 0, n_reset = 0, n_multi = 0, n_abort = 0, n_lora_inf = 0, n_bypass = 0;
  int n_rewrite = 0, n_slot_switch = 0, n_adc_clip = 0, n_sat = 0;

  always_ff @(posedge clk) if (mon_pulse_valid) begin
    if (mon_pulse_set) n_set <= n_set + 1;
    else               n_reset <= n_reset + 1;
  end

  // reference state
  int          gref [ROWS][COLS];
  logic [15:0] xref [ROWS];
  int          aref [SLOTS][RANK][ROWS];
  int          bref [SLOTS][COLS][RANK];
  int          gain = 1, lshift = 0, slot = 0;
  bit          lora_en = 1;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic send(input op_e op, input int a, input int b, input logic [31:0] data,
                      input bit slot_f, input bit mat, output rsp_t r, output int edges);
    @(negedge clk);
    cmd_valid = 1'b1;
    cmd = '{op: op, slot: slot_f, mat: mat, idx_a: IDX_BITS'(a), idx_b: IDX_BITS'(b), data: data};
    check(cmd_ready, "controller not ready for a new command");
    @(negedge clk);
    cmd_valid = 1'b0;
    edges = 1;
    while (!rsp_valid) begin
      @(negedge clk);
      edges++;
    end
    r = rsp;
    check(r.op == op, $sformatf("response opcode %0d for %0d", r.op, op));
  endtask

  task automatic config_set();
    rsp_t r; int e;
    send(OP_CONFIG, 0, 0, {8'(TOL_2US), 2'(slot), 1'(lora_en), 5'(lshift), 16'(gain)}, 0, 0, r, e);
  endtask

  task automatic program_cell(input int row, input int col, input int tgt, input bit expect_ok);
    rsp_t r; int e, g;
    send(OP_PROGRAM, row, col, 32'(tgt), 0, 0, r, e);
    check(r.ok == expect_ok, $sformatf("program %0d,%0d to %0d ok=%0d", row, col, tgt, r.ok));
    check(e == 23 + 4 * int'(r.data), $sformatf("program took %0d edges for %0d pulses", e, r.data));
    check(mon_sel_addr == 16'((row << CA_W) | col), $sformatf("selector holds %h for cell %0d,%0d", mon_sel_addr, row, col));
    if (int'(r.data) > 1) n_multi++;
    if (!r.ok) begin
      n_abort++;
      check(int'(r.data) == MAX_ITER, "abort before MAX_ITER");
    end
    send(OP_VERIFY, row, col, 0, 0, 0, r, e);
    g = int'(r.data);
    if (expect_ok) check((g - tgt) <= 4 && (tgt - g) <= 4, $sformatf("cell %0d,%0d = %0d, target %0d", row, col, g, tgt));
    gref[row][col] = g;
  endtask

  task automatic write_adapter(input int s);
    rsp_t r; int e;
    for (int k = 0; k < ROWS; k++)
      for (int q = 0; q < RANK; q++) begin
        aref[s][q][k] = int'($signed(8'($urandom)));
        send(OP_LORA_WRITE, k, q, 32'(aref[s][q][k]), 1'(s), 0, r, e);
      end
    for (int d = 0; d < COLS; d++)
      for (int q = 0; q < RANK; q++) begin
        bref[s][d][q] = int'($signed(8'($urandom)));
        send(OP_LORA_WRITE, d, q, 32'(bref[s][d][q]), 1'(s), 1, r, e);
      end
  endtask

  task automatic infer_and_check();
    rsp_t r; int e;
    longint h [RANK];
    longint adc, y, l, hi, lo;
    send(OP_INFER, 0, 0, 0, 0, 0, r, e);
    if (lora_en) begin
      n_lora_inf++;
      check(int'(r.data) == ROWS + 2 * COLS + 6, $sformatf("LoRA inference took %0d cycles", r.data));
    end else begin
      n_bypass++;
      check(int'(r.data) == 2 * COLS + 3, $sformatf("backbone-only inference took %0d cycles", r.data));
    end
    check(int'(r.data) == e, $sformatf("reported %0d and observed %0d cycle counts differ", r.data, e));
    for (int q = 0; q < RANK; q++) begin
      h[q] = 0;
      for (int k = 0; k < ROWS; k++) h[q] += longint'(aref[slot][q][k]) * longint'(xref[k]);
      h[q] = h[q] >>> H_SHIFT;
      if (h[q] > 32767) h[q] = 32767;
      if (h[q] < -32768) h[q] = -32768;
    end
    hi = 64'sh7fffffff; lo = -64'sh80000000;
    for (int d = 0; d < COLS; d++) begin
      adc = 0;
      for (int k = 0; k < ROWS; k++) adc += longint'(gref[k][d]) * longint'(xref[k]);
      adc = adc >> ADC_SHIFT;
      if (adc > 16383) begin adc = 16383; n_adc_clip++; end
      l = 0;
      for (int q = 0; q < RANK; q++) l += longint'(bref[slot][d][q]) * h[q];
      l = longint'(32'(l));
      y = adc * gain + (lora_en ? (l >>> lshift) : 0);
      send(OP_Y_READ, d, 0, 0, 0, 0, r, e);
      check(r.ok == !(y > hi || y < lo), $sformatf("y[%0d] saturation flag", d));
      if (y > hi) y = hi;
      if (y < lo) begin y = lo; end
      if (!r.ok) n_sat++;
      check(longint'($signed(r.data)) == y, $sformatf("y[%0d] = %0d expected %0d", d, $signed(r.data), y));
    end
  endtask

  task automatic load_x(input int mode);
    rsp_t r; int e;
    for (int k = 0; k < ROWS; k++) begin
      xref[k] = (mode == 1) ? 16'hFFFF : 16'($urandom_range(20000));
      send(OP_X_WRITE, k, 0, 32'(xref[k]), 0, 0, r, e);
    end
  endtask

  initial begin
    repeat (40000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rsp_t r; int e, g;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    begin
      automatic int w = 0;
      while (!cmd_ready) begin
        @(negedge clk);
        w++;
      end
      check(w >= COLS - 1 && w <= COLS + 1, $sformatf("ready %0d cycles after reset", w));
    end
    gain = 4; lshift = 2; lora_en = 1; slot = 0;
    config_set();

    // 1. deployment of the frozen backbone
    for (int k = 0; k < ROWS; k++)
      for (int d = 0; d < COLS; d++)
        program_cell(k, d, 4 + $urandom_range(196), 1'b1);
    program_cell(3, 4, 250, 1'b0);     // beyond G_MAX: must give up

    // 2. learning: adapter 0
    write_adapter(0);
    begin
      send(OP_LORA_READ, 5, 2, 0, 0, 0, r, e);
      check($signed(r.data) == aref[0][2][5], "A read-back");
      send(OP_LORA_READ, 7, 3, 0, 0, 1, r, e);
      check($signed(r.data) == bref[0][7][3], "B read-back");
    end
    load_x(0);
    infer_and_check();

    // 3. unlearning: rewrite part of adapter 0 only
    for (int d = 0; d < COLS; d += 2)
      for (int q = 0; q < RANK; q++) begin
        bref[0][d][q] = int'($signed(8'(-bref[0][d][q])));   // -(-128) wraps as in the 8-bit SRAM
        send(OP_LORA_WRITE, d, q, 32'(bref[0][d][q]), 0, 1, r, e);
      end
    n_rewrite++;
    infer_and_check();
    for (int k = 0; k < ROWS; k += 5) begin
      send(OP_VERIFY, k, k % COLS, 0, 0, 0, r, e);
      check(int'(r.data) == gref[k][k % COLS], "backbone changed by an adapter update");
    end

    // 4. continual learning: adapter 1
    write_adapter(1);
    slot = 1;
    config_set();
    n_slot_switch++;
    load_x(0);
    infer_and_check();

    // 5. backbone only, ADC clipping, output saturation
    lora_en = 0;
    config_set();
    infer_and_check();
    load_x(1);
    infer_and_check();
    lora_en = 1; gain = 32767; lshift = 0;
    config_set();
    infer_and_check();

    check(n_set > 0,         "no SET pulse");
    check(n_reset > 0,       "no RESET pulse");
    check(n_multi > 0,       "no cell needed more than one pulse");
    check(n_abort > 0,       "write-verify never gave up");
    check(n_lora_inf > 0,    "no inference with the adapter");
    check(n_bypass > 0,      "no backbone-only inference");
    check(n_rewrite > 0,     "no adapter rewrite");
    check(n_slot_switch > 0, "no adapter slot switch");
    $display("mechanisms: set=%0d reset=%0d multi=%0d abort=%0d lora_inf=%0d bypass=%0d rewrite=%0d slot=%0d adc_clip=%0d sat=%0d",
             n_set, n_reset, n_multi, n_abort, n_lora_inf, n_bypass, n_rewrite, n_slot_switch, n_adc_clip, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
