// tb_write_verify_ctrl: self-checking test of the write-and-verify loop.
// The bench holds its own cell: a verify answers one cycle later with the
// cell's code; a pulse moves it by +/-(amp + noise), noise from $urandom in
// -2..+2, clipped to 0..CELL_MAX. For random targets and starting points it
// checks every pulse's polarity and amplitude against the rule
// (SET below target, amplitude clamp(|err|/2, 1, 15)), that done comes with
// ok = 1 and the cell within tolerance, that iterations counts the pulses,
// and that done comes 3 + 4 * pulses clock edges after the edge that takes start. An unreachable target must
// end after MAX_ITER pulses with ok = 0.
module tb_write_verify_ctrl;
  localparam int unsigned G_W      = 8;
  localparam int unsigned MAX_ITER = 40;
  localparam int          CELL_MAX = 240;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0;
  logic [G_W-1:0] target = '0, tol = 8'd4;
  logic busy, pulse_valid, pulse_set, verify_req, done, ok;
  logic [3:0] pulse_amp;
  logic verify_valid;
  logic [G_W-1:0] verify_g;
  logic [7:0] iterations;
  int checks = 0, failures = 0;

  write_verify_ctrl #(.G_W(G_W), .MAX_ITER(MAX_ITER)) dut (.*);

  always #5 clk = ~clk;

  int cellg;
  int n_pulses;
  int bad_pulse;
  always @(posedge clk) begin
    verify_valid <= verify_req;
    if (verify_req) verify_g <= G_W'(cellg);
    if (pulse_valid) begin
      int err, exp_amp, step;
      err = cellg - int'(target);
      exp_amp = (err < 0 ? -err : err) / 2;
      if (exp_amp < 1)  exp_amp = 1;
      if (exp_amp > 15) exp_amp = 15;
      if (pulse_set != (err < 0) || int'(pulse_amp) != exp_amp) bad_pulse <= bad_pulse + 1;
      step = int'(pulse_amp) + int'($urandom_range(4)) - 2;
      cellg <= (pulse_set ? cellg + step : cellg - step) < 0 ? 0 :
              (pulse_set ? cellg + step : cellg - step) > CELL_MAX ? CELL_MAX :
              (pulse_set ? cellg + step : cellg - step);
      n_pulses <= n_pulses + 1;
    end
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int init, input int tgt, output int cycles);
    @(negedge clk);
    cellg = init; n_pulses = 0; bad_pulse = 0;
    target = G_W'(tgt); start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cycles = 1;
    while (!done) begin
      @(negedge clk);
      cycles++;
    end
  endtask

  initial begin
    int cyc, e;
    automatic int multi = 0;
    verify_valid = 1'b0; verify_g = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 60; t++) begin
      int init, tgt;
      init = 20 + $urandom_range(200);
      tgt  = 20 + $urandom_range(200);
      if (t == 0) begin init = 100; tgt = 102; end   // already within tolerance
      run(init, tgt, cyc);
      e = cellg - tgt;
      if (e < 0) e = -e;
      check(ok == 1'b1, $sformatf("t%0d ok=0 from %0d to %0d", t, init, tgt));
      check(e <= 4, $sformatf("t%0d final error %0d", t, e));
      check(int'(iterations) == n_pulses, $sformatf("iterations %0d pulses %0d", iterations, n_pulses));
      check(bad_pulse == 0, $sformatf("t%0d %0d pulses with wrong polarity/amplitude", t, bad_pulse));
      check(cyc == 4 + 4 * n_pulses, $sformatf("t%0d took %0d cycles for %0d pulses", t, cyc, n_pulses));
      if (t == 0) check(n_pulses == 0, "pulse applied to a cellg already in tolerance");
      if (n_pulses > 1) multi++;
    end
    check(multi > 0, "no target needed more than one pulse");
    // unreachable target: cellg saturates at CELL_MAX
    run(200, 255, cyc);
    check(ok == 1'b0, "unreachable target reported ok");
    check(n_pulses == MAX_ITER && int'(iterations) == MAX_ITER,
          $sformatf("abort after %0d pulses", n_pulses));
    // tighter tolerance
    tol = 8'd1;
    run(50, 180, cyc);
    e = cellg - 180;
    if (e < 0) e = -e;
    check(ok && e <= 1, $sformatf("tol=1 final error %0d", e));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
