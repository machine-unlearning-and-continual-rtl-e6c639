// tb_program_precision_workload: programming-precision experiment on the layer
// at its default sizes (128x128 array, no parameter overrides).
//
// A 32x32 conductance map showing the letters 'UL' over 'CL' is programmed by
// write-and-verify, the way the published chip was demonstrated: background
// cells at 90 uS (code 180), letter strokes at 35 uS (code 70) with a 55 uS
// (code 110) rim beside each stroke. The map is computed here from the letter
// shapes; it is this bench's own drawing of such a pattern. The same map is
// programmed six times into six different 32x32 tiles of the array (so every
// run starts from freshly reset cells), each time with a different halting
// tolerance set through CONFIG: 1, 2, 4, 6, 8 and 10 uS (2 to 20 codes).
//
// Checks: every cell converges and reads back within the tolerance of its
// run; the tiles programmed earlier are not disturbed by later runs; and a
// looser tolerance needs fewer pulses per cell than the tightest one. The
// bench prints the mean number of write pulses per cell for each tolerance,
// the trade-off between precision and programming effort that motivates
// keeping the backbone fixed. The absolute numbers depend on the pulse model
// of the behavioural array, not on the real devices.
module tb_program_precision_workload;
  import rm_dlora_pkg::*;

  localparam int unsigned N = 32;
  localparam int unsigned NT = 6;
  localparam int unsigned TOL [NT] = '{2, 4, 8, 12, 16, 20};   // codes of 0.5 uS

  logic clk = 1'b0, rst_n = 1'b0;
  logic cmd_valid = 1'b0, cmd_ready, rsp_valid;
  cmd_t cmd = '0;
  rsp_t rsp;
  logic mon_pulse_valid, mon_pulse_set, mon_mvm_start, mon_lora_busy;
  logic [15:0] mon_sel_addr;
  int checks = 0, failures = 0;

  rm_dlora_top dut (.*);

  always #5 clk = ~clk;

  int gread [NT][N][N];
  int pulses [NT];

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic send(input op_e op, input int a, input int b, input logic [31:0] data, output rsp_t r);
    @(negedge clk);
    cmd_valid = 1'b1;
    cmd = '{op: op, slot: 1'b0, mat: 1'b0, idx_a: IDX_BITS'(a), idx_b: IDX_BITS'(b), data: data};
    check(cmd_ready, "controller not ready for a new command");
    @(negedge clk);
    cmd_valid = 1'b0;
    while (!rsp_valid) @(negedge clk);
    r = rsp;
    check(r.op == op, "response opcode");
  endtask

  // 1 where a letter stroke is: 'U' and 'L' in the upper half, 'C' and 'L'
  // in the lower half, each letter 10 cells high and 10 wide with 2-cell strokes
  function automatic bit stroke(input int r, input int c);
    int lr, lc, letter;
    bit upper;
    upper = (r < 16);
    lr = upper ? r - 4 : r - 19;
    if (lr < 0 || lr > 9) return 1'b0;
    if (c >= 4 && c <= 13)       begin letter = upper ? 0 : 1; lc = c - 4;  end   // U or C
    else if (c >= 18 && c <= 27) begin letter = 2;             lc = c - 18; end   // L
    else return 1'b0;
    case (letter)
      0: return (lc <= 1) || (lc >= 8) || (lr >= 8);                  // U
      1: return (lc <= 1) || (lr <= 1) || (lr >= 8);                  // C
      default: return (lc <= 1) || (lr >= 8);                         // L
    endcase
  endfunction

  function automatic int target(input int r, input int c);
    if (stroke(r, c)) return 70;
    for (int dr = -1; dr <= 1; dr++)
      for (int dc = -1; dc <= 1; dc++)
        if (r + dr >= 0 && r + dr < int'(N) && c + dc >= 0 && c + dc < int'(N) && stroke(r + dr, c + dc))
          return 110;
    return 180;
  endfunction

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rsp_t r;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    while (!cmd_ready) @(negedge clk);

    for (int t = 0; t < int'(NT); t++) begin
      int r0, c0;
      r0 = int'(N) * (t / 4);
      c0 = int'(N) * (t % 4);
      // gain 1, shift 0, adapter on, slot 0, this run's tolerance
      send(OP_CONFIG, 0, 0, {8'(TOL[t]), 2'd0, 1'b1, 5'd0, 16'd1}, r);
      pulses[t] = 0;
      for (int i = 0; i < int'(N); i++)
        for (int j = 0; j < int'(N); j++) begin
          int g;
          send(OP_PROGRAM, r0 + i, c0 + j, 32'(target(i, j)), r);
          check(r.ok, $sformatf("tolerance %0d: cell %0d,%0d did not converge", TOL[t], i, j));
          pulses[t] += int'(r.data);
          send(OP_VERIFY, r0 + i, c0 + j, 0, r);
          g = int'(r.data);
          gread[t][i][j] = g;
          check(g - target(i, j) <= int'(TOL[t]) && target(i, j) - g <= int'(TOL[t]),
                $sformatf("tolerance %0d: cell %0d,%0d = %0d, target %0d", TOL[t], i, j, g, target(i, j)));
        end
      $display("tolerance %0d.%0d uS: %0d.%02d write pulses per cell", TOL[t] / 2, 5 * (TOL[t] % 2),
               pulses[t] / int'(N * N), (100 * pulses[t] / int'(N * N)) % 100);
    end

    // earlier tiles are undisturbed
    for (int t = 0; t < int'(NT); t++)
      for (int s = 0; s < 8; s++) begin
        int i, j;
        i = $urandom_range(N - 1);
        j = $urandom_range(N - 1);
        send(OP_VERIFY, int'(N) * (t / 4) + i, int'(N) * (t % 4) + j, 0, r);
        check(int'(r.data) == gread[t][i][j], $sformatf("tile %0d cell %0d,%0d disturbed", t, i, j));
      end
    for (int t = 1; t < int'(NT); t++)
      check(pulses[t] < pulses[0], $sformatf("tolerance %0d took no fewer pulses than %0d", TOL[t], TOL[0]));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
