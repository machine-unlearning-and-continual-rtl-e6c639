// write_verify_ctrl: programs one resistive-memory cell to a target
// conductance by iterative write and verify.
//
// The loop is the one used for analogue weight programming: verify the
// conductance, compare it with the target, and while the error exceeds the
// tolerance apply one more write pulse and verify again. The loop stops when
// |G - target| <= tol (ok = 1) or after MAX_ITER pulses (ok = 0). The
// published halting tolerance is 2 uS, which is 4 codes at 0.5 uS per code;
// tol is a run-time input so that tighter or looser precision can be traded
// against pulse count.
//
// Pulse choice (this design's own rule): SET when the cell is below the target,
// RESET when above, amplitude clamp(|error| / 2, 1, 15) codes, so large errors
// are closed quickly and small ones with gentle pulses. A cell that is already
// within tolerance takes no pulse.
//
// Interface and timing: start (ignored while busy) samples target and tol.
// Each verify is a one-cycle verify_req answered by verify_valid with
// verify_g any number of cycles later; each pulse is a one-cycle pulse_valid
// with pulse_set and pulse_amp. One iteration takes 4 cycles with a one-cycle
// verify latency. done pulses for one cycle with ok and iterations (the number
// of write pulses applied) held until the next start.
module write_verify_ctrl #(
  parameter int unsigned G_W      = 8,
  parameter int unsigned MAX_ITER = 64
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [G_W-1:0] target,
  input  logic [G_W-1:0] tol,
  output logic           busy,
  output logic           pulse_valid,
  output logic           pulse_set,
  output logic [3:0]     pulse_amp,
  output logic           verify_req,
  input  logic           verify_valid,
  input  logic [G_W-1:0] verify_g,
  output logic           done,
  output logic           ok,
  output logic [7:0]     iterations
);

  typedef enum logic [2:0] {S_IDLE, S_VREQ, S_VWAIT, S_DECIDE, S_PULSE} state_e;

  state_e               state;
  logic [G_W-1:0]       tgt_q, tol_q, g_q;
  logic signed [G_W:0]  err;
  logic [G_W:0]         abs_err;
  logic [G_W:0]         half_err;

  assign err      = $signed({1'b0, g_q}) - $signed({1'b0, tgt_q});
  assign abs_err  = err[G_W] ? (G_W + 1)'(-err) : (G_W + 1)'(err);
  assign half_err = abs_err >> 1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      tgt_q      <= '0;
      tol_q      <= '0;
      g_q        <= '0;
      done       <= 1'b0;
      ok         <= 1'b0;
      iterations <= '0;
      pulse_set  <= 1'b0;
      pulse_amp  <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          tgt_q      <= target;
          tol_q      <= tol;
          iterations <= '0;
          ok         <= 1'b0;
          state      <= S_VREQ;
        end
        S_VREQ:  state <= S_VWAIT;
        S_VWAIT: if (verify_valid) begin
          g_q   <= verify_g;
          state <= S_DECIDE;
        end
        S_DECIDE: begin
          if (abs_err <= (G_W + 1)'(tol_q)) begin
            ok    <= 1'b1;
            done  <= 1'b1;
            state <= S_IDLE;
          end else if (32'(iterations) >= MAX_ITER) begin
            ok    <= 1'b0;
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            pulse_set <= err[G_W];  // below target -> SET
            pulse_amp <= (half_err == '0) ? 4'd1
                       : (half_err > (G_W + 1)'(15)) ? 4'd15 : half_err[3:0];
            state     <= S_PULSE;
          end
        end
        S_PULSE: begin
          iterations <= iterations + 1'b1;
          state      <= S_VREQ;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy        = (state != S_IDLE);
  assign pulse_valid = (state == S_PULSE);
  assign verify_req  = (state == S_VREQ);

endmodule
