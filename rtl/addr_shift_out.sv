// addr_shift_out: drives a serial-in/parallel-out shift-register chain that
// holds the address of the resistive-memory cell being programmed or read.
//
// A start pulse loads WORD_W bits. They leave MSB first on sr_ser, one bit per
// clock with sr_clk_en high (WORD_W cycles); the next cycle raises sr_latch so
// the chain's storage register takes the whole word, and the cycle after that
// pulses done. start is ignored while busy. A full transfer takes WORD_W + 2
// cycles from start to done.
//
// The use of a shift-register chain for addressing follows the published
// board; bit order, word length and the one-latch-cycle protocol are this
// design's own choices.
module addr_shift_out #(
  parameter int unsigned WORD_W = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [WORD_W-1:0] word,
  output logic              busy,
  output logic              done,
  output logic              sr_ser,
  output logic              sr_clk_en,
  output logic              sr_latch
);

  typedef enum logic [1:0] {S_IDLE, S_SHIFT, S_LATCH} state_e;

  localparam int unsigned CNT_W = $clog2(WORD_W + 1);

  state_e            state;
  logic [WORD_W-1:0] sreg;
  logic [CNT_W-1:0]  left;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      sreg  <= '0;
      left  <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          sreg  <= word;
          left  <= CNT_W'(WORD_W);
          state <= S_SHIFT;
        end
        S_SHIFT: begin
          sreg <= {sreg[WORD_W-2:0], 1'b0};
          left <= left - 1'b1;
          if (left == CNT_W'(1)) state <= S_LATCH;
        end
        S_LATCH: begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy      = (state != S_IDLE);
  assign sr_ser    = (state == S_SHIFT) & sreg[WORD_W-1];
  assign sr_clk_en = (state == S_SHIFT);
  assign sr_latch  = (state == S_LATCH);

endmodule
