// lora_pe_array: the digital computing unit of the low-rank adapter branch.
// It computes B*(A*x) for one input vector x of K elements, giving D outputs.
//
// RANK processing elements (one per rank index) work in two phases:
//   Phase 1, projection onto the rank space: for k = 0..K-1 the array reads
//     x[k] and the A word of column k; PE r accumulates h[r] += A[r][k] * x[k].
//     At the end each h[r] is shifted right by H_SHIFT and clipped to a signed
//     16-bit value hq[r], so the second phase uses narrow multipliers.
//   Phase 2, projection back to the outputs: for d = 0..D-1 the array reads
//     the B word of row d and the PEs form B[d][r] * hq[r], which an adder tree
//     sums into y[d]; y[d] leaves on y_valid / y_idx / y_data.
// Only A x is kept between the phases, never the D x K product B*A, which is
// what keeps the branch small.
//
// x is the unsigned DAC code used for the analogue rows, so the same vector
// feeds both branches. A and B are signed W_W-bit weights.
//
// Timing: start (ignored while busy) begins a pass. Operand reads are issued
// on rd_*; x_data, a_word and b_word must be valid the cycle after the read.
// done rises K + D + 3 clock edges after the edge that samples start
// (a bench counting from the cycle it drives start sees K + D + 4),
// which coincides with the last y_valid.
//
// The two projections and the PE array follow the published block diagram;
// one PE per rank, the two-phase schedule and the number formats are this
// design's own choices.
module lora_pe_array #(
  parameter int unsigned K       = 128,
  parameter int unsigned D       = 128,
  parameter int unsigned RANK    = 6,
  parameter int unsigned X_W     = 16,
  parameter int unsigned W_W     = 8,
  parameter int unsigned H_SHIFT = 8,
  parameter int unsigned Y_W     = 32,
  localparam int unsigned IX_W   = $clog2(((K > D) ? K : D))
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  output logic                     busy,
  // operand reads (data one cycle later)
  output logic                     a_rd_en,
  output logic                     b_rd_en,
  output logic [IX_W-1:0]          rd_idx,
  input  logic [X_W-1:0]           x_data,
  input  logic [RANK-1:0][W_W-1:0] a_word,
  input  logic [RANK-1:0][W_W-1:0] b_word,
  // result stream
  output logic                     y_valid,
  output logic [IX_W-1:0]          y_idx,
  output logic signed [Y_W-1:0]    y_data,
  output logic                     done
);

  localparam int unsigned H_W  = W_W + X_W + 1 + $clog2(K);
  localparam int unsigned HQ_W = 16;

  typedef enum logic [2:0] {S_IDLE, S_P1, S_P1_END, S_QUANT, S_P2, S_DRAIN} state_e;

  state_e                         state;
  logic [IX_W-1:0]                cnt;
  logic                           p1_v, p2_v, last_q;
  logic [IX_W-1:0]                p2_idx;
  logic signed [H_W-1:0]          h  [RANK];
  logic signed [HQ_W-1:0]         hq [RANK];
  logic signed [Y_W-1:0]          dot;

  // adder tree of the RANK products of phase 2
  always_comb begin
    logic signed [63:0] s;
    s = '0;
    for (int r = 0; r < RANK; r++)
      s += 64'($signed(b_word[r])) * 64'(hq[r]);
    dot = Y_W'(s);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      cnt     <= '0;
      p1_v    <= 1'b0;
      p2_v    <= 1'b0;
      p2_idx  <= '0;
      last_q  <= 1'b0;
      y_valid <= 1'b0;
      y_idx   <= '0;
      y_data  <= '0;
      done    <= 1'b0;
      for (int r = 0; r < RANK; r++) begin
        h[r]  <= '0;
        hq[r] <= '0;
      end
    end else begin
      p1_v    <= (state == S_P1);
      p2_v    <= (state == S_P2);
      p2_idx  <= cnt;
      last_q  <= (state == S_P2) && (cnt == IX_W'(D - 1));
      y_valid <= p2_v;
      done    <= p2_v && last_q;
      if (p2_v) begin
        y_idx  <= p2_idx;
        y_data <= dot;
      end

      // phase-1 multiply-accumulate, one cycle behind the read
      if (p1_v)
        for (int r = 0; r < RANK; r++)
          h[r] <= h[r] + H_W'($signed(a_word[r])) * H_W'($signed({1'b0, x_data}));

      unique case (state)
        S_IDLE: if (start) begin
          for (int r = 0; r < RANK; r++) h[r] <= '0;
          cnt   <= '0;
          state <= S_P1;
        end
        S_P1: begin
          if (cnt == IX_W'(K - 1)) state <= S_P1_END;
          else                      cnt   <= cnt + 1'b1;
        end
        S_P1_END: state <= S_QUANT;   // the last accumulation lands this cycle
        S_QUANT: begin
          for (int r = 0; r < RANK; r++)
            hq[r] <= HQ_W'(rm_dlora_pkg::sat_signed(64'(h[r] >>> H_SHIFT), HQ_W));
          cnt   <= '0;
          state <= S_P2;
        end
        S_P2: begin
          if (cnt == IX_W'(D - 1)) state <= S_DRAIN;
          else                      cnt   <= cnt + 1'b1;
        end
        S_DRAIN: if (done) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy    = (state != S_IDLE);
  assign a_rd_en = (state == S_P1);
  assign b_rd_en = (state == S_P2);
  assign rd_idx  = cnt;

endmodule
