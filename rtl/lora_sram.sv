// lora_sram: on-chip SRAM buffer holding the trainable low-rank adapter
// matrices A (RANK x K, the projection of the input onto the rank space) and
// B (D x RANK, the projection back to the outputs) for SLOTS adapters.
//
// Keeping the adapters here, not in the resistive array, is what makes model
// updates cheap: unlearning or learning a new class rewrites only these
// RANK*(K+D) words per adapter and never reprograms a conductance.
//
// Organisation (this design's own choice): each matrix is stored as words of
// RANK signed W_W-bit lanes. The A word at index k holds column k, A[0..r-1][k];
// the B word at index d holds row d, B[d][0..r-1]. One read therefore feeds all
// RANK processing elements at once. The host writes a single lane per cycle
// (wr_mat selects A or B, wr_idx the word, wr_lane the rank index).
//
// Timing: all reads are synchronous, data valid the cycle after the enable.
// Port a_rd_* and b_rd_* serve the PE array from the slot rd_slot; port hr_*
// lets the host read one element back. A write and a read of the same word in
// the same cycle return the old contents.
module lora_sram #(
  parameter int unsigned K     = 128,
  parameter int unsigned D     = 128,
  parameter int unsigned RANK  = 6,
  parameter int unsigned W_W   = 8,
  parameter int unsigned SLOTS = 2,
  localparam int unsigned SL_W = (SLOTS > 1) ? $clog2(SLOTS) : 1,
  localparam int unsigned IX_W = $clog2(((K > D) ? K : D)),
  localparam int unsigned LN_W = (RANK > 1) ? $clog2(RANK) : 1
) (
  input  logic                              clk,
  // host write
  input  logic                              wr_en,
  input  logic                              wr_mat,
  input  logic [SL_W-1:0]                   wr_slot,
  input  logic [IX_W-1:0]                   wr_idx,
  input  logic [LN_W-1:0]                   wr_lane,
  input  logic signed [W_W-1:0]             wr_data,
  // PE-array reads
  input  logic [SL_W-1:0]                   rd_slot,
  input  logic                              a_rd_en,
  input  logic [IX_W-1:0]                   a_rd_idx,
  output logic [RANK-1:0][W_W-1:0]          a_rd_word,
  input  logic                              b_rd_en,
  input  logic [IX_W-1:0]                   b_rd_idx,
  output logic [RANK-1:0][W_W-1:0]          b_rd_word,
  // host read-back
  input  logic                              hr_en,
  input  logic                              hr_mat,
  input  logic [SL_W-1:0]                   hr_slot,
  input  logic [IX_W-1:0]                   hr_idx,
  input  logic [LN_W-1:0]                   hr_lane,
  output logic signed [W_W-1:0]             hr_data
);

  typedef logic [RANK-1:0][W_W-1:0] word_t;

  word_t a_mem [SLOTS][K];
  word_t b_mem [SLOTS][D];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      if (!wr_mat) a_mem[wr_slot][wr_idx][wr_lane] <= wr_data;
      else         b_mem[wr_slot][wr_idx][wr_lane] <= wr_data;
    end
  end

  always_ff @(posedge clk) begin
    if (a_rd_en) a_rd_word <= a_mem[rd_slot][a_rd_idx];
    if (b_rd_en) b_rd_word <= b_mem[rd_slot][b_rd_idx];
    if (hr_en)   hr_data   <= hr_mat ? b_mem[hr_slot][hr_idx][hr_lane]
                                     : a_mem[hr_slot][hr_idx][hr_lane];
  end

endmodule
