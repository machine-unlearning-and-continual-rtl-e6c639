// lora_merge: adds the digitised analogue backbone product W0*x and the digital
// low-rank branch B*A*x into the layer output y.
//
// y = sat(adc * gain + (lora >>> lora_shift)) when lora_en is high, and
// y = sat(adc * gain) when it is low (backbone only). adc is the unsigned ADC
// code of one column, gain a signed run-time factor that brings the analogue
// result to the scale of the digital branch, lora_shift a run-time right shift
// of the branch. sat clips to the signed Y_W range and raises sat_flag.
//
// The sum itself is the published output equation; the alignment by gain and
// shift and the enable are this design's own choices, since the analogue and
// digital scales depend on converter settings the publication does not give.
//
// Timing: one element per cycle, registered: out_* follow in_* by one cycle.
module lora_merge #(
  parameter int unsigned ADC_W = 14,
  parameter int unsigned Y_W   = 32,
  parameter int unsigned IX_W  = 7
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic [IX_W-1:0]       in_idx,
  input  logic [ADC_W-1:0]      adc,
  input  logic signed [Y_W-1:0] lora,
  input  logic signed [15:0]    gain,
  input  logic [4:0]            lora_shift,
  input  logic                  lora_en,
  output logic                  out_valid,
  output logic [IX_W-1:0]       out_idx,
  output logic signed [Y_W-1:0] y,
  output logic                  sat_flag
);

  logic signed [63:0] sum, clipped;

  always_comb begin
    sum = 64'($signed({1'b0, adc})) * 64'(gain);
    if (lora_en) sum = sum + 64'(lora >>> lora_shift);
    clipped = rm_dlora_pkg::sat_signed(sum, Y_W);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_idx   <= '0;
      y         <= '0;
      sat_flag  <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_idx  <= in_idx;
        y        <= clipped[Y_W-1:0];
        sat_flag <= (clipped != sum);
      end
    end
  end

endmodule
