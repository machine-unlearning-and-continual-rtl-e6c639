// rm_crossbar: behavioural model of the 128x128 1T1R resistive-memory array
// together with its board periphery, seen at the level of digital codes. It
// stands in for analogue hardware so that the digital system around it can be
// simulated; it is not a description of that analogue circuit.
//
// What it models
//   * Storage: one conductance code per cell, G_W bits at 0.5 uS per LSB.
//     After reset the model spends COLS cycles setting every cell to G_INIT
//     (10 uS, a low-conductance state), one column of all rows per cycle;
//     ready is low meanwhile and no other operation may be issued.
//   * Addressing: the cell used for programming and verify is chosen by a
//     serial-in/parallel-out shift-register chain, as on the published board.
//     sr_ser is shifted in (MSB first) on every cycle with sr_clk_en high, and
//     the chain is copied to sel_addr on a cycle with sr_latch high (a cycle
//     with both copies the contents from before the shift, like a pair of
//     storage registers). sel_addr = {row, column}.
//   * Analogue matrix-vector product: the row lines are driven by the 16-bit
//     DAC codes, each column current sum_i G[i][j]*V[i] is converted by the
//     transimpedance amplifier and the 14-bit ADC. Columns are converted one
//     per clock through the output multiplexer, so a product takes COLS cycles
//     after mvm_start; mvm_done pulses for one cycle when adc_code is complete.
//     adc_code[j] = min(2^ADC_W - 1, (sum_i G[i][j] * dac_code[i]) >> ADC_SHIFT).
//   * Programming: a pulse changes the addressed cell by +/-(pulse_amp + n)
//     LSB, n being pseudo-random noise in -2..+2 from a 16-bit LFSR, clipped to
//     0..G_MAX. SET raises, RESET lowers the conductance. The noise makes the
//     device stochastic, so a single pulse rarely lands on a target and the
//     write-and-verify loop is needed, as the published measurements show.
//   * Verify: verify_req returns the addressed cell's code one cycle later.
//
// The array size, the converter resolutions and the shift-register addressing
// come from the published system. The conductance code, the pulse response,
// the noise, the gain of the conversion (ADC_SHIFT), the column-serial
// conversion and the reset state are this model's own choices.
module rm_crossbar #(
  parameter int unsigned ROWS      = 128,
  parameter int unsigned COLS      = 128,
  parameter int unsigned DAC_W     = 16,
  parameter int unsigned ADC_W     = 14,
  parameter int unsigned G_W       = 8,
  parameter int unsigned G_MAX     = 240,
  parameter int unsigned G_INIT    = 20,
  parameter int unsigned ADC_SHIFT = 16,
  parameter int unsigned SR_W      = 16,
  parameter logic [15:0] LFSR_SEED = 16'hACE1
) (
  input  logic                            clk,
  input  logic                            rst_n,
  output logic                            ready,
  // address shift-register chain
  input  logic                            sr_ser,
  input  logic                            sr_clk_en,
  input  logic                            sr_latch,
  output logic [SR_W-1:0]                 sel_addr,
  // analogue matrix-vector product
  input  logic                            mvm_start,
  input  logic [ROWS-1:0][DAC_W-1:0]      dac_code,
  output logic                            mvm_busy,
  output logic                            mvm_done,
  output logic [COLS-1:0][ADC_W-1:0]      adc_code,
  // programming and verify
  input  logic                            pulse_valid,
  input  logic                            pulse_set,
  input  logic [3:0]                      pulse_amp,
  input  logic                            verify_req,
  output logic                            verify_valid,
  output logic [G_W-1:0]                  verify_g
);

  localparam int unsigned RA_W  = (ROWS > 1) ? $clog2(ROWS) : 1;
  localparam int unsigned CA_W  = (COLS > 1) ? $clog2(COLS) : 1;
  localparam int unsigned ACC_W = G_W + DAC_W + RA_W + 1;

  logic [SR_W-1:0]   sr_chain;
  logic [15:0]       lfsr;
  logic [CA_W-1:0]   conv_col;
  logic [DAC_W-1:0]  dac_hold [ROWS];
  logic              init_busy;
  logic [CA_W-1:0]   init_col;
  logic [G_W-1:0]    cell_conv [ROWS];   // column conv_col of every row
  logic [G_W-1:0]    cell_sel  [ROWS];   // column sel_col of every row
  logic [G_W-1:0]    g_new;              // addressed cell after a pulse
  logic [ADC_W-1:0]  conv_code;          // ADC result for the column being converted

  logic [RA_W-1:0] sel_row;
  logic [CA_W-1:0] sel_col;
  assign sel_row = sel_addr[CA_W +: RA_W];
  assign sel_col = sel_addr[0 +: CA_W];
  assign ready   = !init_busy;

  // shift-register chain and storage register
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sr_chain <= '0;
      sel_addr <= '0;
    end else begin
      if (sr_clk_en) sr_chain <= {sr_chain[SR_W-2:0], sr_ser};
      if (sr_latch)  sel_addr <= sr_chain;
    end
  end

  // pseudo-random source for the programming noise (x^16 + x^14 + x^13 + x^11 + 1)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) lfsr <= LFSR_SEED;
    else if (pulse_valid)
      lfsr <= {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
  end

  // after reset every column is set to G_INIT, all rows at once
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_busy <= 1'b1;
      init_col  <= '0;
    end else if (init_busy) begin
      if (init_col == CA_W'(COLS - 1)) init_busy <= 1'b0;
      else                             init_col  <= init_col + 1'b1;
    end
  end

  // response of the addressed cell to one pulse
  always_comb begin
    int signed step, nv;
    step  = int'(pulse_amp) + int'({29'd0, lfsr[2:0]} % 32'd5) - 2;
    nv    = int'(cell_sel[sel_row]) + (pulse_set ? step : -step);
    if (nv < 0)           nv = 0;
    if (nv > int'(G_MAX)) nv = int'(G_MAX);
    g_new = G_W'(nv);
  end

  // cell array: one memory of COLS conductances per row
  for (genvar r = 0; r < ROWS; r++) begin : g_row
    logic [G_W-1:0] mem [COLS];
    always_ff @(posedge clk) begin
      if (init_busy)                                          mem[init_col] <= G_W'(G_INIT);
      else if (pulse_valid && sel_row == RA_W'(r))            mem[sel_col]  <= g_new;
    end
    assign cell_conv[r] = mem[conv_col];
    assign cell_sel[r]  = mem[sel_col];
  end

  // verify read
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      verify_valid <= 1'b0;
      verify_g     <= '0;
    end else begin
      verify_valid <= verify_req;
      if (verify_req) verify_g <= cell_sel[sel_row];
    end
  end

  // column current of the column being converted, scaled and clipped by the ADC
  always_comb begin
    logic [ACC_W-1:0] acc;
    logic [ACC_W-1:0] code;
    acc = '0;
    for (int r = 0; r < ROWS; r++)
      acc += ACC_W'(cell_conv[r]) * ACC_W'(dac_hold[r]);
    code = acc >> ADC_SHIFT;
    conv_code = (code > ACC_W'((1 << ADC_W) - 1)) ? ADC_W'((1 << ADC_W) - 1) : code[ADC_W-1:0];
  end

  // column-serial conversion of the analogue product
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mvm_busy <= 1'b0;
      mvm_done <= 1'b0;
      conv_col <= '0;
      adc_code <= '0;
      for (int r = 0; r < ROWS; r++) dac_hold[r] <= '0;
    end else begin
      mvm_done <= 1'b0;
      if (mvm_start && !mvm_busy) begin
        mvm_busy <= 1'b1;
        conv_col <= '0;
        for (int r = 0; r < ROWS; r++) dac_hold[r] <= dac_code[r];
      end else if (mvm_busy) begin
        adc_code[conv_col] <= conv_code;
        if (conv_col == CA_W'(COLS - 1)) begin
          mvm_busy <= 1'b0;
          mvm_done <= 1'b1;
        end else begin
          conv_col <= conv_col + 1'b1;
        end
      end
    end
  end

endmodule
