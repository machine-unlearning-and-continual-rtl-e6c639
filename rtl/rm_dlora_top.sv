// rm_dlora_top: one layer of the hybrid resistive-memory / digital-LoRA
// (RM-DLoRA) system, y = W0*x + B*(A*x).
//
// The frozen, pretrained weight matrix W0 lives as conductances in the
// 128x128 resistive-memory array (rm_crossbar, a behavioural model of the
// array and its converters). It is written once, cell by cell, through the
// address shift-register chain (addr_shift_out) and the write-and-verify loop
// (write_verify_ctrl). The trainable low-rank adapters A (RANK x ROWS) and
// B (COLS x RANK) live in SRAM (lora_sram) and are evaluated by the digital PE
// array (lora_pe_array); lora_merge adds both branches. Unlearning a class or
// learning a new one only rewrites A and B, or switches to another adapter
// slot; the conductances stay as programmed.
//
// Host interface: cmd_t / rsp_t from rm_dlora_pkg (see the opcode table
// there). A command is taken when cmd_valid && cmd_ready; cmd_ready is high
// only while the controller is idle and, after reset, once the array model has
// finished initialising its cells (COLS cycles). Each command returns exactly one rsp_t
// with a one-cycle rsp_valid. Latency, counted in clock edges from the edge
// that accepts the command to the edge that raises rsp_valid: X_WRITE,
// LORA_WRITE, CONFIG, Y_READ 1; LORA_READ 2; VERIFY SR_W + 5 (21);
// PROGRAM SR_W + 7 + 4 per write pulse; INFER ROWS + 2*COLS + 6 with the
// adapter (the conversion of the COLS columns overlaps the first LoRA phase)
// and 2*COLS + 3 without it, that is 390 and 259 at the default sizes. INFER
// returns this count in rsp.data. mon_sel_addr shows the {row, column}
// address the array's selector latched (row in the upper bits).
//
// During INFER the same x drives the DAC rows and the LoRA branch in
// parallel; the controller waits for both, then streams the COLS outputs
// through the merge unit into the output buffer.
//
// The partition (analogue backbone, SRAM adapters, digital PEs, output sum)
// and the sizes follow the published system; the command set, buffers,
// adapter slots, run-time gain/shift alignment and the schedule are this
// design's own choices. Training of A and B is done by the host.
//
// Lint note: Verilator reports rst_n as used both synchronously and
// asynchronously (SYNCASYNCNET). The synchronous use is only the
// 'disable iff (!rst_n)' of the two assertions at the end of this file, which
// are simulation checks and produce no logic; every flip-flop uses rst_n as
// an asynchronous reset.
module rm_dlora_top
  import rm_dlora_pkg::*;
#(
  parameter int unsigned ROWS      = ARRAY_ROWS,
  parameter int unsigned COLS      = ARRAY_COLS,
  parameter int unsigned RANK      = LORA_RANK,
  parameter int unsigned SLOTS     = 2,
  parameter int unsigned MAX_ITER  = 64,
  parameter int unsigned H_SHIFT   = 8,
  parameter int unsigned ADC_SHIFT = 16,
  parameter int unsigned G_MAX     = 240,
  parameter int unsigned G_INIT    = 20
) (
  input  logic clk,
  input  logic rst_n,
  input  logic cmd_valid,
  output logic cmd_ready,
  input  cmd_t cmd,
  output logic rsp_valid,
  output rsp_t rsp,
  // observation of the RM macro connection
  output logic mon_pulse_valid,
  output logic mon_pulse_set,
  output logic mon_mvm_start,
  output logic mon_lora_busy,
  output logic [15:0] mon_sel_addr   // cell address latched in the array's selector
);

  localparam int unsigned RA_W = $clog2(ROWS);
  localparam int unsigned CA_W = $clog2(COLS);
  localparam int unsigned IX_W = $clog2(((ROWS > COLS) ? ROWS : COLS));
  localparam int unsigned SL_W = (SLOTS > 1) ? $clog2(SLOTS) : 1;
  localparam int unsigned LN_W = (RANK > 1) ? $clog2(RANK) : 1;
  localparam int unsigned SR_W = 16;

  typedef enum logic [3:0] {
    S_IDLE, S_LREAD, S_SHIFT, S_WV, S_VREQ, S_VWAIT, S_INFER, S_MERGE, S_MDRAIN
  } state_e;

  state_e state;
  op_e               cur_op;    // opcode of the command in progress
  logic [G_BITS-1:0] cur_tgt;   // PROGRAM target conductance code

  // configuration
  logic signed [15:0] cfg_gain;
  logic [4:0]         cfg_shift;
  logic               cfg_lora_en;
  logic [SL_W-1:0]    cfg_slot;
  logic [G_BITS-1:0]  cfg_tol;

  // buffers
  logic [ROWS-1:0][DAC_BITS-1:0] x_buf;
  logic signed [Y_BITS-1:0]      lora_buf [COLS];
  logic signed [Y_BITS-1:0]      y_buf    [COLS];
  logic                          ysat_buf [COLS];

  // ---------------------------------------------------------------- RM macro
  logic                          sr_ser, sr_clk_en, sr_latch, sh_start, sh_busy, sh_done;
  logic                          mvm_start, mvm_busy, mvm_done;
  logic [COLS-1:0][ADC_BITS-1:0] adc_code;
  logic                          pulse_valid, pulse_set;
  logic [AMP_BITS-1:0]           pulse_amp;
  logic                          wv_vreq, top_vreq, verify_valid;
  logic [G_BITS-1:0]             verify_g;
  logic                          wv_start, wv_busy, wv_done, wv_ok;
  logic                          xb_ready;
  logic [7:0]                    wv_iter;

  addr_shift_out #(.WORD_W(SR_W)) u_shift (
    .clk, .rst_n, .start(sh_start),
    .word(SR_W'({cmd.idx_a[RA_W-1:0], cmd.idx_b[CA_W-1:0]})),
    .busy(sh_busy), .done(sh_done), .sr_ser, .sr_clk_en, .sr_latch
  );

  write_verify_ctrl #(.G_W(G_BITS), .MAX_ITER(MAX_ITER)) u_wv (
    .clk, .rst_n, .start(wv_start), .target(cur_tgt), .tol(cfg_tol),
    .busy(wv_busy), .pulse_valid, .pulse_set, .pulse_amp, .verify_req(wv_vreq),
    .verify_valid, .verify_g, .done(wv_done), .ok(wv_ok), .iterations(wv_iter)
  );

  rm_crossbar #(
    .ROWS(ROWS), .COLS(COLS), .DAC_W(DAC_BITS), .ADC_W(ADC_BITS), .G_W(G_BITS),
    .G_MAX(G_MAX), .G_INIT(G_INIT), .ADC_SHIFT(ADC_SHIFT), .SR_W(SR_W)
  ) u_xbar (
    .clk, .rst_n, .ready(xb_ready), .sr_ser, .sr_clk_en, .sr_latch, .sel_addr(mon_sel_addr),
    .mvm_start, .dac_code(x_buf), .mvm_busy, .mvm_done, .adc_code,
    .pulse_valid, .pulse_set, .pulse_amp,
    .verify_req(wv_vreq | top_vreq), .verify_valid, .verify_g
  );

  // ------------------------------------------------------------ LoRA branch
  logic                           pe_start, pe_busy, pe_done, pe_yv;
  logic                           a_rd_en, b_rd_en;
  logic [IX_W-1:0]                rd_idx, pe_yidx;
  logic signed [Y_BITS-1:0]       pe_y;
  logic [RANK-1:0][WGT_BITS-1:0]  a_word, b_word;
  logic [DAC_BITS-1:0]            x_rd;
  logic signed [WGT_BITS-1:0]     hr_data;
  logic                           sram_wr, sram_hr;

  lora_sram #(.K(ROWS), .D(COLS), .RANK(RANK), .W_W(WGT_BITS), .SLOTS(SLOTS)) u_sram (
    .clk,
    .wr_en(sram_wr), .wr_mat(cmd.mat), .wr_slot(SL_W'(cmd.slot)), .wr_idx(IX_W'(cmd.idx_a)),
    .wr_lane(LN_W'(cmd.idx_b)), .wr_data(cmd.data[WGT_BITS-1:0]),
    .rd_slot(cfg_slot),
    .a_rd_en, .a_rd_idx(rd_idx), .a_rd_word(a_word),
    .b_rd_en, .b_rd_idx(rd_idx), .b_rd_word(b_word),
    .hr_en(sram_hr), .hr_mat(cmd.mat), .hr_slot(SL_W'(cmd.slot)), .hr_idx(IX_W'(cmd.idx_a)),
    .hr_lane(LN_W'(cmd.idx_b)), .hr_data
  );

  always_ff @(posedge clk) if (a_rd_en) x_rd <= x_buf[rd_idx[RA_W-1:0]];

  lora_pe_array #(
    .K(ROWS), .D(COLS), .RANK(RANK), .X_W(DAC_BITS), .W_W(WGT_BITS),
    .H_SHIFT(H_SHIFT), .Y_W(Y_BITS)
  ) u_pe (
    .clk, .rst_n, .start(pe_start), .busy(pe_busy),
    .a_rd_en, .b_rd_en, .rd_idx, .x_data(x_rd), .a_word, .b_word,
    .y_valid(pe_yv), .y_idx(pe_yidx), .y_data(pe_y), .done(pe_done)
  );

  always_ff @(posedge clk) if (pe_yv) lora_buf[pe_yidx[CA_W-1:0]] <= pe_y;

  // ------------------------------------------------------------------ merge
  logic                     mg_in_v, mg_out_v, mg_sat;
  logic [CA_W-1:0]          mg_cnt, mg_out_idx;
  logic signed [Y_BITS-1:0] mg_y;

  lora_merge #(.ADC_W(ADC_BITS), .Y_W(Y_BITS), .IX_W(CA_W)) u_merge (
    .clk, .rst_n, .in_valid(mg_in_v), .in_idx(mg_cnt), .adc(adc_code[mg_cnt]),
    .lora(lora_buf[mg_cnt]), .gain(cfg_gain), .lora_shift(cfg_shift),
    .lora_en(cfg_lora_en), .out_valid(mg_out_v), .out_idx(mg_out_idx), .y(mg_y),
    .sat_flag(mg_sat)
  );

  always_ff @(posedge clk) begin
    if (mg_out_v) begin
      y_buf[mg_out_idx]    <= mg_y;
      ysat_buf[mg_out_idx] <= mg_sat;
    end
  end

  // ------------------------------------------------------------- controller
  logic        mvm_seen, pe_seen;
  logic [31:0] cyc;

  assign cmd_ready = (state == S_IDLE) && xb_ready;
  assign sram_wr   = cmd_valid && cmd_ready && (cmd.op == OP_LORA_WRITE);
  assign sram_hr   = cmd_valid && cmd_ready && (cmd.op == OP_LORA_READ);
  assign sh_start  = cmd_valid && cmd_ready && (cmd.op inside {OP_PROGRAM, OP_VERIFY});
  assign mvm_start = cmd_valid && cmd_ready && (cmd.op == OP_INFER);
  assign pe_start  = mvm_start && cfg_lora_en;
  assign wv_start  = (state == S_SHIFT) && sh_done && (cur_op == OP_PROGRAM);
  assign top_vreq  = (state == S_VREQ);
  assign mg_in_v   = (state == S_MERGE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      cur_op      <= OP_NOP;
      cur_tgt     <= '0;
      cfg_gain    <= 16'sd1;
      cfg_shift   <= '0;
      cfg_lora_en <= 1'b1;
      cfg_slot    <= '0;
      cfg_tol     <= G_BITS'(TOL_2US);
      x_buf       <= '0;
      rsp_valid   <= 1'b0;
      rsp         <= '0;
      mvm_seen    <= 1'b0;
      pe_seen     <= 1'b0;
      mg_cnt      <= '0;
      cyc         <= '0;
    end else begin
      rsp_valid <= 1'b0;
      cyc       <= cyc + 1'b1;
      if (mvm_done) mvm_seen <= 1'b1;
      if (pe_done)  pe_seen  <= 1'b1;

      unique case (state)
        S_IDLE: if (cmd_valid && xb_ready) begin
          cur_op   <= cmd.op;
          cur_tgt  <= cmd.data[G_BITS-1:0];
          cyc      <= 32'd1;
          rsp.op   <= cmd.op;
          rsp.ok   <= 1'b1;
          rsp.data <= '0;
          unique case (cmd.op)
            OP_X_WRITE: begin
              x_buf[cmd.idx_a[RA_W-1:0]] <= cmd.data[DAC_BITS-1:0];
              rsp_valid <= 1'b1;
            end
            OP_LORA_WRITE: rsp_valid <= 1'b1;
            OP_LORA_READ:  state <= S_LREAD;
            OP_PROGRAM, OP_VERIFY: state <= S_SHIFT;
            OP_INFER: begin
              mvm_seen <= 1'b0;
              pe_seen  <= !cfg_lora_en;
              state    <= S_INFER;
            end
            OP_Y_READ: begin
              rsp.data  <= y_buf[cmd.idx_a[CA_W-1:0]];
              rsp.ok    <= !ysat_buf[cmd.idx_a[CA_W-1:0]];
              rsp_valid <= 1'b1;
            end
            OP_CONFIG: begin
              cfg_gain    <= cmd.data[15:0];
              cfg_shift   <= cmd.data[20:16];
              cfg_lora_en <= cmd.data[21];
              cfg_slot    <= SL_W'(cmd.data[23:22]);
              cfg_tol     <= cmd.data[31:24];
              rsp_valid   <= 1'b1;
            end
            default: begin
              rsp.ok    <= 1'b0;
              rsp_valid <= 1'b1;
            end
          endcase
        end
        S_LREAD: begin
          rsp.data  <= DATA_BITS'(hr_data);
          rsp_valid <= 1'b1;
          state     <= S_IDLE;
        end
        S_SHIFT: if (sh_done) state <= (cur_op == OP_PROGRAM) ? S_WV : S_VREQ;
        S_WV: if (wv_done) begin
          rsp.ok    <= wv_ok;
          rsp.data  <= DATA_BITS'(wv_iter);
          rsp_valid <= 1'b1;
          state     <= S_IDLE;
        end
        S_VREQ: state <= S_VWAIT;
        S_VWAIT: if (verify_valid) begin
          rsp.data  <= DATA_BITS'(verify_g);
          rsp_valid <= 1'b1;
          state     <= S_IDLE;
        end
        S_INFER: if ((mvm_seen || mvm_done) && (pe_seen || pe_done)) begin
          mg_cnt <= '0;
          state  <= S_MERGE;
        end
        S_MERGE: begin
          if (mg_cnt == CA_W'(COLS - 1)) state  <= S_MDRAIN;
          else                           mg_cnt <= mg_cnt + 1'b1;
        end
        S_MDRAIN: if (mg_out_v && mg_out_idx == CA_W'(COLS - 1)) begin
          rsp.data  <= cyc + 1'b1;
          rsp_valid <= 1'b1;
          state     <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign mon_pulse_valid = pulse_valid;
  assign mon_pulse_set   = pulse_set;
  assign mon_mvm_start   = mvm_start;
  assign mon_lora_busy   = pe_busy;

  // a new command must never start an engine that is still running
  assert property (@(posedge clk) disable iff (!rst_n) mvm_start |-> !mvm_busy && !pe_busy);
  assert property (@(posedge clk) disable iff (!rst_n) sh_start |-> !sh_busy && !wv_busy);

endmodule
