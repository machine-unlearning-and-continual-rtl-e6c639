// rm_dlora_pkg: constants and types shared by the hybrid resistive-memory /
// digital-LoRA (RM-DLoRA) inference system.
//
// The system keeps the frozen backbone weight matrix W0 of one layer as
// conductances in a 128x128 one-transistor-one-resistor (1T1R) array and adds a
// low-rank correction B*A held in SRAM and computed by digital logic, so that
// the output is y = W0*x + B*(A*x). The array size, the 16-bit DAC input code,
// the 14-bit ADC output code, the 2 uS programming tolerance and the rank r = 6
// of the face-recognition configuration follow the published system. Widths of
// the digital weights, the conductance code (0.5 uS per LSB), the host command
// format and the adapter-slot count are this design's own choices.
//
// Lint note: a module that uses only part of this package, linted on its
// own, makes Verilator list the constants it does not use (UNUSEDPARAM);
// the full design uses them.
//
// Host command protocol (rm_dlora_top): one cmd_t is accepted when cmd_valid
// and cmd_ready are both high; exactly one rsp_t is returned later with a
// one-cycle rsp_valid. Field use per opcode:
//   OP_X_WRITE     x[idx_a]           <= data[15:0]
//   OP_LORA_WRITE  (mat? B : A) slot, idx_a = k or d, idx_b = rank lane, data[7:0]
//   OP_LORA_READ   same addressing, rsp.data = sign-extended weight
//   OP_PROGRAM     cell (row idx_a, column idx_b) to conductance data[7:0] by
//                  write-and-verify; rsp.ok = converged, rsp.data = pulses used
//   OP_VERIFY      rsp.data = conductance code of cell (idx_a, idx_b)
//   OP_INFER       y = W0*x (+ B*A*x); rsp.data = cycles taken
//   OP_Y_READ      rsp.data = y[idx_a]; rsp.ok = 0 if that element saturated
//   OP_CONFIG      data[15:0] ADC gain, [20:16] LoRA shift, [21] LoRA enable,
//                  [23:22] active adapter slot, [31:24] write-verify tolerance
package rm_dlora_pkg;

  // Array and converter sizes of the published system.
  localparam int unsigned ARRAY_ROWS = 128;   // 128x128 1T1R array
  localparam int unsigned ARRAY_COLS = 128;
  localparam int unsigned DAC_BITS   = 16;    // 16-bit input DAC
  localparam int unsigned ADC_BITS   = 14;    // 14-bit output ADC
  localparam int unsigned LORA_RANK  = 6;     // r = 6 (face recognition)

  // This design's own number formats.
  localparam int unsigned G_BITS     = 8;     // conductance code, 0.5 uS / LSB
  localparam int unsigned WGT_BITS   = 8;     // signed LoRA weight
  localparam int unsigned Y_BITS     = 32;    // signed output word
  localparam int unsigned AMP_BITS   = 4;     // programming pulse amplitude code
  localparam int unsigned TOL_2US    = 4;     // 2 uS tolerance in conductance LSB

  localparam int unsigned IDX_BITS   = 8;
  localparam int unsigned DATA_BITS  = 32;

  typedef enum logic [3:0] {
    OP_NOP        = 4'd0,
    OP_X_WRITE    = 4'd1,
    OP_LORA_WRITE = 4'd2,
    OP_LORA_READ  = 4'd3,
    OP_PROGRAM    = 4'd4,
    OP_VERIFY     = 4'd5,
    OP_INFER      = 4'd6,
    OP_Y_READ     = 4'd7,
    OP_CONFIG     = 4'd8
  } op_e;

  typedef struct packed {
    op_e                  op;
    logic                 slot;   // adapter slot for LoRA accesses
    logic                 mat;    // 0 = A (down), 1 = B (up)
    logic [IDX_BITS-1:0]  idx_a;
    logic [IDX_BITS-1:0]  idx_b;
    logic [DATA_BITS-1:0] data;
  } cmd_t;

  typedef struct packed {
    op_e                  op;
    logic                 ok;
    logic [DATA_BITS-1:0] data;
  } rsp_t;

  // Saturate a signed value held in 64 bits to a signed width w (w <= 63).
  function automatic logic signed [63:0] sat_signed(input logic signed [63:0] v,
                                                    input int unsigned w);
    logic signed [63:0] hi, lo;
    hi = (64'sd1 <<< (w - 1)) - 64'sd1;
    lo = -(64'sd1 <<< (w - 1));
    if (v > hi)      return hi;
    else if (v < lo) return lo;
    else             return v;
  endfunction

endpackage
