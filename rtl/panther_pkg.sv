// panther_pkg: constants and types shared by the PANTHER training accelerator RTL.
//
// The accelerator stores every 32-bit fixed-point weight of a 128x128 matrix as eight
// "slices", one per ReRAM crossbar. Slice k holds the weight's k-th 4-bit digit plus a few
// extra carry bits, so that outer-product updates can accumulate in place without reading
// the crossbar back. The slice widths follow the configuration "44466555" (MSB slice first):
// slices 7..5 are 4 bits, 4..3 are 6 bits and 2..0 are 5 bits, 39 bits in all. Nibble k of
// SLICE_BITS_DEFAULT is the width of slice k.
//
// Digits are signed. A cell holding the value 2^(b-1) (mid conductance) represents digit 0,
// so each slice can take positive and negative updates. After a carry-resolution step every
// digit lies in [-8, 7] ("balanced" base-16 digits), which also fits the 4-bit slices.
//
// Also defined here: the mcu command bundle (the three operation bits of the 3-bit mask of
// the mcu instruction plus the end-of-batch request issued by halt), the crossbar operation
// codes and the 64-bit instruction word of the core, which is this design's own encoding.
package panther_pkg;

  // ---------------- sizes -------------------------------------------------------------
  localparam int unsigned XBAR_N      = 128;  // crossbar rows = columns
  localparam int unsigned N_SLICES    = 8;    // crossbars (slices) per matrix copy
  localparam int unsigned P_BITS      = 4;    // column DAC resolution, bits of weight per slice
  localparam int unsigned IN_BITS     = 16;   // input/output data width (sign-magnitude at the MCU)
  localparam int unsigned W_BITS      = 32;   // weight width
  localparam int unsigned STREAM_STEPS = IN_BITS; // bit-streamed steps per operation (m = 1)
  localparam logic [31:0] SLICE_BITS_DEFAULT = 32'h4446_6555;

  // Width of slice k for a given packed slice-width word.
  function automatic int unsigned slice_bits(input logic [31:0] cfg, input int unsigned k);
    return int'(cfg[4*k +: 4]);
  endfunction

  // ---------------- crossbar operations ----------------------------------------------
  typedef enum logic [2:0] {
    XB_NOP   = 3'd0,
    XB_MVM   = 3'd1,  // drive rows, sense columns
    XB_MTVM  = 3'd2,  // drive columns, sense rows
    XB_OPA   = 3'd3,  // drive rows (pulse width) and columns (amplitude), update cells
    XB_READ  = 3'd4,  // serial read of one row
    XB_WRITE = 3'd5   // serial write of one row (column mask)
  } xb_op_e;

  // Signed drive level of one crossbar line: -15..+15 covers a 4-bit column DAC with sign.
  typedef logic signed [5:0]  lvl_t;
  // Analog line sum as a number (crossbar -> ADC) and digitised code (ADC -> shift-and-add).
  typedef logic signed [15:0] sum_t;
  // One signed slice digit as read from / written to a crossbar by the row decoder path.
  typedef logic signed [7:0]  digit_t;

  // ---------------- MCU command ------------------------------------------------------
  // mvm/mtvm/opa are the three bits of one 3-bit mask of the mcu instruction; the printed
  // mask '110' means MVM and MTVM, so the mask MSB is MVM and the LSB is OPA.
  typedef struct packed {
    logic mvm;
    logic mtvm;
    logic opa;
    logic batch_end;  // issued by halt: commit (variant 3) and periodic carry resolution
  } mcu_cmd_t;

  // XbarIn / XbarOut vector selectors of the MCU register port.
  typedef enum logic [1:0] {
    VEC_IN_ROW  = 2'd0,  // XbarIn, row side: MVM input, OPA row input
    VEC_IN_COL  = 2'd1,  // XbarIn, column side: MTVM input
    VEC_OUT_COL = 2'd2,  // XbarOut, column side: MVM result, OPA column input
    VEC_OUT_ROW = 2'd3   // XbarOut, row side: MTVM result
  } vec_sel_e;

  // ---------------- core instruction (64 bits) ---------------------------------------
  typedef enum logic [3:0] {
    OP_NOP   = 4'd0,
    OP_SET   = 4'd1,   // reg[a] <- b[15:0]
    OP_LD    = 4'd2,   // reg[a+i] <- mem[b+i], i < len
    OP_ST    = 4'd3,   // mem[a+i] <- reg[b+i], i < len
    OP_MCU   = 4'd4,   // a[3m+2:3m] = mask of MCU m ({MVM, MTVM, OPA})
    OP_HALT  = 4'd5,   // end of kernel: apply OPAs, commit, carry resolution when due
    OP_VADD  = 4'd6,   // reg[a+i] <- reg[b+i] + reg[c+i]
    OP_VSUB  = 4'd7,
    OP_VMUL  = 4'd8,   // fixed-point product, FRAC fraction bits
    OP_VRELU = 4'd9,   // reg[a+i] <- max(reg[b+i], 0)
    OP_VDRELU = 4'd10  // reg[a+i] <- reg[b+i] > 0 ? reg[c+i] : 0  (error times relu')
  } opcode_e;

  typedef struct packed {
    opcode_e     op;
    logic [19:0] a;
    logic [19:0] b;
    logic [11:0] c;
    logic [7:0]  len;
  } instr_t;

  // Two's complement <-> sign-magnitude conversions used at the MCU boundary.
  function automatic logic [15:0] to_sm(input logic signed [15:0] v);
    logic [15:0] mag;
    mag = v[15] ? 16'(-v) : 16'(v);
    if (mag[15]) mag = 16'h7fff;        // -32768 has no sign-magnitude form: saturate
    return {v[15], mag[14:0]};
  endfunction

endpackage
