// tent_pkg: constants and types shared by the tapered fixed-point (TFX)
// accelerator.
//
// A TFX(n, IS, SC) word is n bits: a sign bit, a signed-unary integer run
// of at most IS bits (the inverted sign counts as the first run bit) ended
// by a terminating bit unless the run reaches IS, and the remaining bits
// as a binary fraction. The value is (I + f) * 2^SC with I = m-1 for a
// positive and I = -m for a negative word, m being the run length.
//
// The defaults follow the main configuration: 8-bit words, a 16x16 PE
// array, a 3-bit SC and three 108 kB scratchpads of four banks. The IS
// value travels as IS-1 in ceil(log2 n) bits so that IS = n fits; this
// encoding, the register map and the accumulator guard width are this
// design's own choices.
package tent_pkg;

  parameter int unsigned N_BITS       = 8;    // word precision n
  parameter int unsigned ARRAY_ROWS   = 16;   // PE rows
  parameter int unsigned ARRAY_COLS   = 16;   // PE columns
  parameter int unsigned SC_BITS      = 3;    // signed weight scale, -4..+3
  parameter int unsigned SRAM_KBYTES  = 108;  // size of each scratchpad
  parameter int unsigned SRAM_BANKS   = 4;    // banks per scratchpad
  parameter int unsigned ACC_GUARD    = 13;   // accumulator guard bits: up to 8192 terms

  // Layer format as held in the control unit. IS fields carry IS-1 and
  // are 4 bits wide so that any n up to 16 fits; modules take the low
  // ceil(log2 n) bits.
  typedef struct packed {
    logic                       relu_en;  // clamp negative results to zero
    logic signed [SC_BITS-1:0]  sc;       // weight scale exponent
    logic [3:0]                 is_o_m1;  // IS-1 of the encoded outputs
    logic [3:0]                 is_a_m1;  // IS-1 of the activations
    logic [3:0]                 is_w_m1;  // IS-1 of the weights
  } tfx_fmt_t;

  // Host register map (word addresses).
  typedef enum logic [3:0] {
    REG_CTRL     = 4'd0,  // write bit 0 = 1: start
    REG_STATUS   = 4'd1,  // bit 0 busy, bit 1 done (sticky until next start)
    REG_FORMAT   = 4'd2,  // tfx_fmt_t
    REG_K_LEN    = 4'd3,  // dot-product length per output
    REG_N_TILES  = 4'd4,  // number of 16x16 output tiles
    REG_IFM_BASE = 4'd5,  // first ifmap SRAM word
    REG_FLT_BASE = 4'd6,  // first filter SRAM word
    REG_OFM_BASE = 4'd7,  // first ofmap SRAM word
    REG_FLT_STEP = 4'd8,  // filter pointer advance per tile
    REG_CYCLES   = 4'd9   // cycles taken by the last operation
  } reg_addr_e;

endpackage
