// fpr_pkg: types and constants shared by the term-serial bfloat16 MAC datapath.
//
// Number formats used throughout:
//  * bf16_t     - bfloat16: sign, 8-bit biased exponent, 7-bit fraction. An exponent
//                 field of 0 is treated as zero (denormals are not supported); the
//                 exponent 255 (Inf/NaN) is not given any special treatment.
//  * term_t     - one signed power-of-two term of an A significand after canonical
//                 (non-adjacent form) encoding: pos = 0 means 2^+1, pos = 1 the hidden
//                 bit 2^0, ... pos = 8 means 2^-7. The paper's 3-bit term position t
//                 counts from the hidden bit; pos = t + 1 leaves room for the 2^+1 term
//                 that canonical encoding can produce (1.1111111 = 2^1 - 2^-7).
//  * product exponent (9 bits) PEXP = Ae + Be + 1: the weight of the hidden bit of
//                 a pos-1 (2^0) term times B is 2^(PEXP - 255). The accumulator exponent eacc
//                 uses the scale in which a term at offset K = eacc - PEXP + pos lines up with
//                 the accumulator: the accumulator hidden bit weighs 2^(eacc-254).
package fpr_pkg;

  localparam int unsigned LANES     = 8;   // value pairs per PE (paper: 8 MACs per PE)
  localparam int unsigned TPOS_W    = 4;   // term position width (figure: t is 8x4)
  localparam int unsigned NTERM     = 9;   // canonical digits of an 8-bit significand
  localparam int unsigned EXP_W     = 9;   // product / accumulator exponent width
  localparam int unsigned DELTA_W   = 5;   // exponent delta width (figure: 8x5)
  localparam int unsigned ACC_FRAC  = 12;  // accumulator fractional bits
  localparam int unsigned ACC_INT   = 4;   // accumulator integer bits (hidden + 3)
  localparam int unsigned ACC_W     = 1 + ACC_INT + ACC_FRAC; // signed register, 17 bits
  localparam int unsigned MAX_DELTA = 3;   // largest per-cycle offset between lanes
  localparam int unsigned THR_W     = 5;   // out-of-bounds threshold width
  localparam int unsigned OB_THR_DEFAULT = ACC_FRAC; // skip terms beyond e_max - 12

  typedef struct packed {
    logic       sign;
    logic [7:0] exp;
    logic [6:0] man;
  } bf16_t;

  typedef struct packed {
    logic              valid;
    logic              neg;
    logic [TPOS_W-1:0] pos;
  } term_t;

  function automatic logic bf16_is_zero(bf16_t v);
    return v.exp == 8'd0;
  endfunction

endpackage
