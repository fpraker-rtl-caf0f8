// bdc_compress: exponent base-delta compressor for a group of G bfloat16 values, used
// on the way to off-chip memory.
//
// Neighbouring values in a layer's output have similar exponents. The exponent of the
// first value of the group is the base B. Every other value keeps its sign and 7-bit
// fraction (one byte, M) and stores only the difference of its exponent from B, in
// DW bits, where DW is the smallest width (1 to 8) that holds every difference of the
// group as a two's-complement number. A difference of 8 bits is taken modulo 256, so
// every group can be compressed without loss, including zeros (exponent 0).
//
// Packed layout, least significant bit first:
//   [2:0]   P = DW - 1 (the 3-bit header)
//   [10:3]  B, the base exponent
//   [18:11] M of value 0
//   then for values 1..G-1, each in DW + 8 bits: the DW-bit delta, then its M byte.
// nbits is the number of bits used (19 + (G-1)(DW+8)); the bits above it are zero.
//
// Timing: purely combinational; the caller registers the result.
//
// Following the paper: groups of 32, the first value's exponent as base, the per-group
// delta width, the 3-bit width in the header, the 1-byte sign+mantissa. Own choices:
// the width coding DW = P + 1 (so 3 bits reach 8), the bit order, and that the base
// value carries no delta.
module bdc_compress
  import fpr_pkg::*;
#(
  parameter int unsigned G = 32
) (
  input  bf16_t [G-1:0]              vals,
  output logic  [19+(G-1)*16-1:0]    packed_o,
  output logic  [$clog2(19+(G-1)*16+1)-1:0] nbits,
  output logic  [3:0]                dw
);

  localparam int unsigned PW = 19 + (G - 1) * 16;

  // smallest two's-complement width (1..8) that holds d, for d in -255..255 mod 256
  function automatic logic [3:0] width_of(logic signed [8:0] d);
    for (int w = 1; w <= 8; w++) begin
      if (d >= -(9'sd1 <<< (w - 1)) && d <= (9'sd1 <<< (w - 1)) - 9'sd1) return 4'(w);
    end
    return 4'd8;
  endfunction

  always_comb begin
    logic [7:0] base;
    logic [7:0] d8;
    base = vals[0].exp;
    dw   = 4'd1;
    for (int i = 1; i < G; i++) begin
      logic signed [8:0] d;
      d8 = vals[i].exp - base;        // modulo 256
      d  = $signed({d8[7], d8});      // as -128..127
      if (width_of(d) > dw) dw = width_of(d);
    end
    packed_o = '0;
    packed_o[2:0]   = 3'(dw - 4'd1);
    packed_o[10:3]  = base;
    packed_o[18:11] = {vals[0].sign, vals[0].man};
    for (int i = 1; i < G; i++) begin
      logic [15:0] fld;
      logic [7:0]  mask;
      d8   = vals[i].exp - base;
      mask = 8'(9'h1ff >> (9 - dw));
      fld  = {8'd0, d8 & mask} | ({8'd0, vals[i].sign, vals[i].man} << dw);
      packed_o = packed_o | (PW'(fld) << (19 + (i - 1) * (dw + 8)));
    end
    nbits = $bits(nbits)'(19 + (G - 1) * (dw + 8));
  end

endmodule
