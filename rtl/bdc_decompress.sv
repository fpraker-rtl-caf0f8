// bdc_decompress: inverse of bdc_compress, used when compressed groups are read back
// from off-chip memory.
//
// It reads the header P (delta width DW = P + 1) and the base exponent B. It then
// rebuilds value 0 from B and its sign/fraction byte, and every other value i from the
// field at bit 19 + (i-1)(DW+8): the DW-bit delta is sign-extended and added to B
// modulo 256, and the following byte gives the sign and fraction. The layout is given
// in bdc_compress. The packed input must be the group aligned at bit 0; bits beyond the
// group's length are ignored. nbits reports the group's length, so a reader can find
// where the next group starts in a stream.
//
// Timing: purely combinational.
//
// Following the paper: the inverse of its base-delta format. Own choice: everything
// about the layout that bdc_compress lists as its own.
module bdc_decompress
  import fpr_pkg::*;
#(
  parameter int unsigned G = 32
) (
  input  logic  [19+(G-1)*16-1:0]    packed_i,
  output bf16_t [G-1:0]              vals,
  output logic  [$clog2(19+(G-1)*16+1)-1:0] nbits
);

  always_comb begin
    logic [3:0] dw;
    logic [7:0] base;
    dw   = {1'b0, packed_i[2:0]} + 4'd1;
    base = packed_i[10:3];
    vals[0] = {packed_i[18], base, packed_i[17:11]};
    for (int i = 1; i < G; i++) begin
      logic [15:0] fld;
      logic [7:0]  d8, mb;
      fld = 16'(packed_i >> (19 + (i - 1) * (dw + 8)));
      d8  = fld[7:0] & 8'(9'h1ff >> (9 - dw));
      if (d8[dw - 1]) d8 = d8 | ~8'(9'h1ff >> (9 - dw));   // sign-extend
      mb  = 8'(fld >> dw);
      vals[i] = {mb[7], base + d8, mb[6:0]};
    end
    nbits = $bits(nbits)'(19 + (G - 1) * (dw + 8));
  end

endmodule
