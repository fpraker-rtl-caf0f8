// acc_to_bf16: read-out converter from the PE accumulator to bfloat16.
//
// The accumulator is a signed fixed-point significand acc (hidden bit at bit ACC_FRAC)
// with exponent eacc, worth acc * 2^(eacc - 254 - ACC_FRAC). The converter takes the
// magnitude, finds its leading one, and keeps the 7 bits below it as the fraction
// (bits further down are dropped, as the paper extracts 7 bits on read-out). The
// bfloat16 exponent is eacc - 127 + (lead - ACC_FRAC).
//
// Results below the smallest normal bfloat16 become zero (no denormals), results above
// the largest become infinity; both are own choices, the paper does not discuss them.
// Purely combinational.
module acc_to_bf16
  import fpr_pkg::*;
(
  input  logic signed [ACC_W-1:0] acc,
  input  logic        [EXP_W-1:0] eacc,
  output bf16_t                   res
);

  always_comb begin
    logic [ACC_W-1:0] mag;
    logic [ACC_W+6:0] ext;
    int               lead;
    int               e;
    mag  = acc[ACC_W-1] ? ACC_W'(-acc) : ACC_W'(acc);
    lead = -1;
    for (int j = 0; j < ACC_W; j++) if (mag[j]) lead = j;
    e    = int'(eacc) - 127 + lead - int'(ACC_FRAC);
    ext  = {mag, 7'd0} >> lead;    // the 7 bits below the leading one end up at [6:0]
    res  = '0;
    if (lead >= 0) begin
      res.sign = acc[ACC_W-1];
      if (e >= 255) begin
        res.exp = 8'hff;
      end else if (e > 0) begin
        res.exp = 8'(e);
        res.man = ext[6:0];
      end else begin
        res = '0;
      end
    end
  end

endmodule
