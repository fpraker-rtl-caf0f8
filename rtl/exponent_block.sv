// exponent_block: stage 1 of the PE, computed once per new set of value pairs.
//
// It adds the A and B exponents of every lane into a product exponent, takes the
// maximum of these and of the accumulator exponent (the MAX comparator tree), and
// returns e_max together with the alignment offset delta_i = e_max - PEXP_i of every
// product. It also XORs the A and B signs into the product signs and flags products
// that are zero (either exponent field 0) so that their lanes carry no work.
//
// Scale: PEXP_i = Ae_i + Be_i + 1 (9 bits). The +1 places the most significant
// possible term (2^+1) at offset 0, so that every term offset K = delta + pos is
// non-negative. The accumulator exponent only takes part in the maximum when the
// accumulator is non-zero (acc_nz). Deltas saturate at 2^DELTA_W - 1; any term of such
// a product lies far beyond the out-of-bounds threshold.
//
// Purely combinational: the shared-exponent wrapper in the column decides which
// (A,B) pair it sees in a cycle and latches the result in front of each PE.
//
// Following the paper: the adders, MAX tree, subtractors and sign XORs of its stage 1
// and the 9-bit e_max. Own choices: the +1 offset, the 5-bit saturating delta (the
// shared-exponent figure prints 8x5) and the zero-product flags.
module exponent_block
  import fpr_pkg::*;
#(
  parameter int unsigned N = LANES
) (
  input  bf16_t [N-1:0]              a,
  input  bf16_t [N-1:0]              b,
  input  logic  [EXP_W-1:0]          eacc,
  input  logic                       acc_nz,
  output logic  [EXP_W-1:0]          emax,
  output logic  [N-1:0][DELTA_W-1:0] delta,
  output logic  [N-1:0]              psign,
  output logic  [N-1:0]              pzero
);

  logic [N-1:0][EXP_W-1:0] pexp;

  always_comb begin
    emax = acc_nz ? eacc : '0;
    for (int i = 0; i < N; i++) begin
      pzero[i] = bf16_is_zero(a[i]) || bf16_is_zero(b[i]);
      psign[i] = a[i].sign ^ b[i].sign;
      pexp[i]  = EXP_W'(a[i].exp) + EXP_W'(b[i].exp) + EXP_W'(1);
      if (!pzero[i] && pexp[i] > emax) emax = pexp[i];
    end
    for (int i = 0; i < N; i++) begin
      logic [EXP_W-1:0] d;
      d = emax - pexp[i];
      if (pzero[i])                      delta[i] = '1;
      else if (d > EXP_W'((1 << DELTA_W) - 1)) delta[i] = '1;
      else                               delta[i] = d[DELTA_W-1:0];
    end
  end

endmodule
