// term_encoder: on-the-fly canonical (non-adjacent form) encoder for the A significands
// of one tile column.
//
// Each of the LANES A values is converted into signed powers of two ("terms") and
// presented to the PEs most significant term first, one term per lane at a time. The
// encoder is shared by all PEs of a column, so a lane only moves on to its next term
// when every PE of the column has consumed the current one (adv), and it throws away
// all remaining terms of a lane when every PE has reported that they are out of
// bounds (drop, the combined OB signals).
//
// Encoding: for the 8-bit significand m = 1.fffffff the non-adjacent form is taken with
// the carry trick h = m >> 1, s = m + h, c = h ^ s; positive digits are s & c and
// negative digits h & c. Digit j weighs 2^(j-7) and is presented as pos = 8 - j. A zero
// A value (exponent field 0) has no terms.
//
// Timing: load is the first cycle of a set. In that cycle the terms come straight from
// a_in (the encoder sits just before the PE inputs), later they come from the
// remaining-digit registers. empty_next says that no lane will have a term left in
// the next cycle, which is how the column knows that the set is finished.
//
// Following the paper: canonical encoding, sharing along a column, the OB feedback and
// the 8x4 term bus. Own choices: the 4-bit position code with a separate valid and
// sign bit, and the AND-combination of the per-PE adv and OB signals.
module term_encoder
  import fpr_pkg::*;
#(
  parameter int unsigned N = LANES
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          load,
  input  bf16_t [N-1:0] a_in,
  input  logic  [N-1:0] adv,
  input  logic  [N-1:0] drop,
  output term_t [N-1:0] term,
  output logic  [N-1:0] a_sign,
  output logic          empty_next
);

  logic [N-1:0][NTERM-1:0] pos_q, neg_q;   // remaining positive / negative digits
  logic [N-1:0][NTERM-1:0] pos_c, neg_c;   // digits visible this cycle
  logic [N-1:0][NTERM-1:0] pos_n, neg_n;
  logic [N-1:0]            sign_q;

  function automatic logic [2*NTERM-1:0] naf8(bf16_t v);
    logic [8:0] m, h, s, c;
    m = bf16_is_zero(v) ? 9'd0 : {1'b0, 1'b1, v.man};
    h = m >> 1;
    s = m + h;
    c = h ^ s;
    return {s & c, h & c};   // {positive digits, negative digits}
  endfunction

  logic [N-1:0][NTERM-1:0] top;   // one-hot: the digit presented this cycle

  always_comb begin
    for (int i = 0; i < N; i++) begin
      logic [2*NTERM-1:0] d;
      logic [NTERM-1:0]   any;
      d = naf8(a_in[i]);
      pos_c[i] = load ? d[2*NTERM-1:NTERM] : pos_q[i];
      neg_c[i] = load ? d[NTERM-1:0]       : neg_q[i];
      any = pos_c[i] | neg_c[i];
      top[i]  = '0;
      term[i] = '0;
      for (int j = 0; j < NTERM; j++) begin
        if (any[j]) begin   // the last hit is the most significant digit
          top[i]        = '0;
          top[i][j]     = 1'b1;
          term[i].valid = 1'b1;
          term[i].neg   = neg_c[i][j];
          term[i].pos   = TPOS_W'(NTERM - 1 - j);
        end
      end
      a_sign[i] = load ? a_in[i].sign : sign_q[i];
    end
  end

  always_comb begin
    empty_next = 1'b1;
    for (int i = 0; i < N; i++) begin
      pos_n[i] = drop[i] ? '0 : (adv[i] ? (pos_c[i] & ~top[i]) : pos_c[i]);
      neg_n[i] = drop[i] ? '0 : (adv[i] ? (neg_c[i] & ~top[i]) : neg_c[i]);
      if ((pos_n[i] | neg_n[i]) != '0) empty_next = 1'b0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pos_q  <= '0;
      neg_q  <= '0;
      sign_q <= '0;
    end else begin
      pos_q <= pos_n;
      neg_q <= neg_n;
      if (load) begin
        for (int i = 0; i < N; i++) sign_q[i] <= a_in[i].sign;
      end
    end
  end

endmodule
