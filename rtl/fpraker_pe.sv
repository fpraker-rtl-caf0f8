// fpraker_pe: term-serial processing element (the reduced-shift "modified" PE).
//
// The PE multiplies LANES bfloat16 pairs (A_i, B_i) and accumulates the sum of the
// products into one accumulator. A arrives as a stream of signed power-of-two terms
// per lane (from the column's term encoder); B arrives as-is. Every cycle the PE adds
// +-B_i shifted by the offset of the current term of each lane that can go:
//
//  * Reduced shifting control: the offset of lane i is K_i = delta_i + pos_i +
//    (eacc - emax). base = min K_i over the lanes with work; a lane goes in this cycle
//    only when Delta_i = K_i - base <= MAX_DELTA (3), otherwise it stalls. A term with
//    K_i > ob_thr is out of bounds: it is skipped. A lane whose processed term has
//    K_i >= ob_thr raises OB_i so that its later, smaller terms are skipped as well.
//  * Shift & reduce: each going lane contributes +-(1.B_man << (3 - Delta_i)), an
//    11-bit magnitude; the 8 contributions are summed in a 15-bit adder tree.
//  * Accumulation: the tree output is shifted by base (base_shift) onto the
//    accumulator. On the first cycle of a set (load) the accumulator is first aligned
//    to the new e_max (acc_shift). The exact sum is normalized, its exponent updated,
//    and rounded to nearest even onto ACC_FRAC fraction bits. Normalization to the
//    left is limited to keep eacc >= e_max, so that term offsets never go negative.
//
// Handshake with the column: load marks the cycle in which this PE's values from the
// shared exponent block are valid; they are used straight away (bypass) and latched.
// consumed_i tells the encoder that this PE is done with lane i's current term, adv_i
// (all PEs consumed) tells the PE that the encoder moves on; fin_i says the PE needs no
// more terms of lane i (OB or zero product). set_end closes the set. The accumulator
// is readable at any time as acc/eacc and converted to bfloat16 as res.
//
// Following the paper: 8 lanes, the 3-position shift window, 12-bit lane inputs to a
// 15-bit tree, base_shift, e_max-relative skipping with a threshold of 12, RNE. Own
// choices: exact internal sum with GUARD guard bits plus a sticky bit before the single
// rounding per cycle, the left-normalization limit, and the consumed/taken handshake
// that lets several PEs share one encoder.
module fpraker_pe
  import fpr_pkg::*;
#(
  parameter int unsigned N     = LANES,
  parameter int unsigned GUARD = 30
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clear,
  input  logic                       load,
  input  logic                       set_end,
  input  logic [EXP_W-1:0]           emax_in,
  input  logic [N-1:0][DELTA_W-1:0]  delta_in,
  input  logic [N-1:0]               psign_in,
  input  logic [N-1:0]               pzero_in,
  input  logic [N-1:0][6:0]          bman_in,
  input  term_t [N-1:0]              term,
  input  logic [N-1:0]               adv,
  input  logic [THR_W-1:0]           ob_thr,
  output logic [N-1:0]               consumed,
  output logic [N-1:0]               fin,
  output logic signed [ACC_W-1:0]    acc,
  output logic [EXP_W-1:0]           eacc,
  output logic                       acc_nz,
  output bf16_t                      res,
  output logic                       ev_go,
  output logic                       ev_shift_stall,
  output logic                       ev_ob_skip,
  output logic                       ev_norm
);

  localparam int unsigned YW  = ACC_W + GUARD + 2;   // exact-sum width
  localparam int unsigned HID = ACC_FRAC + GUARD;    // hidden-bit position in the sum
  localparam int unsigned KW  = 8;                   // term offset width
  localparam int unsigned TW  = 15;                  // adder tree output width

  // latched per-set values
  logic [EXP_W-1:0]          emax_q;
  logic [N-1:0][DELTA_W-1:0] delta_q;
  logic [N-1:0]              psign_q, pzero_q, taken_q, obd_q;
  logic [N-1:0][6:0]         bman_q;
  logic                      active_q;
  logic signed [ACC_W-1:0]   acc_q;
  logic [EXP_W-1:0]          eacc_q;

  // values in effect this cycle
  logic [EXP_W-1:0]          emax_e, eacc_e;
  logic [N-1:0][DELTA_W-1:0] delta_e;
  logic [N-1:0]              psign_e, pzero_e, taken_e, obd_e;
  logic [N-1:0][6:0]         bman_e;
  logic                      act;

  logic [N-1:0][KW-1:0]      k;
  logic [N-1:0]              cand, obterm, eff, go, ob_new;
  logic [KW-1:0]             base;
  logic signed [TW-1:0]      tree;
  logic                      upd;

  logic signed [YW-1:0]      acc_al, ysum;
  logic                      sticky_al;
  logic signed [ACC_W-1:0]   acc_n;
  logic [EXP_W-1:0]          eacc_n;
  logic                      norm_r;

  assign act     = load | active_q;
  assign emax_e  = load ? emax_in  : emax_q;
  assign delta_e = load ? delta_in : delta_q;
  assign psign_e = load ? psign_in : psign_q;
  assign pzero_e = load ? pzero_in : pzero_q;
  assign bman_e  = load ? bman_in  : bman_q;
  assign taken_e = load ? '0 : taken_q;
  assign obd_e   = load ? '0 : obd_q;
  assign eacc_e  = load ? emax_in  : eacc_q;

  // ---------------- reduced shifting control ----------------
  always_comb begin
    logic [EXP_W-1:0] ediff;
    ediff = eacc_e - emax_e;
    base  = '1;
    for (int i = 0; i < N; i++) begin
      k[i]      = KW'(delta_e[i]) + KW'(term[i].pos) +
                  ((ediff > EXP_W'(127)) ? KW'(127) : KW'(ediff));
      cand[i]   = act && term[i].valid && !taken_e[i] && !obd_e[i] && !pzero_e[i];
      obterm[i] = cand[i] && (k[i] > KW'(ob_thr));
      eff[i]    = cand[i] && !obterm[i];
      if (eff[i] && k[i] < base) base = k[i];
    end
    for (int i = 0; i < N; i++) begin
      go[i]       = eff[i] && (k[i] - base <= KW'(MAX_DELTA));
      ob_new[i]   = obterm[i] || (go[i] && k[i] >= KW'(ob_thr));
      consumed[i] = act && (go[i] || obterm[i] || taken_e[i] || obd_e[i] || pzero_e[i]);
      fin[i]      = act && (obd_e[i] || ob_new[i] || pzero_e[i]);
    end
  end

  // ---------------- shift & reduce ----------------
  always_comb begin
    tree = '0;
    for (int i = 0; i < N; i++) begin
      logic [10:0]        mag;
      logic signed [11:0] op;
      logic [1:0]         dlt;
      dlt = 2'(k[i] - base);
      mag = {3'b000, 1'b1, bman_e[i]} << (2'd3 - dlt);
      op  = (psign_e[i] ^ term[i].neg) ? -$signed({1'b0, mag}) : $signed({1'b0, mag});
      if (go[i]) tree = tree + TW'(op);
    end
  end

  // ---------------- accumulation ----------------
  always_comb begin
    logic signed [YW-1:0] acc_ext, back, tsh;
    logic [EXP_W-1:0]     sh;
    logic [YW-1:0]        mag, shifted, lost;
    logic                 neg, stk, guard, rest, up;
    logic [EXP_W-1:0]     lmax;
    logic [ACC_FRAC+1:0]  r;
    int                   lead, rs, ls;

    acc_ext = YW'(acc_q) <<< GUARD;
    sh      = (load && acc_q != '0) ? (emax_in - eacc_q) : '0;
    if (sh > EXP_W'(YW - 1)) sh = EXP_W'(YW - 1);
    acc_al    = acc_ext >>> sh;
    back      = acc_al <<< sh;
    sticky_al = (back != acc_ext);

    tsh  = YW'(tree) <<< (ACC_FRAC + GUARD - 10 - int'(base));
    if (!(|go)) tsh = '0;
    ysum = acc_al + tsh;

    neg = ysum[YW-1];
    mag = neg ? YW'(-ysum - YW'(sticky_al)) : YW'(ysum);
    stk = sticky_al;

    lead = -1;
    for (int j = 0; j < YW; j++) if (mag[j]) lead = j;
    lmax   = eacc_e - emax_e;
    rs     = 0;
    ls     = 0;
    eacc_n = eacc_e;
    if (lead > int'(HID)) begin
      rs     = lead - int'(HID);
      eacc_n = eacc_e + EXP_W'(rs);
    end else if (lead >= 0 && lead < int'(HID)) begin
      ls = int'(HID) - lead;
      if (ls > int'(lmax)) ls = int'(lmax);
      eacc_n = eacc_e - EXP_W'(ls);
    end
    norm_r  = (rs != 0);
    shifted = (mag >> rs) << ls;
    lost    = mag & ((YW'(1) << rs) - YW'(1));
    guard   = shifted[GUARD-1];
    rest    = (|shifted[GUARD-2:0]) || (lost != '0) || stk;
    r       = shifted[GUARD +: ACC_FRAC + 2];
    up      = guard && (rest || r[0]);
    r       = r + (ACC_FRAC+2)'(up);
    if (r[ACC_FRAC+1]) begin
      r      = r >> 1;
      eacc_n = eacc_n + EXP_W'(1);
      norm_r = 1'b1;
    end
    acc_n = neg ? -ACC_W'(r) : ACC_W'(r);
  end

  assign upd = act && (load || (|go));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      emax_q   <= '0;
      delta_q  <= '0;
      psign_q  <= '0;
      pzero_q  <= '1;
      bman_q   <= '0;
      taken_q  <= '0;
      obd_q    <= '0;
      active_q <= 1'b0;
      acc_q    <= '0;
      eacc_q   <= '0;
    end else if (clear) begin
      active_q <= 1'b0;
      taken_q  <= '0;
      obd_q    <= '0;
      acc_q    <= '0;
      eacc_q   <= '0;
    end else begin
      if (load) begin
        emax_q  <= emax_in;
        delta_q <= delta_in;
        psign_q <= psign_in;
        pzero_q <= pzero_in;
        bman_q  <= bman_in;
      end
      if (set_end) active_q <= 1'b0;
      else if (load) active_q <= 1'b1;
      for (int i = 0; i < N; i++) begin
        taken_q[i] <= (set_end || adv[i]) ? 1'b0 : (act && (taken_e[i] || go[i]));
        obd_q[i]   <= set_end ? 1'b0 : (act && (obd_e[i] || ob_new[i]));
      end
      if (upd) begin
        acc_q  <= acc_n;
        eacc_q <= eacc_n;
      end
    end
  end

  assign acc            = acc_q;
  assign eacc           = eacc_q;
  assign acc_nz         = (acc_q != '0);
  assign ev_go          = |go;
  assign ev_shift_stall = |(eff & ~go);
  assign ev_ob_skip     = |obterm;
  assign ev_norm        = upd && norm_r;

  acc_to_bf16 u_cvt (.acc(acc_q), .eacc(eacc_q), .res(res));

endmodule
