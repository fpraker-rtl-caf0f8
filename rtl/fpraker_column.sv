// fpraker_column: one column of an FPRaker tile.
//
// All PEs of a column work on the same set of LANES A values and on different B
// values (one B vector per row). The column holds:
//  * one term encoder for the A set, shared by all PEs of the column;
//  * one exponent block per pair of PEs (rows 2j and 2j+1), time-multiplexed: in the
//    first cycle of a set (phase E0) it serves (A, B) of the even row, in the second
//    (E1) (A, B') of the odd row. Its result goes straight into the PE being served
//    (bypass) and is latched there for the rest of the set;
//  * one B buffer per PE, filled by the tile's row broadcast, popped when the PE's
//    exponent cycle takes its B vector.
// A lane of the encoder advances when every PE has consumed its current term and
// drops its remaining terms when every PE reports them out of bounds. A set ends when
// no terms are left after E1 or later; the next set can start in the next cycle, so
// a set takes at least two cycles, as with the paper's shared exponent block.
//
// Interface: a_valid/a_data/a_ready take an A set (a_ready is high in the E0 cycle);
// b_push/b_data/b_full fill the per-PE buffers of each row; res gives the bfloat16
// read-out of every PE (the A signs reach the PEs through the exponent block's
// product signs, so the encoder's sign output is left open); idle says that nothing is in flight. ev_* are one-cycle event
// flags for performance counting.
//
// Following the paper: sharing of the encoder along the column, one exponent block per
// two PEs with the B/B' multiplexer and latches, the two-cycle minimum, per-PE B
// buffers. Own choices: the phase sequencing, which PE's accumulator exponent feeds the
// shared MAX (the one being served) and the AND combination of the per-PE signals.
module fpraker_column
  import fpr_pkg::*;
#(
  parameter int unsigned ROWS   = 8,
  parameter int unsigned N      = LANES,
  parameter int unsigned BDEPTH = 2
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      clear,
  input  logic [THR_W-1:0]          ob_thr,
  input  logic                      a_valid,
  input  bf16_t [N-1:0]             a_data,
  output logic                      a_ready,
  input  logic [ROWS-1:0]           b_push,
  input  bf16_t [ROWS-1:0][N-1:0]   b_data,
  output logic [ROWS-1:0]           b_full,
  output bf16_t [ROWS-1:0]          res,
  output logic                      idle,
  output logic                      ev_set_done,
  output logic                      ev_exp_bound,
  output logic                      ev_shift_stall,
  output logic                      ev_ob_skip,
  output logic                      ev_ob_drop,
  output logic                      ev_norm
);

  typedef enum logic [1:0] {S_IDLE, S_E0, S_E1, S_RUN} phase_e;

  localparam int unsigned CW = $clog2(BDEPTH + 1);

  phase_e                   phase_q, phase_n;
  bf16_t [N-1:0]            a_q;
  bf16_t [ROWS-1:0][N-1:0]  head;
  logic  [ROWS-1:0]         b_empty, pop, pe_load;
  logic  [ROWS-1:0][CW-1:0] b_count;

  term_t [N-1:0]            term;
  logic  [N-1:0]            adv, drop;
  logic                     empty_next, set_end, start_ok, next_ok;

  logic  [ROWS-1:0][N-1:0]  consumed, fin;
  logic  [ROWS-1:0]         ev_stall_r, ev_ob_r, ev_norm_r, acc_nz;
  logic  [ROWS-1:0][EXP_W-1:0] eacc;

  // ---------------- per-PE B buffers ----------------
  for (genvar r = 0; r < ROWS; r++) begin : g_buf
    b_buffer #(.N(N), .DEPTH(BDEPTH)) u_buf (
      .clk, .rst_n,
      .push(b_push[r]), .din(b_data[r]), .full(b_full[r]),
      .pop(pop[r]), .dout(head[r]), .empty(b_empty[r]), .count(b_count[r])
    );
  end

  // ---------------- set sequencing ----------------
  assign start_ok = a_valid && (b_empty == '0);

  always_comb begin
    next_ok = a_valid;
    for (int r = 0; r < ROWS; r++) begin
      if (b_count[r] == CW'(pop[r])) next_ok = 1'b0;
    end
  end

  assign set_end = ((phase_q == S_E1) || (phase_q == S_RUN)) && empty_next;

  always_comb begin
    phase_n = phase_q;
    case (phase_q)
      S_IDLE:  if (start_ok) phase_n = S_E0;
      S_E0:    phase_n = S_E1;
      default: if (set_end) phase_n = next_ok ? S_E0 : S_IDLE;
               else         phase_n = S_RUN;
    endcase
    if (clear) phase_n = S_IDLE;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase_q <= S_IDLE;
      a_q     <= '0;
    end else begin
      phase_q <= phase_n;
      if (phase_q == S_E0) a_q <= a_data;
    end
  end

  assign a_ready = (phase_q == S_E0);

  for (genvar r = 0; r < ROWS; r++) begin : g_ld
    assign pe_load[r] = (r % 2 == 0) ? (phase_q == S_E0) : (phase_q == S_E1);
    assign pop[r]     = pe_load[r];
  end

  // ---------------- shared term encoder ----------------
  always_comb begin
    for (int i = 0; i < N; i++) begin
      adv[i]  = term[i].valid;
      drop[i] = 1'b1;
      for (int r = 0; r < ROWS; r++) begin
        adv[i]  = adv[i]  && consumed[r][i];
        drop[i] = drop[i] && fin[r][i];
      end
    end
  end

  term_encoder #(.N(N)) u_enc (
    .clk, .rst_n,
    .load(phase_q == S_E0), .a_in(a_data),
    .adv, .drop, .term, .a_sign(), .empty_next
  );

  // ---------------- exponent blocks shared by PE pairs, and the PEs ----------------
  for (genvar j = 0; j < ROWS / 2; j++) begin : g_pair
    bf16_t [N-1:0]             ea, eb;
    logic  [EXP_W-1:0]         emax;
    logic  [N-1:0][DELTA_W-1:0] delta;
    logic  [N-1:0]             psign, pzero;
    logic                      sel_odd;

    assign sel_odd = (phase_q == S_E1);
    assign ea      = sel_odd ? a_q : a_data;
    assign eb      = sel_odd ? head[2*j+1] : head[2*j];

    exponent_block #(.N(N)) u_exp (
      .a(ea), .b(eb),
      .eacc(sel_odd ? eacc[2*j+1] : eacc[2*j]),
      .acc_nz(sel_odd ? acc_nz[2*j+1] : acc_nz[2*j]),
      .emax, .delta, .psign, .pzero
    );

    for (genvar h = 0; h < 2; h++) begin : g_pe
      localparam int unsigned R = 2 * j + h;
      logic [N-1:0][6:0] bman;
      logic signed [ACC_W-1:0] acc_unused;
      logic ev_go_unused;
      for (genvar i = 0; i < N; i++) begin : g_bm
        assign bman[i] = head[R][i].man;
      end
      fpraker_pe #(.N(N)) u_pe (
        .clk, .rst_n, .clear,
        .load(pe_load[R]), .set_end,
        .emax_in(emax), .delta_in(delta), .psign_in(psign), .pzero_in(pzero),
        .bman_in(bman), .term, .adv, .ob_thr,
        .consumed(consumed[R]), .fin(fin[R]),
        .acc(acc_unused), .eacc(eacc[R]), .acc_nz(acc_nz[R]), .res(res[R]),
        .ev_go(ev_go_unused), .ev_shift_stall(ev_stall_r[R]),
        .ev_ob_skip(ev_ob_r[R]), .ev_norm(ev_norm_r[R])
      );
    end
  end

  assign idle           = (phase_q == S_IDLE) && (b_empty == '1);
  assign ev_set_done    = set_end;
  assign ev_exp_bound   = set_end && (phase_q == S_E1);
  assign ev_shift_stall = |ev_stall_r;
  assign ev_ob_skip     = |ev_ob_r;
  always_comb begin
    ev_ob_drop = 1'b0;
    for (int i = 0; i < N; i++) if (drop[i] && term[i].valid) ev_ob_drop = 1'b1;
  end
  assign ev_norm        = |ev_norm_r;

  assert property (@(posedge clk) disable iff (!rst_n) (phase_q == S_E0) |-> a_valid)
    else $error("fpraker_column: A set withdrawn before it was taken");

endmodule
