// fpraker_tile: a ROWS x COLS grid of term-serial PEs.
//
// Each column receives its own stream of A sets (LANES values each) and processes it
// term-serially with its own encoder and shared exponent blocks (fpraker_column). Each
// row receives one stream of B vectors, which is broadcast to the B buffers of all PEs
// of that row. PE(r, c) therefore accumulates the dot products of the A sets of column
// c with the B vectors of row r; for example different filters per row and different
// windows per column in the forward pass.
//
// Because B is shared along a row, a row's next B vector can be accepted only when the
// buffers of all its PEs have room (b_ready); the buffers let fast columns run up to
// BDEPTH sets ahead of slow ones. A accepts per column (a_valid/a_ready).
//
// Interface: clear zeroes every accumulator (use it while idle); ob_thr is the
// out-of-bounds threshold (12 for the paper's accumulator, smaller for narrower
// per-layer accumulators); res[r][c] is the bfloat16 read-out of PE(r,c); idle is high
// when no work is in flight. The ev_* outputs are per-cycle event flags (OR over
// columns) for performance counting.
//
// Following the paper: the grid, the per-column A and per-row B sharing, the per-PE
// buffers and the 8x8 size. Own choice: the row-ready handshake.
module fpraker_tile
  import fpr_pkg::*;
#(
  parameter int unsigned ROWS   = 8,
  parameter int unsigned COLS   = 8,
  parameter int unsigned N      = LANES,
  parameter int unsigned BDEPTH = 2
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clear,
  input  logic [THR_W-1:0]              ob_thr,
  input  logic [COLS-1:0]               a_valid,
  input  bf16_t [COLS-1:0][N-1:0]       a_data,
  output logic [COLS-1:0]               a_ready,
  input  logic [ROWS-1:0]               b_valid,
  input  bf16_t [ROWS-1:0][N-1:0]       b_data,
  output logic [ROWS-1:0]               b_ready,
  output bf16_t [ROWS-1:0][COLS-1:0]    res,
  output logic                          idle,
  output logic                          ev_row_wait,
  output logic                          ev_exp_bound,
  output logic                          ev_shift_stall,
  output logic                          ev_ob_skip,
  output logic                          ev_ob_drop,
  output logic                          ev_norm,
  output logic [COLS-1:0]               ev_set_done
);

  logic [COLS-1:0][ROWS-1:0] full;
  logic [ROWS-1:0]           push;
  logic [COLS-1:0]           c_idle, c_exp, c_stall, c_obs, c_obd, c_norm;
  bf16_t [COLS-1:0][ROWS-1:0] c_res;

  always_comb begin
    for (int r = 0; r < ROWS; r++) begin
      b_ready[r] = 1'b1;
      for (int c = 0; c < COLS; c++) if (full[c][r]) b_ready[r] = 1'b0;
      push[r] = b_valid[r] && b_ready[r];
    end
  end

  for (genvar c = 0; c < COLS; c++) begin : g_col
    fpraker_column #(.ROWS(ROWS), .N(N), .BDEPTH(BDEPTH)) u_col (
      .clk, .rst_n, .clear, .ob_thr,
      .a_valid(a_valid[c]), .a_data(a_data[c]), .a_ready(a_ready[c]),
      .b_push(push), .b_data(b_data), .b_full(full[c]),
      .res(c_res[c]), .idle(c_idle[c]),
      .ev_set_done(ev_set_done[c]), .ev_exp_bound(c_exp[c]),
      .ev_shift_stall(c_stall[c]), .ev_ob_skip(c_obs[c]),
      .ev_ob_drop(c_obd[c]), .ev_norm(c_norm[c])
    );
    for (genvar r = 0; r < ROWS; r++) begin : g_res
      assign res[r][c] = c_res[c][r];
    end
  end

  assign idle           = &c_idle;
  assign ev_row_wait    = |(b_valid & ~b_ready);
  assign ev_exp_bound   = |c_exp;
  assign ev_shift_stall = |c_stall;
  assign ev_ob_skip     = |c_obs;
  assign ev_ob_drop     = |c_obd;
  assign ev_norm        = |c_norm;

endmodule
