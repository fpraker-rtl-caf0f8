// fpraker_accel: the accelerator built from term-serial tiles.
//
// NTILES tiles (36 by default) of ROWS x COLS term-serial PEs run side by side. Every
// tile has:
//  * its own per-column A streams (a_valid/a_data/a_ready), which come straight from
//    the on-chip buffer, 8 bfloat16 values per access;
//  * one transposer on its B path. It takes 8 blocks of 8 values from the buffer
//    (bt_*) and hands the tile one block per cycle: block j goes to the tile's row j,
//    as column j of the 8x8 group in transpose mode or as row j in direct mode. This
//    is how weights and gradients are read in the transposed order that some of the
//    training computations need.
// The results of all PEs are read out through one exponent base-delta compressor on
// the way to off-chip memory: out_tile and out_half pick a group of 32 results (rows
// 4*out_half .. 4*out_half+3 of the chosen tile, all columns, row-major). One
// decompressor rebuilds 32 values from a compressed group read from off-chip memory
// (dram_packed to gb_vals), for the global buffer. The global buffer, scratchpads and
// off-chip memory are outside this module, and their sides are the module's ports.
//
// Timing: tile, transposer and handshake timing is that of the sub-blocks. The
// compressor and decompressor are combinational. The ev_* outputs are the tile event
// flags ORed over all tiles, for performance counting. idle is the AND over all tiles
// and transposers.
//
// Following the paper: 36 tiles of 8x8 PEs with 8 MACs each, the transposers, and the
// compression of outputs before they go off-chip with decompression on the way back.
// Own choices: one transposer per tile on the B side only, the result read-out through
// a single multiplexed compressor, and the port-level split at the global buffer. The
// paper does not give how the tiles are wired to the buffer banks.
module fpraker_accel
  import fpr_pkg::*;
#(
  parameter int unsigned NTILES = 36,
  parameter int unsigned ROWS   = 8,
  parameter int unsigned COLS   = 8,
  parameter int unsigned N      = LANES,
  parameter int unsigned BDEPTH = 2,
  localparam int unsigned G     = 32,
  localparam int unsigned PW    = 19 + (G - 1) * 16,
  localparam int unsigned TW    = (NTILES > 1) ? $clog2(NTILES) : 1
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic                                  clear,
  input  logic [THR_W-1:0]                      ob_thr,
  // A operands, per tile and column
  input  logic  [NTILES-1:0][COLS-1:0]          a_valid,
  input  bf16_t [NTILES-1:0][COLS-1:0][N-1:0]   a_data,
  output logic  [NTILES-1:0][COLS-1:0]          a_ready,
  // B operands, per tile, into the transposer
  input  logic  [NTILES-1:0]                    bt_transpose,
  input  logic  [NTILES-1:0]                    bt_valid,
  input  bf16_t [NTILES-1:0][N-1:0]             bt_data,
  output logic  [NTILES-1:0]                    bt_ready,
  // compressed result read-out
  input  logic  [TW-1:0]                        out_tile,
  input  logic                                  out_half,
  output logic  [PW-1:0]                        out_packed,
  output logic  [$clog2(PW+1)-1:0]              out_nbits,
  // decompression of a group read from off-chip memory
  input  logic  [PW-1:0]                        dram_packed,
  output bf16_t [G-1:0]                         gb_vals,
  output logic  [$clog2(PW+1)-1:0]              dram_nbits,
  // status and events
  output logic                                  idle,
  output logic                                  ev_row_wait,
  output logic                                  ev_exp_bound,
  output logic                                  ev_shift_stall,
  output logic                                  ev_ob_skip,
  output logic                                  ev_ob_drop,
  output logic                                  ev_norm,
  output logic  [NTILES-1:0][COLS-1:0]          ev_set_done
);

  bf16_t [NTILES-1:0][ROWS-1:0][COLS-1:0] res;
  logic  [NTILES-1:0] t_idle, tr_idle, e_rw, e_eb, e_st, e_obs, e_obd, e_nm;

  for (genvar t = 0; t < NTILES; t++) begin : g_tile
    logic                 tr_valid, tr_ready;
    bf16_t [N-1:0]        tr_data;
    logic [$clog2(N)-1:0] tr_idx;
    logic  [ROWS-1:0]     b_valid, b_ready;
    bf16_t [ROWS-1:0][N-1:0] b_data;

    transposer #(.N(N)) u_tr (
      .clk, .rst_n,
      .transpose(bt_transpose[t]),
      .in_valid(bt_valid[t]), .in_data(bt_data[t]), .in_ready(bt_ready[t]),
      .out_valid(tr_valid), .out_data(tr_data), .out_idx(tr_idx), .out_ready(tr_ready)
    );

    always_comb begin
      for (int r = 0; r < ROWS; r++) begin
        b_valid[r] = tr_valid && (32'(tr_idx) == r);
        b_data[r]  = tr_data;
      end
      tr_ready = b_ready[tr_idx];
    end
    assign tr_idle[t] = !tr_valid && bt_ready[t];

    fpraker_tile #(.ROWS(ROWS), .COLS(COLS), .N(N), .BDEPTH(BDEPTH)) u_tile (
      .clk, .rst_n, .clear, .ob_thr,
      .a_valid(a_valid[t]), .a_data(a_data[t]), .a_ready(a_ready[t]),
      .b_valid, .b_data, .b_ready,
      .res(res[t]), .idle(t_idle[t]),
      .ev_row_wait(e_rw[t]), .ev_exp_bound(e_eb[t]), .ev_shift_stall(e_st[t]),
      .ev_ob_skip(e_obs[t]), .ev_ob_drop(e_obd[t]), .ev_norm(e_nm[t]),
      .ev_set_done(ev_set_done[t])
    );
  end

  // ---------------- result read-out through the compressor ----------------
  bf16_t [G-1:0] grp;
  always_comb begin
    for (int k = 0; k < G; k++)
      grp[k] = res[out_tile][(ROWS / 2) * out_half + k / COLS][k % COLS];
  end

  bdc_compress #(.G(G)) u_comp (.vals(grp), .packed_o(out_packed), .nbits(out_nbits), .dw());

  bdc_decompress #(.G(G)) u_decomp (.packed_i(dram_packed), .vals(gb_vals), .nbits(dram_nbits));

  assign idle           = &t_idle && &tr_idle;
  assign ev_row_wait    = |e_rw;
  assign ev_exp_bound   = |e_eb;
  assign ev_shift_stall = |e_st;
  assign ev_ob_skip     = |e_obs;
  assign ev_ob_drop     = |e_obd;
  assign ev_norm        = |e_nm;

  initial begin
    assert (ROWS * COLS == 2 * G) else $error("fpraker_accel: read-out assumes 64 PEs per tile");
  end

endmodule
