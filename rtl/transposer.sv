// transposer: 8x8 bfloat16 block transposer on the path from the on-chip buffer to a
// tile.
//
// The on-chip buffer delivers 8 values per access. The transposer takes 8 such blocks
// and writes them as the rows of an internal N x N buffer. It then sends out N blocks of
// N values. In transpose mode, block j is column j of the buffer. In direct mode it is
// row j, for the operations that need no rearrangement. Block j is tagged with its index
// (out_idx) so that the tile can route it to its row j.
//
// Timing: a single buffer that alternates between filling and draining. in_ready is high
// while it fills (N accepted writes, one per cycle at most). out_valid is high while it
// drains (N blocks, one per cycle when out_ready is high). Back-pressure on either side
// only stalls. The mode is sampled with the first write of a block and held until the
// block has drained. So a new 8x8 group can start every 2N cycles at best: the fill of
// the next group waits for the drain of the current one.
//
// Following the paper: 8 reads of 8 values written as rows, read out as columns. Own
// choices: the single buffer (no double buffering), the direct mode and the valid/ready
// handshakes. The paper does not describe these.
module transposer
  import fpr_pkg::*;
#(
  parameter int unsigned N = LANES
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 transpose,   // 1: columns out, 0: rows out
  input  logic                 in_valid,
  input  bf16_t [N-1:0]        in_data,
  output logic                 in_ready,
  output logic                 out_valid,
  output bf16_t [N-1:0]        out_data,
  output logic [$clog2(N)-1:0] out_idx,
  input  logic                 out_ready
);

  localparam int unsigned IW = $clog2(N);

  bf16_t [N-1:0][N-1:0] mem_q;     // mem_q[row][col]
  logic  [IW-1:0]       wr_q, rd_q;
  logic                 draining_q, mode_q;

  assign in_ready  = !draining_q;
  assign out_valid = draining_q;
  assign out_idx   = rd_q;

  always_comb begin
    for (int i = 0; i < N; i++)
      out_data[i] = mode_q ? mem_q[i][rd_q] : mem_q[rd_q][i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mem_q      <= '0;
      wr_q       <= '0;
      rd_q       <= '0;
      draining_q <= 1'b0;
      mode_q     <= 1'b0;
    end else if (!draining_q) begin
      if (in_valid) begin
        mem_q[wr_q] <= in_data;
        if (wr_q == '0) mode_q <= transpose;
        wr_q <= (wr_q == IW'(N - 1)) ? '0 : wr_q + 1'b1;
        if (wr_q == IW'(N - 1)) draining_q <= 1'b1;
      end
    end else if (out_ready) begin
      rd_q <= (rd_q == IW'(N - 1)) ? '0 : rd_q + 1'b1;
      if (rd_q == IW'(N - 1)) draining_q <= 1'b0;
    end
  end

endmodule
