// b_buffer: per-PE buffer of B value sets.
//
// A small first-in first-out buffer in front of each PE that holds DEPTH sets of N
// bfloat16 B values. The B inputs of a tile row are broadcast to the buffers of every
// PE of that row; each column pops its own buffer when it starts a new set. With
// DEPTH entries a column can run up to DEPTH sets ahead of the slowest column of the
// tile before the row input has to wait.
//
// Interface: push/din with full, pop/dout with empty, and the fill level count. dout
// shows the oldest entry (first-word fall-through). Pushing while full and popping
// while empty are protocol errors caught by assertions.
//
// The paper gives the purpose of the buffers but not their depth or organisation; a
// depth of 2 and a circular buffer are this design's choices.
module b_buffer
  import fpr_pkg::*;
#(
  parameter int unsigned N     = LANES,
  parameter int unsigned DEPTH = 2
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         push,
  input  bf16_t [N-1:0]                din,
  output logic                         full,
  input  logic                         pop,
  output bf16_t [N-1:0]                dout,
  output logic                         empty,
  output logic [$clog2(DEPTH+1)-1:0]   count
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  bf16_t [N-1:0]           mem [DEPTH];
  logic [AW-1:0]           rd_q, wr_q;
  logic [$clog2(DEPTH+1)-1:0] cnt_q;

  function automatic logic [AW-1:0] inc(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + AW'(1);
  endfunction

  assign full  = (cnt_q == ($clog2(DEPTH+1))'(DEPTH));
  assign empty = (cnt_q == '0);
  assign count = cnt_q;
  assign dout  = mem[rd_q];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (push) wr_q <= inc(wr_q);
      if (pop)  rd_q <= inc(rd_q);
      cnt_q <= cnt_q + ($clog2(DEPTH+1))'(push) - ($clog2(DEPTH+1))'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_q] <= din;
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !pop))
    else $error("b_buffer: push while full");
  assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty))
    else $error("b_buffer: pop while empty");

endmodule
