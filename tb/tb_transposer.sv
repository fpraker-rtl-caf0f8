// tb_transposer: self-checking testbench of the 8x8 transposer.
//
// Writes random 8x8 groups, alternating transpose and direct mode, with random gaps on
// the input and random back-pressure on the output. Checks every block read out
// against the matrix kept by the testbench (column j, or row j in direct mode), the
// block index, and that a group without stalls takes 2N cycles from first write to
// last read.
module tb_transposer;
  import fpr_pkg::*;

  localparam int N  = 8;
  localparam int NG = 40;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                 transpose, in_valid, in_ready, out_valid, out_ready;
  bf16_t [N-1:0]        in_data, out_data;
  logic [$clog2(N)-1:0] out_idx;

  transposer #(.N(N)) dut (.*);

  int checks = 0, failures = 0;
  logic [15:0] M[NG][N][N];
  bit          tmode[NG];
  int          t_first[NG], t_last[NG], cyc = 0;
  bit          stall_free[NG];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) cyc++;

  initial begin
    int gi, wr, go, rd;
    transpose = 0; in_valid = 0; in_data = '0; out_ready = 0;
    for (int g = 0; g < NG; g++) begin
      tmode[g] = (g % 3 != 2);
      stall_free[g] = (g % 4 == 0);
      for (int r = 0; r < N; r++) for (int c = 0; c < N; c++) M[g][r][c] = 16'($urandom);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    gi = 0; wr = 0; go = 0; rd = 0;
    while (go < NG) begin
      @(negedge clk);
      in_valid  = (gi < NG) && (stall_free[gi] || $urandom_range(0, 3) != 0);
      if (gi < NG) begin
        for (int i = 0; i < N; i++) in_data[i] = M[gi][wr][i];
        transpose = tmode[gi];
      end
      out_ready = stall_free[go] || ($urandom_range(0, 2) != 0);
      @(posedge clk);
      if (out_valid && out_ready) begin
        check(out_idx == rd[2:0], $sformatf("group %0d index %0d vs %0d", go, out_idx, rd));
        for (int i = 0; i < N; i++) begin
          logic [15:0] exp_v;
          exp_v = tmode[go] ? M[go][i][rd] : M[go][rd][i];
          check(out_data[i] == exp_v, $sformatf("group %0d block %0d value %0d", go, rd, i));
        end
        if (rd == N - 1) begin
          t_last[go] = cyc;
          if (stall_free[go])
            check(t_last[go] - t_first[go] == 2 * N - 1,
                  $sformatf("group %0d took %0d cycles", go, t_last[go] - t_first[go] + 1));
          rd = 0; go++;
        end else rd++;
      end
      if (in_valid && in_ready) begin
        if (wr == 0) t_first[gi] = cyc;
        if (wr == N - 1) begin wr = 0; gi++; end else wr++;
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
