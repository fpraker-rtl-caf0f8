// tb_fpraker_tile: self-checking testbench of the 8x8 tile.
//
// Every column gets its own stream of A sets, every row its own stream of B vectors,
// each with random pauses. A column-level reference model per column predicts all 64
// results bit for bit. The test also checks that the row broadcast had to wait for a
// slow column at least once (columns running ahead until the B buffers fill), and
// that a column's stream of sets can be faster than another's.
module tb_fpraker_tile;
  import fpr_pkg::*;
  import fpr_ref_pkg::*;

  localparam int ROWS = 8;
  localparam int COLS = 8;
  localparam int NS   = 40;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                        clear, idle;
  logic [THR_W-1:0]            ob_thr;
  logic [COLS-1:0]             a_valid, a_ready;
  bf16_t [COLS-1:0][7:0]       a_data;
  logic [ROWS-1:0]             b_valid, b_ready;
  bf16_t [ROWS-1:0][7:0]       b_data;
  bf16_t [ROWS-1:0][COLS-1:0]  res;
  logic ev_row_wait, ev_exp_bound, ev_shift_stall, ev_ob_skip, ev_ob_drop, ev_norm;
  logic [COLS-1:0]             ev_set_done;

  fpraker_tile dut (.*);

  int checks = 0, failures = 0;
  logic [15:0] A[COLS][NS][8];
  logic [15:0] B[NS][][8];
  ref_column   rc[COLS];
  int          n_wait = 0, n_done[COLS];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog: sets done %p, idle %b a_valid %b b_valid %b b_ready %b", n_done, idle, a_valid, b_valid, b_ready);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    if (ev_row_wait) n_wait++;
    for (int c = 0; c < COLS; c++) if (ev_set_done[c]) n_done[c]++;
  end

  initial begin
    clear = 0; ob_thr = 5'd12; a_valid = '0; a_data = '0; b_valid = '0; b_data = '0;
    foreach (n_done[c]) n_done[c] = 0;
    for (int s = 0; s < NS; s++) begin
      B[s] = new[ROWS];
      for (int r = 0; r < ROWS; r++)
        for (int i = 0; i < 8; i++)
          B[s][r][i] = mk_bf16($urandom_range(0, 1), 120 + $urandom_range(0, 8), $urandom_range(0, 127));
      for (int c = 0; c < COLS; c++)
        for (int i = 0; i < 8; i++) begin
          A[c][s][i] = mk_bf16($urandom_range(0, 1), 120 + $urandom_range(0, 8), $urandom_range(0, 127));
          if (c == 0) A[c][s][i][5:0] = 6'd0;   // column 0 has few terms: it runs ahead
          if ($urandom_range(0, 7) == 0) A[c][s][i] = 16'h0000;
        end
    end
    for (int c = 0; c < COLS; c++) begin
      rc[c] = new(ROWS);
      for (int s = 0; s < NS; s++) void'(rc[c].run_set(A[c][s], B[s], 12));
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // one clocked driver for all rows and columns: index counters and random pauses
    begin : drive
      int rb[ROWS], ca[COLS], pause[ROWS];
      bit busy;
      foreach (rb[r]) begin rb[r] = 0; pause[r] = 0; end
      foreach (ca[c]) ca[c] = 0;
      busy = 1;
      while (busy) begin
        @(negedge clk);
        busy = 0;
        for (int r = 0; r < ROWS; r++) begin
          if (pause[r] > 0) pause[r]--;
          b_valid[r] = (rb[r] < NS) && (pause[r] == 0);
          if (rb[r] < NS) begin
            busy = 1;
            for (int i = 0; i < 8; i++) b_data[r][i] = B[rb[r]][r][i];
          end
        end
        for (int c = 0; c < COLS; c++) begin
          a_valid[c] = (ca[c] < NS);
          if (ca[c] < NS) begin
            busy = 1;
            for (int i = 0; i < 8; i++) a_data[c][i] = A[c][ca[c]][i];
          end
        end
        @(posedge clk);
        for (int r = 0; r < ROWS; r++)
          if (b_valid[r] && b_ready[r]) begin
            rb[r]++;
            if ($urandom_range(0, 5) == 0) pause[r] = $urandom_range(1, 4);
          end
        for (int c = 0; c < COLS; c++) if (a_valid[c] && a_ready[c]) ca[c]++;
        #1;
      end
      b_valid = '0; a_valid = '0;
    end
    repeat (2) @(negedge clk);
    while (!idle) @(negedge clk);
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++)
        check(res[r][c] == rc[c].pe[r].result(),
              $sformatf("PE(%0d,%0d) %h vs %h", r, c, res[r][c], rc[c].pe[r].result()));
    for (int c = 0; c < COLS; c++) check(n_done[c] == NS, $sformatf("column %0d sets %0d", c, n_done[c]));
    check(n_wait > 0, "row broadcast waited for a column");
    $display("row_wait=%0d", n_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
