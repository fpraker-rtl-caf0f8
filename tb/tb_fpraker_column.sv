// tb_fpraker_column: self-checking testbench of one tile column (8 PEs, one encoder,
// four shared exponent blocks, per-PE B buffers).
//
// Random A sets (including all-zero sets, short mantissas and wide exponent spreads)
// and per-row B vectors are streamed in; the column-level reference model predicts the
// number of cycles of every set and the final bfloat16 result of every PE, bit for
// bit. Also checked: a set never takes fewer than 2 cycles, an all-zero set takes
// exactly 2, and sets follow each other without a gap when their B vectors are there.
module tb_fpraker_column;
  import fpr_pkg::*;
  import fpr_ref_pkg::*;

  localparam int ROWS = 8;
  localparam int NS   = 60;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                     clear;
  logic [THR_W-1:0]         ob_thr;
  logic                     a_valid, a_ready, idle;
  bf16_t [7:0]              a_data;
  logic [ROWS-1:0]          b_push, b_full;
  bf16_t [ROWS-1:0][7:0]    b_data;
  bf16_t [ROWS-1:0]         res;
  logic ev_set_done, ev_exp_bound, ev_shift_stall, ev_ob_skip, ev_ob_drop, ev_norm;

  fpraker_column #(.ROWS(ROWS)) dut (.*);

  int checks = 0, failures = 0;
  logic [15:0] A[NS][8];
  logic [15:0] B[NS][][8];
  int          cyc_ref[NS];
  ref_column   rc;
  int          n_gap0 = 0, n_exp = 0, n_stall = 0, n_obd = 0, n_norm = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic gen(int round);
    for (int s = 0; s < NS; s++) begin
      int spread;
      spread = (s % 4 == 0) ? 30 : 5;
      B[s] = new[ROWS];
      for (int i = 0; i < 8; i++) begin
        A[s][i] = mk_bf16($urandom_range(0, 1), 122 + $urandom_range(0, spread), $urandom_range(0, 127));
        if (s % 7 == 3) A[s][i][4:0] = 5'd0;
        if ($urandom_range(0, 9) == 0) A[s][i] = 16'h0000;
        if (s % 11 == 5) A[s][i] = 16'h0000;     // set without any term
        for (int r = 0; r < ROWS; r++) begin
          B[s][r][i] = mk_bf16($urandom_range(0, 1), 124 + $urandom_range(0, spread), $urandom_range(0, 127));
          if ($urandom_range(0, 15) == 0) B[s][r][i] = 16'h0000;
        end
      end
    end
  endtask

  task automatic run_round(int thr);
    int done_sets;
    rc = new(ROWS);
    for (int s = 0; s < NS; s++) cyc_ref[s] = rc.run_set(A[s], B[s], thr);
    @(negedge clk); clear = 1; ob_thr = THR_W'(thr); @(negedge clk); clear = 0;
    done_sets = 0;
    fork
      begin : drive_b
        for (int s = 0; s < NS; s++) begin
          @(negedge clk);
          while (b_full != '0) @(negedge clk);
          for (int r = 0; r < ROWS; r++)
            for (int i = 0; i < 8; i++) b_data[r][i] = B[s][r][i];
          b_push = '1;
          @(posedge clk); #1 b_push = '0;
        end
      end
      begin : drive_a
        for (int s = 0; s < NS; s++) begin
          a_valid = 1;
          for (int i = 0; i < 8; i++) a_data[i] = A[s][i];
          @(negedge clk);
          while (!a_ready) @(negedge clk);
          @(posedge clk); #1;
          // leave a gap now and then so that the buffers fill up
          a_valid = 0;
          if (s % 9 == 8) repeat (6) @(posedge clk);
        end
        a_valid = 0;
      end
      begin : monitor
        int cnt, s;
        bit last_done;
        s = 0; cnt = 0; last_done = 0;
        while (s < NS) begin
          @(negedge clk);
          if (a_ready) begin
            if (last_done) n_gap0++;
            cnt = 0;
          end
          cnt++;
          last_done = ev_set_done;
          if (ev_exp_bound) n_exp++;
          if (ev_shift_stall) n_stall++;
          if (ev_ob_drop) n_obd++;
          if (ev_norm) n_norm++;
          if (ev_set_done) begin
            check(cnt == cyc_ref[s], $sformatf("set %0d cycles %0d vs %0d", s, cnt, cyc_ref[s]));
            check(cnt >= 2, "at least two cycles per set");
            if (s % 11 == 5) check(cnt == 2, "empty set takes two cycles");
            s++;
          end
        end
      end
    join
    @(negedge clk);
    while (!idle) @(negedge clk);
    for (int r = 0; r < ROWS; r++)
      check(res[r] == rc.pe[r].result(), $sformatf("row %0d res %h vs %h", r, res[r], rc.pe[r].result()));
  endtask

  initial begin
    clear = 0; ob_thr = 5'd12; a_valid = 0; a_data = '0; b_push = '0; b_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 6; round++) begin
      gen(round);
      run_round(round % 3 == 2 ? 6 : 12);
    end
    check(n_gap0 > 0, "back-to-back sets seen");
    check(n_exp > 0, "exponent-bound sets seen");
    check(n_stall > 0, "shift stalls seen");
    check(n_obd > 0, "OB drops seen");
    $display("gap0=%0d exp_bound=%0d stalls=%0d ob_drops=%0d norms=%0d", n_gap0, n_exp, n_stall, n_obd, n_norm);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
