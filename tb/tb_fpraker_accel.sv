// tb_fpraker_accel: end-to-end testbench of the whole accelerator, built with 2 tiles.
// The default is 36. Every tile is identical and independent, and 2 tiles keep the
// build short while still exercising the tile selection of the read-out.
//
// Every tile gets NS sets per column and NS B groups. The B groups go through the
// tile's transposer, alternating transpose and direct mode (the testbench lays each
// group out so that row r of the tile receives the B vector meant for it in both
// modes). Once everything is idle, all 64 results of every tile are read out through
// the compressor, passed back through the decompressor (as on a round trip through
// off-chip memory) and compared bit for bit with a column-level reference model.
//
// It counts each mechanism: row waits, exponent-bound (two-cycle) sets, shift stalls,
// out-of-bounds term skips and lane drops, normalizations, groups in each transposer
// mode, and result groups that the compressor shrank. Any that never happened is a
// failure.
module tb_fpraker_accel;
  import fpr_pkg::*;
  import fpr_ref_pkg::*;

  localparam int NT   = 2;
  localparam int ROWS = 8;
  localparam int COLS = 8;
  localparam int NS   = 6;
  localparam int G    = 32;
  localparam int PW   = 19 + (G - 1) * 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                                 clear, idle, out_half;
  logic [THR_W-1:0]                     ob_thr;
  logic  [NT-1:0][COLS-1:0]             a_valid, a_ready, ev_set_done;
  bf16_t [NT-1:0][COLS-1:0][7:0]        a_data;
  logic  [NT-1:0]                       bt_transpose, bt_valid, bt_ready;
  bf16_t [NT-1:0][7:0]                  bt_data;
  logic  [$clog2(NT)-1:0]               out_tile;
  logic  [PW-1:0]                       out_packed, dram_packed;
  logic  [$clog2(PW+1)-1:0]             out_nbits, dram_nbits;
  bf16_t [G-1:0]                        gb_vals;
  logic ev_row_wait, ev_exp_bound, ev_shift_stall, ev_ob_skip, ev_ob_drop, ev_norm;

  fpraker_accel #(.NTILES(NT)) dut (.*);

  int checks = 0, failures = 0;
  logic [15:0] A[NT][COLS][NS][8];
  logic [15:0] B[NT][NS][][8];
  ref_column   rc[NT][COLS];
  int n_wait = 0, n_exp = 0, n_stall = 0, n_obs = 0, n_obd = 0, n_norm = 0;
  int n_tr = 0, n_dir = 0, n_small = 0, n_done = 0;

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

  always @(negedge clk) begin
    if (ev_row_wait)    n_wait++;
    if (ev_exp_bound)   n_exp++;
    if (ev_shift_stall) n_stall++;
    if (ev_ob_skip)     n_obs++;
    if (ev_ob_drop)     n_obd++;
    if (ev_norm)        n_norm++;
    for (int t = 0; t < NT; t++) for (int c = 0; c < COLS; c++) if (ev_set_done[t][c]) n_done++;
  end

  assign dram_packed = out_packed;   // off-chip round trip

  initial begin
    int ca[NT][COLS], gs[NT], gw[NT], cyc;
    bit busy;
    clear = 0; ob_thr = 5'd12; a_valid = '0; a_data = '0;
    bt_transpose = '0; bt_valid = '0; bt_data = '0; out_tile = '0; out_half = 0;
    for (int t = 0; t < NT; t++)
      for (int s = 0; s < NS; s++) begin
        B[t][s] = new[ROWS];
        for (int r = 0; r < ROWS; r++)
          for (int i = 0; i < 8; i++)
            B[t][s][r][i] = mk_bf16($urandom_range(0, 1), 124 + $urandom_range(0, 3), $urandom_range(0, 127));
        for (int c = 0; c < COLS; c++)
          for (int i = 0; i < 8; i++) begin
            // wide exponent spread in some sets, so that terms go out of bounds
            A[t][c][s][i] = mk_bf16($urandom_range(0, 1),
                                    (s % 2 == 0) ? 110 + $urandom_range(0, 20) : 124 + $urandom_range(0, 3),
                                    $urandom_range(0, 127));
            if (s == 3) A[t][c][s][i] = 16'h0000;   // a set without terms
          end
      end
    for (int t = 0; t < NT; t++)
      for (int c = 0; c < COLS; c++) begin
        rc[t][c] = new(ROWS);
        for (int s = 0; s < NS; s++) void'(rc[t][c].run_set(A[t][c][s], B[t][s], 12));
      end
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (ca[t, c]) ca[t][c] = 0;
    foreach (gs[t]) begin gs[t] = 0; gw[t] = 0; end
    busy = 1; cyc = 0;
    while (busy) begin
      @(negedge clk);
      busy = 0; cyc++;
      for (int t = 0; t < NT; t++) begin
        bt_valid[t] = (gs[t] < NS);
        if (gs[t] < NS) begin
          busy = 1;
          bt_transpose[t] = (gs[t] % 2 == 0);
          for (int i = 0; i < 8; i++)
            bt_data[t][i] = bt_transpose[t] ? B[t][gs[t]][i][gw[t]] : B[t][gs[t]][gw[t]][i];
        end
        for (int c = 0; c < COLS; c++) begin
          // A is held back at first, so that the B buffers fill and rows must wait
          a_valid[t][c] = (ca[t][c] < NS) && (cyc > 80);
          if (ca[t][c] < NS) begin
            busy = 1;
            for (int i = 0; i < 8; i++) a_data[t][c][i] = A[t][c][ca[t][c]][i];
          end
        end
      end
      @(posedge clk);
      for (int t = 0; t < NT; t++) begin
        if (bt_valid[t] && bt_ready[t]) begin
          if (gw[t] == 7) begin
            if (bt_transpose[t]) n_tr++; else n_dir++;
            gw[t] = 0; gs[t]++;
          end else gw[t]++;
        end
        for (int c = 0; c < COLS; c++) if (a_valid[t][c] && a_ready[t][c]) ca[t][c]++;
      end
      #1;
    end
    bt_valid = '0; a_valid = '0;
    repeat (2) @(negedge clk);
    while (!idle) @(negedge clk);
    // read-out: compressor -> off-chip -> decompressor
    for (int t = 0; t < NT; t++)
      for (int h = 0; h < 2; h++) begin
        out_tile = $bits(out_tile)'(t); out_half = h[0];
        #1;
        if (out_nbits < 19 + 31 * 16) n_small++;
        check(dram_nbits == out_nbits, "decompressor length");
        for (int k = 0; k < G; k++) begin
          int r, c;
          r = 4 * h + k / COLS; c = k % COLS;
          check(gb_vals[k] == rc[t][c].pe[r].result(),
                $sformatf("tile %0d PE(%0d,%0d) %h vs %h", t, r, c, gb_vals[k], rc[t][c].pe[r].result()));
        end
      end
    check(n_done == NT * COLS * NS, $sformatf("sets done %0d", n_done));
    check(n_wait  > 0, "row waits seen");
    check(n_exp   > 0, "exponent-bound sets seen");
    check(n_stall > 0, "shift stalls seen");
    check(n_obs   > 0, "out-of-bounds term skips seen");
    check(n_obd   > 0, "out-of-bounds lane drops seen");
    check(n_norm  > 0, "normalizations seen");
    check(n_tr    > 0, "transpose-mode groups seen");
    check(n_dir   > 0, "direct-mode groups seen");
    check(n_small > 0, "compressed result groups seen");
    $display("row_wait=%0d exp_bound=%0d stall=%0d ob_skip=%0d ob_drop=%0d norm=%0d transpose=%0d direct=%0d compressed=%0d sets=%0d",
             n_wait, n_exp, n_stall, n_obs, n_obd, n_norm, n_tr, n_dir, n_small, n_done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
