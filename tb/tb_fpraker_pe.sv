// tb_fpraker_pe: self-checking testbench of one term-serial PE.
//
// The testbench plays the term encoder (one term per lane, advanced when the PE has
// consumed it, all dropped on OB) and the exponent block (computed by the reference
// model). Every cycle it compares consumed/fin with the reference PE model, after
// every set the accumulator and exponent, and at the end the bfloat16 read-out.
//  1. The worked example of the paper's timing figure (binary terms, 2 lanes): with a
//     6-bit accumulator precision the set takes 4 cycles, without skipping 5 cycles.
//  2. Random sets of canonically encoded values with a real-number sanity check.
module tb_fpraker_pe;
  import fpr_pkg::*;
  import fpr_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                      clear, load, set_end;
  logic [EXP_W-1:0]          emax_in;
  logic [7:0][DELTA_W-1:0]   delta_in;
  logic [7:0]                psign_in, pzero_in, adv;
  logic [7:0][6:0]           bman_in;
  term_t [7:0]               term;
  logic [THR_W-1:0]          ob_thr;
  logic [7:0]                consumed, fin;
  logic signed [ACC_W-1:0]   acc;
  logic [EXP_W-1:0]          eacc;
  logic                      acc_nz, ev_go, ev_shift_stall, ev_ob_skip, ev_norm;
  bf16_t                     res;

  fpraker_pe dut (.*);

  int checks = 0, failures = 0;
  int n_stall = 0, n_ob = 0, n_norm = 0;
  ref_pe  rm;
  tlist_t q[8];
  int     idx[8];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic bit lanes_empty();
    for (int i = 0; i < 8; i++) if (idx[i] < q[i].size()) return 0;
    return 1;
  endfunction

  // run one set; returns the number of cycles it took
  task automatic run_set(logic [15:0] a[8], logic [15:0] b[8], int thr, output int cyc);
    int  em, dl[8];
    bit  ps[8], pz[8], first, a_adv[8];
    rterm_t tv[8];
    rm.prepare(a, b, em, dl, ps, pz);
    for (int i = 0; i < 8; i++) idx[i] = 0;
    first = 1;
    cyc = 0;
    do begin
      @(negedge clk);
      load    = first;
      emax_in = EXP_W'(em);
      ob_thr  = THR_W'(thr);
      for (int i = 0; i < 8; i++) begin
        delta_in[i] = DELTA_W'(dl[i]);
        psign_in[i] = ps[i];
        pzero_in[i] = pz[i];
        bman_in[i]  = b[i][6:0];
        if (idx[i] < q[i].size()) tv[i] = q[i][idx[i]];
        else begin tv[i].valid = 0; tv[i].neg = 0; tv[i].pos = 0; end
        term[i].valid = tv[i].valid;
        term[i].neg   = tv[i].neg;
        term[i].pos   = TPOS_W'(tv[i].pos);
      end
      rm.evaluate(first, a, b, tv, thr);
      #2;
      for (int i = 0; i < 8; i++) begin
        check(consumed[i] == rm.consumed[i], $sformatf("consumed[%0d]", i));
        check(fin[i] == rm.fin[i], $sformatf("fin[%0d]", i));
        a_adv[i] = rm.consumed[i] && tv[i].valid;
        adv[i]   = a_adv[i];
      end
      if (ev_shift_stall) n_stall++;
      if (ev_ob_skip) n_ob++;
      if (ev_norm) n_norm++;
      for (int i = 0; i < 8; i++) begin
        if (rm.fin[i]) idx[i] = q[i].size();
        else if (a_adv[i]) idx[i]++;
      end
      set_end = lanes_empty();
      rm.commit(a_adv, set_end);
      first = 0;
      cyc++;
      @(posedge clk);
      #1;
      load = 0; set_end = 0; adv = '0;
    end while (!lanes_empty());
    check(acc == ACC_W'(rm.acc), $sformatf("acc %0d vs %0d", acc, rm.acc));
    check(rm.acc == 0 || eacc == EXP_W'(rm.eacc), $sformatf("eacc %0d vs %0d", eacc, rm.eacc));
  endtask

  task automatic do_clear();
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    rm = new();
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] a[8], b[8];
    int          cyc, e0;
    real         exact, got, mx;
    clear = 0; load = 0; set_end = 0; adv = '0; term = '0; ob_thr = 5'd12;
    emax_in = '0; delta_in = '0; psign_in = '0; pzero_in = '1; bman_in = '0;
    rm = new();
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- 1. worked example: A0=2^2 x 1.1101, B0=2^3 x 1.0011, A1=2^1 x 1.1011, B1=2^1 x 1.1010
    for (int pass = 0; pass < 2; pass++) begin
      rterm_t t;
      do_clear();
      for (int i = 0; i < 8; i++) begin a[i] = 16'h0000; b[i] = 16'h0000; q[i] = {}; end
      a[0] = mk_bf16(0, 127 + 2, 7'b1101000);  b[0] = mk_bf16(0, 127 + 3, 7'b0011000);
      a[1] = mk_bf16(0, 127 + 1, 7'b1011000);  b[1] = mk_bf16(0, 127 + 1, 7'b1010000);
      // binary (not canonical) terms, as in the example: positions of the one bits
      t.valid = 1; t.neg = 0;
      t.pos = 1; q[0].push_back(t); t.pos = 2; q[0].push_back(t);
      t.pos = 3; q[0].push_back(t); t.pos = 5; q[0].push_back(t);
      t.pos = 1; q[1].push_back(t); t.pos = 2; q[1].push_back(t);
      t.pos = 4; q[1].push_back(t); t.pos = 5; q[1].push_back(t);
      // offsets here are the example's k + 1, so its 6-bit precision is threshold 7
      run_set(a, b, pass == 0 ? 7 : 12, cyc);
      check(cyc == (pass == 0 ? 4 : 5), $sformatf("example cycles %0d", cyc));
      // product exponent 2+3 plus the +1 offset: e_max = 127+2 + 127+3 + 1
      e0 = 127 + 2 + 127 + 3 + 1;
      // the example's accumulator exponent grows from 5 to 6; here the accumulator
      // already sits one position higher (room for the 2^+1 term), so it stays at e0
      if (pass == 1) check(int'(eacc) == e0, $sformatf("example eacc %0d", eacc));
      exact = bf16_to_real(a[0]) * bf16_to_real(b[0]) + bf16_to_real(a[1]) * bf16_to_real(b[1]);
      got = bf16_to_real(res);
      check(got <= exact && got > exact * 0.95, $sformatf("example value %f vs %f", got, exact));
    end

    // ---- 2. random sets
    for (int tst = 0; tst < 300; tst++) begin
      int nsets, thr, spread;
      do_clear();
      nsets  = 1 + $urandom_range(0, 5);
      thr    = ($urandom_range(0, 3) == 0) ? $urandom_range(4, 31) : 12;
      spread = (tst % 3 == 0) ? 40 : 6;
      exact = 0.0; mx = 0.0;
      for (int s = 0; s < nsets; s++) begin
        for (int i = 0; i < 8; i++) begin
          bit pos_only;
          pos_only = (tst % 4 == 1);
          a[i] = mk_bf16(pos_only ? 0 : $urandom_range(0, 1), 120 + $urandom_range(0, spread),
                         $urandom_range(0, 127));
          b[i] = mk_bf16(pos_only ? 0 : $urandom_range(0, 1), 124 + $urandom_range(0, spread),
                         $urandom_range(0, 127));
          if ($urandom_range(0, 7) == 0) a[i] = 16'h0000;
          if ($urandom_range(0, 15) == 0) b[i] = 16'h8000;
          if (tst % 5 == 2) a[i][3:0] = 4'h0;   // shorter mantissas: fewer terms
          q[i] = naf_terms(a[i]);
          exact += bf16_to_real(a[i]) * bf16_to_real(b[i]);
        end
        run_set(a, b, thr, cyc);
        check(cyc >= 1, "cycles");
      end
      check(res == rm.result(), $sformatf("res %h vs %h", res, rm.result()));
      if (tst % 4 == 1 && thr == 12) begin
        got = bf16_to_real(res);
        check(got <= exact * 1.0001 && got >= exact * (1.0 - 1.0 / 32.0),
              $sformatf("value %g vs %g", got, exact));
      end
    end
    check(n_stall > 0, "shift-range stalls seen");
    check(n_ob > 0, "out-of-bounds skips seen");
    check(n_norm > 0, "normalizations seen");
    $display("stalls=%0d ob_skips=%0d norms=%0d", n_stall, n_ob, n_norm);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
