// tb_bdc: self-checking testbench of the exponent base-delta compressor and
// decompressor.
//
// Random groups of 32 bfloat16 values, with exponents spread by different amounts
// around a random base (0, 1, 3, 7, ... up to the full range, and some zeros), are
// compressed and decompressed. Checked: the round trip is lossless; the delta width
// and the length agree with a width computed here from the exponent differences;
// the header, base and first byte sit where the format puts them; each field,
// decoded here independently from the bit stream, gives the right value; and the
// bits above the length are zero.
module tb_bdc;
  import fpr_pkg::*;

  localparam int G  = 32;
  localparam int PW = 19 + (G - 1) * 16;

  bf16_t [G-1:0]                 vals, back;
  logic [PW-1:0]                 pk;
  logic [$clog2(PW+1)-1:0]       nb_c, nb_d;
  logic [3:0]                    dw;

  bdc_compress   #(.G(G)) u_c (.vals, .packed_o(pk), .nbits(nb_c), .dw);
  bdc_decompress #(.G(G)) u_d (.packed_i(pk), .vals(back), .nbits(nb_d));

  int checks = 0, failures = 0;
  int hist[9];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (hist[i]) hist[i] = 0;
    for (int t = 0; t < 2000; t++) begin
      int spread, base, want, off;
      spread = (t % 10 == 9) ? 255 : ((1 << (t % 9)) - 1);
      base = $urandom_range(1, 254);
      for (int i = 0; i < G; i++) begin
        int e;
        e = base + $urandom_range(0, 2 * spread) - spread;
        if (e < 0) e = 0;
        if (e > 255) e = 255;
        if ($urandom_range(0, 40) == 0) e = 0;
        vals[i] = {1'($urandom), 8'(e), 7'($urandom)};
      end
      #1;
      // the width expected: smallest w with every difference in [-2^(w-1), 2^(w-1)-1]
      want = 1;
      for (int i = 1; i < G; i++) begin
        int d;
        d = int'(vals[i].exp) - int'(vals[0].exp);
        if (d > 127) d -= 256;
        if (d < -128) d += 256;
        for (int w = 1; w <= 8; w++)
          if (d >= -(1 << (w - 1)) && d <= (1 << (w - 1)) - 1) begin
            if (w > want) want = w;
            break;
          end
      end
      hist[want]++;
      check(dw == 4'(want), $sformatf("test %0d width %0d vs %0d", t, dw, want));
      check(nb_c == 19 + (G - 1) * (want + 8), $sformatf("test %0d length %0d", t, nb_c));
      check(nb_d == nb_c, "decompressor length");
      check(pk[2:0] == 3'(want - 1) && pk[10:3] == vals[0].exp
            && pk[18:11] == {vals[0].sign, vals[0].man}, "header");
      off = 19;
      for (int i = 1; i < G; i++) begin
        logic [7:0] d8, e8;
        d8 = '0;
        for (int k = 0; k < want; k++) d8[k] = pk[off + k];
        for (int k = want; k < 8; k++) d8[k] = d8[want - 1];
        e8 = vals[0].exp + d8;
        check(e8 == vals[i].exp, $sformatf("test %0d field %0d exponent", t, i));
        for (int k = 0; k < 7; k++) check(pk[off + want + k] == vals[i].man[k], "fraction bit");
        check(pk[off + want + 7] == vals[i].sign, "sign bit");
        off += want + 8;
      end
      check((pk >> nb_c) == '0, "bits above the length are zero");
      check(back == vals, $sformatf("test %0d round trip", t));
    end
    $display("width histogram %p", hist);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
