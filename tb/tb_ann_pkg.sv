// tb_ann_pkg: self-checking test of the elaboration-time helpers in ann_pkg,
// which decide the structure of every datapath (table offsets, CSD digits,
// shifts of the weights).
//
// Checks, each against values worked out here by other means:
//  - w_off / b_off / max_width on the 16-16-10-10 and 16-10-10 structures
//    (hand-computed offsets 256, 416, 516 and 16, 26, 36);
//  - csd_digits for every 8-bit constant: digits in {-1,0,1}, no two adjacent
//    nonzero digits, and sum d_i*2**i equal to the constant; the digit counts
//    of 11 and 13 (three each) and of 85 (four);
//  - tz against repeated division by two;
//  - sls_row on the worked example 20 = 5<<2, 24 = 3<<3, 26 = 13<<1 (sls 1),
//    with a zero weight added (still 1) and on an all-zero row (0);
//  - the default weight generator: neuron j's weights are multiples of
//    2**(j mod 3) and lie in [-48, 48]; the biases lie in [-20, 20];
//  - shifted_weights, per neuron and global: c * 2**s gives back w, and the
//    shifted row has no common factor of two left;
//  - sls_all on the default table (0) and on the table times 2 and 4 (1, 2).
// There is no clocked logic under test; the clock only drives the watchdog.
module tb_ann_pkg;
  import ann_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Trailing zeros by repeated division (independent of tz's bit test).
  function automatic int tz_ref(int c);
    int n = 0;
    if (c == 0) return WW;
    while ((c % 2) == 0 && n < WW) begin
      c = c / 2;
      n++;
    end
    return n;
  endfunction

  localparam topo_t T3 = DEF_TOPO;
  localparam topo_t T2 = '{16, 10, 10, 0, 0};

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wtab_t w, w2, w4, c;
    btab_t b;
    csd_t  d;
    int    v, nz, s, g, off, m, p;

    @(posedge clk);

    // ------------------------------------------------------------ offsets
    check(w_off(T3, 0) == 0,   "w_off 0");
    check(w_off(T3, 1) == 256, "w_off 1");
    check(w_off(T3, 2) == 416, "w_off 2");
    check(w_off(T3, 3) == 516, "w_off 3");
    check(b_off(T3, 1) == 16,  "b_off 1");
    check(b_off(T3, 2) == 26,  "b_off 2");
    check(b_off(T3, 3) == 36,  "b_off 3");
    check(w_off(T2, 2) == 260, "w_off 16-10-10");
    check(max_width(T3, 3, 0) == 16, "max_width all");
    check(max_width(T2, 2, 1) == 10, "max_width outputs");

    // ---------------------------------------------------------------- CSD
    for (int cc = -128; cc < 128; cc++) begin
      bit ok;
      d  = csd_digits(cc);
      v  = 0;
      ok = 1'b1;
      for (int i = 0; i < CSD_N; i++) begin
        if (d[i] < -1 || d[i] > 1) ok = 1'b0;
        if (i > 0 && d[i] != 0 && d[i-1] != 0) ok = 1'b0;
        v += d[i] * (1 << i);
      end
      check(ok && v == cc, $sformatf("csd_digits(%0d)", cc));
    end
    begin
      int cs [3];
      int nn [3];
      cs = '{11, 13, 85};
      nn = '{3, 3, 4};
      for (int k = 0; k < 3; k++) begin
        d  = csd_digits(cs[k]);
        nz = 0;
        for (int i = 0; i < CSD_N; i++) if (d[i] != 0) nz++;
        check(nz == nn[k], $sformatf("CSD digit count of %0d: %0d", cs[k], nz));
      end
    end

    // ----------------------------------------------------------------- tz
    for (int cc = -128; cc < 128; cc++)
      check(tz(cc) == tz_ref(cc), $sformatf("tz(%0d)", cc));

    // ---------------------------------------------------------------- sls
    for (int n = 0; n < MAX_W; n++) w[n] = 0;
    w[10] = 20; w[11] = 24; w[12] = 26;
    check(sls_row(w, 10, 3) == 1, "sls of 20, 24, 26");
    check(sls_row(w, 9, 4) == 1,  "sls with a zero weight");
    check(sls_row(w, 11, 1) == 3, "sls of 24");
    check(sls_row(w, 100, 8) == 0, "sls of an all-zero row");

    // ------------------------------------------------- default constants
    w = gen_weights(T3, DEF_NL, 1);
    b = gen_biases(T3, DEF_NL, 1);
    for (int k = 0; k < DEF_NL; k++)
      for (int j = 0; j < T3[k+1]; j++) begin
        bit ok;
        ok = 1'b1;
        m  = 1 << (j % 3);
        for (int i = 0; i < T3[k]; i++) begin
          v = w[w_off(T3, k) + j * T3[k] + i];
          if (v % m != 0 || v < -48 || v > 48) ok = 1'b0;
        end
        check(ok, $sformatf("default weights of layer %0d neuron %0d", k, j));
        v = b[b_off(T3, k) + j];
        check(v >= -20 && v <= 20, $sformatf("default bias %0d/%0d", k, j));
      end
    p = 0;
    for (int n = w_off(T3, DEF_NL); n < MAX_W; n++) if (w[n] != 0) p++;
    check(p == 0, "weight table is zero past the last layer");

    // --------------------------------------------------- shifted weights
    c = shifted_weights(w, T3, DEF_NL, 1'b1);
    for (int k = 0; k < DEF_NL; k++)
      for (int j = 0; j < T3[k+1]; j++) begin
        bit ok, odd, any;
        ok  = 1'b1;
        odd = 1'b0;
        any = 1'b0;
        off = w_off(T3, k) + j * T3[k];
        s   = sls_neuron(w, T3, k, j);
        for (int i = 0; i < T3[k]; i++) begin
          if (c[off+i] * (1 << s) != w[off+i]) ok = 1'b0;
          if (c[off+i] != 0) any = 1'b1;
          if (c[off+i] % 2 != 0) odd = 1'b1;
        end
        check(ok && (odd || !any), $sformatf("per-neuron shift of %0d/%0d", k, j));
        check(s >= (j % 3), $sformatf("sls of %0d/%0d at least %0d", k, j, j % 3));
      end

    g = sls_all(w, T3, DEF_NL);
    check(g == 0, "global sls of the default table");
    for (int n = 0; n < MAX_W; n++) begin
      w2[n] = w[n] * 2;
      w4[n] = w[n] * 4;
    end
    check(sls_all(w2, T3, DEF_NL) == 1, "global sls after doubling");
    check(sls_all(w4, T3, DEF_NL) == 2, "global sls after times four");
    c = shifted_weights(w4, T3, DEF_NL, 1'b0);
    p = 0;
    for (int n = 0; n < w_off(T3, DEF_NL); n++) if (c[n] != w[n]) p++;
    check(p == 0, "global shift of the table times four gives the table back");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
