// tb_schedule -- test of the counter library metadata and the greedy
// construction in msum_pkg.
//
// 1. Efficiency, strength and slack of every counter are computed from its
//    signature and compared with the published values (whole-slice
//    counters: E from 1 to 1.75, S from 1.8 to 2.4, A = 1/32 for a lower
//    (0,6) atom; floating counters: (3:1,1] 1/1.5/0, (6:1,1,1] 1/2/1/8,
//    (2,5:1,2,1] 1.5/1.75/0, (1,3,2,5) 1.5/2.2/1/16).
// 2. The most preferred counter of each metric is checked, and the
//    efficiency order (ties broken by strength) must equal the product order.
// 2b. The strength-driven schedules of the six population-count shapes
//    must reproduce the published counter and stage counts.
// 3. For a set of matrix shapes and all metrics, the schedule is replayed
//    independently: every stage's output heights must equal input heights
//    minus consumed bits plus counter outputs, every consumed bit index must
//    lie inside its column and be used once, and the final matrix must be
//    accepted by the carry-propagate table.  Stage and counter counts are
//    printed for reference.  150 random shapes (up to 16 columns of up to 80
//    bits) are replayed the same way.
module tb_schedule;
  import msum_pkg::*;
  int checks = 0, failures = 0;

  initial begin
    #100000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  task automatic expect_int(string what, int got, int want);
    checks++;
    if (got != want) begin
      failures++;
      $display("FAIL %s: %0d, expected %0d", what, got, want);
    end
  endtask

  // metric values scaled: E*100, S*100, A*32 (A*16 is used for (1,3,2,5))
  task automatic check_metrics(counter_e c, int e100, int s100, int a_num, int a_den);
    sig_t g;
    int p, q, k, mi, mo;
    g = sig(c);
    p = sig_p(g); q = sig_q(g); k = int'(g.k);
    mi = sig_maxin(g); mo = sig_maxout(g);
    expect_int($sformatf("E*100 of %s", c), 100*(p - q)/k, e100);
    expect_int($sformatf("S*100 of %s", c), 100*p/q, s100);
    // A = 1 - (1+mi)/(1+mo) = a_num/a_den  <=>  (mo - mi)*a_den = a_num*(1+mo)
    expect_int($sformatf("slack of %s", c), (mo - mi)*a_den, a_num*(1 + mo));
  endtask

  // Published strength-driven schedules: FA, (2,5), (6), slice counters, stages.
  task automatic expect_counts(hvec_t h, string name, int fa, int c25, int c6, int sl, int ns);
    sched_t s;
    s = schedule(h, M_STRENGTH);
    expect_int({name, " FA"},     count_kind(s, C_FA), fa);
    expect_int({name, " (2,5)"},  count_kind(s, C_25_121), c25);
    expect_int({name, " (6)"},    count_kind(s, C_6_111), c6);
    expect_int({name, " slice"},  int'(s.first[s.nstages]) - count_kind(s, C_FA)
                                  - count_kind(s, C_25_121) - count_kind(s, C_6_111), sl);
    expect_int({name, " stages"}, int'(s.nstages), ns);
  endtask

  task automatic replay(hvec_t h, metric_e m, string name);
    sched_t s;
    hvec_t hi, ho, used, prod;
    int w, ns, nfail0;
    logic [4095:0] seen;
    sig_t g;
    int ok;
    s = schedule(h, m);
    w = int'(s.w);
    ns = int'(s.nstages);
    nfail0 = failures;
    expect_int({name, " ok"}, int'(s.ok), 1);
    for (int st = 0; st < ns; st++) begin
      hi = s.height[st];
      ho = s.height[st+1];
      used = '0; prod = '0; seen = '0;
      for (int j = int'(s.first[st]); j < int'(s.first[st+1]); j++) begin
        g = sig(counter_e'(s.place[j].kind));
        for (int i = 0; i < int'(g.ncol); i++) begin
          int c, b;
          c = int'(s.place[j].pos) + i;
          for (int k = 0; k < int'(g.p[i]); k++) begin
            b = int'(s.place[j].in_base[i]) + k;
            ok = (b >= col_offset(hi, c)) && (b < col_offset(hi, c) + int'(hi[c])) && !seen[b];
            checks++;
            if (!ok) begin failures++; $display("FAIL %s stage %0d counter %0d bit %0d", name, st, j, b); end
            seen[b] = 1'b1;
          end
          used[c] += HB'(g.p[i]);
        end
        for (int i = 0; i < int'(g.nout); i++)
          if (int'(s.place[j].pos) + i < w) prod[int'(s.place[j].pos) + i] += HB'(g.q[i]);
      end
      for (int c = 0; c < w; c++)
        expect_int($sformatf("%s stage %0d column %0d height", name, st, c),
                   int'(ho[c]), int'(hi[c]) - int'(used[c]) + int'(prod[c]));
    end
    ho = s.height[ns];
    for (int c = 0; c < w; c++) begin
      checks++;
      if (cp_element(cp_carries(ho, c), int'(ho[c])) == CPE_NA) begin
        failures++;
        $display("FAIL %s: final column %0d not accepted", name, c);
      end
    end
    $display("%-12s %-12s stages %0d  FA %0d (2,5) %0d (6) %0d slice %0d  %s", name, m, ns,
             count_kind(s, C_FA), count_kind(s, C_25_121), count_kind(s, C_6_111),
             int'(s.first[ns]) - count_kind(s, C_FA) - count_kind(s, C_25_121) - count_kind(s, C_6_111),
             (failures == nfail0) ? "consistent" : "INCONSISTENT");
  endtask

  initial begin
    order_t o;
    // Tab. I: rows upper atom (2,2),(1,4),(0,6); columns lower (2,3),(1,5),(0,6)
    check_metrics(C_S22_22, 100, 180, 0, 1);
    check_metrics(C_S22_14, 125, 200, 0, 1);
    check_metrics(C_S22_06, 125, 200, 1, 32);
    check_metrics(C_S14_22, 125, 200, 0, 1);
    check_metrics(C_S14_14, 150, 220, 0, 1);
    check_metrics(C_S14_06, 150, 220, 1, 32);
    check_metrics(C_S06_22, 150, 220, 0, 1);
    check_metrics(C_S06_14, 175, 240, 0, 1);
    check_metrics(C_S06_06, 175, 240, 1, 32);
    // Tab. II and the (1,3,2,5) slice counter
    check_metrics(C_FA,     100, 150, 0, 1);
    check_metrics(C_6_111,  100, 200, 1, 8);
    check_metrics(C_25_121, 150, 175, 0, 1);
    check_metrics(C_1325,   150, 220, 1, 16);
    // most preferred counters
    o = counter_order(M_STRENGTH);
    expect_int("best by strength", int'(o[0]), int'(C_S06_14));
    o = counter_order(M_EFFICIENCY);
    expect_int("best by efficiency", int'(o[0]), int'(C_S06_14));
    expect_int("last by efficiency", int'(o[NCNT-1]), int'(C_FA));
    for (int i = 0; i < NCNT; i++)
      expect_int($sformatf("efficiency rank %0d equals product rank", i), int'(o[i]), int'(counter_order(M_PRODUCT)[i]));
    o = counter_order(M_PRODUCT);
    expect_int("best by product", int'(o[0]), int'(C_S06_14));
    // strength-driven schedules of the popcount shapes against published counts
    expect_counts(hv1(128),       "(128)",     2, 0,  25,  5, 3);
    expect_counts(hv1(256),       "(256)",     7, 0,  49, 12, 4);
    expect_counts(hv1(512),       "(512)",     6, 1, 101, 26, 5);
    expect_counts(hv2(128, 128),  "(128,128)", 4, 2,  46, 13, 4);
    expect_counts(hv2(256, 256),  "(256,256)", 3, 0,  98, 28, 5);
    expect_counts(hv2(512, 512),  "(512,512)", 4, 0, 197, 59, 6);
    // construction replays
    for (int m = 0; m < 3; m++) begin
      replay(hv1(128), metric_e'(m), "(128)");
      replay(hv1(256), metric_e'(m), "(256)");
      replay(hv1(512), metric_e'(m), "(512)");
      replay(hv2(128, 128), metric_e'(m), "(128,128)");
      replay(hv2(256, 256), metric_e'(m), "(256,256)");
      replay(hv2(512, 512), metric_e'(m), "(512,512)");
      replay(hv_mul(16), metric_e'(m), "MUL16");
      replay(hv1(7), metric_e'(m), "(7)");
    end
    // random shapes: 1..16 columns of 0..80 bits, every metric
    for (int n = 0; n < 150; n++) begin
      hvec_t h;
      int nc;
      h = '0;
      nc = $urandom_range(1, 16);
      for (int c = 0; c < nc; c++) h[c] = HB'($urandom_range(0, 80));
      replay(h, metric_e'(n % 3), $sformatf("random%0d", n));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
