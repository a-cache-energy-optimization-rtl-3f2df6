// tb_energy_saving_algorithm: checks the colour-count decision against a
// floating-point reference model of the same estimate (profiling counts
// scaled by 64 and linearly interpolated, execution time from the memory
// stall cycles per load miss, lambda = 2.5 % against the full cache, energy
// from the L2 leakage, L2 accesses, DRAM leakage and DRAM accesses and the
// block transitions). Scenarios: a program insensitive to cache size (the
// cache must shrink by the full step of 16), a cache-hungry program (growth),
// a case where every candidate is too slow (the largest one is taken), the
// floor of N/16 colours, no load misses at all (the 160-cycle fallback) and
// random ones. The number of candidates examined, the number rejected and
// the decision latency are checked too.
module tb_energy_saving_algorithm;
  import smart_pkg::*;
  localparam int N = 128, NP = 5, CW = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  logic start, busy, done;
  interval_stats_t stats;
  logic [CNT_W-1:0] pm [NP], plm [NP];
  logic [CW-1:0] cur, newc;
  logic [E_W-1:0] best_e;
  logic [7:0] n_eval, n_rej;
  int checks = 0, failures = 0;

  energy_saving_algorithm dut (
    .clk, .rst_n, .start, .stats, .prof_misses(pm), .prof_load_misses(plm),
    .cur_colors(cur), .busy, .done, .new_colors(newc), .best_energy(best_e),
    .n_evaluated(n_eval), .n_rejected(n_rej));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real est(input int c, input logic [CNT_W-1:0] a [NP]);
    int lo; real vlo, vhi;
    lo = NP - 1;
    for (int k = NP - 1; k >= 0; k--) if (c >= (N >> k)) lo = k;
    vlo = real'(a[lo]) * 64.0;
    if (lo == 0) return vlo;
    vhi = real'(a[lo-1]) * 64.0;
    return vlo + (vhi - vlo) * real'(c - (N >> lo)) / real'(N >> lo);
  endfunction

  // reference decision; returns chosen c, number evaluated and rejected
  task automatic reference(input int c_cur, output int best_c, output int ne, output int nr);
    real spm, tf, ti, mi, e, best_e_r, fa;
    int lo_c, hi_c;
    spm = (stats.load_misses == 0) ? 160.0 : real'(stats.stall) / real'(stats.load_misses);
    tf = real'(stats.cycles) - real'(stats.stall) + spm * est(N, plm);
    lo_c = (c_cur - 16 < N / 16) ? N / 16 : c_cur - 16;
    hi_c = (c_cur + 16 > N) ? N : c_cur + 16;
    best_c = -1; ne = 0; nr = 0; best_e_r = 0.0;
    for (int c = lo_c; c <= hi_c; c += 2) begin
      ne++;
      ti = real'(stats.cycles) - real'(stats.stall) + spm * est(c, plm);
      mi = est(c, pm);
      if ((ti - tf) / tf * 100.0 > 2.5) begin nr++; continue; end
      fa = (real'(c) + (31.0 / 1024.0) * real'(N - c)) / real'(N);
      e = 1117500.0 * fa * ti + 1015000.0 * real'(stats.reads)
        + 1036000.0 * (real'(stats.writes) + mi) + 90000.0 * ti + 70.0e6 * mi
        + 2000.0 * 512.0 * real'((c > c_cur) ? c - c_cur : c_cur - c);
      if (best_c < 0 || e < best_e_r) begin best_c = c; best_e_r = e; end
    end
    if (best_c < 0) best_c = hi_c;
  endtask

  task automatic run(input string name, input int c_cur, input int expect_c);
    int rc, ne, nr, cyc;
    reference(c_cur, rc, ne, nr);
    @(negedge clk);
    cur = CW'(c_cur); start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done && cyc < 2000) begin @(negedge clk); cyc++; end
    checks += 4;
    if (int'(newc) !== rc) begin failures++; $display("%s: chose %0d, reference %0d", name, newc, rc); end
    if (expect_c >= 0 && int'(newc) !== expect_c) begin failures++; $display("%s: chose %0d, expected %0d", name, newc, expect_c); end
    if (int'(n_eval) !== ne || int'(n_rej) !== nr) begin
      failures++; $display("%s: evaluated %0d/%0d rejected %0d/%0d", name, n_eval, ne, n_rej, nr);
    end
    // divider (at most CNT_W+17 cycles) plus 2 cycles per candidate and the full size
    if (cyc > CNT_W + 17 + 2 * ne + 4) begin failures++; $display("%s: took %0d cycles", name, cyc); end
    $display("%s: cur %0d -> %0d (evaluated %0d, rejected %0d, %0d cycles)", name, c_cur, newc, n_eval, n_rej, cyc);
  endtask

  task automatic set_prof(input int m0, m1, m2, m3, m4, input real lfrac);
    int v[5];
    v = '{m0, m1, m2, m3, m4};
    for (int k = 0; k < NP; k++) begin
      pm[k]  = CNT_W'(v[k]);
      plm[k] = CNT_W'(int'(real'(v[k]) * lfrac));
    end
  endtask

  initial begin
    start = 0; cur = CW'(N);
    stats = '0;
    set_prof(0, 0, 0, 0, 0, 1.0);
    repeat (3) @(posedge clk);
    rst_n = 1;
    // 1. size-insensitive program: shrink by 16
    stats.cycles = 20_000_000; stats.instr = 15_000_000; stats.stall = 2_000_000;
    stats.load_misses = 10_000; stats.misses = 14_000; stats.reads = 300_000; stats.writes = 100_000;
    set_prof(150, 150, 150, 150, 150, 0.7);
    run("flat", 128, 112);
    run("flat-mid", 40, 24);
    // 2. floor of N/16 colours
    run("floor", 12, 8);
    // 3. cache-hungry: misses climb quickly as the cache shrinks
    stats.stall = 20_000;
    set_prof(100, 3000, 8000, 15000, 30000, 0.7);
    run("hungry", 64, 80);
    // 4. everything slower than lambda: largest candidate
    stats.stall = 15_000_000; stats.load_misses = 100_000;
    set_prof(1000, 60000, 60000, 60000, 60000, 1.0);
    run("all-rejected", 64, 80);
    // 5. no load misses: 160-cycle stall per miss assumed
    stats.load_misses = 0; stats.stall = 0;
    set_prof(10, 10, 12, 14, 2000, 1.0);
    run("no-load-miss", 40, -1);
    // 6. random cases
    for (int i = 0; i < 40; i++) begin
      int m[5];
      stats.cycles = CNT_W'($urandom_range(10_000_000, 60_000_000));
      stats.stall  = CNT_W'($urandom_range(0, 8_000_000));
      stats.load_misses = CNT_W'($urandom_range(0, 200_000));
      stats.misses = stats.load_misses + CNT_W'($urandom_range(0, 50_000));
      stats.reads  = CNT_W'($urandom_range(0, 2_000_000));
      stats.writes = CNT_W'($urandom_range(0, 1_000_000));
      m[0] = $urandom_range(0, 3000);
      for (int k = 1; k < 5; k++) m[k] = m[k-1] + $urandom_range(0, 3000);
      set_prof(m[0], m[1], m[2], m[3], m[4], 0.6);
      run($sformatf("random%0d", i), 2 * $urandom_range(4, 64), -1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
