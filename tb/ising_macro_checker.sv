// ising_macro_checker: runs one Ising macro of a given size through full
// annealing runs and checks it against an independent reference model.
// The checker plays the SOT units (random switch vectors on every write
// pulse) and keeps its own model of the algorithm: neighbour orders,
// superposed vector, integer distance sums D_x, stochastic pass set (all
// candidates if none switched), ArgMax with lowest-index ties, and the
// column update, with or without the swap. After every iteration the spin
// storage must equal the model. It also checks 9 cycles per iteration, the
// iteration count and the I_write code of every iteration, that fixed end
// cities stay put, that (with the swap) tours stay permutations, and that
// the W_D sum along the tours has risen over all runs together.
// Runs: closed tour of N cities, open path of N-3 cities with fixed ends,
// closed tour of 5 cities. fin rises when all runs are over; checks and
// failures are then final.
module ising_macro_checker #(
  parameter int N    = 12,
  parameter int B    = 4,
  parameter bit SWAP = 1'b1
) (
  output int checks,
  output int failures,
  output bit fin
);
  import tb_tsp_pkg::*;
  localparam int AW = $clog2(N), NW = $clog2(N + 1);
  localparam int ITERS = 1340, T_ITER = 9;
  logic clk, rst_n = 0;
  logic w_we = 0; logic [AW-1:0] w_row = 0, w_col = 0; logic [B-1:0] w_data = 0;
  logic s_we = 0; logic [AW-1:0] s_city = 0, s_order = 0; logic s_data = 0;
  logic start = 0; logic [NW-1:0] n_cities = NW'(N); logic fix_ends = 0;
  logic busy, done; logic [15:0] iter_cnt;
  logic rng_pulse; logic [19:0] i_write_na; logic [N-1:0] rng_sw;
  logic [AW-1:0] tour [N]; logic [N-1:0] spins [N];
  logic [15:0] n_free_pass, n_changed;

  int sum0 = 0, sum1 = 0;
  int cnt_none = 0, cnt_swap = 0, cnt_keep = 0;
  int w [MAXN][MAXN];
  bit S [N][N];          // reference spins [city][order]
  coord_t xy;

  ising_macro #(.N(N), .B(B), .SWAP(SWAP)) dut (.*);

  initial clk = 0;
  always #1 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // SOT units played by the testbench: each switches with probability 1/10.
  always @(posedge clk)
    if (!rst_n) rng_sw <= '0;
    else if (rng_pulse) for (int u = 0; u < N; u++) rng_sw[u] <= ($urandom_range(9, 0) == 0);

  // One reference iteration on order o.
  task automatic ref_step(int n, bit fix, int o);
    int pv, nx, best, bw, oldc, wprev;
    bit v [N]; bit cand [N]; bit anysw; bit pass [N];
    pv = fix ? o - 1 : (o + n - 1) % n;
    nx = fix ? o + 1 : (o + 1) % n;
    for (int k = 0; k < N; k++) v[k] = S[k][pv] || S[k][nx];
    anysw = 0;
    for (int x = 0; x < N; x++) begin
      cand[x] = (x < n) && !(fix && (S[x][0] || S[x][n - 1]));
      if (cand[x] && rng_sw[x]) anysw = 1;
    end
    if (!anysw) cnt_none++;
    best = -1; bw = -1;
    for (int x = 0; x < N; x++) begin
      int d = 0;
      pass[x] = cand[x] && (!anysw || rng_sw[x]);
      for (int k = 0; k < N; k++) d += w[k][x] * v[k];
      if (pass[x] && d > best) begin best = d; bw = x; end
    end
    if (bw < 0) return;
    oldc = -1; wprev = -1;
    for (int c = 0; c < N; c++) if (S[c][o]) oldc = c;
    for (int q = n - 1; q >= 0; q--) if (S[bw][q]) wprev = q;
    for (int c = 0; c < N; c++) S[c][o] = 0;
    S[bw][o] = 1;
    if (SWAP && wprev >= 0 && wprev != o) begin
      for (int c = 0; c < N; c++) S[c][wprev] = 0;
      if (oldc >= 0) S[oldc][wprev] = 1;
      cnt_swap++;
    end else cnt_keep++;
  endtask

  // Sum of W_D over consecutive cities: the quantity the macro maximises
  // (the negated Ising energy of a valid tour).
  function automatic int score(int tr [], int n, bit fix);
    int sc = 0;
    for (int o = 0; o + 1 < n; o++) sc += w[tr[o]][tr[o + 1]];
    if (!fix) sc += w[tr[n - 1]][tr[0]];
    return sc;
  endfunction

  task automatic compare(string when);
    bit ok;
    ok = 1;
    for (int c = 0; c < N; c++) for (int q = 0; q < N; q++) if (spins[c][q] != S[c][q]) ok = 0;
    chk(ok, $sformatf("spin storage differs from reference %s", when));
  endtask

  task automatic run(int n, bit fix);
    int ids [] = new [n];
    int perm [] = new [n];
    int ftour [] = new [n];
    int o, first, lasto, pulses, last_pulse, t, first_city, last_city;
    real l0, l1;
    int e0, e1;
    for (int i = 0; i < n; i++) begin ids[i] = i; xy[i][0] = $urandom_range(999, 0); xy[i][1] = $urandom_range(999, 0); end
    wd_map(xy, ids, n, B, w);
    for (int i = 0; i < n; i++) perm[i] = i;
    for (int i = n - 1; i > 0; i--) begin int j = $urandom_range(i, 0); int tt = perm[i]; perm[i] = perm[j]; perm[j] = tt; end
    // program: weights of the whole array (zeros outside the cluster), spins
    for (int r = 0; r < N; r++) for (int c = 0; c < N; c++) begin
      if (r >= n || c >= n) w[r][c] = 0;
      @(negedge clk); w_we = 1; w_row = AW'(r); w_col = AW'(c); w_data = B'(w[r][c]);
    end
    @(negedge clk); w_we = 0;
    for (int c = 0; c < N; c++) for (int q = 0; q < N; q++) begin
      S[c][q] = (q < n) && (perm[q] == c);
      @(negedge clk); s_we = 1; s_city = AW'(c); s_order = AW'(q); s_data = S[c][q];
    end
    @(negedge clk); s_we = 0;
    l0 = path_len(xy, ids, perm, n, !fix);
    e0 = score(perm, n, fix);
    first_city = perm[0]; last_city = perm[n - 1];
    compare("after programming");
    @(negedge clk); n_cities = NW'(n); fix_ends = fix; start = 1;
    @(negedge clk); start = 0;
    first = fix ? 1 : 0; lasto = fix ? n - 2 : n - 1; o = first;
    pulses = 0; last_pulse = -1; t = 0;
    while (!done && t < ITERS * T_ITER + 100) begin
      @(negedge clk); t++;
      if (rng_pulse) begin
        if (pulses > 0) chk(t - last_pulse == T_ITER, $sformatf("iteration length %0d", t - last_pulse));
        chk(i_write_na == 20'(420000 - 50 * pulses), $sformatf("I_write %0d at iteration %0d", i_write_na, pulses));
        last_pulse = t; pulses++;
        @(negedge clk); t++;     // rng_sw now holds this iteration's switch vector
        ref_step(n, fix, o);
        o = (o == lasto) ? first : o + 1;
      end
      if (pulses > 0 && t == last_pulse + 6) compare($sformatf("after iteration %0d", pulses));
    end
    @(negedge clk);
    chk(done && !busy, "done");
    chk(pulses == ITERS && iter_cnt == 16'(ITERS), $sformatf("iterations %0d / %0d", pulses, iter_cnt));
    chk(t == ITERS * T_ITER, $sformatf("run took %0d cycles, expected %0d", t, ITERS * T_ITER));
    compare("at the end");
    for (int q = 0; q < n; q++) ftour[q] = int'(tour[q]);
    if (fix) chk(ftour[0] == first_city && ftour[n - 1] == last_city, "fixed ends kept");
    begin
      bit seen [N];
      for (int c = 0; c < N; c++) seen[c] = 0;
      for (int q = 0; q < n; q++) seen[ftour[q]] = 1;
      if (SWAP) for (int c = 0; c < n; c++) chk(seen[c], "final tour is a permutation");
    end
    l1 = path_len(xy, ids, ftour, n, !fix);
    e1 = score(ftour, n, fix);
    $display("N=%0d B=%0d SWAP=%0d n=%0d fix=%0d: length %0.1f -> %0.1f, sum of W_D along the tour %0d -> %0d, free passes %0d, changes %0d",
             N, B, SWAP, n, fix, l0, l1, e0, e1, n_free_pass, n_changed);
    sum0 += e0; sum1 += e1;
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    checks = 0; failures = 0; fin = 0;
    run(N, 0);
    run(N - 3, 1);
    run(5, 0);
    $display("events: none-switched %0d, swaps %0d, unchanged %0d", cnt_none, cnt_swap, cnt_keep);
    chk(sum1 > sum0, "annealing raised the total W_D sum along the tours");
    chk(cnt_none > 0 && (cnt_swap > 0 || !SWAP) && cnt_keep > 0, "every update case was exercised");
    fin = 1;
  end
endmodule
