// tb_taxi_top: end-to-end test of the chip at its default size (8 macros of
// 12 cities, 4-bit weights, full annealing schedule, behavioural SOT units).
// Each macro gets its own random sub-problem: closed tours of 12 cities,
// open paths of 12 cities with fixed first and last cities, and smaller
// clusters of 7 and 10 cities. All macros are started together and must run
// in parallel, finish after exactly 1340 iterations of 9 cycles, and return
// valid tours (permutations, fixed ends in place) whose W_D sum along the
// tour has risen in total. It counts how often each mechanism occurred: stochastic
// selection with no unit switched, tour changes (swaps), both tour modes,
// reduced cluster size and parallel operation; one that never occurred is a
// failure.
module tb_taxi_top;
  import tb_tsp_pkg::*;
  localparam int M = 8, N = 12, B = 4, AW = $clog2(N), NW = $clog2(N + 1), MW = $clog2(M);
  localparam int ITERS = 1340, T_ITER = 9;
  logic clk, rst_n = 0;
  logic [MW-1:0] prog_macro = 0;
  logic w_we = 0; logic [AW-1:0] w_row = 0, w_col = 0; logic [B-1:0] w_data = 0;
  logic s_we = 0; logic [AW-1:0] s_city = 0, s_order = 0; logic s_data = 0;
  logic [M-1:0] start = 0, fix_ends = 0, busy, done;
  logic [NW-1:0] n_cities [M];
  logic [15:0] iter_cnt [M], n_free_pass [M], n_changed [M];
  logic [MW-1:0] rd_macro = 0; logic [AW-1:0] rd_order = 0; logic [AW-1:0] rd_city;
  logic [N-1:0] rd_spin_col;

  int checks = 0, failures = 0;
  int sum0 = 0, sum1 = 0;
  int ev_free = 0, ev_change = 0, ev_cyclic = 0, ev_fixed = 0, ev_small = 0, ev_parallel = 0;
  int nc [M] = '{12, 12, 12, 12, 12, 12, 7, 10};
  bit fx [M] = '{0, 0, 0, 0, 1, 1, 0, 1};
  int w [M][MAXN][MAXN];
  int perm [M][N];
  coord_t xy;

  taxi_top dut (.*);

  initial clk = 0;
  always #1 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic int score(int m, int tr [N], int n, bit fix);
    int sc = 0;
    for (int o = 0; o + 1 < n; o++) sc += w[m][tr[o]][tr[o + 1]];
    if (!fix) sc += w[m][tr[n - 1]][tr[0]];
    return sc;
  endfunction

  task automatic program_macro(int m);
    int n = nc[m];
    int ids [] = new [n];
    int wm [MAXN][MAXN];
    for (int i = 0; i < n; i++) begin
      ids[i] = i; xy[i][0] = $urandom_range(999, 0); xy[i][1] = $urandom_range(999, 0);
    end
    wd_map(xy, ids, n, B, wm);
    for (int r = 0; r < N; r++) for (int c = 0; c < N; c++) w[m][r][c] = (r < n && c < n) ? wm[r][c] : 0;
    for (int i = 0; i < N; i++) perm[m][i] = i;
    for (int i = n - 1; i > 0; i--) begin
      int j, t; j = $urandom_range(i, 0); t = perm[m][i]; perm[m][i] = perm[m][j]; perm[m][j] = t;
    end
    prog_macro = MW'(m);
    for (int r = 0; r < N; r++) for (int c = 0; c < N; c++) begin
      @(negedge clk); w_we = 1; w_row = AW'(r); w_col = AW'(c); w_data = B'(w[m][r][c]);
    end
    @(negedge clk); w_we = 0;
    for (int c = 0; c < N; c++) for (int q = 0; q < N; q++) begin
      @(negedge clk); s_we = 1; s_city = AW'(c); s_order = AW'(q); s_data = (q < n) && (perm[m][q] == c);
    end
    @(negedge clk); s_we = 0;
  endtask

  initial begin
    int t, done_at [M];
    for (int m = 0; m < M; m++) begin n_cities[m] = NW'(nc[m]); done_at[m] = -1; end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int m = 0; m < M; m++) program_macro(m);
    // read back the initial tours
    for (int m = 0; m < M; m++) for (int q = 0; q < nc[m]; q++) begin
      rd_macro = MW'(m); rd_order = AW'(q); #0.1;
      chk(int'(rd_city) == perm[m][q], $sformatf("initial tour of macro %0d order %0d", m, q));
    end
    @(negedge clk);
    for (int m = 0; m < M; m++) fix_ends[m] = fx[m];
    start = '1;
    @(negedge clk); start = '0;
    t = 0;
    while (t < ITERS * T_ITER + 50) begin
      @(negedge clk); t++;
      if (&busy) ev_parallel++;
      for (int m = 0; m < M; m++) if (done[m] && done_at[m] < 0) done_at[m] = t;
      if (&done) break;
    end
    for (int m = 0; m < M; m++) begin
      int fin [N]; bit seen [N]; int e0, e1;
      chk(done_at[m] == ITERS * T_ITER, $sformatf("macro %0d done after %0d cycles", m, done_at[m]));
      chk(iter_cnt[m] == 16'(ITERS), $sformatf("macro %0d iterations %0d", m, iter_cnt[m]));
      for (int c = 0; c < N; c++) seen[c] = 0;
      for (int q = 0; q < nc[m]; q++) begin
        rd_macro = MW'(m); rd_order = AW'(q); #0.1;
        fin[q] = int'(rd_city); seen[fin[q]] = 1;
        chk(rd_spin_col == N'(1) << fin[q], $sformatf("macro %0d: spin column %0d is %b", m, q, rd_spin_col));
      end
      for (int c = 0; c < nc[m]; c++) chk(seen[c], $sformatf("macro %0d: city %0d missing from tour", m, c));
      if (fx[m]) chk(fin[0] == perm[m][0] && fin[nc[m] - 1] == perm[m][nc[m] - 1],
                     $sformatf("macro %0d: fixed ends moved", m));
      e0 = score(m, perm[m], nc[m], fx[m]);
      e1 = score(m, fin, nc[m], fx[m]);
      $display("macro %0d (n=%0d, %s): W_D sum %0d -> %0d, no-switch iterations %0d, changes %0d",
               m, nc[m], fx[m] ? "fixed ends" : "closed tour", e0, e1, n_free_pass[m], n_changed[m]);
      sum0 += e0; sum1 += e1;
      ev_free += int'(n_free_pass[m]); ev_change += int'(n_changed[m]);
      if (fx[m]) ev_fixed++; else ev_cyclic++;
      if (nc[m] < N) ev_small++;
    end
    $display("mechanisms: no-switch %0d, tour changes %0d, closed-tour runs %0d, fixed-end runs %0d, small clusters %0d, all-busy cycles %0d",
             ev_free, ev_change, ev_cyclic, ev_fixed, ev_small, ev_parallel);
    // The update rule is greedy per order and does not guarantee a rise on
    // every macro, so the quality check is made over all macros together.
    chk(sum1 > sum0, $sformatf("total W_D sum along the tours rose (%0d -> %0d)", sum0, sum1));
    chk(ev_free > 0, "no-switch case occurred");
    chk(ev_change > 0, "tour changes occurred");
    chk(ev_cyclic > 0 && ev_fixed > 0, "both tour modes ran");
    chk(ev_small > 0, "a reduced cluster size ran");
    chk(ev_parallel >= ITERS * T_ITER - 1, "all macros ran in parallel");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
