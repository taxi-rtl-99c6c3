// tb_taxi_hier: a two-level hierarchical solve on the chip at its default
// size, in the way the accelerator is meant to be used for large TSPs.
// A 48-city instance is generated as four groups of 12 cities (one per
// quadrant of the map); the testbench acts as the host:
//   1. the 4 cluster centroids form the upper level, solved as a closed tour
//      on macro 0;
//   2. between clusters that follow each other in that tour, the closest
//      city pair is taken as exit / entry city, so every cluster gets a fixed
//      first and last city;
//   3. the 4 clusters are solved in parallel on macros 0..3 as open paths with
//      fixed ends;
//   4. the paths are concatenated in cluster order into the full tour.
// Checks: the upper-level tour visits every cluster, each cluster path keeps
// its entry and exit city, the merged tour visits all 48 cities once, and it
// is shorter than the initial tour built from the same clusters with random
// order inside each cluster.
module tb_taxi_hier;
  import tb_tsp_pkg::*;
  localparam int M = 8, N = 12, B = 4, AW = $clog2(N), NW = $clog2(N + 1), MW = $clog2(M);
  localparam int K = 4, NC = K * N;
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
  coord_t xy, cxy;
  int ctour [K];                 // cluster visiting order
  int entry [K], exitc [K];      // fixed first / last city (global ids)
  int sub [K][N];                // solved path per cluster (global ids)

  taxi_top dut (.*);

  initial clk = 0;
  always #1 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // Program macro m with the sub-problem ids[0..n-1] of coordinate set c and
  // the initial order init[] (indices into ids).
  task automatic load(int m, const ref coord_t c, input int ids [], input int n, input int init []);
    int w [MAXN][MAXN];
    wd_map(c, ids, n, B, w);
    prog_macro = MW'(m);
    for (int r = 0; r < N; r++) for (int q = 0; q < N; q++) begin
      @(negedge clk); w_we = 1; w_row = AW'(r); w_col = AW'(q);
      w_data = (r < n && q < n) ? B'(w[r][q]) : '0;
    end
    @(negedge clk); w_we = 0;
    for (int r = 0; r < N; r++) for (int q = 0; q < N; q++) begin
      @(negedge clk); s_we = 1; s_city = AW'(r); s_order = AW'(q); s_data = (q < n) && (init[q] == r);
    end
    @(negedge clk); s_we = 0;
  endtask

  task automatic run(logic [M-1:0] which);
    @(negedge clk); start = which; @(negedge clk); start = '0;
    while ((done & which) != which) @(negedge clk);
  endtask

  initial begin
    automatic int ids [] = new [N];
    automatic int init [] = new [N];
    automatic int kid [] = new [K];
    automatic int kinit [] = new [K];
    int full [NC];
    real l_init, l_final;
    bit seen [NC];
    for (int m = 0; m < M; m++) n_cities[m] = NW'(N);
    // instance: cluster k holds cities k*N .. k*N+N-1 in quadrant k
    for (int k = 0; k < K; k++) begin
      cxy[k][0] = 0; cxy[k][1] = 0;
      for (int i = 0; i < N; i++) begin
        xy[k * N + i][0] = (k % 2) * 1000 + $urandom_range(899, 100);
        xy[k * N + i][1] = (k / 2) * 1000 + $urandom_range(899, 100);
        cxy[k][0] += xy[k * N + i][0] / N; cxy[k][1] += xy[k * N + i][1] / N;
      end
    end
    repeat (2) @(posedge clk); rst_n = 1;

    // 1. upper level: closed tour of the 4 centroids on macro 0
    for (int k = 0; k < K; k++) begin kid[k] = k; kinit[k] = (k * 3) % K; end
    n_cities[0] = NW'(K); fix_ends[0] = 0;
    load(0, cxy, kid, K, kinit);
    run(8'b1);
    begin
      bit ks [K];
      for (int k = 0; k < K; k++) ks[k] = 0;
      for (int q = 0; q < K; q++) begin
        rd_macro = 0; rd_order = AW'(q); #0.1; ctour[q] = int'(rd_city);
        if (ctour[q] < K) ks[ctour[q]] = 1;
      end
      for (int k = 0; k < K; k++) chk(ks[k], $sformatf("cluster %0d missing from upper-level tour", k));
      $display("upper-level cluster order: %0d %0d %0d %0d", ctour[0], ctour[1], ctour[2], ctour[3]);
    end

    // 2. fix first / last cities by the closest pair between neighbours
    for (int q = 0; q < K; q++) begin entry[q] = -1; exitc[q] = -1; end
    for (int q = 0; q < K; q++) begin
      automatic int a = ctour[q], b = ctour[(q + 1) % K];
      automatic real best = 1.0e30;
      for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
        automatic int ca = a * N + i, cb = b * N + j;
        if (ca == entry[q]) continue;
        if ((q + 1) % K == 0 && cb == exitc[0]) continue;
        if (cdist(xy, ca, cb) < best) begin best = cdist(xy, ca, cb); exitc[q] = ca; entry[(q + 1) % K] = cb; end
      end
    end

    // 3. solve the 4 clusters in parallel, fixed ends, on macros 0..3
    l_init = 0.0;
    for (int q = 0; q < K; q++) begin
      automatic int c = ctour[q], p = 1;
      for (int i = 0; i < N; i++) ids[i] = c * N + i;
      init[0] = entry[q] - c * N; init[N - 1] = exitc[q] - c * N;
      for (int i = 0; i < N; i++) if (i != init[0] && i != init[N - 1]) begin init[p] = i; p++; end
      for (int i = N - 2; i > 1; i--) begin
        int j, t; j = $urandom_range(i, 1); t = init[i]; init[i] = init[j]; init[j] = t;
      end
      for (int i = 0; i < N; i++) full[q * N + i] = c * N + init[i];
      n_cities[q] = NW'(N); fix_ends[q] = 1;
      load(q, xy, ids, N, init);
    end
    for (int i = 0; i < NC; i++) l_init += cdist(xy, full[i], full[(i + 1) % NC]);
    run(8'b1111);

    // 4. merge
    for (int q = 0; q < K; q++) for (int o = 0; o < N; o++) begin
      rd_macro = MW'(q); rd_order = AW'(o); #0.1;
      sub[q][o] = ctour[q] * N + int'(rd_city);
      full[q * N + o] = sub[q][o];
    end
    for (int q = 0; q < K; q++)
      chk(sub[q][0] == entry[q] && sub[q][N - 1] == exitc[q], $sformatf("cluster %0d entry/exit kept", ctour[q]));
    for (int i = 0; i < NC; i++) seen[i] = 0;
    for (int i = 0; i < NC; i++) seen[full[i]] = 1;
    for (int i = 0; i < NC; i++) chk(seen[i], $sformatf("city %0d missing from merged tour", i));
    l_final = 0.0;
    for (int i = 0; i < NC; i++) l_final += cdist(xy, full[i], full[(i + 1) % NC]);
    $display("48-city tour: initial %0.1f, after annealing %0.1f", l_init, l_final);
    chk(l_final < l_init, "hierarchical solve shortened the tour");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
