// ising_macro: one crossbar-based Ising macro solving a TSP sub-problem.
//
// The macro keeps the whole problem inside: the B weight partitions of the
// crossbar hold the quantised inverse distances W_D, the spin-storage
// partition holds the current tour as a city x order permutation matrix.
// Each iteration optimises one visiting order i:
//   1. superpose: columns i-1 and i+1 of the spin storage are read; the
//      comparator and latch turn the row currents into the vector v of the
//      two neighbour cities;
//   2. optimize: v drives the weight rows; per city x the mirrored partition
//      currents give D_x = sum_k W_D(k,x) v[k] (large = close to both
//      neighbours); the SOT units, pulsed with the current I_write of the
//      annealing schedule, let only randomly chosen cities through (all if
//      none switched); the ArgMax picks the largest current;
//   3. update: column i is reset and the ArgMax one-hot is written into it.
// I_write falls from 420 uA by 50 nA per iteration, lowering the switching
// probability from about 20 % to 1 %, and the run ends at 353 uA.
// With SWAP = 1 (default, this design's own addition) the city that held
// order i is moved to the winner's former order in the same update, so the
// spin storage stays a valid tour; SWAP = 0 writes only column i, as the
// paper states it. n_cities (3..N) selects a smaller cluster; fix_ends keeps
// the first and last cities of an open path in place, as the hierarchical
// flow needs for sub-problems. Programming ports are ignored while busy.
// The SOT devices are outside (rng_pulse, i_write_na, rng_sw); rng_sw must
// be valid from the cycle after rng_pulse to the end of the optimization.
// Timing: 3 + 4 + 2 = 9 cycles per iteration, 1340 iterations by default.
module ising_macro #(
  parameter int unsigned N          = taxi_pkg::N_CITIES,
  parameter int unsigned B          = taxi_pkg::B_PREC,
  parameter bit          SWAP       = 1'b1,
  parameter int unsigned I_START_NA = taxi_pkg::I_START_NA,
  parameter int unsigned I_STEP_NA  = taxi_pkg::I_STEP_NA,
  parameter int unsigned I_STOP_NA  = taxi_pkg::I_STOP_NA,
  localparam int unsigned AW = $clog2(N),
  localparam int unsigned NW = $clog2(N + 1),
  localparam int unsigned CW = $clog2(N + 1),
  localparam int unsigned DW = taxi_pkg::dist_width(N, B),
  localparam int unsigned IW = taxi_pkg::IW_W
) (
  input  logic          clk,
  input  logic          rst_n,
  // programming
  input  logic          w_we,
  input  logic [AW-1:0] w_row,
  input  logic [AW-1:0] w_col,
  input  logic [B-1:0]  w_data,
  input  logic          s_we,
  input  logic [AW-1:0] s_city,
  input  logic [AW-1:0] s_order,
  input  logic          s_data,
  // control
  input  logic          start,
  input  logic [NW-1:0] n_cities,
  input  logic          fix_ends,
  output logic          busy,
  output logic          done,
  output logic [15:0]   iter_cnt,
  // SOT stochastic devices
  output logic          rng_pulse,
  output logic [IW-1:0] i_write_na,
  input  logic [N-1:0]  rng_sw,
  // result
  output logic [AW-1:0] tour  [N],     // city visited at each order
  output logic [N-1:0]  spins [N],     // spins[city][order]
  // event counters of the last run (for observation)
  output logic [15:0]   n_free_pass,   // iterations in which no SOT unit switched
  output logic [15:0]   n_changed      // iterations whose winner differed from the old city
);

  // ---------------------------------------------------------------- control
  logic [AW-1:0] order, prev_order, next_order;
  logic [NW-1:0] n_act;
  logic          fix_act, sched_start, sup_act, latch_en, opt_capture;
  logic          upd_clr, upd_wr, iter_done, last_iter;
  taxi_pkg::phase_e phase;

  ising_controller #(.N(N)) u_ctrl (
    .clk, .rst_n, .start, .n_cities, .fix_ends, .last_iter,
    .phase, .order, .prev_order, .next_order, .n_act, .fix_act, .sched_start,
    .sup_act, .latch_en, .rng_pulse, .opt_capture, .upd_clr, .upd_wr,
    .iter_done, .busy, .done);

  anneal_scheduler #(.I_START_NA(I_START_NA), .I_STEP_NA(I_STEP_NA), .I_STOP_NA(I_STOP_NA))
    u_sched (.clk, .rst_n, .start(sched_start), .step(iter_done),
             .i_write_na, .last(last_iter), .iter_cnt);

  // ----------------------------------------------------------- superpose
  logic [N-1:0]  col_act;
  logic [CW-1:0] row_cur [N];
  logic [N-1:0]  vec;
  logic [1:0]    clr_en, wr_en;
  logic [AW-1:0] clr_col [2];
  logic [AW-1:0] wr_col  [2];
  logic [N-1:0]  wr_data [2];

  assign col_act = sup_act ? ((N'(1) << prev_order) | (N'(1) << next_order)) : '0;

  spin_storage #(.N(N)) u_ss (
    .clk, .rst_n,
    .prog_we(s_we && !busy), .prog_city(s_city), .prog_order(s_order), .prog_data(s_data),
    .col_act, .row_cur, .clr_en, .clr_col, .wr_en, .wr_col, .wr_data, .spins);

  current_comparator_latch #(.N(N)) u_cmp (.clk, .rst_n, .row_cur, .latch_en, .vec);

  // ------------------------------------------------------------ optimize
  logic [CW-1:0] col_cur [B][N];
  logic [DW-1:0] dist_cur    [N];
  logic [DW-1:0] gated   [N];
  logic [N-1:0]  cand, pass_en, win;
  logic [AW-1:0] win_idx;
  logic          win_valid;

  weight_xbar #(.N(N), .B(B)) u_wx (
    .clk, .rst_n, .prog_we(w_we && !busy), .prog_row(w_row), .prog_col(w_col),
    .prog_data(w_data), .row_vec(vec), .col_cur);

  current_mirror #(.N(N), .B(B)) u_mir (.col_cur, .dist_cur);

  // Candidates: cities inside the cluster, minus the fixed end cities.
  always_comb
    for (int x = 0; x < N; x++)
      cand[x] = (NW'(x) < n_act) &&
                !(fix_act && (spins[x][0] || spins[x][AW'(n_act - NW'(1))]));

  stochastic_gate #(.N(N), .DW(DW)) u_stoch (
    .dist_in(dist_cur), .sw(rng_sw), .cand, .pass_en, .dist_out(gated));

  argmax_wta #(.N(N), .DW(DW)) u_wta (
    .cur(gated), .en(pass_en), .win, .win_idx, .valid(win_valid));

  // ------------------------------------------------------ winner capture
  logic [N-1:0]  win_q, old_q;       // one-hot new city, one-hot old city of order i
  logic [AW-1:0] win_prev_q;         // order the winner held before
  logic          win_valid_q, swap_q;
  logic [N-1:0]  old_col;
  logic [AW-1:0] win_prev;
  logic          win_prev_ok;

  always_comb begin
    for (int c = 0; c < N; c++) old_col[c] = spins[c][order];
    win_prev    = '0;
    win_prev_ok = 1'b0;
    for (int o = N - 1; o >= 0; o--)
      if (spins[win_idx][o] && (NW'(o) < n_act)) begin
        win_prev    = AW'(o);
        win_prev_ok = 1'b1;
      end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      win_q <= '0; old_q <= '0; win_prev_q <= '0; win_valid_q <= 1'b0; swap_q <= 1'b0;
      n_free_pass <= '0; n_changed <= '0;
    end else begin
      if (sched_start) begin
        n_free_pass <= '0;
        n_changed   <= '0;
      end
      if (opt_capture) begin
        win_q       <= win;
        old_q       <= old_col;
        win_prev_q  <= win_prev;
        win_valid_q <= win_valid;
        swap_q      <= SWAP && win_valid && win_prev_ok && (win_prev != order);
        if (~|(rng_sw & cand)) n_free_pass <= n_free_pass + 16'd1;
        if (win_valid && win != old_col) n_changed <= n_changed + 16'd1;
      end
    end
  end

  // -------------------------------------------------------------- update
  assign clr_en     = {upd_clr && swap_q, upd_clr && win_valid_q};
  assign clr_col[0] = order;
  assign clr_col[1] = win_prev_q;
  assign wr_en      = {upd_wr && swap_q, upd_wr && win_valid_q};
  assign wr_col[0]  = order;
  assign wr_col[1]  = win_prev_q;
  assign wr_data[0] = win_q;
  assign wr_data[1] = old_q;

  // -------------------------------------------------------------- result
  always_comb
    for (int o = 0; o < N; o++) begin
      tour[o] = '0;
      for (int c = N - 1; c >= 0; c--)
        if (spins[c][o]) tour[o] = AW'(c);
    end

  // The ArgMax result written into the spin storage is one-hot.
  always_ff @(posedge clk)
    if (rst_n && opt_capture && win_valid)
      a_win_onehot: assert ((win & (win - N'(1))) == '0 && win != '0)
        else $error("ArgMax output not one-hot: %b", win);

  // Spin columns are reset and written only in the update phase.
  always_ff @(posedge clk)
    if (rst_n && (clr_en != '0 || wr_en != '0))
      a_write_in_upd: assert (phase == taxi_pkg::PH_UPD)
        else $error("spin storage written outside the update phase");

endmodule
