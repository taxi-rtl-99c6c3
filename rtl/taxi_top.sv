// taxi_top: a TAXI accelerator chip with NUM_MACROS Ising macros.
//
// Large TSPs are split by hierarchical clustering on the host into
// sub-problems of at most N cities; every cluster of one hierarchy level is
// mapped onto its own macro and all macros anneal in parallel, without
// moving data between macros. Each macro owns its N SOT stochastic units
// (sot_rng_array). The host loads each macro through one shared write port
// (prog_macro selects the macro; w_* writes a W_D value, s_* one spin of
// the initial tour), then raises the macro's start bit together with its
// cluster size and fixed-end mode (1 for sub-problems whose first and last
// cities are fixed, 0 for a closed tour). done[m] rises after the macro's
// 1340 iterations of 9 cycles; the tour is read by rd_macro / rd_order ->
// rd_city, and the raw spin column of that order (one bit per city, one-hot
// in a valid tour) on rd_spin_col; both are combinational. The macro count
// is this design's assumption.
module taxi_top #(
  parameter int unsigned NUM_MACROS = 8,
  parameter int unsigned N          = taxi_pkg::N_CITIES,
  parameter int unsigned B          = taxi_pkg::B_PREC,
  localparam int unsigned MW = (NUM_MACROS > 1) ? $clog2(NUM_MACROS) : 1,
  localparam int unsigned AW = $clog2(N),
  localparam int unsigned NW = $clog2(N + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // host programming port
  input  logic [MW-1:0]         prog_macro,
  input  logic                  w_we,
  input  logic [AW-1:0]         w_row,
  input  logic [AW-1:0]         w_col,
  input  logic [B-1:0]          w_data,
  input  logic                  s_we,
  input  logic [AW-1:0]         s_city,
  input  logic [AW-1:0]         s_order,
  input  logic                  s_data,
  // per-macro control
  input  logic [NUM_MACROS-1:0] start,
  input  logic [NW-1:0]         n_cities [NUM_MACROS],
  input  logic [NUM_MACROS-1:0] fix_ends,
  output logic [NUM_MACROS-1:0] busy,
  output logic [NUM_MACROS-1:0] done,
  output logic [15:0]           iter_cnt    [NUM_MACROS],
  output logic [15:0]           n_free_pass [NUM_MACROS],
  output logic [15:0]           n_changed   [NUM_MACROS],
  // tour readout
  input  logic [MW-1:0]         rd_macro,
  input  logic [AW-1:0]         rd_order,
  output logic [AW-1:0]         rd_city,
  output logic [N-1:0]          rd_spin_col
);

  logic [AW-1:0] tour [NUM_MACROS][N];
  logic [N-1:0]  spin_col [NUM_MACROS];

  for (genvar m = 0; m < NUM_MACROS; m++) begin : g_macro
    logic                  rng_pulse;
    logic [taxi_pkg::IW_W-1:0] i_write_na;
    logic [N-1:0]          rng_sw;
    logic                  sel;
    logic [N-1:0]          spins [N];

    assign sel = (prog_macro == MW'(m));

    ising_macro #(.N(N), .B(B)) u_macro (
      .clk, .rst_n,
      .w_we(w_we && sel), .w_row, .w_col, .w_data,
      .s_we(s_we && sel), .s_city, .s_order, .s_data,
      .start(start[m]), .n_cities(n_cities[m]), .fix_ends(fix_ends[m]),
      .busy(busy[m]), .done(done[m]), .iter_cnt(iter_cnt[m]),
      .rng_pulse, .i_write_na, .rng_sw,
      .tour(tour[m]), .spins,
      .n_free_pass(n_free_pass[m]), .n_changed(n_changed[m]));

    for (genvar c = 0; c < N; c++) begin : g_col
      assign spin_col[m][c] = spins[c][rd_order];
    end

    sot_rng_array #(.N(N)) u_rng (.clk, .pulse(rng_pulse), .i_write_na, .sw(rng_sw));
  end

  assign rd_city     = tour[rd_macro][rd_order];
  assign rd_spin_col = spin_col[rd_macro];

endmodule
