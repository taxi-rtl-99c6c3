// spin_storage: the spin-storage partition of the Ising crossbar.
//
// N x N spins, spins[city][order] = 1 when that city is visited at that order
// (one low-resistance cell per column). The host writes single cells to load
// an initial visiting order. Superpose read: the order columns set in col_act
// are driven, and each row (city) returns the number of low-resistance cells
// it holds in those columns; with the two neighbour orders i-1 and i+1 active
// this is sigma[k][i-1] + sigma[k][i+1], the superposed vector of the paper.
// Update: the write sequence resets a column to all-zero (HRS) and, in a later
// cycle, writes a one-hot column, following the paper's reset-then-write.
// Two reset and two write ports exist; the second pair is used only by the
// macro's permutation-keeping swap, which is this design's own addition.
// The read is combinational; writes take effect at the clock edge. A write in
// the same cycle as a reset of the same column wins. Host writes are ignored
// while any update port is active (the macro does not program while running).
module spin_storage #(
  parameter int unsigned N  = taxi_pkg::N_CITIES,
  localparam int unsigned AW = $clog2(N),
  localparam int unsigned CW = $clog2(N + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // host programming
  input  logic                 prog_we,
  input  logic [AW-1:0]        prog_city,
  input  logic [AW-1:0]        prog_order,
  input  logic                 prog_data,
  // superpose read
  input  logic [N-1:0]         col_act,
  output logic [CW-1:0]        row_cur [N],
  // column reset and write (two ports each)
  input  logic [1:0]           clr_en,
  input  logic [AW-1:0]        clr_col [2],
  input  logic [1:0]           wr_en,
  input  logic [AW-1:0]        wr_col  [2],
  input  logic [N-1:0]         wr_data [2],
  // whole array
  output logic [N-1:0]         spins   [N]   // spins[city][order]
);

  logic [N-1:0] ss [N];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int c = 0; c < N; c++) ss[c] <= '0;
    end else if (|clr_en || |wr_en) begin
      for (int p = 0; p < 2; p++)
        if (clr_en[p])
          for (int c = 0; c < N; c++) ss[c][clr_col[p]] <= 1'b0;
      for (int p = 0; p < 2; p++)
        if (wr_en[p])
          for (int c = 0; c < N; c++)
            if (wr_data[p][c]) ss[c][wr_col[p]] <= 1'b1;
    end else if (prog_we) begin
      ss[prog_city][prog_order] <= prog_data;
    end
  end

  // Row currents: Kirchhoff sum of the activated cells in each row.
  always_comb begin
    for (int c = 0; c < N; c++) begin
      row_cur[c] = '0;
      for (int o = 0; o < N; o++)
        row_cur[c] = row_cur[c] + CW'(ss[c][o] & col_act[o]);
    end
  end

  assign spins = ss;

endmodule
