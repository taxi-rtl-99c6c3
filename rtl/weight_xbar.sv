// weight_xbar: the B distance-weight partitions of the Ising crossbar.
//
// Cell (k, x) of partition p holds bit (B-1-p) of W_D(k, x), the quantised
// inverse distance between cities k and x; partition 0 is the most
// significant and sits leftmost, nearest the drivers, as in the paper. When
// the latched binary vector is driven on the rows, every column x of every
// partition returns sum_k Wbit(k, x) * row_vec[k] (Ohm's and Kirchhoff's
// laws), counted in units of one low-resistance cell current. The bit
// scaling of the partitions is done by current_mirror. The diagonal should be
// programmed 0 (self distance is infinite), giving the k != x of the
// distance sum. The host writes one W_D value (all B bits) per cycle; the
// column read is combinational.
module weight_xbar #(
  parameter int unsigned N  = taxi_pkg::N_CITIES,
  parameter int unsigned B  = taxi_pkg::B_PREC,
  localparam int unsigned AW = $clog2(N),
  localparam int unsigned CW = $clog2(N + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           prog_we,
  input  logic [AW-1:0]  prog_row,
  input  logic [AW-1:0]  prog_col,
  input  logic [B-1:0]   prog_data,
  input  logic [N-1:0]   row_vec,
  output logic [CW-1:0]  col_cur [B][N]   // [partition (0 = MSB)][column]
);

  // wbits[p][row][col]
  logic [N-1:0] wbits [B][N];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int p = 0; p < B; p++)
        for (int r = 0; r < N; r++) wbits[p][r] <= '0;
    end else if (prog_we) begin
      for (int p = 0; p < B; p++)
        wbits[p][prog_row][prog_col] <= prog_data[B-1-p];
    end
  end

  always_comb begin
    for (int p = 0; p < B; p++)
      for (int x = 0; x < N; x++) begin
        col_cur[p][x] = '0;
        for (int k = 0; k < N; k++)
          col_cur[p][x] = col_cur[p][x] + CW'(wbits[p][k][x] & row_vec[k]);
      end
  end

endmodule
