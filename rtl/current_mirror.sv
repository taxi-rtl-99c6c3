// current_mirror: bit-significance scaling of the weight partitions.
//
// The column current of partition p (p = 0 is the MSB partition, bit
// significance b = B - p) is mirrored with gain 2^(b-1), and the mirrored
// currents of the B partitions of the same city column are summed, giving
// D_x = sum_k W_D(k, x) * v[k], the relative closeness of city x to the
// neighbours of the order being optimised. The gains follow the paper; the
// summing of the partitions into one current per city is this design's
// reading of the floor plan. Purely combinational.
module current_mirror #(
  parameter int unsigned N  = taxi_pkg::N_CITIES,
  parameter int unsigned B  = taxi_pkg::B_PREC,
  localparam int unsigned CW = $clog2(N + 1),
  localparam int unsigned DW = taxi_pkg::dist_width(N, B)
) (
  input  logic [CW-1:0] col_cur [B][N],
  output logic [DW-1:0] dist_cur    [N]
);

  always_comb begin
    for (int x = 0; x < N; x++) begin
      dist_cur[x] = '0;
      for (int p = 0; p < B; p++)
        dist_cur[x] = dist_cur[x] + (DW'(col_cur[p][x]) << (B - 1 - p));
    end
  end

endmodule
