// current_comparator_latch: the current comparator and D-latch after the
// spin-storage rows.
//
// Each superposed row current is compared with a threshold of THRESH unit
// cell currents (default 1: any low-resistance cell in the active columns)
// and the resulting binary vector is held, to be driven back onto the
// crossbar rows during the optimization phase. The paper names a current
// comparator and a D-latch; the threshold is this design's choice, and the
// latch is written as a register loaded on latch_en so that no
// level-sensitive storage is inferred. The vector is valid the cycle after
// latch_en and holds until the next latch_en.
module current_comparator_latch #(
  parameter int unsigned N      = taxi_pkg::N_CITIES,
  parameter int unsigned THRESH = 1,
  localparam int unsigned CW = $clog2(N + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [CW-1:0]  row_cur [N],
  input  logic           latch_en,
  output logic [N-1:0]   vec
);

  logic [N-1:0] cmp;

  always_comb
    for (int k = 0; k < N; k++) cmp[k] = (row_cur[k] >= CW'(THRESH));

  always_ff @(posedge clk) begin
    if (!rst_n)        vec <= '0;
    else if (latch_en) vec <= cmp;
  end

endmodule
