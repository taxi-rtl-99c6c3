// stochastic_gate: the N pass units of the stochastic circuit.
//
// Each unit passes the mirrored distance current of its city to the ArgMax
// only when its SOT device switched on this iteration's write pulse (sw = 1,
// the inverter output V_s,u). A NAND over all units opens every unit when no
// device switched, so the ArgMax then sees all currents, as the paper
// describes. The cand mask is this design's addition: cities outside the
// programmed cluster, and fixed end cities, are disconnected and their
// switch outputs are ignored, so "none switched" refers to candidate units.
// Blocked currents become 0 and pass_en tells the ArgMax which inputs take
// part. Purely combinational.
module stochastic_gate #(
  parameter int unsigned N  = taxi_pkg::N_CITIES,
  parameter int unsigned DW = taxi_pkg::dist_width(taxi_pkg::N_CITIES, taxi_pkg::B_PREC)
) (
  input  logic [DW-1:0] dist_in  [N],
  input  logic [N-1:0]  sw,
  input  logic [N-1:0]  cand,
  output logic [N-1:0]  pass_en,
  output logic [DW-1:0] dist_out [N]
);

  logic [N-1:0] sw_c;     // switch outputs of candidate units
  logic         none_sw;  // NAND output: no candidate unit switched

  assign sw_c    = sw & cand;
  assign none_sw = ~|sw_c;
  assign pass_en = cand & (sw_c | {N{none_sw}});

  always_comb
    for (int x = 0; x < N; x++) dist_out[x] = pass_en[x] ? dist_in[x] : '0;

endmodule
