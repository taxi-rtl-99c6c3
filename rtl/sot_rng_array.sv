// sot_rng_array: behavioural model of the N SOT-MRAM stochastic units.
//
// This is a behavioural model, not synthesizable logic: the real part is an
// analog circuit of SOT-MRAM devices, resistive dividers and inverters,
// with a current DAC producing the write current. On every pulse each
// device, starting from the anti-parallel state, receives a write current of
// i_write_na nA for one pulse; it switches to the parallel state with the
// sigmoidal probability
//     P_sw(I) = 1 / (1 + exp(-(I - I50_NA) / SLOPE_NA)),
// after which the divider and inverter drive sw = 1 for that unit. The two
// constants are fitted through the two operating points the design uses
// (420 uA gives 20 %, 353 uA gives 1 %); the curve is then about 0 below
// 300 uA and about 1 above 650 uA, the stochastic range of the device. Each
// pulse draws fresh, independent samples; sw is valid from the clock edge
// that sampled pulse and holds until the next pulse. The device is assumed to
// be reset to the anti-parallel state between pulses.
module sot_rng_array #(
  parameter int unsigned N        = taxi_pkg::N_CITIES,
  parameter int unsigned I50_NA   = 448900,
  parameter int unsigned SLOPE_NA = 20880,
  localparam int unsigned IW = taxi_pkg::IW_W
) (
  input  logic          clk,
  input  logic          pulse,
  input  logic [IW-1:0] i_write_na,
  output logic [N-1:0]  sw
);

  real p_sw;

  always_comb
    p_sw = 1.0 / (1.0 + $exp(-(real'(i_write_na) - real'(I50_NA)) / real'(SLOPE_NA)));

  always_ff @(posedge clk)
    if (pulse)
      for (int u = 0; u < N; u++) sw[u] <= (real'($urandom) < p_sw * 4294967296.0);

endmodule
