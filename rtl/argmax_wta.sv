// argmax_wta: winner-take-all selection of the largest current.
//
// Among the inputs with en set, the one with the largest current wins and
// the output is a one-hot vector marking it, plus its index. This is the
// logic function of the paper's analog Lazzaro-type WTA; the analog
// circuit resolves ties by device mismatch, here the lowest index wins (a
// choice of this design). An enabled input with zero current can still win;
// valid is 0 only when no input is enabled. Purely combinational: a linear
// compare chain over the N inputs.
module argmax_wta #(
  parameter int unsigned N  = taxi_pkg::N_CITIES,
  parameter int unsigned DW = taxi_pkg::dist_width(taxi_pkg::N_CITIES, taxi_pkg::B_PREC),
  localparam int unsigned AW = $clog2(N)
) (
  input  logic [DW-1:0] cur [N],
  input  logic [N-1:0]  en,
  output logic [N-1:0]  win,
  output logic [AW-1:0] win_idx,
  output logic          valid
);

  logic [DW-1:0] best;

  always_comb begin
    valid   = 1'b0;
    best    = '0;
    win_idx = '0;
    for (int x = 0; x < N; x++) begin
      if (en[x] && (!valid || cur[x] > best)) begin
        valid   = 1'b1;
        best    = cur[x];
        win_idx = AW'(x);
      end
    end
    win = valid ? (N'(1) << win_idx) : '0;
  end

endmodule
