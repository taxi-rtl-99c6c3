// ising_controller: iteration sequencer of the Ising macro.
//
// One iteration optimises one visiting order i and has three phases whose
// lengths are the circuit latencies reported for the macro, at a 1 ns clock:
//   superposition  T_SUP cycles: columns i-1 and i+1 of the spin storage are
//                  driven (sup_act); latch_en in the last cycle stores the
//                  comparator output;
//   optimization   T_OPT cycles (>= 2): rng_pulse in the first cycle writes
//                  the SOT devices with the current I_write; the distance
//                  MAC, stochastic gate and ArgMax settle; opt_capture in the
//                  last cycle registers the winner;
//   storage update T_UPD cycles (>= 2): upd_clr in the first cycle resets the
//                  column(s) to HRS, upd_wr in the last writes them;
//                  iter_done marks the end of the iteration.
// Orders are swept cyclically, one per iteration. With fix_ends = 0 the
// tour is a closed cycle: orders 0..n-1 are optimised and neighbours wrap.
// With fix_ends = 1 the tour is an open path whose first and last cities are
// fixed: orders 1..n-2 are optimised. The run stops after the iteration in
// which last_iter (from the annealing schedule) is high; done then stays
// high until the next start. start is ignored while busy. n_cities and
// fix_ends are sampled at start; n_cities must be 3..N. The phase lengths
// follow the paper's latencies; the clock, the order sweep and the
// fixed-end handling are this design's reading of it.
module ising_controller
  import taxi_pkg::*;
#(
  parameter int unsigned N     = taxi_pkg::N_CITIES,
  parameter int unsigned T_SUP = taxi_pkg::T_SUP_CYC,
  parameter int unsigned T_OPT = taxi_pkg::T_OPT_CYC,
  parameter int unsigned T_UPD = taxi_pkg::T_UPD_CYC,
  localparam int unsigned AW = $clog2(N),
  localparam int unsigned NW = $clog2(N + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [NW-1:0] n_cities,
  input  logic          fix_ends,
  input  logic          last_iter,
  output phase_e        phase,
  output logic [AW-1:0] order,
  output logic [AW-1:0] prev_order,
  output logic [AW-1:0] next_order,
  output logic [NW-1:0] n_act,
  output logic          fix_act,
  output logic          sched_start,
  output logic          sup_act,
  output logic          latch_en,
  output logic          rng_pulse,
  output logic          opt_capture,
  output logic          upd_clr,
  output logic          upd_wr,
  output logic          iter_done,
  output logic          busy,
  output logic          done
);

  logic [3:0]    cnt;
  logic [AW-1:0] first_o, last_o;

  assign busy = (phase == PH_SUP) || (phase == PH_OPT) || (phase == PH_UPD);
  assign done = (phase == PH_DONE);
  assign sched_start = start && !busy;

  assign first_o    = fix_act ? AW'(1) : AW'(0);
  assign last_o     = fix_act ? AW'(n_act - NW'(2)) : AW'(n_act - NW'(1));
  assign prev_order = (!fix_act && order == '0) ? AW'(n_act - NW'(1)) : order - AW'(1);
  assign next_order = (!fix_act && order == AW'(n_act - NW'(1))) ? '0 : order + AW'(1);

  assign sup_act     = (phase == PH_SUP);
  assign latch_en    = (phase == PH_SUP) && (cnt == 4'(T_SUP - 1));
  assign rng_pulse   = (phase == PH_OPT) && (cnt == 4'd0);
  assign opt_capture = (phase == PH_OPT) && (cnt == 4'(T_OPT - 1));
  assign upd_clr     = (phase == PH_UPD) && (cnt == 4'd0);
  assign upd_wr      = (phase == PH_UPD) && (cnt == 4'(T_UPD - 1));
  assign iter_done   = upd_wr;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      phase   <= PH_IDLE;
      cnt     <= '0;
      order   <= '0;
      n_act   <= NW'(N);
      fix_act <= 1'b0;
    end else if (sched_start) begin
      phase   <= PH_SUP;
      cnt     <= '0;
      n_act   <= n_cities;
      fix_act <= fix_ends;
      order   <= fix_ends ? AW'(1) : AW'(0);
    end else begin
      unique case (phase)
        PH_SUP:
          if (cnt == 4'(T_SUP - 1)) begin phase <= PH_OPT; cnt <= '0; end
          else cnt <= cnt + 4'd1;
        PH_OPT:
          if (cnt == 4'(T_OPT - 1)) begin phase <= PH_UPD; cnt <= '0; end
          else cnt <= cnt + 4'd1;
        PH_UPD:
          if (cnt == 4'(T_UPD - 1)) begin
            cnt <= '0;
            if (last_iter) phase <= PH_DONE;
            else begin
              phase <= PH_SUP;
              order <= (order == last_o) ? first_o : order + AW'(1);
            end
          end else cnt <= cnt + 4'd1;
        default: ;
      endcase
    end
  end

  // The optimised order always lies inside the active range.
  always_ff @(posedge clk)
    if (rst_n && busy)
      a_order_range: assert (order >= first_o && order <= last_o)
        else $error("optimised order %0d outside %0d..%0d", order, first_o, last_o);

endmodule
