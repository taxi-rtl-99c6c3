// taxi_pkg: shared sizes, widths and types of the TAXI Ising-macro design.
//
// The macro solves a TSP sub-problem of up to N_CITIES cities with distance
// weights W_D of B_PREC bits (the main configuration: 12 cities, 4 bits, a
// 12 x 60 crossbar). Currents inside the macro are represented as unsigned
// integers in units of one low-resistance-state cell current. The clock is
// taken as 1 ns, so the phase latencies of one iteration (3, 4 and 2 ns) are
// cycle counts. All of these are defaults; modules take them as parameters.
package taxi_pkg;

  localparam int unsigned N_CITIES  = 12;      // cities per macro (cluster size)
  localparam int unsigned B_PREC    = 4;       // W_D bit precision (partitions)

  // Phase lengths of one iteration, in cycles of a 1 ns clock.
  localparam int unsigned T_SUP_CYC = 3;       // superposition
  localparam int unsigned T_OPT_CYC = 4;       // optimization (MAC, stochastic, ArgMax)
  localparam int unsigned T_UPD_CYC = 2;       // spin-storage update (reset, write)

  // Annealing schedule of the SOT write current, in nA.
  localparam int unsigned I_START_NA = 420000;
  localparam int unsigned I_STEP_NA  = 50;
  localparam int unsigned I_STOP_NA  = 353000;
  localparam int unsigned IW_W       = 20;     // width of an I_write code

  // Width of a column current of a B-bit, N-row crossbar after scaling:
  // at most N * (2^B - 1).
  function automatic int unsigned dist_width(int unsigned n, int unsigned b);
    return $clog2(n * ((1 << b) - 1) + 1);
  endfunction

  // Phases of one iteration, as sequenced by ising_controller.
  typedef enum logic [2:0] {
    PH_IDLE = 3'd0,
    PH_SUP  = 3'd1,
    PH_OPT  = 3'd2,
    PH_UPD  = 3'd3,
    PH_DONE = 3'd4
  } phase_e;

endpackage
