// anneal_scheduler: the write-current schedule that sets the stochasticity.
//
// The SOT devices switch with a sigmoidal probability of the write current
// I_write, so lowering I_write step by step anneals the Ising macro. As in
// the paper, I_write starts at 420 uA (about 20 % switching probability),
// drops by 50 nA after every iteration, and the solver stops once it reaches
// 353 uA (about 1 %): 1340 iterations. The code is kept in nA. start loads
// I_START_NA and clears the iteration count; step (one pulse per finished
// iteration) lowers the code. last is high while the running iteration is
// the final one, i.e. the next step would reach I_STOP_NA.
module anneal_scheduler #(
  parameter int unsigned I_START_NA = taxi_pkg::I_START_NA,
  parameter int unsigned I_STEP_NA  = taxi_pkg::I_STEP_NA,
  parameter int unsigned I_STOP_NA  = taxi_pkg::I_STOP_NA,
  localparam int unsigned IW = taxi_pkg::IW_W
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          step,
  output logic [IW-1:0] i_write_na,
  output logic          last,
  output logic [15:0]   iter_cnt
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      i_write_na <= IW'(I_START_NA);
      iter_cnt   <= '0;
    end else if (start) begin
      i_write_na <= IW'(I_START_NA);
      iter_cnt   <= '0;
    end else if (step && !(i_write_na <= IW'(I_STOP_NA))) begin
      i_write_na <= i_write_na - IW'(I_STEP_NA);
      iter_cnt   <= iter_cnt + 16'd1;
    end
  end

  assign last = (i_write_na <= IW'(I_STOP_NA + I_STEP_NA));

endmodule
