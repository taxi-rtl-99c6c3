// tb_sot_rng_array: checks the switching statistics of the behavioural SOT
// units against the operating points of the annealing schedule: about 20 %
// at 420 uA, about 1 % at 353 uA, about 0 at 300 uA, about 1 at 650 uA,
// and that the outputs change only on a pulse.
module tb_sot_rng_array;
  localparam int N = 12;
  logic clk, pulse = 0;
  logic [19:0] i_write_na = 20'd420000;
  logic [N-1:0] sw;
  int checks = 0, failures = 0;

  sot_rng_array dut (.*);

  initial clk = 0;
  always #1 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic measure(int i_na, real lo, real hi);
    int ones = 0; int pulses = 2000; real f;
    i_write_na = 20'(i_na);
    for (int t = 0; t < pulses; t++) begin
      logic [N-1:0] held;
      @(negedge clk); pulse = 1; @(negedge clk); pulse = 0;
      ones += $countones(sw);
      held = sw;
      @(negedge clk);
      checks++; if (sw != held) begin failures++; $display("FAIL output changed without pulse"); end
    end
    f = real'(ones) / real'(pulses * N);
    $display("I_write = %0d nA: switching fraction %f", i_na, f);
    checks++;
    if (f < lo || f > hi) begin failures++; $display("FAIL fraction %f outside %f..%f", f, lo, hi); end
  endtask

  initial begin
    measure(420000, 0.18, 0.22);
    measure(353000, 0.005, 0.016);
    measure(300000, 0.0, 0.002);
    measure(650000, 0.998, 1.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
