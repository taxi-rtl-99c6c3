// tb_ising_macro: end-to-end test of one Ising macro at its default size
// (12 cities, 4-bit weights, full 1340-iteration schedule), through
// ising_macro_checker: three complete runs (closed tour of 12 cities, open
// path of 9 cities with fixed ends, closed tour of 5 cities), each compared
// with a reference model after every iteration, with the 9-cycle iteration,
// the annealing ramp, valid tours and fixed ends checked.
module tb_ising_macro;
  int checks, failures;
  bit fin;

  ising_macro_checker u_chk (.checks, .failures, .fin);

  initial begin
    #1000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    wait (fin);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
