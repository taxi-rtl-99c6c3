// tb_ising_controller: checks the cycle-by-cycle strobe pattern of one
// iteration (3 superposition, 4 optimization, 2 update cycles = 9), the
// order sweep and neighbour orders in closed-cycle and fixed-end modes, the
// stop after the last iteration, and that start is ignored while busy.
module tb_ising_controller;
  import taxi_pkg::*;
  localparam int N = 12, AW = $clog2(N), NW = $clog2(N + 1);
  logic clk, rst_n = 0, start = 0, fix_ends = 0, last_iter = 0;
  logic [NW-1:0] n_cities = NW'(5);
  phase_e phase;
  logic [AW-1:0] order, prev_order, next_order;
  logic [NW-1:0] n_act;
  logic fix_act, sched_start, sup_act, latch_en, rng_pulse, opt_capture, upd_clr, upd_wr, iter_done, busy, done;
  int checks = 0, failures = 0;

  ising_controller dut (.*);

  initial clk = 0;
  always #1 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic run(int n, bit fix, int iters);
    int o, first, lasto;
    first = fix ? 1 : 0; lasto = fix ? n - 2 : n - 1;
    @(negedge clk); n_cities = NW'(n); fix_ends = fix; start = 1;
    @(negedge clk); start = 0;
    o = first;
    for (int it = 0; it < iters; it++) begin
      for (int c = 0; c < 9; c++) begin
        int ep, en;
        ep = fix ? o - 1 : (o + n - 1) % n;
        en = fix ? o + 1 : (o + 1) % n;
        last_iter = (it == iters - 1);
        if (it == 1 && c == 4) start = 1;   // must be ignored
        #0.1;
        chk(busy && !done, "busy");
        chk(sup_act == (c < 3), $sformatf("sup_act it%0d c%0d", it, c));
        chk(latch_en == (c == 2), "latch_en");
        chk(rng_pulse == (c == 3), "rng_pulse");
        chk(opt_capture == (c == 6), "opt_capture");
        chk(upd_clr == (c == 7), "upd_clr");
        chk(upd_wr == (c == 8) && iter_done == (c == 8), "upd_wr");
        chk(order == AW'(o) && prev_order == AW'(ep) && next_order == AW'(en),
            $sformatf("order %0d/%0d/%0d exp %0d/%0d/%0d", order, prev_order, next_order, o, ep, en));
        @(negedge clk); start = 0;
      end
      o = (o == lasto) ? first : o + 1;
    end
    last_iter = 0;
    #0.1; chk(done && !busy, "done after last iteration");
    repeat (3) @(negedge clk);
    chk(done && !rng_pulse, "stays done");
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); chk(!busy && !done, "idle after reset");
    run(5, 0, 12);
    run(6, 1, 10);
    run(12, 0, 14);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
