// tb_anneal_scheduler: runs the default schedule and checks the write
// current after every step (420 uA - k * 50 nA), that 'last' is high in
// exactly the 1340th iteration, that the code stops at 353 uA and that a
// new start reloads 420 uA.
module tb_anneal_scheduler;
  logic clk, rst_n = 0, start = 0, step = 0;
  logic [19:0] i_write_na;
  logic last;
  logic [15:0] iter_cnt;
  int checks = 0, failures = 0, iters = 0;

  anneal_scheduler dut (.*);

  initial clk = 0;
  always #1 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      chk(i_write_na == 20'd420000, "start value");
      iters = 0;
      forever begin
        // one iteration, with idle cycles in between
        chk(i_write_na == 20'(420000 - 50 * iters), $sformatf("I_write at iter %0d = %0d", iters, i_write_na));
        iters++;
        chk(last == (iters == 1340), $sformatf("last at iter %0d", iters));
        if (last) begin step = 1; @(negedge clk); step = 0; break; end
        step = 1; @(negedge clk); step = 0;
        repeat ($urandom_range(2, 0)) @(negedge clk);
        if (iters > 1400) break;
      end
      chk(iters == 1340, $sformatf("iterations %0d", iters));
      chk(i_write_na == 20'd353000, $sformatf("end value %0d", i_write_na));
      chk(iter_cnt == 16'd1340, "iteration count");
      step = 1; @(negedge clk); step = 0;
      chk(i_write_na == 20'd353000, "no step below the stop value");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
