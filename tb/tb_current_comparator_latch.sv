// tb_current_comparator_latch: checks the threshold (>= 1 unit current) and
// that the vector is taken only on latch_en and held otherwise.
module tb_current_comparator_latch;
  localparam int N = 12, CW = $clog2(N + 1);
  logic clk, rst_n = 0, latch_en = 0;
  logic [CW-1:0] row_cur [N];
  logic [N-1:0] vec, expv;
  int checks = 0, failures = 0;

  current_comparator_latch dut (.*);

  initial clk = 0;
  always #1 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int k = 0; k < N; k++) row_cur[k] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); checks++; if (vec != '0) failures++;
    expv = '0;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      for (int k = 0; k < N; k++) row_cur[k] = CW'($urandom_range(2, 0));
      latch_en = 1'($urandom_range(1, 0));
      @(negedge clk);
      if (latch_en) for (int k = 0; k < N; k++) expv[k] = (row_cur[k] != 0);
      latch_en = 0;
      checks++;
      if (vec != expv) begin failures++; $display("FAIL vec %b exp %b", vec, expv); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
