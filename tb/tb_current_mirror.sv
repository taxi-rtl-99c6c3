// tb_current_mirror: checks D_x = sum_p col_cur[p][x] * 2^(B-1-p) for random
// and extreme partition currents.
module tb_current_mirror;
  localparam int N = 12, B = 4;
  localparam int CW = $clog2(N + 1), DW = taxi_pkg::dist_width(N, B);
  logic [CW-1:0] col_cur [B][N];
  logic [DW-1:0] dist_cur [N];
  int checks = 0, failures = 0;

  current_mirror dut (.*);

  initial begin
    #100000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      for (int p = 0; p < B; p++) for (int x = 0; x < N; x++)
        col_cur[p][x] = (t == 0) ? CW'(N) : CW'($urandom_range(N, 0));
      #1;
      for (int x = 0; x < N; x++) begin
        automatic int e = 0;
        for (int p = 0; p < B; p++) e += col_cur[p][x] * (1 << (B - 1 - p));
        checks++;
        if (dist_cur[x] != DW'(e)) begin
          failures++; $display("FAIL x=%0d got %0d exp %0d", x, dist_cur[x], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
