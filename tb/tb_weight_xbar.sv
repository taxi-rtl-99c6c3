// tb_weight_xbar: self-checking test of the W_D bit partitions.
// Programs random 4-bit weights, drives random row vectors and checks every
// partition's column current against sum_k bit(W(k,x)) * v[k], with
// partition 0 holding the most significant bit.
module tb_weight_xbar;
  localparam int N = 12, B = 4;
  localparam int AW = $clog2(N), CW = $clog2(N + 1);
  logic clk, rst_n = 0;
  logic prog_we = 0; logic [AW-1:0] prog_row = 0, prog_col = 0; logic [B-1:0] prog_data = 0;
  logic [N-1:0] row_vec = 0;
  logic [CW-1:0] col_cur [B][N];
  int checks = 0, failures = 0;
  int w [N][N];

  weight_xbar dut (.*);

  initial clk = 0;
  always #1 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int rep = 0; rep < 3; rep++) begin
      for (int r = 0; r < N; r++) for (int c = 0; c < N; c++) begin
        @(negedge clk); prog_we = 1; prog_row = AW'(r); prog_col = AW'(c);
        w[r][c] = (rep == 2) ? ((1 << B) - 1) : $urandom_range((1 << B) - 1, 0);
        prog_data = B'(w[r][c]);
      end
      @(negedge clk); prog_we = 0;
      for (int t = 0; t < 30; t++) begin
        @(negedge clk); row_vec = (t == 0) ? '1 : N'($urandom); #0.1;
        for (int p = 0; p < B; p++) for (int x = 0; x < N; x++) begin
          automatic int e = 0;
          for (int k = 0; k < N; k++) e += row_vec[k] * ((w[k][x] >> (B - 1 - p)) & 1);
          checks++;
          if (col_cur[p][x] != CW'(e)) begin
            failures++; $display("FAIL p=%0d x=%0d got %0d exp %0d", p, x, col_cur[p][x], e);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
