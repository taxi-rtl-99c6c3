// tb_spin_storage: self-checking test of the spin-storage partition.
// Loads random permutation matrices through the host port, checks the
// superpose row currents for random column activations against a model
// array, then exercises the column reset/write ports (single and two-port
// swap) and checks that host writes are ignored during an update.
module tb_spin_storage;
  localparam int N = 12;
  localparam int AW = $clog2(N), CW = $clog2(N + 1);
  logic clk, rst_n = 0;
  logic prog_we = 0; logic [AW-1:0] prog_city = 0, prog_order = 0; logic prog_data = 0;
  logic [N-1:0] col_act = 0;
  logic [CW-1:0] row_cur [N];
  logic [1:0] clr_en = 0, wr_en = 0;
  logic [AW-1:0] clr_col [2] = '{default: '0};
  logic [AW-1:0] wr_col  [2] = '{default: '0};
  logic [N-1:0]  wr_data [2] = '{default: '0};
  logic [N-1:0] spins [N];
  int checks = 0, failures = 0;
  bit model [N][N];

  spin_storage dut (.*);

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

  task automatic compare_all();
    for (int c = 0; c < N; c++) for (int o = 0; o < N; o++)
      chk(spins[c][o] == model[c][o], $sformatf("spin[%0d][%0d]", c, o));
  endtask

  task automatic load_perm();
    int perm [N];
    for (int i = 0; i < N; i++) perm[i] = i;
    for (int i = N - 1; i > 0; i--) begin
      int j = $urandom_range(i, 0); int t = perm[i]; perm[i] = perm[j]; perm[j] = t;
    end
    for (int c = 0; c < N; c++) for (int o = 0; o < N; o++) begin
      @(negedge clk); prog_we = 1; prog_city = AW'(c); prog_order = AW'(o);
      prog_data = (perm[o] == c); model[c][o] = (perm[o] == c);
    end
    @(negedge clk); prog_we = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk);
    for (int c = 0; c < N; c++) for (int o = 0; o < N; o++) model[c][o] = 0;
    compare_all();                                  // reset clears
    for (int rep = 0; rep < 4; rep++) begin
      load_perm();
      @(negedge clk); compare_all();
      for (int t = 0; t < 20; t++) begin
        @(negedge clk); col_act = N'($urandom);
        if (t < 10) begin                           // two neighbour columns
          automatic int a = $urandom_range(N - 1, 0), b = $urandom_range(N - 1, 0);
          col_act = (N'(1) << a) | (N'(1) << b);
        end
        #0.1;
        for (int c = 0; c < N; c++) begin
          automatic int e = 0;
          for (int o = 0; o < N; o++) e += (model[c][o] && col_act[o]);
          chk(row_cur[c] == CW'(e), $sformatf("row_cur[%0d]=%0d exp %0d", c, row_cur[c], e));
        end
      end
      col_act = 0;
      // single-column reset, then write; host write in the same cycle ignored
      begin
        automatic int col = $urandom_range(N - 1, 0), city = $urandom_range(N - 1, 0);
        @(negedge clk); clr_en = 2'b01; clr_col[0] = AW'(col);
        prog_we = 1; prog_city = AW'((col + 1) % N); prog_order = AW'((col + 1) % N);
        prog_data = ~model[(col + 1) % N][(col + 1) % N];
        for (int c = 0; c < N; c++) model[c][col] = 0;
        @(negedge clk); clr_en = 0; prog_we = 0; compare_all();
        wr_en = 2'b01; wr_col[0] = AW'(col); wr_data[0] = N'(1) << city; model[city][col] = 1;
        @(negedge clk); wr_en = 0; compare_all();
      end
      // two-port swap of columns a and b
      begin
        automatic int a = $urandom_range(N - 1, 0), b = (a + 1 + $urandom_range(N - 2, 0)) % N;
        automatic logic [N-1:0] ca, cb;
        for (int c = 0; c < N; c++) begin ca[c] = model[c][a]; cb[c] = model[c][b]; end
        @(negedge clk); clr_en = 2'b11; clr_col[0] = AW'(a); clr_col[1] = AW'(b);
        @(negedge clk); clr_en = 0;
        for (int c = 0; c < N; c++) begin
          chk(spins[c][a] == 0 && spins[c][b] == 0, "two-column reset");
        end
        wr_en = 2'b11; wr_col[0] = AW'(a); wr_data[0] = cb; wr_col[1] = AW'(b); wr_data[1] = ca;
        for (int c = 0; c < N; c++) begin model[c][a] = cb[c]; model[c][b] = ca[c]; end
        @(negedge clk); wr_en = 0; compare_all();
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
