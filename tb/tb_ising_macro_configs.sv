// tb_ising_macro_configs: the other macro configurations the design was
// evaluated with, each run through complete annealing runs against the
// reference model of ising_macro_checker, all in parallel:
//   maximum cluster sizes 14, 16, 18 and 20 cities at 4-bit weights,
//   3-bit and 2-bit weights at 12 cities,
//   and the literal single-column update (no swap) at 12 cities, 4 bits.
module tb_ising_macro_configs;
  localparam int K = 7;
  int ch [K], fa [K];
  bit fi [K];

  ising_macro_checker #(.N(14), .B(4)) u_n14 (.checks(ch[0]), .failures(fa[0]), .fin(fi[0]));
  ising_macro_checker #(.N(16), .B(4)) u_n16 (.checks(ch[1]), .failures(fa[1]), .fin(fi[1]));
  ising_macro_checker #(.N(18), .B(4)) u_n18 (.checks(ch[2]), .failures(fa[2]), .fin(fi[2]));
  ising_macro_checker #(.N(20), .B(4)) u_n20 (.checks(ch[3]), .failures(fa[3]), .fin(fi[3]));
  ising_macro_checker #(.N(12), .B(3)) u_b3  (.checks(ch[4]), .failures(fa[4]), .fin(fi[4]));
  ising_macro_checker #(.N(12), .B(2)) u_b2  (.checks(ch[5]), .failures(fa[5]), .fin(fi[5]));
  ising_macro_checker #(.N(12), .B(4), .SWAP(1'b0)) u_noswap (.checks(ch[6]), .failures(fa[6]), .fin(fi[6]));

  function automatic int total(int a [K]);
    int s = 0;
    foreach (a[i]) s += a[i];
    return s;
  endfunction

  initial begin
    #2000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", total(ch), total(fa) + 1);
    $finish;
  end

  initial begin
    forever begin
      bit all;
      #100;
      all = 1;
      foreach (fi[i]) if (!fi[i]) all = 0;
      if (all) break;
    end
    $display("TB_RESULT checks=%0d failures=%0d", total(ch), total(fa));
    $finish;
  end
endmodule
