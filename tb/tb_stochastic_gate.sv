// tb_stochastic_gate: checks that only switched candidate units pass, that
// all candidates pass when none switched, and that blocked currents are 0.
module tb_stochastic_gate;
  localparam int N = 12, DW = 8;
  logic [DW-1:0] dist_in [N], dist_out [N];
  logic [N-1:0] sw, cand, pass_en;
  int checks = 0, failures = 0, n_none = 0;

  stochastic_gate dut (.*);

  initial begin
    #100000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int t = 0; t < 400; t++) begin
      logic [N-1:0] ep; bit none;
      for (int x = 0; x < N; x++) dist_in[x] = DW'($urandom_range(180, 1));
      cand = (t % 4 == 0) ? '1 : N'($urandom);
      sw   = (t % 3 == 0) ? '0 : N'($urandom) & N'($urandom) & N'($urandom);
      #1;
      none = 1;
      for (int x = 0; x < N; x++) if (sw[x] && cand[x]) none = 0;
      if (none) n_none++;
      for (int x = 0; x < N; x++) ep[x] = cand[x] && (none || sw[x]);
      checks++;
      if (pass_en != ep) begin failures++; $display("FAIL pass %b exp %b", pass_en, ep); end
      for (int x = 0; x < N; x++) begin
        checks++;
        if (dist_out[x] != (ep[x] ? dist_in[x] : '0)) begin failures++; $display("FAIL out %0d", x); end
      end
    end
    checks++; if (n_none == 0) begin failures++; $display("FAIL none-switched case never seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
