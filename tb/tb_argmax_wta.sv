// tb_argmax_wta: checks the one-hot winner against a reference search
// (largest enabled current, lowest index on ties), including zero currents,
// heavy ties and the no-input case.
module tb_argmax_wta;
  localparam int N = 12, DW = 8, AW = $clog2(N);
  logic [DW-1:0] cur [N];
  logic [N-1:0] en, win;
  logic [AW-1:0] win_idx;
  logic valid;
  int checks = 0, failures = 0;

  argmax_wta dut (.*);

  initial begin
    #100000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int t = 0; t < 500; t++) begin
      int best, bi;
      for (int x = 0; x < N; x++)
        cur[x] = (t % 2 == 1) ? DW'($urandom_range(3, 0)) : DW'($urandom_range(255, 0));
      en = (t % 50 == 7) ? '0 : ((t % 5 == 0) ? '1 : N'($urandom));
      #1;
      best = -1; bi = -1;
      for (int x = 0; x < N; x++) if (en[x] && int'(cur[x]) > best) begin best = int'(cur[x]); bi = x; end
      checks++;
      if (bi < 0) begin
        if (valid || win != '0) begin failures++; $display("FAIL no-input case"); end
      end else if (!valid || win != (N'(1) << bi) || win_idx != AW'(bi)) begin
        failures++; $display("FAIL t=%0d win %b idx %0d exp %0d", t, win, win_idx, bi);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
