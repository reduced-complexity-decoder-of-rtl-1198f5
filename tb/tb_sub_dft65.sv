// tb_sub_dft65: checks two tier-2 modules (instances 0 and 6 of the T2 = 9
// configuration) against a direct 65-point DFT with kernel alpha^63. Outputs
// k2 that are a syndrome (CRT(k1, k2) < 170) for some row k1 = c*7 + inst the
// instance serves must match; all other outputs must be zero (pruned).
module tb_sub_dft65;
  import ccft_pkg::*;
  import tb_gf_pkg::*;
  localparam int T2 = 9;
  localparam int NUM = 7;

  sym_t x0 [N2], y0 [N2], x6 [N2], y6 [N2];
  int checks = 0, failures = 0, nused = 0;

  sub_dft65 #(.T2(T2), .INST(0)) u0 (.x(x0), .y(y0));
  sub_dft65 #(.T2(T2), .INST(6)) u6 (.x(x6), .y(y6));

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit used(int inst, int k2);
    for (int c = 0; c < T2; c++) begin
      int k1;
      k1 = c * NUM + inst;
      // k = k1 + 63*m with k mod 65 = k2; syndrome if k < 170
      for (int m = 0; m < 3; m++)
        if (k1 < 63 && k1 + 63 * m < 170 && (k1 + 63 * m) % 65 == k2) return 1'b1;
    end
    return 1'b0;
  endfunction

  task automatic check(input int inst, input sym_t x [N2], input sym_t y [N2]);
    for (int k2 = 0; k2 < N2; k2++) begin
      int acc;
      acc = 0;
      if (used(inst, k2)) begin
        for (int n2 = 0; n2 < N2; n2++) acc ^= mul(int'(x[n2]), apow(63 * n2 * k2));
        nused++;
      end
      checks++;
      if (int'(y[k2]) != acc) begin
        failures++;
        if (failures < 5) $display("FAIL inst %0d k2=%0d: %h expected %h", inst, k2, y[k2], acc);
      end
    end
  endtask

  initial begin
    init_tables();
    for (int rep = 0; rep < 6; rep++) begin
      for (int n = 0; n < N2; n++) begin
        x0[n] = sym_t'($urandom_range(0, 4095));
        x6[n] = sym_t'($urandom_range(0, 4095));
      end
      #1;
      check(0, x0, y0);
      check(6, x6, y6);
    end
    $display("useful outputs checked: %0d", nused);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
