// tb_sub_dft63: checks two tier-1 modules (instances 0 and 4 of the T1 = 13
// configuration) against a direct 63-point DFT with kernel alpha^65 computed
// from log tables. Inputs that can never be non-zero for the columns an
// instance serves are driven with random data too: the reference treats
// them as zero, so this also checks that the pruning removes exactly them.
module tb_sub_dft63;
  import ccft_pkg::*;
  import tb_gf_pkg::*;
  localparam int T1 = 13;
  localparam int NUM = 5;

  sym_t x0 [N1], y0 [N1], x4 [N1], y4 [N1];
  int checks = 0, failures = 0;

  sub_dft63 #(.T1(T1), .INST(0)) u0 (.x(x0), .y(y0));
  sub_dft63 #(.T1(T1), .INST(4)) u4 (.x(x4), .y(y4));

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit used(int inst, int n1);
    for (int c = 0; c < T1; c++) begin
      int n2;
      n2 = c * NUM + inst;
      if (n2 < 65 && (65 * n1 + 63 * n2) % 4095 < 2720) return 1'b1;
    end
    return 1'b0;
  endfunction

  task automatic check(input int inst, input sym_t x [N1], input sym_t y [N1]);
    for (int k1 = 0; k1 < N1; k1++) begin
      int acc;
      acc = 0;
      for (int n1 = 0; n1 < N1; n1++)
        if (used(inst, n1)) acc ^= mul(int'(x[n1]), apow(65 * n1 * k1));
      checks++;
      if (int'(y[k1]) != acc) begin
        failures++;
        if (failures < 5) $display("FAIL inst %0d k1=%0d: %h expected %h", inst, k1, y[k1], acc);
      end
    end
  endtask

  initial begin
    int npruned;
    init_tables();
    npruned = 0;
    for (int n1 = 0; n1 < N1; n1++) if (!used(0, n1)) npruned++;
    $display("instance 0: %0d of 63 inputs pruned", npruned);
    for (int rep = 0; rep < 6; rep++) begin
      for (int n = 0; n < N1; n++) begin
        x0[n] = (rep == 0) ? sym_t'(n == 1) : sym_t'($urandom_range(0, 4095));
        x4[n] = sym_t'($urandom_range(0, 4095));
      end
      #1;
      check(0, x0, y0);
      check(4, x4, y4);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
