// tb_tier1_input_sel: checks the prime-factor input map and the folding mux
// at T1 = 13 (5 modules). For every step-1 cycle and random received data,
// input n1 of module i must carry r[(65*n1 + 63*n2) mod 4095] with
// n2 = cyc*5 + i, or zero when that index is beyond the shortened length.
module tb_tier1_input_sel;
  import ccft_pkg::*;
  localparam int T1 = 13;
  localparam int NUM = 5;

  sym_t rx [N_SHORT];
  logic [3:0] cyc;
  sym_t x [NUM][N1];
  int checks = 0, failures = 0;

  tier1_input_sel #(.T1(T1)) dut (.rx, .cyc, .x);

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int rep = 0; rep < 2; rep++) begin
      for (int i = 0; i < N_SHORT; i++) rx[i] = sym_t'($urandom_range(1, 4095));
      for (int c = 0; c < T1; c++) begin
        cyc = 4'(c);
        #1;
        for (int i = 0; i < NUM; i++) begin
          for (int n1 = 0; n1 < N1; n1++) begin
            int n2, idx;
            sym_t e;
            n2 = c * NUM + i;
            idx = (65 * n1 + 63 * n2) % 4095;
            e = (idx < 2720) ? rx[idx] : '0;
            checks++;
            if (x[i][n1] !== e) begin
              failures++;
              if (failures < 5) $display("FAIL cyc=%0d i=%0d n1=%0d: %h expected %h", c, i, n1, x[i][n1], e);
            end
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
