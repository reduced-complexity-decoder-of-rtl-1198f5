// tb_syndrome_reg: at T2 = 9 (7 tier-2 modules) drives random tier-2
// outputs in each of the 9 step-2 cycles and checks that syndrome S_k holds
// output (k mod 65) of module (k mod 63) mod 7 from cycle (k mod 63) / 7,
// that reset clears all syndromes and that they hold while `we` is low.
module tb_syndrome_reg;
  import ccft_pkg::*;
  localparam int T2 = 9, NUM2 = 7;

  logic clk = 1'b0, rst_n = 1'b0, we = 1'b0;
  logic [3:0] cyc = '0;
  sym_t din [NUM2][N2];
  sym_t syn [N_SYN];
  sym_t hist [T2][NUM2][N2];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  syndrome_reg #(.T2(T2)) dut (.clk, .rst_n, .we, .cyc, .din, .syn);

  initial begin : watchdog
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all(input bit zero, input string what);
    for (int k = 0; k < N_SYN; k++) begin
      sym_t e;
      e = zero ? '0 : hist[(k % 63) / NUM2][(k % 63) % NUM2][k % 65];
      checks++;
      if (syn[k] !== e) begin
        failures++;
        if (failures < 5) $display("FAIL %s S_%0d: %h expected %h", what, k, syn[k], e);
      end
    end
  endtask

  task automatic step2(input bit en);
    for (int c = 0; c < T2; c++) begin
      @(negedge clk);
      we = en;
      cyc = 4'(c);
      for (int j = 0; j < NUM2; j++)
        for (int k2 = 0; k2 < N2; k2++) begin
          din[j][k2] = sym_t'($urandom_range(0, 4095));
          if (en) hist[c][j][k2] = din[j][k2];
        end
    end
    @(negedge clk);
    we = 1'b0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    check_all(1'b1, "reset");
    rst_n = 1'b1;
    step2(1'b1);
    check_all(1'b0, "first");
    step2(1'b0);
    check_all(1'b0, "hold");
    step2(1'b1);
    check_all(1'b0, "second");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
