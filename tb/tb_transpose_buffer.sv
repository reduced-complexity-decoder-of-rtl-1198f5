// tb_transpose_buffer: at (T1, T2) = (13, 9) writes random tier-1 results
// column-wise over 13 cycles (5 columns per cycle, column n2 from module
// n2 mod 5 in cycle n2 / 5), then reads rows over 9 cycles (7 rows per
// cycle, row k1 = cyc*7 + j on port j) and compares with a model array.
// A cycle with the write enable low must leave the contents unchanged.
module tb_transpose_buffer;
  import ccft_pkg::*;
  localparam int T1 = 13, T2 = 9, NUM1 = 5, NUM2 = 7;

  logic clk = 1'b0, we = 1'b0;
  logic [3:0] wcyc = '0, rcyc = '0;
  sym_t din [NUM1][N1];
  sym_t dout [NUM2][N2];
  sym_t model [N1][N2];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  transpose_buffer #(.T1(T1), .T2(T2)) dut (.clk, .we, .wcyc, .din, .rcyc, .dout);

  initial begin : watchdog
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fill(input bit store);
    for (int c = 0; c < T1; c++) begin
      @(negedge clk);
      we = store;
      wcyc = 4'(c);
      for (int i = 0; i < NUM1; i++)
        for (int k1 = 0; k1 < N1; k1++) begin
          din[i][k1] = sym_t'($urandom_range(0, 4095));
          if (store) model[k1][c*NUM1+i] = din[i][k1];
        end
    end
    @(negedge clk);
    we = 1'b0;
  endtask

  task automatic drain();
    for (int c = 0; c < T2; c++) begin
      rcyc = 4'(c);
      #1;
      for (int j = 0; j < NUM2; j++)
        for (int n2 = 0; n2 < N2; n2++) begin
          checks++;
          if (dout[j][n2] !== model[c*NUM2+j][n2]) begin
            failures++;
            if (failures < 5) $display("FAIL rcyc=%0d j=%0d n2=%0d: %h expected %h",
                                       c, j, n2, dout[j][n2], model[c*NUM2+j][n2]);
          end
        end
    end
  endtask

  initial begin
    fill(1'b1);
    drain();
    fill(1'b0);   // write enable low: contents kept
    drain();
    fill(1'b1);
    drain();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
