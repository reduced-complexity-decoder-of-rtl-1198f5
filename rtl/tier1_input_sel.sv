// tier1_input_sel: input permutation and multiplexer in front of tier 1.
//
// The prime-factor algorithm feeds element n = (65*n1 + 63*n2) mod 4095 of
// the received vector to input n1 of the 63-point sub-DFT of column n2
// (the input map of the paper's 3 x 5 example, scaled to 63 x 65). With
// NUM = ceil(65/T1) folded sub-DFT modules, module i works on column
// n2 = cyc*NUM + i in cycle `cyc` of step 1. For each (module, input) pair
// this block is a T1:1 multiplexer of fixed, elaboration-time wires.
// Elements with n >= 2720 are zero in the shortened code and are not wired
// at all: those mux legs are constant zero. Columns past 64 (when T1 does
// not divide 65) also read zero.
//
// Purely combinational. Ports: rx[2720] received symbols r_0..r_2719
// (coefficient of x^i), cyc the step-1 cycle, x[NUM][63] module inputs.
//
// The index maps follow the paper; the multiplexer is this design's
// simplest realisation of the input selection the folding needs.
module tier1_input_sel
  import ccft_pkg::*;
#(
  parameter int unsigned T1 = 13,
  localparam int unsigned NUM = (N2 + T1 - 1) / T1,
  localparam int unsigned CW  = (T1 > 1) ? $clog2(T1) : 1
) (
  input  sym_t          rx  [N_SHORT],
  input  logic [CW-1:0] cyc,
  output sym_t          x   [NUM][N1]
);

  for (genvar i = 0; i < NUM; i++) begin : g_mod
    for (genvar n1 = 0; n1 < N1; n1++) begin : g_in
      sym_t leg [T1];
      for (genvar c = 0; c < T1; c++) begin : g_leg
        localparam int unsigned COL = c * NUM + i;
        localparam int unsigned IDX = (COL < N2) ? pfa_in_index(n1, COL) : N;
        if (IDX < N_SHORT) begin : g_wire
          assign leg[c] = rx[IDX];
        end else begin : g_zero
          assign leg[c] = '0;
        end
      end
      assign x[i][n1] = (32'(cyc) < T1) ? leg[cyc] : '0;
    end
  end

endmodule
