// rs_syndrome_ccft: syndrome computation for the (2720, 2550) shortened
// Reed-Solomon code over GF(2^12) by a folded partial composite cyclotomic
// Fourier transform (CCFT).
//
// The 170 syndromes S_j = sum_{i<2720} r_i alpha^(i*j), j = 0..169, are the
// first 170 outputs of the 4095-point DFT of the received vector padded with
// zeros. The DFT is decomposed 63 x 65 by the prime-factor algorithm and
// folded in time:
//   step 1 (T1 cycles): NUM1 = ceil(65/T1) sub_dft63 modules transform
//          NUM1 columns per cycle; tier1_input_sel routes the permuted
//          received symbols to them and the results fill transpose_buffer.
//   step 2 (T2 cycles): NUM2 = ceil(63/T2) sub_dft65 modules transform
//          NUM2 buffer rows per cycle; the useful outputs go straight into
//          syndrome_reg through fixed wires (CRT output map).
// ccft_ctrl sequences the two steps.
//
// Interface: assert `start` while `ready` is high with the received vector
// on rx[0..2719] (r_i is the coefficient of x^i). rx must stay stable for
// the T1 cycles of step 1 that follow. `done` pulses T1 + T2 cycles after
// the start cycle; syn[0..169] then holds S_0..S_169 until step 2 of the next
// computation overwrites it. A new start may be given in the last step-2
// cycle, so one vector is processed every T1 + T2 cycles.
//
// Defaults (T1, T2) = (13, 9): 5 tier-1 and 7 tier-2 modules, 22 cycles per
// vector, one of the two configurations the paper reports; (5, 7) is the
// other (13 and 9 modules, 12 cycles). The sub-DFTs and the field
// polynomial are realised as described in their own files; the handshake is
// this design's choice. The datapath has no pipeline registers inside the
// sub-DFTs (the paper mentions them only as a possible improvement).
module rs_syndrome_ccft
  import ccft_pkg::*;
#(
  parameter int unsigned T1 = 13,
  parameter int unsigned T2 = 9,
  localparam int unsigned NUM1 = (N2 + T1 - 1) / T1,
  localparam int unsigned NUM2 = (N1 + T2 - 1) / T2,
  localparam int unsigned TMAX = (T1 > T2) ? T1 : T2,
  localparam int unsigned CW   = (TMAX > 1) ? $clog2(TMAX) : 1,
  localparam int unsigned CW1  = (T1 > 1) ? $clog2(T1) : 1,
  localparam int unsigned CW2  = (T2 > 1) ? $clog2(T2) : 1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  output logic ready,
  input  sym_t rx  [N_SHORT],
  output sym_t syn [N_SYN],
  output logic done
);

  logic          step1, step2;
  logic [CW-1:0] cyc;

  sym_t t1_in  [NUM1][N1];
  sym_t t1_out [NUM1][N1];
  sym_t t2_in  [NUM2][N2];
  sym_t t2_out [NUM2][N2];

  ccft_ctrl #(.T1(T1), .T2(T2)) u_ctrl (
    .clk, .rst_n, .start, .ready, .step1, .step2, .cyc, .done
  );

  tier1_input_sel #(.T1(T1)) u_insel (
    .rx, .cyc(cyc[CW1-1:0]), .x(t1_in)
  );

  for (genvar i = 0; i < NUM1; i++) begin : g_tier1
    sub_dft63 #(.T1(T1), .INST(i)) u_dft63 (.x(t1_in[i]), .y(t1_out[i]));
  end

  transpose_buffer #(.T1(T1), .T2(T2)) u_buf (
    .clk,
    .we  (step1),
    .wcyc(cyc[CW1-1:0]),
    .din (t1_out),
    .rcyc(cyc[CW2-1:0]),
    .dout(t2_in)
  );

  for (genvar j = 0; j < NUM2; j++) begin : g_tier2
    sub_dft65 #(.T2(T2), .INST(j)) u_dft65 (.x(t2_in[j]), .y(t2_out[j]));
  end

  syndrome_reg #(.T2(T2)) u_syn (
    .clk, .rst_n, .we(step2), .cyc(cyc[CW2-1:0]), .din(t2_out), .syn
  );

endmodule
