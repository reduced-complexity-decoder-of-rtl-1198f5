// sub_dft65: one folded, partial 65-point DFT module of tier 2.
//
// Computes S = sum_{n2} alpha^(63*n2*k2) x[n2] (gamma = alpha^63 has order
// 65) for the outputs k2 that are needed. Over the T2 cycles of step 2 this
// instance is reused for the tier-2 rows k1 = c*NUM + INST, c = 0..T2-1, with
// NUM = ceil(63/T2) instances side by side. Output k2 of row k1 is the
// frequency component k = CRT(k1, k2); only k < 170 are syndromes, which
// leaves two or three useful outputs per row. Output k2 is built only if it
// is useful for some row this instance serves; the others are removed and
// read as zero. All 65 inputs carry tier-1 results, so none is pruned.
//
// As in sub_dft63 every coefficient is an elaboration-time constant, so the
// module is a network of constant GF(2^12) multipliers and XORs.
//
// Purely combinational, no clock. Ports: x[65] inputs (one row of the
// transpose buffer), y[65] outputs indexed by k2 (pruned ones are zero).
//
// The partial DFT, the folding and the output pruning follow the paper. The
// cyclotomic factorisation of the 65-point DFT is not given there; the sums
// are evaluated directly.
module sub_dft65
  import ccft_pkg::*;
#(
  parameter int unsigned T2   = 9,   // cycles of step 2
  parameter int unsigned INST = 0    // index of this instance, 0..NUM-1
) (
  input  sym_t x [N2],
  output sym_t y [N2]
);

  localparam int unsigned NUM = (N1 + T2 - 1) / T2;

  // Outputs that are a syndrome for at least one row this instance serves.
  function automatic logic [N2-1:0] out_used();
    logic [N2-1:0] u;
    u = '0;
    for (int unsigned c = 0; c < T2; c++) begin
      if (c * NUM + INST < N1) begin
        for (int unsigned k2 = 0; k2 < N2; k2++)
          if (crt_index(c * NUM + INST, k2) < N_SYN) u[k2] = 1'b1;
      end
    end
    return u;
  endfunction

  localparam logic [N2-1:0] OUT_USED = out_used();

  always_comb begin
    for (int unsigned k2 = 0; k2 < N2; k2++) begin
      sym_t acc;
      acc = '0;
      if (OUT_USED[k2])
        for (int unsigned n2 = 0; n2 < N2; n2++)
          acc ^= gf_mul(x[n2], ALPHA_EXP[(N1 * n2 * k2) % N]);
      y[k2] = acc;
    end
  end

endmodule
