// sub_dft63: one folded, partial 63-point DFT module of tier 1.
//
// Computes G[k1] = sum_{n1} alpha^(65*n1*k1) x[n1] for all 63 outputs k1
// (beta = alpha^65 has order 63). Over the T1 cycles of step 1 this instance
// is reused for the tier-1 columns n2 = c*NUM + INST, c = 0..T1-1, with
// NUM = ceil(65/T1) instances side by side. Input n1 feeds time-domain
// element n = (65*n1 + 63*n2) mod 4095; when that index is >= 2720 for every
// column the instance serves, the element is always zero in the shortened
// code and its column of constant multipliers is removed. All 63 outputs are
// needed by tier 2 (every k1 occurs among the syndrome indices 0..169), so no
// output is pruned.
//
// Every coefficient alpha^(65*n1*k1) is an elaboration-time constant taken
// from the antilog table, so each product is a constant multiplier (a fixed
// XOR network) and each output is the XOR of its products.
//
// Purely combinational, no clock. Ports: x[63] inputs (pruned ones are
// ignored), y[63] outputs.
//
// The partial DFT, the folding and the pruning follow the paper. The paper
// builds each sub-DFT as a cyclotomic FFT (bilinear form A*Q*(c.P*f)) but
// gives no matrices for 63 points; this module evaluates the same sums
// directly, which gives identical results with more multipliers.
module sub_dft63
  import ccft_pkg::*;
#(
  parameter int unsigned T1   = 13,  // cycles of step 1
  parameter int unsigned INST = 0    // index of this instance, 0..NUM-1
) (
  input  sym_t x [N1],
  output sym_t y [N1]
);

  localparam int unsigned NUM = (N2 + T1 - 1) / T1;

  // Inputs that can be non-zero for at least one column this instance serves.
  function automatic logic [N1-1:0] in_used();
    logic [N1-1:0] u;
    u = '0;
    for (int unsigned c = 0; c < T1; c++) begin
      if (c * NUM + INST < N2) begin
        for (int unsigned n1 = 0; n1 < N1; n1++)
          if (pfa_in_index(n1, c * NUM + INST) < N_SHORT) u[n1] = 1'b1;
      end
    end
    return u;
  endfunction

  localparam logic [N1-1:0] IN_USED = in_used();

  always_comb begin
    for (int unsigned k1 = 0; k1 < N1; k1++) begin
      sym_t acc;
      acc = '0;
      for (int unsigned n1 = 0; n1 < N1; n1++)
        if (IN_USED[n1]) acc ^= gf_mul(x[n1], ALPHA_EXP[(N2 * n1 * k1) % N]);
      y[k1] = acc;
    end
  end

endmodule
