// syndrome_reg: output register of the 170 syndromes.
//
// Output k2 of tier-2 module j in step-2 cycle c is frequency component
// k = CRT(k1, k2) with k1 = c*NUM2 + j (the output map of the paper's 3 x 5
// example, scaled to 63 x 65). Inverting this, syndrome S_k has exactly one
// source: module (k mod 63) mod NUM2, output k mod 65, in step-2 cycle
// (k mod 63) / NUM2. Each register therefore has a fixed input wire and a
// decoded write enable; no output multiplexer is needed.
//
// Timing: S_k is written at the clock edge ending its step-2 cycle while `we`
// is high and holds its value until the same cycle of the next computation.
// Synchronous active-low reset clears all syndromes (this design's choice).
// Ports: din[NUM2][65] tier-2 outputs, syn[170] syndromes S_0..S_169.
module syndrome_reg
  import ccft_pkg::*;
#(
  parameter int unsigned T2 = 9,
  localparam int unsigned NUM2 = (N1 + T2 - 1) / T2,
  localparam int unsigned CW   = (T2 > 1) ? $clog2(T2) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          we,
  input  logic [CW-1:0] cyc,
  input  sym_t          din [NUM2][N2],
  output sym_t          syn [N_SYN]
);

  for (genvar k = 0; k < N_SYN; k++) begin : g_syn
    localparam int unsigned K1  = k % N1;
    localparam int unsigned K2  = k % N2;
    localparam int unsigned SRC = K1 % NUM2;
    localparam int unsigned WC  = K1 / NUM2;
    always_ff @(posedge clk) begin
      if (!rst_n) syn[k] <= '0;
      else if (we && (32'(cyc) == WC)) syn[k] <= din[SRC][K2];
    end
  end

endmodule
