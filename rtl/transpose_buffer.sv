// transpose_buffer: intermediate buffer between tier 1 and tier 2.
//
// Holds the 63 x 65 tier-1 results G[k1][n2] (4095 symbols of 12 bits).
// Step 1 writes whole columns: in cycle `wcyc` the NUM1 = ceil(65/T1)
// tier-1 modules deliver columns n2 = wcyc*NUM1 + i. Each column has a
// single fixed source module, so the write side needs only write enables.
// Step 2 reads whole rows: in cycle `rcyc` output port j presents row
// k1 = rcyc*NUM2 + j (NUM2 = ceil(63/T2)) through a T2:1 row multiplexer.
// Rows past 62 read as zero.
//
// Timing: writes at the clock edge that ends a step-1 cycle with `we` high;
// reads are combinational from the registers. No reset: every entry is
// written in step 1 before step 2 reads it.
//
// The paper names the buffers needed to reuse the sub-DFT modules; the
// column-write / row-read register array is this design's realisation.
module transpose_buffer
  import ccft_pkg::*;
#(
  parameter int unsigned T1 = 13,
  parameter int unsigned T2 = 9,
  localparam int unsigned NUM1 = (N2 + T1 - 1) / T1,
  localparam int unsigned NUM2 = (N1 + T2 - 1) / T2,
  localparam int unsigned CW1  = (T1 > 1) ? $clog2(T1) : 1,
  localparam int unsigned CW2  = (T2 > 1) ? $clog2(T2) : 1
) (
  input  logic           clk,
  input  logic           we,
  input  logic [CW1-1:0] wcyc,
  input  sym_t           din  [NUM1][N1],   // din[i][k1] from tier-1 module i
  input  logic [CW2-1:0] rcyc,
  output sym_t           dout [NUM2][N2]    // dout[j][n2] to tier-2 module j
);

  sym_t mem [N1][N2];

  for (genvar n2 = 0; n2 < N2; n2++) begin : g_col
    localparam int unsigned WC = n2 / NUM1;   // step-1 cycle of this column
    localparam int unsigned SRC = n2 % NUM1;  // module that computes it
    always_ff @(posedge clk) begin
      if (we && (32'(wcyc) == WC)) begin
        for (int unsigned k1 = 0; k1 < N1; k1++) mem[k1][n2] <= din[SRC][k1];
      end
    end
  end

  always_comb begin
    for (int unsigned j = 0; j < NUM2; j++) begin
      for (int unsigned n2 = 0; n2 < N2; n2++) dout[j][n2] = '0;
      for (int unsigned c = 0; c < T2; c++) begin
        if (32'(rcyc) == c && c * NUM2 + j < N1) begin
          for (int unsigned n2 = 0; n2 < N2; n2++) dout[j][n2] = mem[c*NUM2+j][n2];
        end
      end
    end
  end

endmodule
