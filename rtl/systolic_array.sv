// systolic_array: an S x S output-stationary systolic array of
// multiply-accumulate PEs for fixed-point matrix-matrix products.
//
// Row r of the left operand enters at a_in[r] and moves one PE to the right
// per cycle; column c of the top operand enters at b_in[c] and moves one PE
// down per cycle.  Each PE multiplies the pair passing through it and keeps
// the full-precision (Q63.64) running sum.  For C = A x B with inner
// dimension K the feeder must skew the inputs: a_in[r] at cycle t carries
// A[r][t-r] and b_in[c] carries B[t-c][c] (zero outside 0..K-1); after
// K + 2S - 2 enabled cycles acc[r][c] holds sum_k A[r][k] B[k][c].  `clear`
// with `en` restarts every sum with the current products.  The paper names
// a systolic array for GEMM; size and dataflow are this design's choices.
module systolic_array
  import sia_pkg::*;
#(
  parameter int S = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         en,
  input  fx_t [S-1:0]  a_in,
  input  fx_t [S-1:0]  b_in,
  output acc_t         acc [S][S]
);

  fx_t a_reg [S][S];
  fx_t b_reg [S][S];

  for (genvar r = 0; r < S; r++) begin : g_row
    for (genvar c = 0; c < S; c++) begin : g_col
      fx_t a_src, b_src;
      acc_t prod;
      if (c == 0) begin : g_a0
        assign a_src = a_in[r];
      end else begin : g_an
        assign a_src = a_reg[r][c-1];
      end
      if (r == 0) begin : g_b0
        assign b_src = b_in[c];
      end else begin : g_bn
        assign b_src = b_reg[r-1][c];
      end
      assign prod = acc_t'(a_src) * acc_t'(b_src);

      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          a_reg[r][c] <= '0;
          b_reg[r][c] <= '0;
          acc[r][c]   <= '0;
        end else if (en) begin
          a_reg[r][c] <= a_src;
          b_reg[r][c] <= b_src;
          acc[r][c]   <= clear ? prod : acc[r][c] + prod;
        end
      end
    end
  end

endmodule
