// macc_vec: a vector of LANES multiply-accumulate units reduced into one
// dot-product accumulator.
//
// Each enabled cycle the unit multiplies LANES element pairs a[l]*b[l] (lanes
// whose mask bit is 0 contribute nothing), sums them and adds the sum to a
// full-precision Q63.64 accumulator.  `clear` together with `en` restarts the
// sum with the current products; `clear` alone zeroes it.  Result is visible
// one cycle after the last enabled input.  The paper states that every outer
// and inner loop PE carries such a vector of MACC units; the lane count is not
// given and is a parameter here.
module macc_vec
  import sia_pkg::*;
#(
  parameter int LANES = 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clear,
  input  logic                   en,
  input  fx_t  [LANES-1:0]       a,
  input  fx_t  [LANES-1:0]       b,
  input  logic [LANES-1:0]       mask,
  output acc_t                   acc
);

  acc_t sum;

  always_comb begin
    sum = '0;
    for (int l = 0; l < LANES; l++)
      if (mask[l]) sum = sum + acc_t'(a[l]) * acc_t'(b[l]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)            acc <= '0;
    else if (clear && en)  acc <= sum;
    else if (clear)        acc <= '0;
    else if (en)           acc <= acc + sum;
  end

endmodule
