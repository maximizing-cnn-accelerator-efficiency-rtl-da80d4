// dot_product: one vector dot-product unit of the CLP compute module.
//
// Each cycle it takes TN input words and TN weight words, multiplies them pairwise with TN
// floating-point multipliers and sums the products with a balanced tree of TN-1
// floating-point adders, as in the compute module where Tm such units each produce one word
// per cycle. Lanes whose mask bit is 0 contribute zero; the CLP clears the lanes beyond the
// last input map of a layer (N not a multiple of Tn), so stale buffer contents never enter
// the sum. The result is registered: y/y_valid follow x/w/valid by one cycle.
// The unit structure follows the source design; the tree order and the one-cycle latency are
// choices of this implementation.
module dot_product
  import fp32_pkg::*;
#(
  parameter int TN = 2
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            valid,
  input  fp32_t [TN-1:0]  x,
  input  fp32_t [TN-1:0]  w,
  input  logic  [TN-1:0]  mask,
  output fp32_t           y,
  output logic            y_valid
);

  fp32_t sum;

  always_comb begin
    fp32_t v [TN];
    for (int t = 0; t < TN; t++) v[t] = mask[t] ? fp_mul(x[t], w[t]) : FP_ZERO;
    for (int step = 1; step < TN; step = step * 2)
      for (int t = 0; t < TN; t = t + 2 * step)
        if (t + step < TN) v[t] = fp_add(v[t], v[t + step]);
    sum = v[0];
  end

  always_ff @(posedge clk) y <= sum;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) y_valid <= 1'b0;
    else        y_valid <= valid;

endmodule
