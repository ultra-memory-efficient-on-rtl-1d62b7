// tc_kernel: rank-parallel FP32 tensor-contraction kernel.
//
// Every contraction of the tensor-train (TT) training flow involves a TT
// rank index, and the datapath is parallel over that index: R lanes, one per
// rank element, each with an FP32 multiplier and adder. A rank vector is
// one R x 32-bit word, so a vector operand comes from one memory read.
// Three operations (btt_pkg::tc_op_e):
//   TC_ROW : acc_v[l] <= (clr ? 0 : acc_v[l]) + s * a[l]
//            row-wise product, used when the rank index is a free index of
//            the result, e.g. Z2(k) = sum_n X[n,k] * Wr(n).
//   TC_DOT : acc_d[lane] <= (clr ? 0 : acc_d[lane]) + sum_l a[l] * b[l]
//            inner product over the rank index, the R products summed by a
//            balanced adder tree, e.g. Y[m,k] = Wl(m) . Z2(k). The result
//            goes to one lane of a second vector register, so R inner
//            products can be assembled into a rank vector.
//   TC_FMA : acc_v[l] <= a[l] + s * b[l]
//            accumulation of a gradient word held in memory, and the SGD
//            update theta - alpha * grad (with s = -alpha).
// Timing: one operation per cycle when en is high; results are registered
// and visible the cycle after. Multiplier, tree and accumulator form one
// combinational stage. Parallelism over the rank follows the design this
// RTL implements; the three modes and the single-stage lane are this
// implementation's choice (the original was produced by high-level
// synthesis and its pipelining is not published).
module tc_kernel
  import btt_pkg::*;
#(
  parameter int unsigned R = 12,              // TT rank = number of lanes
  localparam int unsigned XW = (R > 1) ? $clog2(R) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              en,
  input  tc_op_e            op,
  input  logic              clr,              // start a new accumulation
  input  logic [XW-1:0]     lane,             // TC_DOT destination lane
  input  fp32_t             s,                // scalar operand
  input  fp32_t [R-1:0]     a,                // rank-vector operand
  input  fp32_t [R-1:0]     b,                // second rank-vector operand
  output fp32_t [R-1:0]     acc_v,            // row / FMA result
  output fp32_t [R-1:0]     acc_d             // inner-product results
);

  localparam int unsigned NP = (R <= 1) ? 1 : (1 << $clog2(R));

  fp32_t [R-1:0] prod;
  fp32_t [R-1:0] nxt_v;
  fp32_t         tree_sum;
  fp32_t         t [NP];

  always_comb begin
    for (int l = 0; l < int'(R); l++) begin
      case (op)
        TC_DOT:  prod[l] = fp_mul(a[l], b[l]);
        TC_FMA:  prod[l] = fp_mul(s, b[l]);
        default: prod[l] = fp_mul(s, a[l]);
      endcase
      if (op == TC_FMA) nxt_v[l] = fp_add(a[l], prod[l]);
      else              nxt_v[l] = fp_add(clr ? FP_ZERO : acc_v[l], prod[l]);
    end
    for (int l = 0; l < int'(NP); l++) t[l] = (l < int'(R)) ? prod[l] : FP_ZERO;
    for (int w = int'(NP) / 2; w >= 1; w = w / 2)
      for (int l = 0; l < w; l++) t[l] = fp_add(t[2*l], t[2*l+1]);
    tree_sum = t[0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_v <= '0;
      acc_d <= '0;
    end else if (en) begin
      if (op == TC_DOT) acc_d[lane] <= fp_add(clr ? FP_ZERO : acc_d[lane], tree_sum);
      else              acc_v <= nxt_v;
    end
  end

endmodule
