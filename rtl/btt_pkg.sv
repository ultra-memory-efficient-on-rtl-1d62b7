// btt_pkg: types, constants and FP32 arithmetic shared by the tensor-train
// training datapath.
//
// All model parameters, activations and gradients are IEEE-754 binary32
// words, as in the design this RTL follows. The two arithmetic functions
// here, fp_mul and fp_add, are combinational and round to nearest even.
// Simplifications chosen for this implementation (not taken from the
// source design, which used vendor floating-point cores):
//   * subnormal inputs are read as zero and subnormal results flush to zero,
//   * NaN is not generated or propagated; exponent overflow saturates to
//     infinity with the correct sign,
//   * the sum of +x and -x is +0.
// Rank vectors are written fp32_t [R-1:0] in the modules: R binary32 values
// in one word. This is the "array reshaping" storage of the rank index of
// TT cores, so that one memory read returns every rank element at once.
package btt_pkg;

  typedef logic [31:0] fp32_t;

  localparam fp32_t FP_ZERO = 32'h0000_0000;

  // Operation codes of the contraction kernel.
  typedef enum logic [1:0] {
    TC_ROW   = 2'd0,   // acc_v[l]    += s * a[l]         (row-wise product)
    TC_DOT   = 2'd1,   // acc_d[lane] += sum_l a[l]*b[l]  (inner product)
    TC_FMA   = 2'd2    // acc_v[l]     = a[l] + s * b[l]  (gradient / update)
  } tc_op_e;

  // Commands of one side unit of the bidirectional contraction.
  typedef enum logic [2:0] {
    SC_CHAIN  = 3'd0,  // MUL0: contract the side's TT cores into W
    SC_PROJ   = 3'd1,  // Z(k)   = sum_t A[t,k] * W(t)
    SC_EXPAND = 3'd2,  // O[t,k] = W(t) . Zin(k)
    SC_GRAD   = 3'd3,  // fused MUL2/MUL3: core gradients of the side
    SC_UPDATE = 3'd4   // parameter update of the side's cores
  } side_cmd_e;

  // Count of leading zeros of a 28-bit value (28 when zero).
  function automatic logic [4:0] clz28(input logic [27:0] v);
    logic [4:0] n;
    logic       found;
    n     = 5'd28;
    found = 1'b0;
    for (int i = 27; i >= 0; i--) begin
      if (!found && v[i]) begin
        n     = 5'(27 - i);
        found = 1'b1;
      end
    end
    return n;
  endfunction

  // Round a normalised significand (hidden bit at position 26 of a 27-bit
  // field holding 24 significand bits and guard/round/sticky) and pack.
  function automatic fp32_t fp_round_pack(input logic s, input int e,
                                          input logic [26:0] m);
    logic [24:0] r;
    logic        inc;
    int          ee;
    inc = m[2] & (m[1] | m[0] | m[3]);
    r   = {1'b0, m[26:3]} + 25'(inc);
    ee  = e;
    if (r[24]) begin
      r  = r >> 1;
      ee = ee + 1;
    end
    if (ee >= 255) return {s, 8'hff, 23'd0};
    if (ee <= 0)   return FP_ZERO;
    return {s, 8'(ee), r[22:0]};
  endfunction

  function automatic fp32_t fp_mul(input fp32_t a, input fp32_t b);
    logic        s;
    logic [23:0] ma, mb;
    logic [47:0] p;
    logic [26:0] m;
    int          e;
    s = a[31] ^ b[31];
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0) return FP_ZERO;
    if (a[30:23] == 8'hff || b[30:23] == 8'hff) return {s, 8'hff, 23'd0};
    ma = {1'b1, a[22:0]};
    mb = {1'b1, b[22:0]};
    p  = ma * mb;
    e  = int'(a[30:23]) + int'(b[30:23]) - 127;
    if (p[47]) begin
      m = {p[47:22], |p[21:0]};
      e = e + 1;
    end else begin
      m = {p[46:21], |p[20:0]};
    end
    return fp_round_pack(s, e, m);
  endfunction

  function automatic fp32_t fp_add(input fp32_t a, input fp32_t b);
    fp32_t       x, y;
    logic [27:0] mx, my, sum;
    logic [7:0]  d;
    logic [4:0]  lz;
    int          e;
    if (a[30:23] == 8'd0) return (b[30:23] == 8'd0) ? FP_ZERO : b;
    if (b[30:23] == 8'd0) return a;
    if (a[30:23] == 8'hff) return a;
    if (b[30:23] == 8'hff) return b;
    // x holds the operand of larger magnitude
    if (a[30:0] >= b[30:0]) begin x = a; y = b; end
    else                    begin x = b; y = a; end
    mx = {1'b0, 1'b1, x[22:0], 3'b000};
    my = {1'b0, 1'b1, y[22:0], 3'b000};
    d  = x[30:23] - y[30:23];
    if (d > 8'd27) my = 28'd1;                      // all bits become sticky
    else if (d != 8'd0) my = (my >> d) | 28'(|(my & ((28'd1 << d) - 28'd1)));
    e = int'(x[30:23]);
    if (x[31] == y[31]) begin
      sum = mx + my;
      if (sum[27]) begin
        sum = {1'b0, sum[27:2], sum[1] | sum[0]};
        e   = e + 1;
      end
    end else begin
      sum = mx - my;
      if (sum == 28'd0) return FP_ZERO;
      lz  = clz28(sum) - 5'd1;                      // hidden bit goes to 26
      sum = sum << lz;
      e   = e - int'(lz);
    end
    return fp_round_pack(x[31], e, sum[26:0]);
  endfunction

  // Negation (sign flip); zero stays +0.
  function automatic fp32_t fp_neg(input fp32_t a);
    return (a[30:23] == 8'd0) ? FP_ZERO : {~a[31], a[30:0]};
  endfunction

endpackage
