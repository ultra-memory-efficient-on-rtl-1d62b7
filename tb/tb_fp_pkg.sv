// tb_fp_pkg: conversions between real (binary64) and FP32 bit patterns for
// the testbenches, written with $realtobits / $bitstoreal only, so they do
// not depend on the arithmetic under test. real2fp rounds to nearest even;
// values below the FP32 normal range become zero (as in the datapath).
// Functions only, no timing. The helpers are this testbench set's own;
// binary32 itself is the data format the accelerator uses.
package tb_fp_pkg;

  function automatic logic [31:0] real2fp(input real r);
    logic [63:0] d;
    logic [52:0] m;          // 1 + 52 bits
    logic [24:0] q;
    logic        g, st;
    int          e;
    d = $realtobits(r);
    if (d[62:52] == 11'd0) return 32'd0;
    e = int'(d[62:52]) - 1023 + 127;
    m = {1'b1, d[51:0]};
    q = {1'b0, m[52:29]};
    g  = m[28];
    st = |m[27:0];
    if (g && (st || q[0])) q = q + 25'd1;
    if (q[24]) begin q = q >> 1; e = e + 1; end
    if (e <= 0) return 32'd0;
    if (e >= 255) return {d[63], 8'hff, 23'd0};
    return {d[63], 8'(e), q[22:0]};
  endfunction

  function automatic real fp2real(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  // uniform random real in [-a, a]
  function automatic real urand(input real a);
    return a * (2.0 * real'($urandom() % 32'd1000001) / 1000000.0 - 1.0);
  endfunction

  function automatic real rabs(input real x);
    return (x < 0.0) ? -x : x;
  endfunction

endpackage
