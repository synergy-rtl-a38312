// tb_fp_pkg: reference single-precision arithmetic for the testbenches.
//
// Values are widened to double precision, combined with the simulator's
// own double arithmetic, and rounded back to single precision (round to
// nearest, ties to even) by hand.  Rounding a double-precision sum or
// product of two floats to float gives the correctly rounded float result,
// because 53 >= 2*24 + 2, so this is an independent model of fp32_add and
// fp32_mul.  Like the hardware, it treats subnormals as zero and flushes
// results below the smallest normal number to zero.
//
// Paper vs. choice: purely a test reference; it mirrors this design's choice of
// flushing subnormals.  Interface: functions f2r, r2f, fmul, fadd, rand_f, tree_sum.
package tb_fp_pkg;

  function automatic real f2r(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(input real x);
    logic [63:0] d;
    logic [23:0] m;
    logic        g, st;
    int          e;
    if (x == 0.0) return 32'd0;
    d  = $realtobits(x);
    e  = int'(d[62:52]) - 1023 + 127;
    m  = {1'b0, d[51:29]};
    g  = d[28];
    st = |d[27:0];
    if (g && (st || m[0])) m = m + 24'd1;
    if (m[23]) begin m = 24'd0; e = e + 1; end
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    if (e <= 0)   return {d[63], 31'd0};
    return {d[63], 8'(e), m[22:0]};
  endfunction

  function automatic logic [31:0] fmul(input logic [31:0] a, input logic [31:0] b);
    return r2f(f2r(a) * f2r(b));
  endfunction

  function automatic logic [31:0] fadd(input logic [31:0] a, input logic [31:0] b);
    return r2f(f2r(a) + f2r(b));
  endfunction

  // a random normal float with an exponent between 2^-8 and 2^+7
  function automatic logic [31:0] rand_f();
    logic [31:0] r;
    r = $urandom;
    return {r[31], 8'(119 + ($urandom % 16)), r[22:0]};
  endfunction

  // sum of a[l]*b[l] in the heap order of fp32_mac_tree
  function automatic logic [31:0] tree_sum(input logic [31:0] a [], input logic [31:0] b [],
                                           input int lanes);
    logic [31:0] node [];
    node = new[2 * lanes - 1];
    for (int l = 0; l < lanes; l++) node[lanes - 1 + l] = fmul(a[l], b[l]);
    for (int i = lanes - 2; i >= 0; i--) node[i] = fadd(node[2*i+1], node[2*i+2]);
    return node[0];
  endfunction

endpackage
