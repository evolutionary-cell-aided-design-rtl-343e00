// Reference FP32 arithmetic for the testbenches, written independently of the RTL: operands are
// widened to double precision, the exact product (or a double-rounded sum, which is still correctly
// rounded for binary32) is formed by the simulator's `real` arithmetic, and the result is rounded
// back to binary32 from its IEEE-754 double bit pattern, nearest-even. Values below the smallest
// normal binary32 number become signed zero, matching the flush-to-zero rule of the datapath.
package fp_ref_pkg;

  function automatic real f2r(logic [31:0] x);
    logic [10:0] e;
    if (x[30:23] == 8'd0) return 0.0;
    if (x[30:23] == 8'hFF) e = 11'h7FF;
    else e = 11'({3'd0, x[30:23]} + 11'd896);
    return $bitstoreal({x[31], e, x[22:0], 29'd0});
  endfunction

  function automatic logic [31:0] r2f(real r);
    logic [63:0] d;
    int          ex;
    logic [23:0] m;
    logic        g, st;
    d = $realtobits(r);
    if (d[62:52] == 11'd0) return {d[63], 31'd0};
    ex = int'(d[62:52]) - 1023;
    if (ex < -126) return {d[63], 31'd0};
    m  = {1'b1, d[51:29]};
    g  = d[28];
    st = |d[27:0];
    if (g && (st || m[0])) begin
      m = m + 24'd1;
      if (m == 24'd0) begin
        m  = 24'h800000;
        ex = ex + 1;
      end
    end
    if (ex > 127) return {d[63], 8'hFF, 23'd0};
    return {d[63], 8'(ex + 127), m[22:0]};
  endfunction

  function automatic logic [31:0] ref_mul(logic [31:0] a, logic [31:0] b);
    return r2f(f2r(a) * f2r(b));
  endfunction

  function automatic logic [31:0] ref_add(logic [31:0] a, logic [31:0] b);
    return r2f(f2r(a) + f2r(b));
  endfunction

  // Random normal binary32 number with exponent in [127-span, 127+span].
  function automatic logic [31:0] rand_fp(int span);
    int e;
    e = 127 - span + int'($urandom_range(2 * span));
    return {1'($urandom), 8'(e), 23'($urandom)};
  endfunction

  // Random small integer-valued float in [-8, 8], exact in any dot product of modest length.
  function automatic logic [31:0] rand_int_fp();
    int v;
    v = int'($urandom_range(16)) - 8;
    return r2f(real'(v));
  endfunction

  function automatic logic [31:0] relu(logic [31:0] x);
    return x[31] ? 32'd0 : x;
  endfunction

endpackage
