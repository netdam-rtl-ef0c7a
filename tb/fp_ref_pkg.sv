// fp_ref_pkg: float32 reference arithmetic for the testbenches.
//
// Operands are widened to double, combined with real arithmetic and rounded
// back to float32 (round to nearest, ties to even) by hand, so the reference
// does not depend on the simulator's shortreal support. Results below the
// smallest normal are flushed to signed zero, matching the datapath.
package fp_ref_pkg;

  function automatic real f2r(input logic [31:0] f);
    logic [10:0] e;
    if (f[30:23] == 8'd0) return f[31] ? -0.0 : 0.0;
    e = 11'(f[30:23]) + 11'd896;
    return $bitstoreal({f[31], e, f[22:0], 29'd0});
  endfunction

  function automatic logic [31:0] r2f(input real r);
    logic [63:0] d;
    logic [52:0] m;
    logic [24:0] k;
    int e;
    logic up;
    d = $realtobits(r);
    if (d[62:0] == 63'd0) return {d[63], 31'd0};
    e = int'(d[62:52]) - 1023 + 127;
    m = {1'b1, d[51:0]};
    up = m[28] && ((|m[27:0]) || m[29]);
    k = {1'b0, m[52:29]} + 25'(up);
    if (k[24]) begin k = k >> 1; e = e + 1; end
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    if (e <= 0) return {d[63], 31'd0};
    return {d[63], 8'(e), k[22:0]};
  endfunction

  // Random normal float32 with exponent in [60,190] (no overflow/underflow).
  function automatic logic [31:0] rnd_f();
    logic [31:0] v;
    v = $urandom;
    v[30:23] = 8'(60 + ($urandom % 131));
    return v;
  endfunction

  function automatic logic [31:0] ref_add(input logic [31:0] a, input logic [31:0] b);
    return r2f(f2r(a) + f2r(b));
  endfunction

endpackage
