// fp32_alu: one lane of the NetDAM SIMD ALU.
//
// Combinational IEEE-754 single-precision unit with the element operations
// the design lists for neural-network work: ADD, SUB, MUL, MIN, MAX, plus a
// bitwise XOR and a pass-through of operand b. Results of ADD, SUB and MUL are
// rounded to nearest, ties to even. To keep the lane small, subnormal inputs
// are read as zero and subnormal results are flushed to signed zero (a common
// accelerator simplification, this design's choice). Any NaN input, inf-inf
// and 0*inf give the quiet NaN 0x7FC00000. MIN/MAX order -0 below +0.
//
// Interface: op (alu_op_e), a, b -> y. No clock: the SIMD array registers it.
module fp32_alu
  import netdam_pkg::*;
(
  input  alu_op_e     op,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);

  localparam logic [31:0] QNAN = 32'h7FC0_0000;

  // ---------------------------------------------------------------- helpers
  // (the class tests look at exponent and fraction only; the sign is unused)
  function automatic logic is_nan(input logic [31:0] x);
    return (x[30:23] == 8'hFF) && (x[22:0] != 23'd0);
  endfunction
  function automatic logic is_inf(input logic [31:0] x);
    return (x[30:23] == 8'hFF) && (x[22:0] == 23'd0);
  endfunction
  function automatic logic is_zero(input logic [31:0] x);
    return x[30:23] == 8'h00;  // zero or subnormal (flushed)
  endfunction

  // Round a normalised 27-bit significand (bit 26 = hidden one, bits 2:0 =
  // guard, round, sticky) with biased exponent e and pack the result.
  function automatic logic [31:0] round_pack(input logic s, input logic signed [10:0] e,
                                             input logic [26:0] v);
    logic [24:0] m;
    logic signed [10:0] ee;
    logic up;
    up = v[2] && ((|v[1:0]) || v[3]);
    m  = {1'b0, v[26:3]} + 25'(up);
    ee = e;
    if (m[24]) begin
      m  = m >> 1;
      ee = ee + 11'sd1;
    end
    if (ee >= 11'sd255) return {s, 8'hFF, 23'd0};
    if (ee <= 11'sd0)   return {s, 31'd0};
    return {s, ee[7:0], m[22:0]};
  endfunction

  // ---------------------------------------------------------------- add/sub
  function automatic logic [31:0] fadd(input logic [31:0] x, input logic [31:0] z);
    logic [31:0] p, q;
    logic [23:0] mp, mq;
    logic [7:0]  d8;
    logic [5:0]  d;
    logic [49:0] sh;
    logic [26:0] vq, vp;
    logic [27:0] sum;
    logic [26:0] v;
    logic signed [10:0] e;
    int lz;
    if (is_nan(x) || is_nan(z)) return QNAN;
    if (is_inf(x) && is_inf(z)) return (x[31] == z[31]) ? x : QNAN;
    if (is_inf(x)) return x;
    if (is_inf(z)) return z;
    if (is_zero(x) && is_zero(z)) return {x[31] & z[31], 31'd0};
    if (is_zero(x)) return z;
    if (is_zero(z)) return x;
    // p = larger magnitude
    if (x[30:0] >= z[30:0]) begin p = x; q = z; end
    else                    begin p = z; q = x; end
    mp = {1'b1, p[22:0]};
    mq = {1'b1, q[22:0]};
    d8 = p[30:23] - q[30:23];
    d  = (d8 > 8'd50) ? 6'd50 : d8[5:0];
    sh = {mq, 26'd0} >> d;
    vq = {sh[49:24], sh[23] | (|sh[22:0])};
    vp = {mp, 3'd0};
    e  = 11'(p[30:23]);
    if (p[31] == q[31]) begin
      sum = {1'b0, vp} + {1'b0, vq};
      if (sum[27]) begin
        v = {sum[27:2], sum[1] | sum[0]};
        e = e + 11'sd1;
      end else begin
        v = sum[26:0];
      end
    end else begin
      v = vp - vq;
      if (v == 27'd0) return 32'd0;
      lz = 0;
      for (int i = 26; i >= 0; i--) begin
        if (v[i]) break;
        lz++;
      end
      v = v << lz;
      e = e - 11'(lz);
    end
    return round_pack(p[31], e, v);
  endfunction

  // ---------------------------------------------------------------- multiply
  function automatic logic [31:0] fmul(input logic [31:0] x, input logic [31:0] z);
    logic s;
    logic [47:0] pr;
    logic [26:0] v;
    logic signed [10:0] e;
    s = x[31] ^ z[31];
    if (is_nan(x) || is_nan(z)) return QNAN;
    if ((is_inf(x) && is_zero(z)) || (is_zero(x) && is_inf(z))) return QNAN;
    if (is_inf(x) || is_inf(z)) return {s, 8'hFF, 23'd0};
    if (is_zero(x) || is_zero(z)) return {s, 31'd0};
    pr = {1'b1, x[22:0]} * {1'b1, z[22:0]};
    e  = 11'(x[30:23]) + 11'(z[30:23]) - 11'sd127;
    if (pr[47]) begin
      v = {pr[47:22], |pr[21:0]};
      e = e + 11'sd1;
    end else begin
      v = {pr[46:21], |pr[20:0]};
    end
    return round_pack(s, e, v);
  endfunction

  // ---------------------------------------------------------------- compare
  // true when x < z in IEEE order (no NaN), -0 < +0
  function automatic logic flt(input logic [31:0] x, input logic [31:0] z);
    if (x[31] != z[31]) return x[31];
    if (x[31]) return x[30:0] > z[30:0];
    return x[30:0] < z[30:0];
  endfunction

  always_comb begin
    unique case (op)
      ALU_ADD:    y = fadd(a, b);
      ALU_SUB:    y = fadd(a, {~b[31], b[30:0]});
      ALU_MUL:    y = fmul(a, b);
      ALU_XOR:    y = a ^ b;
      ALU_MIN:    y = (is_nan(a) || is_nan(b)) ? QNAN : (flt(a, b) ? a : b);
      ALU_MAX:    y = (is_nan(a) || is_nan(b)) ? QNAN : (flt(a, b) ? b : a);
      ALU_PASS_B: y = b;
      default:    y = a;
    endcase
  end

endmodule
