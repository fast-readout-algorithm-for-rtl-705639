// tb_fp_pkg: reference arithmetic for the testbenches.
//
// Converts between IEEE-754 binary32 words and SystemVerilog reals (binary64)
// without using the design's code. A single binary32 operation (+, -, *, /,
// sqrt) evaluated in binary64 and then rounded once more to binary32 gives the
// correctly rounded binary32 result, because binary64 carries more than
// 2*24+2 significand bits. r2f rounds to nearest-even and applies the same
// flush-to-zero rule as the design: a result whose rounded magnitude is below
// 2^-126 becomes a signed zero. f2r reads subnormals as zero.
package tb_fp_pkg;

  function automatic real f2r(logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'h00) return $bitstoreal({f[31], 63'd0});
    if (f[30:23] == 8'hFF) begin
      if (f[22:0] != 0) d = 64'h7FF8_0000_0000_0000;
      else              d = {f[31], 11'h7FF, 52'd0};
      return $bitstoreal(d);
    end
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(real r);
    logic [63:0] d;
    logic        s;
    int          e;
    logic [52:0] m;
    logic [24:0] mr;
    logic        g, st;
    d = $realtobits(r);
    s = d[63];
    if (d[62:52] == 11'h7FF) begin
      if (d[51:0] != 0) return 32'h7FC0_0000;
      return {s, 8'hFF, 23'd0};
    end
    if (d[62:52] == 0) return {s, 31'd0};
    e  = int'(d[62:52]) - 1023 + 127;
    m  = {1'b1, d[51:0]};
    g  = m[28];
    st = |m[27:0];
    mr = {1'b0, m[52:29]} + {24'd0, g & (st | m[29])};
    if (mr[24]) begin
      mr = mr >> 1;
      e  = e + 1;
    end
    if (e >= 255) return {s, 8'hFF, 23'd0};
    if (e <= 0)   return {s, 31'd0};
    return {s, 8'(e), mr[22:0]};
  endfunction

  function automatic logic is_nan32(logic [31:0] f);
    return (f[30:23] == 8'hFF) && (f[22:0] != 0);
  endfunction

  // Same word, or both NaN.
  function automatic logic same32(logic [31:0] x, logic [31:0] y);
    if (is_nan32(x) && is_nan32(y)) return 1'b1;
    return x == y;
  endfunction

  // Random finite binary32 with exponent field in [elo, ehi].
  function automatic logic [31:0] rand32(int elo, int ehi);
    logic [31:0] v;
    v[31]    = 1'($urandom_range(0, 1));
    v[30:23] = 8'($urandom_range(elo, ehi));
    v[22:0]  = 23'($urandom);
    return v;
  endfunction

  // Single binary32 operations, correctly rounded.
  function automatic logic [31:0] fadd(logic [31:0] x, logic [31:0] y);
    return r2f(f2r(x) + f2r(y));
  endfunction
  function automatic logic [31:0] fsub(logic [31:0] x, logic [31:0] y);
    return r2f(f2r(x) - f2r(y));
  endfunction
  function automatic logic [31:0] fmul(logic [31:0] x, logic [31:0] y);
    return r2f(f2r(x) * f2r(y));
  endfunction
  function automatic logic [31:0] fdiv(logic [31:0] x, logic [31:0] y);
    return r2f(f2r(x) / f2r(y));
  endfunction
  function automatic logic [31:0] fsqrt(logic [31:0] x);
    if (x[30:23] == 8'h00) return {x[31], 31'd0};
    if (is_nan32(x) || x[31]) return 32'h7FC0_0000;
    return r2f($sqrt(f2r(x)));
  endfunction
  function automatic logic [31:0] fabs(logic [31:0] x);
    return {1'b0, x[30:0]};
  endfunction

  localparam logic [31:0] ONE32 = 32'h3F80_0000;

  // Reference for the ratio stage: (a - b) / (a + b).
  function automatic logic [31:0] ref_ratio(logic [31:0] a, logic [31:0] b);
    return fdiv(fsub(a, b), fadd(a, b));
  endfunction

  // Reference for the correction stage: q + (b*q)*|p|.
  function automatic logic [31:0] ref_refine(logic [31:0] q, logic [31:0] p, logic [31:0] b);
    return fadd(q, fmul(fmul(b, q), fabs(p)));
  endfunction

  // Reference for the position chain, same operation order as the schematic.
  function automatic void ref_core(input logic [31:0] qx, input logic [31:0] qy,
                                   input logic [31:0] a_eff, input int q2_log2,
                                   output logic [31:0] x, output logic [31:0] y,
                                   output logic paraxial);
    logic [31:0] q2, qm, t1, s, iq, ux, uy, rho, half_a;
    q2  = fadd(fmul(qx, qx), fmul(qy, qy));
    qm  = fsqrt(q2);
    t1  = fsub(fdiv(ONE32, q2), ONE32);
    s   = fsqrt(t1);
    iq  = fdiv(ONE32, qm);
    ux  = fdiv(qx, qm);
    uy  = fdiv(qy, qm);
    rho = fsub(iq, s);
    paraxial = (q2[30:23] == 8'h00) || (int'(q2[30:23]) - 127 < q2_log2);
    half_a = r2f(f2r(a_eff) / 2.0);
    if (paraxial) begin
      x = fmul(half_a, qx);
      y = fmul(half_a, qy);
    end else begin
      x = fmul(rho, fmul(a_eff, ux));
      y = fmul(rho, fmul(a_eff, uy));
    end
  endfunction

endpackage
