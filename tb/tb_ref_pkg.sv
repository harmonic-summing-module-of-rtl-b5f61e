// tb_ref_pkg: reference models used by the testbenches.
//
// Single-precision values are converted to and from double precision
// bit patterns by hand, so the expected results do not depend on the
// adder under test: to_real() widens a float exactly, to_f32() rounds a
// double to the nearest float (ties to even, results below the normal
// range flushed to zero, as the design does). fop_val() gives a reproducible
// pseudo-random FOP value for each point, so no plane needs storing.
package tb_ref_pkg;

  function automatic real to_real(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] to_f32(input real r);
    logic [63:0] d;
    int          e;
    logic [23:0] m;
    logic        g, s;
    logic [24:0] mr;
    d = $realtobits(r);
    if (d[62:0] == 63'd0) return {d[63], 31'd0};
    e = int'(d[62:52]) - 1023 + 127;
    m = {1'b1, d[51:29]};
    g = d[28];
    s = |d[27:0];
    mr = {1'b0, m} + 25'(g & (s | m[0]));
    if (mr[24]) begin
      mr = mr >> 1;
      e  = e + 1;
    end
    if (e <= 0) return {d[63], 31'd0};
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    return {d[63], 8'(e), mr[22:0]};
  endfunction

  // Float sum rounded once (exact in double when exponents are close).
  function automatic logic [31:0] ref_add(input logic [31:0] a, input logic [31:0] b);
    return to_f32(to_real(a) + to_real(b));
  endfunction

  // Random float with exponent in [lo, hi].
  function automatic logic [31:0] rand_f32(input int lo, input int hi);
    logic [31:0] f;
    f[31]    = 1'($urandom);
    f[30:23] = 8'(lo + ($urandom % (hi - lo + 1)));
    f[22:0]  = 23'($urandom);
    return f;
  endfunction

  // Deterministic FOP test value for point (r, j): positive, in [0.5, 2).
  function automatic logic [31:0] fop_val(input int r, input int j, input int seed);
    logic [31:0] h;
    h = 32'(r) * 32'h9E37_79B1 ^ 32'(j) * 32'h85EB_CA77 ^ 32'(seed) * 32'hC2B2_AE3D;
    h = h ^ (h >> 15);
    h = h * 32'h2C1B_3C6D;
    h = h ^ (h >> 12);
    return {1'b0, 8'd126 + 8'(h[31]), h[22:0]};
  endfunction

endpackage
