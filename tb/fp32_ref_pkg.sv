// fp32_ref_pkg -- reference float32 arithmetic for the testbenches.
//
// Computes single-precision results through the simulator's double
// precision 'real' type: a product of two float32 values is exact in double
// and a sum is exact or correctly resolvable, so rounding the double result
// once to float32 (nearest, ties to even) gives the IEEE result. Results
// below the normal float32 range flush to zero, matching the design's
// subnormal policy. Independent of the RTL arithmetic.
package fp32_ref_pkg;

  function automatic real f2r(logic [31:0] f);
    if (f[30:23] == 8'd0) return 0.0;
    return $bitstoreal({f[31], 11'(f[30:23]) - 11'd127 + 11'd1023, f[22:0], 29'd0});
  endfunction

  function automatic logic [31:0] r2f(real r);
    logic [63:0] d;
    logic        s, g, st;
    int          e;
    logic [23:0] m;
    d = $realtobits(r);
    s = d[63];
    if (d[62:52] == 11'd0) return {s, 31'd0};
    e  = int'(d[62:52]) - 1023 + 127;
    m  = {1'b0, d[51:29]};
    g  = d[28];
    st = |d[27:0];
    if (g && (st || m[0])) m = m + 24'd1;
    if (m[23]) e = e + 1;
    if (e >= 255) return {s, 8'hFF, 23'd0};
    if (e <= 0)   return {s, 31'd0};
    return {s, 8'(e), m[22:0]};
  endfunction

  function automatic logic [31:0] fmul(logic [31:0] a, logic [31:0] b);
    return r2f(f2r(a) * f2r(b));
  endfunction

  function automatic logic [31:0] fadd(logic [31:0] a, logic [31:0] b);
    return r2f(f2r(a) + f2r(b));
  endfunction

  function automatic logic [31:0] fneg(logic [31:0] a);
    return {~a[31], a[30:0]};
  endfunction

  // one step of the motor model, same operation order as the hardware
  function automatic void model_step(
      input  logic [31:0] a_c, beta, gamma, lambda, mu, nu, vh,
      inout  logic [31:0] im, wm);
    logic [31:0] im_n, wm_n;
    im_n = fadd(fadd(fmul(a_c, im), fmul(gamma, vh)), fmul(beta, wm));
    wm_n = fadd(fmul(lambda, im), fmul(mu, wm));
    if (nu[30:23] != 0 && wm[30:23] != 0)
      wm_n = fadd(wm_n, {nu[31] ^ wm[31], nu[30:0]});
    im = im_n;
    wm = wm_n;
  endfunction

endpackage
