// boris_pusher -- relativistic particle push (Boris scheme) and position
// advance for one particle.
//
// With tem = q*dt/(2m) and the interpolated fields Ep, Bp:
//   u-  = u + tem*Ep                                  (half electric impulse)
//   n   = tem/gamma * Bp,  gamma = sqrt(1 + |u-|^2)   (rotation vector)
//   u'  = u- + u- x n
//   u+  = u- + u' x (2n / (1 + n.n))                 (full magnetic rotation)
//   u_new = u+ + tem*Ep                               (second half impulse)
// then 1/gamma_new = 1/sqrt(1 + |u_new|^2) and the displacement in cell units
//   dx = dt_dx * u_new.x / gamma_new,  dy = dt_dy * u_new.y / gamma_new
// (dt_dx = dt/dx_cell). vz = u_new.z / gamma_new is passed on for the
// out-of-plane current. These are the equations of the design's particle
// push; the gamma of the rotation is taken from u- (standard Boris choice).
// Purely combinational in fixed point (see pic_pkg).
module boris_pusher
  import pic_pkg::*;
(
  input  vec3_t u,
  input  vec3_t ep,
  input  vec3_t bp,
  input  fx_t   tem,
  input  fx_t   dt_dx,
  input  fx_t   dt_dy,
  output vec3_t u_new,
  output fx_t   dx,
  output fx_t   dy,
  output fx_t   vz
);
  vec3_t et, um, n, up, s, uplus;
  fx_t   gtem, otsq, rg;

  always_comb begin
    et    = scale3(ep, tem);
    um    = add3(u, et);
    gtem  = fx_mul(tem, fx_rsqrt1(dot3(um, um)));
    n     = scale3(bp, gtem);
    otsq  = fx_div(FX_ONE <<< 1, FX_ONE + dot3(n, n));
    up    = add3(um, cross3(um, n));
    s     = scale3(n, otsq);
    uplus = add3(um, cross3(up, s));
    u_new = add3(uplus, et);
    rg    = fx_rsqrt1(dot3(u_new, u_new));
    dx    = fx_mul(dt_dx, fx_mul(u_new.x, rg));
    dy    = fx_mul(dt_dy, fx_mul(u_new.y, rg));
    vz    = fx_mul(u_new.z, rg);
  end
endmodule
