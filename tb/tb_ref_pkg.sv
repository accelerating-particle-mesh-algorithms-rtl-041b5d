// tb_ref_pkg -- floating-point (real) reference models used by the
// testbenches: field interpolation on the staggered grid, the Boris push and
// the charge-conserving current split. They are written from the equations,
// independently of the fixed-point RTL, and compared with it within a
// tolerance.
package tb_ref_pkg;
  import pic_pkg::*;

  function automatic real r(fx_t a);
    return real'(a) / real'(64'd1 << FRAC);
  endfunction

  function automatic fx_t f(real a);
    return fx_t'($rtoi(a * real'(64'd1 << FRAC)));
  endfunction

  function automatic real absr(real a);
    return (a < 0.0) ? -a : a;
  endfunction

  function automatic real comp_of(emf_t v, int c);
    case (c)
      0: return r(v.e.x);
      1: return r(v.e.y);
      2: return r(v.e.z);
      3: return r(v.b.x);
      4: return r(v.b.y);
      default: return r(v.b.z);
    endcase
  endfunction

  // value of component c (Ex,Ey,Ez,Bx,By,Bz) at a point inside the centre cell
  // of a 3x3 window; the sample of window point (a,b) sits at (a+sx, b+sy)
  function automatic real ref_interp1(emf_t win[3][3], real x0, real y0, int c);
    real sx, sy, px, py, wx, wy;
    int  bx, by;
    sx = (c == 0 || c == 4 || c == 5) ? 0.5 : 0.0;
    sy = (c == 1 || c == 3 || c == 5) ? 0.5 : 0.0;
    px = 1.0 + x0 - sx;
    py = 1.0 + y0 - sy;
    bx = $rtoi($floor(px));
    by = $rtoi($floor(py));
    wx = px - bx;
    wy = py - by;
    return (1.0 - wx) * (1.0 - wy) * comp_of(win[bx][by], c) + wx * (1.0 - wy) * comp_of(win[bx+1][by], c)
         + (1.0 - wx) * wy * comp_of(win[bx][by+1], c) + wx * wy * comp_of(win[bx+1][by+1], c);
  endfunction

  function automatic void ref_boris(input real u[3], input real e[3], input real b[3],
                                    input real tem, input real dtdx, input real dtdy,
                                    output real un[3], output real dx, output real dy,
                                    output real vz);
    real um[3], t[3], s[3], up[3], g, t2, gn;
    for (int i = 0; i < 3; i++) um[i] = u[i] + tem * e[i];
    g = $sqrt(1.0 + um[0]*um[0] + um[1]*um[1] + um[2]*um[2]);
    for (int i = 0; i < 3; i++) t[i] = tem * b[i] / g;
    t2 = t[0]*t[0] + t[1]*t[1] + t[2]*t[2];
    for (int i = 0; i < 3; i++) s[i] = 2.0 * t[i] / (1.0 + t2);
    up[0] = um[0] + um[1]*t[2] - um[2]*t[1];
    up[1] = um[1] + um[2]*t[0] - um[0]*t[2];
    up[2] = um[2] + um[0]*t[1] - um[1]*t[0];
    un[0] = um[0] + up[1]*s[2] - up[2]*s[1] + tem * e[0];
    un[1] = um[1] + up[2]*s[0] - up[0]*s[2] + tem * e[1];
    un[2] = um[2] + up[0]*s[1] - up[1]*s[0] + tem * e[2];
    gn = $sqrt(1.0 + un[0]*un[0] + un[1]*un[1] + un[2]*un[2]);
    dx = dtdx * un[0] / gn;
    dy = dtdy * un[1] / gn;
    vz = un[2] / gn;
  endfunction

  // split of a move into basic movements: returns their number; for each,
  // the cell offset and the 4 corner currents {x,y,z} (k = 0:(0,0) 1:(0,1)
  // 2:(1,0) 3:(1,1))
  function automatic int ref_split(input real x0, input real y0, input real dx, input real dy,
                                   input real qnx, input real qny, input real qvz,
                                   output int ci[3], output int cj[3], output real jc[3][4][3]);
    real ts[4], tmp, px, py, qx, qy, xs, ys, xe, ye, ddx, ddy, xm, ym, ft, kk;
    int  n, nm;
    n = 0;
    ts[n++] = 0.0;
    if (x0 + dx < 0.0)  ts[n++] = -x0 / dx;
    if (x0 + dx >= 1.0) ts[n++] = (1.0 - x0) / dx;
    if (y0 + dy < 0.0)  ts[n++] = -y0 / dy;
    if (y0 + dy >= 1.0) ts[n++] = (1.0 - y0) / dy;
    if (n == 3 && ts[2] < ts[1]) begin tmp = ts[1]; ts[1] = ts[2]; ts[2] = tmp; end
    ts[n] = 1.0;
    nm = n;
    for (int m = 0; m < 3; m++) begin
      ci[m] = 0; cj[m] = 0;
      for (int k = 0; k < 4; k++) for (int c = 0; c < 3; c++) jc[m][k][c] = 0.0;
    end
    for (int m = 0; m < nm; m++) begin
      px = x0 + ts[m] * dx;   py = y0 + ts[m] * dy;
      qx = x0 + ts[m+1] * dx; qy = y0 + ts[m+1] * dy;
      // the cell is the one holding the movement's midpoint
      ci[m] = $rtoi($floor((px + qx) / 2.0));
      cj[m] = $rtoi($floor((py + qy) / 2.0));
      xs = px - ci[m]; ys = py - cj[m]; xe = qx - ci[m]; ye = qy - cj[m];
      ddx = xe - xs; ddy = ye - ys; xm = (xs + xe) / 2.0; ym = (ys + ye) / 2.0;
      ft = ts[m+1] - ts[m];
      kk = ddx * ddy / 12.0;
      jc[m][0][0] = qnx * ddx * (1.0 - ym);
      jc[m][1][0] = qnx * ddx * ym;
      jc[m][0][1] = qny * ddy * (1.0 - xm);
      jc[m][2][1] = qny * ddy * xm;
      jc[m][0][2] = qvz * ft * ((1.0 - xm) * (1.0 - ym) + kk);
      jc[m][1][2] = qvz * ft * ((1.0 - xm) * ym - kk);
      jc[m][2][2] = qvz * ft * (xm * (1.0 - ym) - kk);
      jc[m][3][2] = qvz * ft * (xm * ym + kk);
    end
    return nm;
  endfunction
endpackage
