// field_interp -- linear interpolation of E and B at a particle position on
// the staggered (Yee) grid.
//
// Inputs are the 3 x 3 neighbourhood of grid points around the particle's
// cell (e_win/b_win[dx][dy] = point (i-1+dx, j-1+dy)) and the position inside
// the cell, x0, y0 in [0,1). Following the staggered grid of the design,
// Ez sits on the cell corner (i, j), Ex and By half a cell along x,
// (i+1/2, j), Ey and Bx half a cell along y, (i, j+1/2), and Bz in the cell
// centre (i+1/2, j+1/2). A component staggered along x is interpolated
// between points ih and ih+1, where ih = i-1 when x0 < 1/2 and i otherwise,
// with weight x0 + 1/2 or x0 - 1/2; an unstaggered one between i and i+1 with
// weight x0. Each component is the bilinear blend of 4 points.
// Purely combinational. The stagger positions follow the grid figure of the
// design; the choice of the ih/jh neighbours is this implementation's.
module field_interp
  import pic_pkg::*;
(
  input  emf_t  win [3][3],
  input  fx_t   x0,
  input  fx_t   y0,
  output vec3_t ep,
  output vec3_t bp
);
  function automatic fx_t bilin(fx_t f00, fx_t f10, fx_t f01, fx_t f11, fx_t wx, fx_t wy);
    fx_t lo, hi;
    lo = fx_mul(f00, FX_ONE - wx) + fx_mul(f10, wx);
    hi = fx_mul(f01, FX_ONE - wx) + fx_mul(f11, wx);
    return fx_mul(lo, FX_ONE - wy) + fx_mul(hi, wy);
  endfunction

  logic xl, yl;      // position in the lower half of the cell
  int   bh, bv;      // window base for staggered x / staggered y
  fx_t  wxh, wyh;    // half-cell shifted weights

  always_comb begin
    xl  = (x0 < FX_HALF);
    yl  = (y0 < FX_HALF);
    bh  = xl ? 0 : 1;
    bv  = yl ? 0 : 1;
    wxh = xl ? x0 + FX_HALF : x0 - FX_HALF;
    wyh = yl ? y0 + FX_HALF : y0 - FX_HALF;
    // Ex, By: staggered in x only
    ep.x = bilin(win[bh][1].e.x, win[bh+1][1].e.x, win[bh][2].e.x, win[bh+1][2].e.x, wxh, y0);
    bp.y = bilin(win[bh][1].b.y, win[bh+1][1].b.y, win[bh][2].b.y, win[bh+1][2].b.y, wxh, y0);
    // Ey, Bx: staggered in y only
    ep.y = bilin(win[1][bv].e.y, win[2][bv].e.y, win[1][bv+1].e.y, win[2][bv+1].e.y, x0, wyh);
    bp.x = bilin(win[1][bv].b.x, win[2][bv].b.x, win[1][bv+1].b.x, win[2][bv+1].b.x, x0, wyh);
    // Ez: on the corner
    ep.z = bilin(win[1][1].e.z, win[2][1].e.z, win[1][2].e.z, win[2][2].e.z, x0, y0);
    // Bz: staggered in both
    bp.z = bilin(win[bh][bv].b.z, win[bh+1][bv].b.z, win[bh][bv+1].b.z, win[bh+1][bv+1].b.z, wxh, wyh);
  end
endmodule
