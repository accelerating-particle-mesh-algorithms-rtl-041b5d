// vb_deposit -- charge-conserving current deposit (Villasenor-Buneman) of
// one particle move, split into up to NMOVE = 3 basic movements.
//
// Position inside the start cell (x0, y0) in [0,1), displacement (dx, dy)
// in cell units with |dx|, |dy| < 1 (Courant condition). When the particle
// crosses a cell edge the motion is cut at the crossing, so each basic
// movement stays inside one cell: 1 movement without a crossing, 2 with one,
// 3 when it crosses both an x and a y edge (ordered by crossing time).
// mv_valid[m] says whether movement m exists; (mv_di[m], mv_dj[m]) in
// {-1,0,1} is its cell relative to the start cell.
//
// For a movement from (xs, ys) to (xs+ddx, ys+ddy) inside its cell, with the
// midpoint (xm, ym), the charge crossing each boundary is (the design's
// equations written with the local origin at the cell centre):
//   Jx1 = qnx*ddx*(1-ym)  Jx2 = qnx*ddx*ym  Jy1 = qny*ddy*(1-xm)  Jy2 = qny*ddy*xm
// The out-of-plane current is qvz times the fraction of the time step spent
// in the movement times the time-averaged area weight of each corner
// (bilinear weight at the midpoint -/+ ddx*ddy/12); this Jz rule is this
// implementation's choice.
// The four cells of movement m go to cur[m][k]:
//   k=0: cell (0,0) {Jx1, Jy1, Jz00}   k=1: cell (0,1) {Jx2, 0, Jz01}
//   k=2: cell (1,0) {0, Jy2, Jz10}     k=3: cell (1,1) {0, 0, Jz11}
// relative to the movement's cell, so each of the 12 (m, k) values can go to
// its own copy of the current buffer. All three movements are always
// computed; mv_valid selects them. Purely combinational.
// Outputs that are constant by construction, kept so that every movement and
// corner has the same {Jx, Jy, Jz} layout: the zero entries of the table
// above (x of k=2 and k=3, y of k=1 and k=3, for each movement), mv_valid[0]
// (the first movement always exists) and the offsets of movement 0, which
// starts in the particle's own cell.
module vb_deposit
  import pic_pkg::*;
(
  input  fx_t                x0,
  input  fx_t                y0,
  input  fx_t                dx,
  input  fx_t                dy,
  input  fx_t                qnx,
  input  fx_t                qny,
  input  fx_t                qvz,
  output logic [NMOVE-1:0]   mv_valid,
  output logic signed [1:0]  mv_di [NMOVE],
  output logic signed [1:0]  mv_dj [NMOVE],
  output vec3_t              cur   [NMOVE][NCUR]
);
  typedef struct packed {
    fx_t x;
    fx_t y;
    fx_t t;
  } pt_t;

  fx_t  x1, y1, xb, yb, tx, ty;
  logic cx, cy, xfirst;
  logic signed [1:0] di, dj;
  pt_t  p0, px, py, p1;
  pt_t  ps [NMOVE];
  pt_t  pe [NMOVE];

  function automatic void seg_cur(input pt_t a, input pt_t b, input logic signed [1:0] ci,
                                  input logic signed [1:0] cj, input fx_t qx, input fx_t qy,
                                  input fx_t qz, output vec3_t c [NCUR]);
    fx_t xs, ys, ddx, ddy, xm, ym, ft, k, qf;
    xs  = a.x - (fx_t'(ci) <<< FRAC);
    ys  = a.y - (fx_t'(cj) <<< FRAC);
    ddx = b.x - a.x;
    ddy = b.y - a.y;
    xm  = xs + (ddx >>> 1);
    ym  = ys + (ddy >>> 1);
    ft  = b.t - a.t;
    k   = fx_div(fx_mul(ddx, ddy), 32'sd12 <<< FRAC);
    qf  = fx_mul(qz, ft);
    c[0].x = fx_mul(fx_mul(qx, ddx), FX_ONE - ym);
    c[0].y = fx_mul(fx_mul(qy, ddy), FX_ONE - xm);
    c[0].z = fx_mul(qf, fx_mul(FX_ONE - xm, FX_ONE - ym) + k);
    c[1].x = fx_mul(fx_mul(qx, ddx), ym);
    c[1].y = '0;
    c[1].z = fx_mul(qf, fx_mul(FX_ONE - xm, ym) - k);
    c[2].x = '0;
    c[2].y = fx_mul(fx_mul(qy, ddy), xm);
    c[2].z = fx_mul(qf, fx_mul(xm, FX_ONE - ym) - k);
    c[3].x = '0;
    c[3].y = '0;
    c[3].z = fx_mul(qf, fx_mul(xm, ym) + k);
  endfunction

  always_comb begin
    x1 = x0 + dx;
    y1 = y0 + dy;
    cx = (x1 < 0) || (x1 >= FX_ONE);
    cy = (y1 < 0) || (y1 >= FX_ONE);
    di = cx ? ((x1 < 0) ? -2'sd1 : 2'sd1) : 2'sd0;
    dj = cy ? ((y1 < 0) ? -2'sd1 : 2'sd1) : 2'sd0;
    xb = (x1 < 0) ? '0 : FX_ONE;
    yb = (y1 < 0) ? '0 : FX_ONE;
    tx = cx ? fx_div(xb - x0, dx) : FX_ONE;
    ty = cy ? fx_div(yb - y0, dy) : FX_ONE;
    xfirst = cx && (!cy || tx <= ty);

    p0 = '{x: x0, y: y0, t: '0};
    p1 = '{x: x1, y: y1, t: FX_ONE};
    px = '{x: xb, y: y0 + fx_mul(tx, dy), t: tx};
    py = '{x: x0 + fx_mul(ty, dx), y: yb, t: ty};

    mv_valid = '0;
    for (int m = 0; m < NMOVE; m++) begin
      ps[m] = p0; pe[m] = p1; mv_di[m] = '0; mv_dj[m] = '0;
    end
    mv_valid[0] = 1'b1;
    if (cx && cy) begin
      mv_valid = 3'b111;
      ps[0] = p0;                   pe[0] = xfirst ? px : py;
      ps[1] = xfirst ? px : py;     pe[1] = xfirst ? py : px;
      ps[2] = xfirst ? py : px;     pe[2] = p1;
      mv_di[1] = xfirst ? di : 2'sd0;
      mv_dj[1] = xfirst ? 2'sd0 : dj;
      mv_di[2] = di;
      mv_dj[2] = dj;
    end else if (cx) begin
      mv_valid = 3'b011;
      pe[0] = px;
      ps[1] = px;
      mv_di[1] = di;
    end else if (cy) begin
      mv_valid = 3'b011;
      pe[0] = py;
      ps[1] = py;
      mv_dj[1] = dj;
    end
    for (int m = 0; m < NMOVE; m++)
      seg_cur(ps[m], pe[m], mv_di[m], mv_dj[m], qnx, qny, qvz, cur[m]);
  end
endmodule
