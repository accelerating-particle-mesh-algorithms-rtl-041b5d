// advance_lane -- one computing lane of the particle advance compute unit
// (stage 2): interpolates the fields at a particle, pushes it and deposits
// its current into the lane's private current buffer.
//
// A lane takes a particle when issue=1 and ready=1 and then steps through a
// fixed schedule of ADV_II = 6 cycles, so it starts a new particle every 6
// cycles, the initiation interval of the design (the deposit into the local
// current is a load, a multiply-add and a store that must finish before the
// next particle may touch the same cell):
//   phase 0  take the particle (pvalid=0 marks an empty slot of the group)
//   phase 1  present the particle's cell to the field buffer (win_ci/cj)
//   phase 2  window arrives: interpolate E, B and Boris push (registered)
//   phase 3  split the move and compute the 12 boundary currents (registered)
//   phase 4  issue the 12 accumulates; the updated particle is on res_part
//            with res_valid=1
//   phase 5  the current buffer writes the sums
// Cell indices in the tile are local: li = ix - tile_cx0 + GHOST_LO.
// The updated particle keeps its cell index in [0, nx) x [0, ny): a particle
// leaving the grid re-enters on the other side (periodic boundaries, this
// implementation's choice). Out-of-plane current uses qvz = q * vz.
// Some bits of acc_data are zero by construction: the corners that receive
// no Jx or Jy (see vb_deposit) keep the common {Jx, Jy, Jz} word so that all
// 12 current copies are alike.
module advance_lane
  import pic_pkg::*;
(
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           issue,
  input  logic                           pvalid,
  input  part_t                          part,
  output logic                           ready,
  input  logic signed [15:0]             tile_cx0,
  input  logic signed [15:0]             tile_cy0,
  input  logic [15:0]                    nx,
  input  logic [15:0]                    ny,
  input  fx_t                            tem,
  input  fx_t                            dt_dx,
  input  fx_t                            dt_dy,
  input  fx_t                            qnx,
  input  fx_t                            qny,
  input  fx_t                            q,
  output logic [4:0]                     win_ci,
  output logic [4:0]                     win_cj,
  input  emf_t                           win [3][3],
  output logic [NCOPY-1:0]               acc_en,
  output logic [NCOPY-1:0][CADDR_W-1:0]  acc_addr,
  output vec3_t [NCOPY-1:0]              acc_data,
  output logic                           res_valid,
  output part_t                          res_part,
  output logic [1:0]                     res_nmove
);
  logic [2:0] ph;
  part_t      p_q;
  logic       v_q;
  vec3_t      ep, bp, un_c, un_q;
  fx_t        dx_c, dy_c, vz_c, dx_q, dy_q, vz_q;
  logic [NMOVE-1:0]  mv_valid_c, mv_valid_q;
  logic signed [1:0] mv_di_c [NMOVE];
  logic signed [1:0] mv_dj_c [NMOVE];
  logic signed [1:0] mv_di_q [NMOVE];
  logic signed [1:0] mv_dj_q [NMOVE];
  vec3_t      cur_c [NMOVE][NCUR];
  vec3_t      cur_q [NMOVE][NCUR];
  part_t      np_c, np_q;
  int         li, lj;

  assign ready  = (ph == 3'd0);
  assign li     = int'(p_q.ix) - int'(tile_cx0) + GHOST_LO;
  assign lj     = int'(p_q.iy) - int'(tile_cy0) + GHOST_LO;
  assign win_ci = 5'(li);
  assign win_cj = 5'(lj);

  field_interp u_interp (.win(win), .x0(p_q.x), .y0(p_q.y), .ep(ep), .bp(bp));

  boris_pusher u_push (.u(p_q.u), .ep(ep), .bp(bp), .tem(tem), .dt_dx(dt_dx), .dt_dy(dt_dy),
                       .u_new(un_c), .dx(dx_c), .dy(dy_c), .vz(vz_c));

  vb_deposit u_dep (.x0(p_q.x), .y0(p_q.y), .dx(dx_q), .dy(dy_q), .qnx(qnx), .qny(qny),
                    .qvz(fx_mul(q, vz_q)), .mv_valid(mv_valid_c), .mv_di(mv_di_c),
                    .mv_dj(mv_dj_c), .cur(cur_c));

  // new position, cell crossing and periodic wrap
  always_comb begin
    fx_t xn, yn;
    int  ixn, iyn;
    xn  = p_q.x + dx_q;
    yn  = p_q.y + dy_q;
    ixn = int'(p_q.ix);
    iyn = int'(p_q.iy);
    if (xn < 0)            begin xn = xn + FX_ONE; ixn = ixn - 1; end
    else if (xn >= FX_ONE) begin xn = xn - FX_ONE; ixn = ixn + 1; end
    if (yn < 0)            begin yn = yn + FX_ONE; iyn = iyn - 1; end
    else if (yn >= FX_ONE) begin yn = yn - FX_ONE; iyn = iyn + 1; end
    if (ixn < 0)             ixn = ixn + int'(nx);
    else if (ixn >= int'(nx)) ixn = ixn - int'(nx);
    if (iyn < 0)             iyn = iyn + int'(ny);
    else if (iyn >= int'(ny)) iyn = iyn - int'(ny);
    np_c.ix = 16'(ixn);
    np_c.iy = 16'(iyn);
    np_c.x  = xn;
    np_c.y  = yn;
    np_c.u  = un_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph  <= '0;
      v_q <= 1'b0;
    end else begin
      case (ph)
        3'd0: if (issue) begin ph <= 3'd1; v_q <= pvalid; end
        3'd5: ph <= 3'd0;
        default: ph <= ph + 3'd1;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (ph == 3'd0 && issue) p_q <= part;
    if (ph == 3'd2) begin
      un_q <= un_c;
      dx_q <= dx_c;
      dy_q <= dy_c;
      vz_q <= vz_c;
    end
    if (ph == 3'd3) begin
      mv_valid_q <= mv_valid_c;
      mv_di_q    <= mv_di_c;
      mv_dj_q    <= mv_dj_c;
      cur_q      <= cur_c;
      np_q       <= np_c;
    end
  end

  always_comb begin
    for (int m = 0; m < NMOVE; m++) begin
      for (int k = 0; k < NCUR; k++) begin
        int ci, cj;
        ci = li + int'(mv_di_q[m]) + ((k >= 2) ? 1 : 0);
        cj = lj + int'(mv_dj_q[m]) + ((k % 2 == 1) ? 1 : 0);
        acc_en[m*NCUR+k]   = (ph == 3'd4) && v_q && mv_valid_q[m];
        acc_addr[m*NCUR+k] = caddr(ci, cj);
        acc_data[m*NCUR+k] = cur_q[m][k];
      end
    end
  end

  assign res_valid = (ph == 3'd4) && v_q;
  assign res_part  = np_q;
  assign res_nmove = 2'(mv_valid_q[0]) + 2'(mv_valid_q[1]) + 2'(mv_valid_q[2]);

  // a particle handed to the lane must lie inside the tile interior
  a_in_tile: assert property (@(posedge clk) disable iff (!rst_n)
                              (ph == 3'd1 && v_q) |-> (li >= GHOST_LO && li < GHOST_LO + TILE_NX &&
                                                       lj >= GHOST_LO && lj < GHOST_LO + TILE_NX));
endmodule
