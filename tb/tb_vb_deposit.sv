// tb_vb_deposit -- random moves inside and across cell edges; the number of
// basic movements, their cells and all 12 corner currents are compared with a
// real-valued split. Counts moves with 1, 2 and 3 basic movements and fails
// if any kind never occurred. Also checks charge conservation of the x/y
// boundary currents: the net flux through the boundaries of every cell must
// equal the change of the charge the cell holds by area weighting.
module tb_vb_deposit;
  import pic_pkg::*;
  import tb_ref_pkg::*;
  fx_t x0, y0, dx, dy, qnx, qny, qvz;
  logic [NMOVE-1:0] mv_valid;
  logic signed [1:0] mv_di [NMOVE];
  logic signed [1:0] mv_dj [NMOVE];
  vec3_t cur [NMOVE][NCUR];
  int checks = 0, failures = 0;
  int nkind [4];

  vb_deposit dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real vcomp(vec3_t v, int c);
    return (c == 0) ? r(v.x) : (c == 1) ? r(v.y) : r(v.z);
  endfunction

  initial begin
    int ci[3], cj[3], nm;
    real jc[3][4][3];
    real jx [-2:3][-2:3];
    real jy [-2:3][-2:3];
    real rho0, rho1, flux;
    int ra, rb;
    nkind = '{0, 0, 0, 0};
    for (int t = 0; t < 3000; t++) begin
      x0 = fx_t'($urandom % (1 << FRAC));
      y0 = fx_t'($urandom % (1 << FRAC));
      ra = $urandom % 1801; rb = $urandom % 1801;
      dx = f((ra - 900) / 1000.0);
      dy = f((rb - 900) / 1000.0);
      qnx = f(1.0); qny = f(1.0); qvz = f(0.3);
      #1;
      nm = ref_split(r(x0), r(y0), r(dx), r(dy), r(qnx), r(qny), r(qvz), ci, cj, jc);
      nkind[nm]++;
      checks++;
      if (mv_valid != NMOVE'((1 << nm) - 1)) begin
        failures++; $display("FAIL moves got %b exp %0d", mv_valid, nm);
      end
      for (int m = 0; m < nm; m++) begin
        checks++;
        if (int'(mv_di[m]) != ci[m] || int'(mv_dj[m]) != cj[m]) begin
          failures++; $display("FAIL cell of move %0d: x0 %f y0 %f dx %f dy %f got %0d,%0d exp %0d,%0d", m, r(x0), r(y0), r(dx), r(dy), mv_di[m], mv_dj[m], ci[m], cj[m]);
        end
        for (int k = 0; k < 4; k++)
          for (int c = 0; c < 3; c++) begin
            checks++;
            if (absr(vcomp(cur[m][k], c) - jc[m][k][c]) > 1e-4) begin
              failures++;
              $display("FAIL m%0d k%0d c%0d got %f exp %f", m, k, c, vcomp(cur[m][k], c), jc[m][k][c]);
            end
          end
      end
      // charge conservation on the RTL's own currents (qnx = qny = 1):
      // node (a,b) holds the area weight (1-|x-a|)(1-|y-b|); Jx(a,b) moves
      // charge from node a to a+1 on row b, Jy(a,b) from row b to b+1.
      for (int a = -2; a <= 3; a++) for (int b = -2; b <= 3; b++) begin jx[a][b] = 0; jy[a][b] = 0; end
      for (int m = 0; m < NMOVE; m++)
        if (mv_valid[m]) begin
          jx[int'(mv_di[m])][int'(mv_dj[m])]   += r(cur[m][0].x);
          jx[int'(mv_di[m])][int'(mv_dj[m]) + 1] += r(cur[m][1].x);
          jy[int'(mv_di[m])][int'(mv_dj[m])]   += r(cur[m][0].y);
          jy[int'(mv_di[m]) + 1][int'(mv_dj[m])] += r(cur[m][2].y);
        end
      for (int a = -1; a <= 3; a++) for (int b = -1; b <= 3; b++) begin
        real ox0, oy0, ox1, oy1;
        ox0 = 1.0 - absr(r(x0) - a);         if (ox0 < 0) ox0 = 0;
        oy0 = 1.0 - absr(r(y0) - b);         if (oy0 < 0) oy0 = 0;
        ox1 = 1.0 - absr(r(x0) + r(dx) - a); if (ox1 < 0) ox1 = 0;
        oy1 = 1.0 - absr(r(y0) + r(dy) - b); if (oy1 < 0) oy1 = 0;
        rho0 = ox0 * oy0; rho1 = ox1 * oy1;
        flux = jx[a][b] - jx[a-1][b] + jy[a][b] - jy[a][b-1];
        checks++;
        if (absr(rho1 - rho0 + flux) > 1e-4) begin
          failures++;
          $display("FAIL continuity at node %0d,%0d: drho %f flux %f", a, b, rho1 - rho0, flux);
        end
      end
    end
    for (int k = 1; k <= 3; k++) begin
      checks++;
      if (nkind[k] == 0) begin failures++; $display("FAIL no move with %0d basic movements", k); end
    end
    $display("moves with 1/2/3 basic movements: %0d %0d %0d", nkind[1], nkind[2], nkind[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
