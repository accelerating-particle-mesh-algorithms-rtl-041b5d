// tb_particle_advance_cu -- runs the particle advance compute unit over a
// 50 x 50 grid (2 x 2 tiles, one of them empty) against behavioural global
// memories, and compares every updated particle and every point of the
// global current with a real-valued model of the whole advance (field
// interpolation, Boris push, periodic wrap, split deposit added to the prior
// current). The first run has memories that always grant and checks the
// stage timing (one grid point per cycle in stages 1 and 3, one particle
// group per 6 cycles in stage 2); the second run stalls the memories at
// random and checks the results only.
module tb_particle_advance_cu;
  import pic_pkg::*;
  import tb_ref_pkg::*;
  localparam int LANES = 2;
  localparam int NX = 50, NY = 50, ROW = NX + 3, NPTS = ROW * (NY + 3);
  localparam int LAT = 3;
  localparam real TEM = -0.035, DTD = 0.6, Q = -0.5;

  logic clk = 0, rst_n = 1, start = 0, busy, done, stall = 0;
  logic toff_req, toff_gnt, toff_rvalid;  logic [31:0] toff_addr, toff_rdata;
  logic fld_req, fld_gnt, fld_rvalid;     logic [31:0] fld_addr;  emf_t fld_rdata;
  logic prd_req, prd_gnt, prd_rvalid;     logic [31:0] prd_addr;  part_t [LANES-1:0] prd_rdata;
  logic pwr_req, pwr_gnt;                 logic [31:0] pwr_addr;  logic [LANES-1:0] pwr_mask;
  part_t [LANES-1:0] pwr_data;
  logic jrd_req, jrd_gnt, jrd_rvalid;     logic [31:0] jrd_addr;  vec3_t jrd_rdata;
  logic jwr_req, jwr_gnt;                 logic [31:0] jwr_addr;  vec3_t jwr_data;
  logic [31:0] cyc_load, cyc_adv, cyc_store, n_groups;
  logic unused_g0, unused_g1, unused_v;
  logic [31:0] unused_d;

  particle_advance_cu dut (
    .clk, .rst_n, .start, .busy, .done, .nx(16'(NX)), .ny(16'(NY)), .ntx(16'd2), .nty(16'd2),
    .tem(f(TEM)), .dt_dx(f(DTD)), .dt_dy(f(DTD)), .qnx(f(1.0)), .qny(f(1.0)), .q(f(Q)),
    .fld_base(32'd0), .j_base(32'd0), .part_base(32'd0), .toff_base(32'd0),
    .toff_req, .toff_addr, .toff_gnt, .toff_rvalid, .toff_rdata,
    .fld_req, .fld_addr, .fld_gnt, .fld_rvalid, .fld_rdata,
    .prd_req, .prd_addr, .prd_gnt, .prd_rvalid, .prd_rdata,
    .pwr_req, .pwr_addr, .pwr_mask, .pwr_data, .pwr_gnt,
    .jrd_req, .jrd_addr, .jrd_gnt, .jrd_rvalid, .jrd_rdata,
    .jwr_req, .jwr_addr, .jwr_data, .jwr_gnt,
    .cyc_load, .cyc_adv, .cyc_store, .n_groups);

  tb_gmem #(.W(32), .NW(1), .DEPTH(8), .LAT(LAT)) m_toff (
    .clk, .stall, .rd_req(toff_req), .rd_addr(toff_addr), .rd_gnt(toff_gnt),
    .rd_rvalid(toff_rvalid), .rd_rdata(toff_rdata), .wr_req(1'b0), .wr_addr(32'd0),
    .wr_mask(1'b0), .wr_data(32'd0), .wr_gnt(unused_g0));
  tb_gmem #(.W(EMF_W), .NW(1), .DEPTH(NPTS), .LAT(LAT)) m_fld (
    .clk, .stall, .rd_req(fld_req), .rd_addr(fld_addr), .rd_gnt(fld_gnt),
    .rd_rvalid(fld_rvalid), .rd_rdata(fld_rdata), .wr_req(1'b0), .wr_addr(32'd0),
    .wr_mask(1'b0), .wr_data('0), .wr_gnt(unused_g1));
  tb_gmem #(.W(PART_W), .NW(LANES), .DEPTH(64), .LAT(LAT)) m_part (
    .clk, .stall, .rd_req(prd_req), .rd_addr(prd_addr), .rd_gnt(prd_gnt),
    .rd_rvalid(prd_rvalid), .rd_rdata(prd_rdata), .wr_req(pwr_req), .wr_addr(pwr_addr),
    .wr_mask(pwr_mask), .wr_data(pwr_data), .wr_gnt(pwr_gnt));
  tb_gmem #(.W(VEC3_W), .NW(1), .DEPTH(NPTS), .LAT(LAT)) m_j (
    .clk, .stall, .rd_req(jrd_req), .rd_addr(jrd_addr), .rd_gnt(jrd_gnt),
    .rd_rvalid(jrd_rvalid), .rd_rdata(jrd_rdata), .wr_req(jwr_req), .wr_addr(jwr_addr),
    .wr_mask(1'b1), .wr_data(jwr_data), .wr_gnt(jwr_gnt));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cnt [4];
  part_t p0 [64];
  real jref [NPTS][3];

  task automatic chk(string what, real got, real exp, real tol);
    checks++;
    if (absr(got - exp) > tol) begin failures++; $display("FAIL %s got %f exp %f", what, got, exp); end
  endtask

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real rnd(real m);
    return (($urandom % 20001) / 10000.0 - 1.0) * m;
  endfunction

  task automatic setup();
    int k;
    cnt[0] = 5 + int'($urandom % 6);
    cnt[1] = 0;                                   // an empty tile
    cnt[2] = 4 + int'($urandom % 9);
    cnt[3] = 1 + int'($urandom % 6);
    for (int a = 0; a < NPTS; a++) begin
      emf_t fe;
      vec3_t jv;
      fe.e = '{f(rnd(0.5)), f(rnd(0.5)), f(rnd(0.5))};
      fe.b = '{f(rnd(0.5)), f(rnd(0.5)), f(rnd(0.5))};
      jv = '{f(rnd(1.0)), f(rnd(1.0)), f(rnd(1.0))};
      m_fld.mem[a] = fe;
      m_j.mem[a]   = jv;
      jref[a]      = '{r(m_j.mem[a][95:64]), r(m_j.mem[a][63:32]), r(m_j.mem[a][31:0])};
    end
    k = 0;
    m_toff.mem[0] = 0;
    for (int t = 0; t < 4; t++) begin
      for (int n = 0; n < cnt[t]; n++) begin
        part_t p;
        p.ix = 16'((t % 2) * 25 + $urandom % 25);
        p.iy = 16'((t / 2) * 25 + $urandom % 25);
        if (n == 0) begin p.ix = 16'((t % 2) * 25); p.iy = 16'((t / 2) * 25); end  // at the tile corner
        p.x = fx_t'($urandom % (1 << FRAC));
        p.y = fx_t'($urandom % (1 << FRAC));
        p.u = '{f(rnd(1.5)), f(rnd(1.5)), f(rnd(1.0))};
        if (n == 0) begin p.x = f(0.05); p.y = f(0.05); p.u = '{f(-1.5), f(-1.5), f(0.0)}; end
        p0[k] = p;
        m_part.mem[k] = p;
        k++;
      end
      m_toff.mem[t+1] = 32'(k);
    end
  endtask

  task automatic check_results();
    int k;
    k = 0;
    for (int t = 0; t < 4; t++)
      for (int n = 0; n < cnt[t]; n++) begin
        part_t p, g;
        emf_t w [3][3];
        real e[3], b[3], un[3], rdx, rdy, rvz, xn, yn, jc[3][4][3];
        int ixn, iyn, ci[3], cj[3], nm;
        p = p0[k];
        g = m_part.mem[k];
        for (int a = 0; a < 3; a++) for (int bb = 0; bb < 3; bb++)
          w[a][bb] = m_fld.mem[(int'(p.iy) + bb) * ROW + int'(p.ix) + a];
        for (int c = 0; c < 3; c++) begin
          e[c] = ref_interp1(w, r(p.x), r(p.y), c);
          b[c] = ref_interp1(w, r(p.x), r(p.y), c + 3);
        end
        ref_boris('{r(p.u.x), r(p.u.y), r(p.u.z)}, e, b, TEM, DTD, DTD, un, rdx, rdy, rvz);
        xn = r(p.x) + rdx; yn = r(p.y) + rdy;
        ixn = int'(p.ix) + $rtoi($floor(xn)); iyn = int'(p.iy) + $rtoi($floor(yn));
        xn = xn - $floor(xn); yn = yn - $floor(yn);
        ixn = (ixn + NX) % NX; iyn = (iyn + NY) % NY;
        checks++;
        if (int'(g.ix) != ixn || int'(g.iy) != iyn) begin
          failures++; $display("FAIL particle %0d cell %0d,%0d exp %0d,%0d", k, g.ix, g.iy, ixn, iyn);
        end
        chk("x", r(g.x), xn, 1e-4);
        chk("y", r(g.y), yn, 1e-4);
        chk("ux", r(g.u.x), un[0], 1e-4);
        chk("uy", r(g.u.y), un[1], 1e-4);
        nm = ref_split(r(p.x), r(p.y), rdx, rdy, 1.0, 1.0, Q * rvz, ci, cj, jc);
        for (int m = 0; m < nm; m++)
          for (int kk = 0; kk < 4; kk++) begin
            int gx, gy;
            gx = int'(p.ix) + 1 + ci[m] + kk / 2;
            gy = int'(p.iy) + 1 + cj[m] + kk % 2;
            for (int c = 0; c < 3; c++) jref[gy * ROW + gx][c] += jc[m][kk][c];
          end
        k++;
      end
    for (int a = 0; a < NPTS; a++) begin
      chk("Jx", r(m_j.mem[a][95:64]), jref[a][0], 1e-3);
      chk("Jy", r(m_j.mem[a][63:32]), jref[a][1], 1e-3);
      chk("Jz", r(m_j.mem[a][31:0]), jref[a][2], 1e-3);
    end
  endtask

  initial begin
    int ngrp, cyc;
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      stall = (run == 1);
      setup();
      ngrp = 0;
      for (int t = 0; t < 4; t++) ngrp += (cnt[t] + LANES - 1) / LANES;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      cyc = 0;
      while (!done) begin @(posedge clk); cyc++; end
      repeat (2) @(posedge clk);
      check_results();
      checks++;
      if (n_groups != 32'(ngrp)) begin failures++; $display("FAIL groups %0d exp %0d", n_groups, ngrp); end
      $display("run %0d: %0d cycles, load %0d adv %0d store %0d, %0d groups", run, cyc, cyc_load,
               cyc_adv, cyc_store, n_groups);
      if (run == 0) begin
        checks += 3;
        if (cyc_load < 4 * TILE_CELLS || cyc_load > 4 * (TILE_CELLS + LAT + 3)) begin
          failures++; $display("FAIL load stage not one point per cycle");
        end
        if (cyc_adv < ADV_II * ngrp || cyc_adv > ADV_II * ngrp + 4 * (2 * LAT + 12)) begin
          failures++; $display("FAIL advance stage not one group per %0d cycles", ADV_II);
        end
        if (cyc_store < 4 * TILE_CELLS || cyc_store > 4 * (TILE_CELLS + LAT + 6)) begin
          failures++; $display("FAIL store stage not one point per cycle");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
