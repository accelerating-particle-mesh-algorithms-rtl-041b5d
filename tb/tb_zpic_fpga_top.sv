// tb_zpic_fpga_top -- end-to-end test of the FPGA time step: particle
// advance, then particle sort, with the top at its default parameters
// (2 lanes, 400 tile counters) on a 50 x 50 grid of 2 x 2 tiles.
//
// Global memory is three behavioural memories: fields and current, the
// particle array (with the sort's scratch area) read and written LANES
// particles wide, and one 32-bit index memory holding tile_offset,
// target_idx and source_idx. The two compute units never run at the same
// time, so their channels to the particle and index memories are simply
// multiplexed by which unit is requesting, and read data goes to the
// advance unit until adv_done and to the sort unit after it (the sort unit
// uses word 0 of the wide particle port).
//
// Two time steps are run, the second with memories that withhold grants at
// random. For each step the testbench keeps a real-valued model: when
// adv_done rises it compares every particle (in place) and every point of
// the current array with the model; when done rises it checks that the
// particles are sorted by tile, that tile_offset is right and that the set
// of particles is the one the advance produced. The current array is reset
// by the testbench between steps, as the host does after reducing it.
//
// Mechanisms counted (each must occur at least once): memory stalls; a
// partial particle group (write mask); an empty tile; one-, two- and
// three-movement current splits; current deposited into ghost points;
// periodic wrap; out-of-order particles and the exchange; adv_done before
// done (the host may take the current while the sort runs).
module tb_zpic_fpga_top;
  import pic_pkg::*;
  import tb_ref_pkg::*;
  localparam int LANES = 2;
  localparam int NX = 50, NY = 50, NTX = 2, NTY = 2, NT = 4;
  localparam int ROW = NX + 3, NPTS = ROW * (NY + 3);
  localparam int LAT = 4;
  localparam int MAXP = 256;
  localparam int PBASE = 0, TBASE = 256;                    // particle memory
  localparam int OBASE = 0, GBASE = 8, SBASE = 8 + MAXP;    // index memory
  localparam real TEM = -0.035, DTD = 0.6, Q = -0.5;

  logic clk = 0, rst_n = 1, start = 0, stall = 0;
  logic busy, adv_done, done;
  logic [31:0] np;
  logic a_toff_req, a_toff_gnt, a_toff_rvalid;  logic [31:0] a_toff_addr, a_toff_rdata;
  logic a_fld_req, a_fld_gnt, a_fld_rvalid;     logic [31:0] a_fld_addr;  emf_t a_fld_rdata;
  logic a_prd_req, a_prd_gnt, a_prd_rvalid;     logic [31:0] a_prd_addr;  part_t [LANES-1:0] a_prd_rdata;
  logic a_pwr_req, a_pwr_gnt;                   logic [31:0] a_pwr_addr;  logic [LANES-1:0] a_pwr_mask;
  part_t [LANES-1:0] a_pwr_data;
  logic a_jrd_req, a_jrd_gnt, a_jrd_rvalid;     logic [31:0] a_jrd_addr;  vec3_t a_jrd_rdata;
  logic a_jwr_req, a_jwr_gnt;                   logic [31:0] a_jwr_addr;  vec3_t a_jwr_data;
  logic s_prd_req, s_prd_gnt, s_prd_rvalid;     logic [31:0] s_prd_addr;  part_t s_prd_rdata;
  logic s_pwr_req, s_pwr_gnt;                   logic [31:0] s_pwr_addr;  part_t s_pwr_data;
  logic s_idx_req, s_idx_we, s_idx_gnt, s_idx_rvalid;
  logic [31:0] s_idx_addr, s_idx_wdata, s_idx_rdata;
  logic [31:0] adv_cycles, sort_cycles, n_groups, n_ooo;

  zpic_fpga_top dut (
    .clk, .rst_n, .start, .busy, .adv_done, .done,
    .nx(16'(NX)), .ny(16'(NY)), .ntx(16'(NTX)), .nty(16'(NTY)), .np,
    .tem(f(TEM)), .dt_dx(f(DTD)), .dt_dy(f(DTD)), .qnx(f(1.0)), .qny(f(1.0)), .q(f(Q)),
    .fld_base(32'd0), .j_base(32'd0), .part_base(32'(PBASE)), .tmp_base(32'(TBASE)),
    .toff_base(32'(OBASE)), .tgt_base(32'(GBASE)), .src_base(32'(SBASE)),
    .a_toff_req, .a_toff_addr, .a_toff_gnt, .a_toff_rvalid, .a_toff_rdata,
    .a_fld_req, .a_fld_addr, .a_fld_gnt, .a_fld_rvalid, .a_fld_rdata,
    .a_prd_req, .a_prd_addr, .a_prd_gnt, .a_prd_rvalid, .a_prd_rdata,
    .a_pwr_req, .a_pwr_addr, .a_pwr_mask, .a_pwr_data, .a_pwr_gnt,
    .a_jrd_req, .a_jrd_addr, .a_jrd_gnt, .a_jrd_rvalid, .a_jrd_rdata,
    .a_jwr_req, .a_jwr_addr, .a_jwr_data, .a_jwr_gnt,
    .s_prd_req, .s_prd_addr, .s_prd_gnt, .s_prd_rvalid, .s_prd_rdata,
    .s_pwr_req, .s_pwr_addr, .s_pwr_data, .s_pwr_gnt,
    .s_idx_req, .s_idx_we, .s_idx_addr, .s_idx_wdata, .s_idx_gnt, .s_idx_rvalid, .s_idx_rdata,
    .adv_cycles, .sort_cycles, .n_groups, .n_ooo);

  // fields (read only)
  logic g_unused;
  tb_gmem #(.W(EMF_W), .NW(1), .DEPTH(NPTS), .LAT(LAT)) m_fld (
    .clk, .stall, .rd_req(a_fld_req), .rd_addr(a_fld_addr), .rd_gnt(a_fld_gnt),
    .rd_rvalid(a_fld_rvalid), .rd_rdata(a_fld_rdata), .wr_req(1'b0), .wr_addr(32'd0),
    .wr_mask(1'b0), .wr_data('0), .wr_gnt(g_unused));
  // current
  tb_gmem #(.W(VEC3_W), .NW(1), .DEPTH(NPTS), .LAT(LAT)) m_j (
    .clk, .stall, .rd_req(a_jrd_req), .rd_addr(a_jrd_addr), .rd_gnt(a_jrd_gnt),
    .rd_rvalid(a_jrd_rvalid), .rd_rdata(a_jrd_rdata), .wr_req(a_jwr_req), .wr_addr(a_jwr_addr),
    .wr_mask(1'b1), .wr_data(a_jwr_data), .wr_gnt(a_jwr_gnt));
  // particles: the advance unit's wide channel or word 0 for the sort unit
  logic p_rd_req, p_rd_gnt, p_rd_rvalid, p_wr_req, p_wr_gnt;
  logic [31:0] p_rd_addr, p_wr_addr;
  logic [LANES-1:0] p_wr_mask;
  part_t [LANES-1:0] p_rd_data, p_wr_data;
  assign p_rd_req  = a_prd_req | s_prd_req;
  assign p_rd_addr = s_prd_req ? s_prd_addr : a_prd_addr;
  assign p_wr_req  = a_pwr_req | s_pwr_req;
  assign p_wr_addr = s_pwr_req ? s_pwr_addr : a_pwr_addr;
  assign p_wr_mask = s_pwr_req ? LANES'(1) : a_pwr_mask;
  always_comb begin
    p_wr_data = a_pwr_data;
    if (s_pwr_req) begin p_wr_data = '0; p_wr_data[0] = s_pwr_data; end
  end
  assign a_prd_gnt = p_rd_gnt;  assign s_prd_gnt = p_rd_gnt;
  assign a_pwr_gnt = p_wr_gnt;  assign s_pwr_gnt = p_wr_gnt;
  assign a_prd_rvalid = p_rd_rvalid && !adv_done;  assign s_prd_rvalid = p_rd_rvalid && adv_done;
  assign a_prd_rdata  = p_rd_data;    assign s_prd_rdata  = p_rd_data[0];
  tb_gmem #(.W(PART_W), .NW(LANES), .DEPTH(2 * MAXP), .LAT(LAT)) m_part (
    .clk, .stall, .rd_req(p_rd_req), .rd_addr(p_rd_addr), .rd_gnt(p_rd_gnt),
    .rd_rvalid(p_rd_rvalid), .rd_rdata(p_rd_data), .wr_req(p_wr_req), .wr_addr(p_wr_addr),
    .wr_mask(p_wr_mask), .wr_data(p_wr_data), .wr_gnt(p_wr_gnt));
  // index memory: tile_offset (both units), target_idx, source_idx
  logic i_rd_req, i_rd_gnt, i_rd_rvalid, i_wr_gnt;
  logic [31:0] i_rd_addr, i_rd_data;
  assign i_rd_req  = a_toff_req | (s_idx_req && !s_idx_we);
  assign i_rd_addr = s_idx_req ? s_idx_addr : a_toff_addr;
  assign a_toff_gnt = i_rd_gnt;  assign a_toff_rvalid = i_rd_rvalid && !adv_done;  assign a_toff_rdata = i_rd_data;
  assign s_idx_gnt  = s_idx_we ? i_wr_gnt : i_rd_gnt;
  assign s_idx_rvalid = i_rd_rvalid && adv_done;  assign s_idx_rdata = i_rd_data;
  tb_gmem #(.W(32), .NW(1), .DEPTH(GBASE + 2 * MAXP), .LAT(LAT)) m_idx (
    .clk, .stall, .rd_req(i_rd_req), .rd_addr(i_rd_addr), .rd_gnt(i_rd_gnt),
    .rd_rvalid(i_rd_rvalid), .rd_rdata(i_rd_data), .wr_req(s_idx_req && s_idx_we),
    .wr_addr(s_idx_addr), .wr_mask(1'b1), .wr_data(s_idx_wdata), .wr_gnt(i_wr_gnt));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  // mechanism counters
  int n_stall = 0, n_partial = 0, n_empty = 0, n_mv[1:3] = '{0, 0, 0}, n_ghost = 0, n_wrap = 0,
      n_ooo_tot = 0, n_exch = 0, n_overlap = 0, n_cross = 0;

  always @(posedge clk) begin
    if ((a_prd_req && !a_prd_gnt) || (a_fld_req && !a_fld_gnt) || (a_jrd_req && !a_jrd_gnt) ||
        (s_prd_req && !s_prd_gnt) || (s_idx_req && !s_idx_gnt) || (a_pwr_req && !a_pwr_gnt))
      n_stall++;
    if (a_pwr_req && a_pwr_gnt && a_pwr_mask != '1) n_partial++;
    if (s_pwr_req && s_pwr_gnt && s_pwr_addr >= 32'(TBASE)) n_exch++;
  end

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, real got, real exp, real tol);
    checks++;
    if (absr(got - exp) > tol) begin failures++; $display("FAIL %s got %f exp %f", what, got, exp); end
  endtask

  function automatic real rnd(real m);
    return (($urandom % 20001) / 10000.0 - 1.0) * m;
  endfunction

  function automatic int tile_of(part_t p);
    return (int'(p.iy) / TILE_NX) * NTX + int'(p.ix) / TILE_NX;
  endfunction

  real jref [NPTS][3];
  part_t p0 [MAXP];
  part_t snap [MAXP];
  int toff0 [NT+1];

  // a tile-ordered particle array: tile 1 empty, odd counts, particles near
  // tile edges and at the grid edge moving outwards
  task automatic init_particles(output int n);
    int cnt [NT];
    n = 0;
    cnt[0] = 15 + int'($urandom % 10);
    cnt[1] = 0;
    cnt[2] = 20 + int'($urandom % 10) * 2 + 1;
    cnt[3] = 9 + int'($urandom % 8);
    m_idx.mem[OBASE] = 0;
    for (int t = 0; t < NT; t++) begin
      for (int i = 0; i < cnt[t]; i++) begin
        part_t p;
        int x0, y0;
        x0 = (t % NTX) * TILE_NX;  y0 = (t / NTX) * TILE_NX;
        p.ix = 16'(x0 + int'($urandom % TILE_NX));
        p.iy = 16'(y0 + int'($urandom % TILE_NX));
        p.x  = fx_t'($urandom % (1 << FRAC));
        p.y  = fx_t'($urandom % (1 << FRAC));
        p.u  = '{f(rnd(1.5)), f(rnd(1.5)), f(rnd(1.0))};
        case (i % 4)
          0: begin p.ix = 16'(x0 + (i % 8 == 0 ? 0 : TILE_NX - 1)); p.x = f(i % 8 == 0 ? 0.1 : 0.9);
                   p.u.x = f(i % 8 == 0 ? -1.5 : 1.5); end
          1: begin p.iy = 16'(y0 + (i % 8 == 1 ? 0 : TILE_NX - 1)); p.y = f(i % 8 == 1 ? 0.1 : 0.9);
                   p.u.y = f(i % 8 == 1 ? -1.5 : 1.5); end
          default: ;
        endcase
        m_part.mem[PBASE + n] = p;
        n++;
      end
      m_idx.mem[OBASE + t + 1] = 32'(n);
    end
  endtask

  task automatic check_advance(int n);
    for (int t = 0; t <= NT; t++) toff0[t] = int'(m_idx.mem[OBASE + t]);
    for (int k = 0; k < n; k++) begin
      part_t p, g;
      emf_t w [3][3];
      real e[3], b[3], un[3], rdx, rdy, rvz, xn, yn, jc[3][4][3];
      int ixn, iyn, ci[3], cj[3], nm;
      p = p0[k];
      g = m_part.mem[PBASE + k];
      for (int a = 0; a < 3; a++) for (int bb = 0; bb < 3; bb++)
        w[a][bb] = m_fld.mem[(int'(p.iy) + bb) * ROW + int'(p.ix) + a];
      for (int c = 0; c < 3; c++) begin
        e[c] = ref_interp1(w, r(p.x), r(p.y), c);
        b[c] = ref_interp1(w, r(p.x), r(p.y), c + 3);
      end
      ref_boris('{r(p.u.x), r(p.u.y), r(p.u.z)}, e, b, TEM, DTD, DTD, un, rdx, rdy, rvz);
      xn = r(p.x) + rdx;  yn = r(p.y) + rdy;
      ixn = int'(p.ix) + $rtoi($floor(xn));  iyn = int'(p.iy) + $rtoi($floor(yn));
      if (ixn != int'(p.ix) || iyn != int'(p.iy)) n_cross++;
      if (ixn < 0 || ixn >= NX || iyn < 0 || iyn >= NY) n_wrap++;
      xn = xn - $floor(xn);  yn = yn - $floor(yn);
      ixn = (ixn + NX) % NX;  iyn = (iyn + NY) % NY;
      checks++;
      if (int'(g.ix) != ixn || int'(g.iy) != iyn) begin
        failures++; $display("FAIL particle %0d cell %0d,%0d exp %0d,%0d", k, g.ix, g.iy, ixn, iyn);
      end
      chk("x", r(g.x), xn, 1e-4);
      chk("y", r(g.y), yn, 1e-4);
      chk("ux", r(g.u.x), un[0], 1e-4);
      chk("uy", r(g.u.y), un[1], 1e-4);
      chk("uz", r(g.u.z), un[2], 1e-4);
      nm = ref_split(r(p.x), r(p.y), rdx, rdy, 1.0, 1.0, Q * rvz, ci, cj, jc);
      n_mv[nm]++;
      for (int m = 0; m < nm; m++)
        for (int kk = 0; kk < 4; kk++) begin
          int gx, gy;
          gx = int'(p.ix) + 1 + ci[m] + kk / 2;
          gy = int'(p.iy) + 1 + cj[m] + kk % 2;
          if (gx == 0 || gy == 0 || gx > NX || gy > NY) n_ghost++;
          for (int c = 0; c < 3; c++) jref[gy * ROW + gx][c] += jc[m][kk][c];
        end
    end
    for (int a = 0; a < NPTS; a++) begin
      vec3_t jv;
      jv = m_j.mem[a];
      chk("Jx", r(jv.x), jref[a][0], 1e-3);
      chk("Jy", r(jv.y), jref[a][1], 1e-3);
      chk("Jz", r(jv.z), jref[a][2], 1e-3);
    end
  endtask

  task automatic check_sort(int n);
    int bag [bit [PART_W-1:0]];
    int newc [NT], noff [NT+1], exp_ooo;
    newc = '{default: 0};
    for (int k = 0; k < n; k++) begin
      newc[tile_of(snap[k])]++;
      if (bag.exists(snap[k])) bag[snap[k]]++; else bag[snap[k]] = 1;
    end
    noff[0] = 0;
    for (int t = 0; t < NT; t++) begin
      noff[t+1] = noff[t] + newc[t];
      if (newc[t] == 0) n_empty++;
    end
    exp_ooo = 0;
    for (int k = 0; k < n; k++)
      if (k < noff[tile_of(snap[k])] || k >= noff[tile_of(snap[k]) + 1]) exp_ooo++;
    for (int t = 0; t <= NT; t++) begin
      checks++;
      if (int'(m_idx.mem[OBASE + t]) != noff[t]) begin
        failures++; $display("FAIL tile_offset[%0d] %0d exp %0d", t, m_idx.mem[OBASE + t], noff[t]);
      end
    end
    for (int k = 0; k < n; k++) begin
      part_t p;
      p = m_part.mem[PBASE + k];
      checks += 2;
      if (k < noff[tile_of(p)] || k >= noff[tile_of(p) + 1]) begin
        failures++; $display("FAIL particle %0d outside the section of tile %0d", k, tile_of(p));
      end
      if (!bag.exists(p) || bag[p] == 0) begin
        failures++; $display("FAIL particle %0d was not produced by the advance", k);
      end else bag[p]--;
    end
    checks++;
    if (n_ooo != 32'(exp_ooo)) begin failures++; $display("FAIL n_ooo %0d exp %0d", n_ooo, exp_ooo); end
    n_ooo_tot += int'(n_ooo);
  endtask

  initial begin
    int n, cyc;
    #1 rst_n = 0;
    for (int a = 0; a < NPTS; a++) begin
      emf_t fe;
      fe.e = '{f(rnd(0.5)), f(rnd(0.5)), f(rnd(0.5))};
      fe.b = '{f(rnd(0.5)), f(rnd(0.5)), f(rnd(0.5))};
      m_fld.mem[a] = fe;
    end
    init_particles(n);
    np = 32'(n);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int step = 0; step < 2; step++) begin
      stall = (step == 1);
      for (int a = 0; a < NPTS; a++) begin m_j.mem[a] = '0; jref[a] = '{0.0, 0.0, 0.0}; end
      for (int k = 0; k < n; k++) p0[k] = m_part.mem[PBASE + k];
      if (step == 0) for (int t = 0; t < NT; t++)
        if (m_idx.mem[OBASE + t + 1] == m_idx.mem[OBASE + t]) n_empty++;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      cyc = 0;
      while (!adv_done) begin @(posedge clk); cyc++; end
      #1;
      for (int k = 0; k < n; k++) snap[k] = m_part.mem[PBASE + k];
      check_advance(n);
      while (!done) begin @(posedge clk); cyc++; if (adv_done && !done) n_overlap++; end
      repeat (2) @(posedge clk);
      check_sort(n);
      $display("step %0d: %0d particles, %0d cycles (advance %0d, sort %0d), %0d groups, %0d out of order",
               step, n, cyc, adv_cycles, sort_cycles, n_groups, n_ooo);
    end
    n_stall = int'(m_part.stalls + m_fld.stalls + m_j.stalls + m_idx.stalls);
    $display("mechanisms: stalls %0d, partial groups %0d, empty tiles %0d, moves 1/2/3 %0d/%0d/%0d,",
             n_stall, n_partial, n_empty, n_mv[1], n_mv[2], n_mv[3]);
    $display("  cell crossings %0d, ghost deposits %0d, wraps %0d, out of order %0d, exchange writes %0d, overlap cycles %0d",
             n_cross, n_ghost, n_wrap, n_ooo_tot, n_exch, n_overlap);
    foreach (n_mv[i]) begin
      checks++;
      if (n_mv[i] == 0) begin failures++; $display("FAIL no %0d-movement split seen", i); end
    end
    checks += 9;
    if (n_stall == 0)   begin failures++; $display("FAIL no memory stall"); end
    if (n_partial == 0) begin failures++; $display("FAIL no partial particle group"); end
    if (n_empty == 0)   begin failures++; $display("FAIL no empty tile"); end
    if (n_cross == 0)   begin failures++; $display("FAIL no cell crossing"); end
    if (n_ghost == 0)   begin failures++; $display("FAIL no ghost deposit"); end
    if (n_wrap == 0)    begin failures++; $display("FAIL no periodic wrap"); end
    if (n_ooo_tot == 0) begin failures++; $display("FAIL no out-of-order particle"); end
    if (n_exch == 0)    begin failures++; $display("FAIL no exchange"); end
    if (n_overlap == 0) begin failures++; $display("FAIL adv_done never ahead of done"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
