// tb_particle_sort_cu -- sorts a particle array of 3 x 3 tiles (75 x 75
// cells) whose particles were in tile order before a random fraction moved
// to a neighbouring tile (one tile left empty, moves wrap periodically).
// Checks afterwards: tile_offset in global memory is the prefix sum of the
// new tile counts; every particle sits inside the section of its tile; the
// set of particles is unchanged; n_ooo equals the number of particles that
// were outside their tile's new section. The first run has memories that
// always grant and checks that counting and registering take about one
// cycle per particle (plus two per out-of-order particle for the index
// writes of registration) and that each of the two exchange passes moves
// one particle per cycle; the second run stalls the memories at random.
module tb_particle_sort_cu;
  import pic_pkg::*;
  localparam int NTX = 3, NT = 9, NCELL = 75, MAXP = 400;
  localparam int PBASE = 0, TBASE = 512;                 // particle memory
  localparam int OBASE = 0, GBASE = 16, SBASE = 16 + 512; // index memory
  localparam int LAT = 3;

  logic clk = 0, rst_n = 1, start = 0, busy, done, stall = 0;
  logic [31:0] np;
  logic prd_req, prd_gnt, prd_rvalid, pwr_req, pwr_gnt;
  logic [31:0] prd_addr, pwr_addr;
  part_t prd_rdata, pwr_data;
  logic idx_req, idx_we, idx_gnt, idx_rvalid, rg, wg;
  logic [31:0] idx_addr, idx_wdata, idx_rdata;
  logic [31:0] n_ooo, cyc_count, cyc_reg, cyc_exch;

  particle_sort_cu dut (
    .clk, .rst_n, .start, .busy, .done, .np, .ntx(16'(NTX)), .n_tiles(16'(NT)),
    .part_base(32'(PBASE)), .tmp_base(32'(TBASE)), .toff_base(32'(OBASE)),
    .tgt_base(32'(GBASE)), .src_base(32'(SBASE)),
    .prd_req, .prd_addr, .prd_gnt, .prd_rvalid, .prd_rdata,
    .pwr_req, .pwr_addr, .pwr_data, .pwr_gnt,
    .idx_req, .idx_we, .idx_addr, .idx_wdata, .idx_gnt, .idx_rvalid, .idx_rdata,
    .n_ooo, .cyc_count, .cyc_reg, .cyc_exch);

  tb_gmem #(.W(PART_W), .NW(1), .DEPTH(1024), .LAT(LAT)) m_part (
    .clk, .stall, .rd_req(prd_req), .rd_addr(prd_addr), .rd_gnt(prd_gnt),
    .rd_rvalid(prd_rvalid), .rd_rdata(prd_rdata), .wr_req(pwr_req), .wr_addr(pwr_addr),
    .wr_mask(1'b1), .wr_data(pwr_data), .wr_gnt(pwr_gnt));
  // one index memory; the request goes to its read or write channel
  tb_gmem #(.W(32), .NW(1), .DEPTH(1100), .LAT(LAT)) m_idx (
    .clk, .stall, .rd_req(idx_req && !idx_we), .rd_addr(idx_addr), .rd_gnt(rg),
    .rd_rvalid(idx_rvalid), .rd_rdata(idx_rdata), .wr_req(idx_req && idx_we),
    .wr_addr(idx_addr), .wr_mask(1'b1), .wr_data(idx_wdata), .wr_gnt(wg));
  assign idx_gnt = idx_we ? wg : rg;

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int tile_of(part_t p);
    return (int'(p.iy) / TILE_NX) * NTX + int'(p.ix) / TILE_NX;
  endfunction

  initial begin
    int oldc [NT], newc [NT], noff [NT+1], k, nmoved, exp_ooo, cyc;
    int bag [bit [PART_W-1:0]];
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      stall = (run == 1);
      bag.delete();
      // sorted array, then moves
      k = 0;
      for (int t = 0; t < NT; t++) begin
        oldc[t] = (t == 4) ? 0 : 10 + int'($urandom % 30);
        for (int n = 0; n < oldc[t]; n++) begin
          part_t p;
          p.ix = 16'((t % NTX) * TILE_NX + int'($urandom % TILE_NX));
          p.iy = 16'((t / NTX) * TILE_NX + int'($urandom % TILE_NX));
          p.x = fx_t'($urandom % (1 << FRAC));
          p.y = fx_t'($urandom % (1 << FRAC));
          p.u = '{fx_t'($urandom), fx_t'($urandom), fx_t'(k)};
          m_part.mem[PBASE + k] = p;
          k++;
        end
      end
      np = 32'(k);
      nmoved = 0;
      for (int i = 0; i < k; i++) begin
        part_t p;
        p = m_part.mem[PBASE + i];
        if ($urandom % 100 < 20) begin
          int dx, dy;
          dx = int'($urandom % 3) * TILE_NX - TILE_NX;
          dy = int'($urandom % 3) * TILE_NX - TILE_NX;
          p.ix = 16'((int'(p.ix) + dx + NCELL) % NCELL);
          p.iy = 16'((int'(p.iy) + dy + NCELL) % NCELL);
          if (tile_of(p) == 4) p.ix = 16'((int'(p.ix) + TILE_NX) % NCELL);   // keep tile 4 empty
          nmoved++;
        end
        m_part.mem[PBASE + i] = p;
        if (bag.exists(p)) bag[p]++; else bag[p] = 1;
      end
      // expected new offsets and out-of-order count
      newc = '{default: 0};
      for (int i = 0; i < k; i++) newc[tile_of(m_part.mem[PBASE + i])]++;
      noff[0] = 0;
      for (int t = 0; t < NT; t++) noff[t+1] = noff[t] + newc[t];
      exp_ooo = 0;
      for (int i = 0; i < k; i++) begin
        int tt;
        tt = tile_of(m_part.mem[PBASE + i]);
        if (i < noff[tt] || i >= noff[tt+1]) exp_ooo++;
      end

      @(negedge clk); start = 1; @(negedge clk); start = 0;
      cyc = 0;
      while (!done) begin @(posedge clk); cyc++; end
      repeat (2) @(posedge clk);

      for (int t = 0; t <= NT; t++) begin
        checks++;
        if (int'(m_idx.mem[OBASE + t]) != noff[t]) begin
          failures++; $display("FAIL tile_offset[%0d] %0d exp %0d", t, m_idx.mem[OBASE + t], noff[t]);
        end
      end
      for (int i = 0; i < k; i++) begin
        part_t p;
        int tt;
        p = m_part.mem[PBASE + i];
        tt = tile_of(p);
        checks += 2;
        if (i < noff[tt] || i >= noff[tt+1]) begin
          failures++; $display("FAIL particle %0d of tile %0d outside its section", i, tt);
        end
        if (!bag.exists(p) || bag[p] == 0) begin
          failures++; $display("FAIL particle %0d not in the original set", i);
        end else bag[p]--;
      end
      checks++;
      if (n_ooo != 32'(exp_ooo)) begin failures++; $display("FAIL n_ooo %0d exp %0d", n_ooo, exp_ooo); end
      $display("run %0d: np %0d moved %0d ooo %0d; %0d cycles: count %0d reg %0d exch %0d", run, k,
               nmoved, n_ooo, cyc, cyc_count, cyc_reg, cyc_exch);
      if (run == 0) begin
        checks += 3;
        if (cyc_exch > 2 * (exp_ooo + 2 * NT + 2 * LAT + 8)) begin
          failures++; $display("FAIL exchange slower than one particle per cycle per pass");
        end
        if (cyc_count > k + 2 * NT + 2 * LAT + 8) begin
          failures++; $display("FAIL counting slower than one particle per cycle");
        end
        if (cyc_reg > k + 2 * exp_ooo + NT + 2 * LAT + 8) begin
          failures++; $display("FAIL registering slower than one particle per cycle");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
