// tb_advance_lane -- drives one lane with random particles of a tile whose
// fields are held by the testbench (answering the window port one cycle
// later, like the field buffer). Checks the updated particle and every
// current accumulate (cell and value) against the real-valued references,
// and that the lane accepts a new particle exactly every 6 cycles. The tile
// is the top right one of a 50 x 75 grid, and some particles leave the grid
// there and must wrap to the other side.
module tb_advance_lane;
  import pic_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic issue, pvalid, ready;
  part_t part;
  logic [4:0] win_ci, win_cj;
  emf_t win [3][3];
  logic [NCOPY-1:0] acc_en;
  logic [NCOPY-1:0][CADDR_W-1:0] acc_addr;
  vec3_t [NCOPY-1:0] acc_data;
  logic res_valid;
  part_t res_part;
  logic [1:0] res_nmove;
  emf_t fld [TILE_SIZE][TILE_SIZE];
  int checks = 0, failures = 0;
  localparam real TEM = -0.035, DTD = 0.7, Q = -0.5;

  advance_lane dut (.clk, .rst_n, .issue, .pvalid, .part, .ready,
                    .tile_cx0(16'sd25), .tile_cy0(16'sd50), .nx(16'd50), .ny(16'd75),
                    .tem(f(TEM)), .dt_dx(f(DTD)), .dt_dy(f(DTD)), .qnx(f(1.0)), .qny(f(1.0)),
                    .q(f(Q)), .win_ci, .win_cj, .win, .acc_en, .acc_addr, .acc_data,
                    .res_valid, .res_part, .res_nmove);
  always #5 clk = ~clk;

  always_ff @(posedge clk)
    for (int a = 0; a < 3; a++)
      for (int b = 0; b < 3; b++)
        win[a][b] <= fld[int'(win_ci) - 1 + a][int'(win_cj) - 1 + b];

  task automatic chk(string what, real got, real exp, real tol);
    checks++;
    if (absr(got - exp) > tol) begin failures++; $display("FAIL %s got %f exp %f", what, got, exp); end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  part_t sent [$];
  int    t_issue [$];
  int    cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // result checker
  initial begin
    forever begin
      @(posedge clk);
      if (res_valid) begin
        part_t p;
        emf_t w [3][3];
        real e[3], b[3], un[3], rdx, rdy, rvz, xn, yn, jc[3][4][3];
        int ixn, iyn, li, lj, ci[3], cj[3], nm;
        p = sent.pop_front();
        li = int'(p.ix) - 25 + 1; lj = int'(p.iy) - 50 + 1;
        for (int a = 0; a < 3; a++) for (int bb = 0; bb < 3; bb++) w[a][bb] = fld[li - 1 + a][lj - 1 + bb];
        for (int c = 0; c < 3; c++) begin
          e[c] = ref_interp1(w, r(p.x), r(p.y), c);
          b[c] = ref_interp1(w, r(p.x), r(p.y), c + 3);
        end
        ref_boris('{r(p.u.x), r(p.u.y), r(p.u.z)}, e, b, TEM, DTD, DTD, un, rdx, rdy, rvz);
        xn = r(p.x) + rdx; yn = r(p.y) + rdy;
        ixn = int'(p.ix) + $rtoi($floor(xn)); iyn = int'(p.iy) + $rtoi($floor(yn));
        xn = xn - $floor(xn); yn = yn - $floor(yn);
        ixn = (ixn + 50) % 50; iyn = (iyn + 75) % 75;     // the tile is at the top right grid corner
        checks++;
        if (int'(res_part.ix) != ixn || int'(res_part.iy) != iyn) begin
          failures++; $display("FAIL cell got %0d,%0d exp %0d,%0d", res_part.ix, res_part.iy, ixn, iyn);
        end
        chk("x", r(res_part.x), xn, 1e-4);
        chk("y", r(res_part.y), yn, 1e-4);
        chk("ux", r(res_part.u.x), un[0], 1e-4);
        chk("uz", r(res_part.u.z), un[2], 1e-4);
        nm = ref_split(r(p.x), r(p.y), rdx, rdy, 1.0, 1.0, Q * rvz, ci, cj, jc);
        checks++;
        if (int'(res_nmove) != nm) begin failures++; $display("FAIL nmove %0d exp %0d", res_nmove, nm); end
        for (int m = 0; m < 3; m++)
          for (int k = 0; k < 4; k++) begin
            int c;
            c = m * 4 + k;
            checks++;
            if (acc_en[c] != (m < nm)) begin failures++; $display("FAIL acc_en %0d", c); end
            if (m < nm) begin
              checks++;
              if (acc_addr[c] != caddr(li + ci[m] + k / 2, lj + cj[m] + k % 2)) begin
                failures++; $display("FAIL acc_addr copy %0d", c);
              end
              chk("jx", r(acc_data[c].x), jc[m][k][0], 2e-4);
              chk("jy", r(acc_data[c].y), jc[m][k][1], 2e-4);
              chk("jz", r(acc_data[c].z), jc[m][k][2], 2e-4);
            end
          end
      end
    end
  end

  initial begin
    issue = 0; pvalid = 0; part = '0;
    for (int a = 0; a < TILE_SIZE; a++)
      for (int b = 0; b < TILE_SIZE; b++)
        fld[a][b] = '{'{f(($urandom % 1000) / 1000.0 - 0.5), f(($urandom % 1000) / 1000.0 - 0.5),
                        f(($urandom % 1000) / 1000.0 - 0.5)},
                      '{f(($urandom % 1000) / 1000.0 - 0.5), f(($urandom % 1000) / 1000.0 - 0.5),
                        f(($urandom % 1000) / 1000.0 - 0.5)}};
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      part_t p;
      p.ix = 16'(25 + $urandom % 25);
      p.iy = 16'(50 + $urandom % 25);
      p.x  = fx_t'($urandom % (1 << FRAC));
      p.y  = fx_t'($urandom % (1 << FRAC));
      p.u  = '{f(($urandom % 2000) / 1000.0 - 1.0), f(($urandom % 2000) / 1000.0 - 1.0),
               f(($urandom % 2000) / 1000.0 - 1.0)};
      if (n % 5 == 0) begin p.ix = 16'd49; p.x = f(0.9); p.u.x = f(1.0); end   // leaves the grid
      if (n % 7 == 0) begin p.iy = 16'd74; p.y = f(0.9); p.u.y = f(1.0); end
      @(negedge clk);
      issue = 1; pvalid = 1; part = p;
      @(posedge clk);
      while (!ready) @(posedge clk);
      sent.push_back(p);
      t_issue.push_back(cyc);
      @(negedge clk);
      issue = 0;
    end
    repeat (10) @(posedge clk);
    // initiation interval: accepted issues are 6 cycles apart
    for (int i = 1; i < t_issue.size(); i++) begin
      checks++;
      if (t_issue[i] - t_issue[i-1] != ADV_II) begin
        failures++; $display("FAIL issue spacing %0d", t_issue[i] - t_issue[i-1]);
      end
    end
    checks++;
    if (sent.size() != 0) begin failures++; $display("FAIL %0d results missing", sent.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
