// tb_tile_field_buffer -- fills a tile with random E/B points and checks the
// registered 3x3 windows of two read ports against a shadow copy, including
// windows at the buffer edge (zero outside).
module tb_tile_field_buffer;
  import pic_pkg::*;
  logic clk = 0;
  logic we;
  logic [CADDR_W-1:0] waddr;
  emf_t wdata;
  logic [1:0][4:0] ci, cj;
  emf_t win [2][3][3];
  emf_t shadow [TILE_CELLS];
  int checks = 0, failures = 0;

  tile_field_buffer #(.NPORT(2)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; ci = '0; cj = '0; waddr = '0; wdata = '0;
    for (int a = 0; a < TILE_CELLS; a++) begin
      @(negedge clk);
      we = 1; waddr = CADDR_W'(a);
      wdata = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      shadow[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 400; t++) begin
      int x0, y0, x1, y1;
      x0 = $urandom % 28; y0 = $urandom % 28; x1 = 1 + $urandom % 26; y1 = 1 + $urandom % 26;
      ci[0] = 5'(x0); cj[0] = 5'(y0); ci[1] = 5'(x1); cj[1] = 5'(y1);
      @(negedge clk);
      for (int dx = 0; dx < 3; dx++)
        for (int dy = 0; dy < 3; dy++) begin
          int xa, ya;
          emf_t exp0;
          xa = x0 - 1 + dx; ya = y0 - 1 + dy;
          exp0 = (xa < 0 || ya < 0 || xa > 27 || ya > 27) ? '0 : shadow[ya * 28 + xa];
          checks += 2;
          if (win[0][dx][dy] !== exp0) begin failures++; $display("FAIL port0 %0d %0d", x0, y0); end
          if (win[1][dx][dy] !== shadow[(y1 - 1 + dy) * 28 + x1 - 1 + dx]) begin
            failures++; $display("FAIL port1 %0d %0d", x1, y1);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
