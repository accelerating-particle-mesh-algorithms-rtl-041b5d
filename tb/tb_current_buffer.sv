// tb_current_buffer -- checks the self-clear after reset, accumulation into
// the 12 copies (random addresses, updates spaced as a lane spaces them),
// the summed read-out and the clear-on-read of stage 3.
module tb_current_buffer;
  import pic_pkg::*;
  logic clk = 0, rst_n = 0, ready;
  logic [NCOPY-1:0] acc_en;
  logic [NCOPY-1:0][CADDR_W-1:0] acc_addr;
  vec3_t [NCOPY-1:0] acc_data;
  logic [CADDR_W-1:0] rd_addr;
  logic clr;
  vec3_t sum_out;
  longint sx [TILE_CELLS], sz [TILE_CELLS];
  int checks = 0, failures = 0, init_cycles = 0;

  current_buffer dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    acc_en = '0; acc_addr = '0; acc_data = '0; rd_addr = '0; clr = 0;
    for (int a = 0; a < TILE_CELLS; a++) begin sx[a] = 0; sz[a] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    while (!ready) begin @(posedge clk); init_cycles++; end
    checks++;
    if (init_cycles < TILE_CELLS - 2 || init_cycles > TILE_CELLS + 2) begin
      failures++; $display("FAIL init took %0d cycles", init_cycles);
    end
    for (int it = 0; it < 300; it++) begin
      @(negedge clk);
      for (int c = 0; c < NCOPY; c++) begin
        int a;
        a = $urandom % 40;                 // few addresses: many hits
        acc_en[c]   = ($urandom % 4 != 0);
        acc_addr[c] = CADDR_W'(a);
        acc_data[c] = '{fx_t'($urandom % 2000) - 1000, 0, fx_t'($urandom % 100)};
        if (acc_en[c]) begin sx[a] += longint'(acc_data[c].x); sz[a] += longint'(acc_data[c].z); end
      end
      @(negedge clk); acc_en = '0;
      repeat (1 + $urandom % 3) @(negedge clk);
    end
    repeat (3) @(negedge clk);
    for (int a = 0; a < 60; a++) begin
      rd_addr = CADDR_W'(a);
      #1;
      checks++;
      if (longint'(sum_out.x) != sx[a] || longint'(sum_out.z) != sz[a] || sum_out.y != 0) begin
        failures++; $display("FAIL sum @%0d got %0d exp %0d", a, sum_out.x, sx[a]);
      end
      clr = 1;
      @(negedge clk); clr = 0;
      #1;
      checks++;
      if (sum_out != '0) begin failures++; $display("FAIL not cleared @%0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
