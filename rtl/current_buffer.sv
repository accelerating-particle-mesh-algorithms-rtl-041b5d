// current_buffer -- private local current buffer of one computing lane.
//
// The current of a tile is accumulated in NCOPY = 12 independent copies
// (separate banks), one for each of the 4 cells touched by each of the 3
// basic movements of the Villasenor-Buneman deposit, so the 12 updates made
// by one particle never collide. Each copy has TILE_SIZE x TILE_SIZE vec3_t
// words (x fastest).
//
// Accumulate port: acc_en[c] adds acc_data[c] to copy c at acc_addr[c]. The
// update is a read-modify-write over two cycles (read and latch in the first,
// write the sum in the second); the lane's initiation interval of 6 cycles
// keeps two updates of the same word at least 6 cycles apart, and an
// assertion checks that no copy sees updates on consecutive cycles.
//
// Read-out port (stage 3): sum_out is the sum of the 12 copies at rd_addr,
// combinationally. clr=1 zeroes that word in every copy at the clock edge.
//
// After reset the buffer clears itself, one word per cycle in all copies
// (TILE_CELLS cycles); ready goes high when that is finished. Afterwards the
// read-out of stage (3) leaves every word it reads at zero, so each tile
// starts from an empty buffer.
module current_buffer
  import pic_pkg::*;
(
  input  logic                            clk,
  input  logic                            rst_n,
  output logic                            ready,
  input  logic [NCOPY-1:0]                acc_en,
  input  logic [NCOPY-1:0][CADDR_W-1:0]   acc_addr,
  input  vec3_t [NCOPY-1:0]               acc_data,
  input  logic [CADDR_W-1:0]              rd_addr,
  input  logic                            clr,
  output vec3_t                           sum_out
);
  vec3_t mem [NCOPY][TILE_CELLS];

  logic [NCOPY-1:0]              p_en;
  logic [NCOPY-1:0][CADDR_W-1:0] p_addr;
  vec3_t [NCOPY-1:0]             p_sum;
  logic [CADDR_W-1:0]            init_addr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ready     <= 1'b0;
      init_addr <= '0;
      p_en      <= '0;
    end else begin
      if (!ready) begin
        init_addr <= init_addr + 1'b1;
        if (init_addr == CADDR_W'(TILE_CELLS - 1)) ready <= 1'b1;
      end
      p_en <= acc_en;
    end
  end

  // stage 1 of the read-modify-write: read and add
  always_ff @(posedge clk) begin
    for (int c = 0; c < NCOPY; c++) begin
      p_addr[c] <= acc_addr[c];
      p_sum[c]  <= add3(mem[c][acc_addr[c]], acc_data[c]);
    end
  end

  // stage 2: write back; clearing has priority
  always_ff @(posedge clk) begin
    for (int c = 0; c < NCOPY; c++) begin
      if (!ready)
        mem[c][init_addr] <= '0;
      else if (clr)
        mem[c][rd_addr] <= '0;
      else if (p_en[c])
        mem[c][p_addr[c]] <= p_sum[c];
    end
  end

  always_comb begin
    sum_out = '0;
    for (int c = 0; c < NCOPY; c++) sum_out = add3(sum_out, mem[c][rd_addr]);
  end

  // a copy must not be updated on two consecutive cycles (read-after-write)
  a_no_back_to_back: assert property (@(posedge clk) disable iff (!rst_n)
                                      (acc_en & p_en) == '0);
endmodule
