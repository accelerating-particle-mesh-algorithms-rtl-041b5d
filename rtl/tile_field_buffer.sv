// tile_field_buffer -- local (on-chip) copy of the electric and magnetic
// field of one tile, the explicitly managed cache of stage (1) of the
// particle advance compute unit.
//
// Holds TILE_SIZE x TILE_SIZE (28 x 28) grid points of E and B, one emf_t
// word per point, addressed lj*TILE_SIZE + li (x fastest). Local index 0 is
// the ghost cell just below the tile. The loader writes one point per cycle
// through (we, waddr, wdata). Each of the NPORT lanes reads a 3 x 3 window of
// points centred on (ci, cj): win[dx][dy] is point (ci-1+dx, cj-1+dy). The
// window is registered, so it is valid the cycle after the centre is given.
// Window reads that would fall outside the buffer return zero (a lane only
// asks for centres 1..26, so this never happens for particles of the tile).
//
// The published design keeps E and B in separate double-pumped, 3-way
// replicated block RAMs; a window port per lane is this implementation's
// way of giving every lane the neighbourhood it interpolates from.
module tile_field_buffer
  import pic_pkg::*;
#(
  parameter int NPORT = 2
) (
  input  logic                      clk,
  input  logic                      we,
  input  logic [CADDR_W-1:0]        waddr,
  input  emf_t                      wdata,
  input  logic [NPORT-1:0][4:0]     ci,
  input  logic [NPORT-1:0][4:0]     cj,
  output emf_t                      win [NPORT][3][3]
);
  emf_t mem [TILE_CELLS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    for (int p = 0; p < NPORT; p++) begin
      for (int dx = 0; dx < 3; dx++) begin
        for (int dy = 0; dy < 3; dy++) begin
          int xi, yi;
          xi = int'(ci[p]) - 1 + dx;
          yi = int'(cj[p]) - 1 + dy;
          if (xi >= 0 && xi < TILE_SIZE && yi >= 0 && yi < TILE_SIZE)
            win[p][dx][dy] <= mem[caddr(xi, yi)];
          else
            win[p][dx][dy] <= '0;
        end
      end
    end
  end
endmodule
