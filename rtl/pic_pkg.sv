// pic_pkg -- types, constants and fixed-point helpers shared by the
// particle-in-cell (PIC) accelerator.
//
// The accelerator advances particles tile by tile. A tile is a block of
// TILE_NX x TILE_NX grid cells (25 x 25, as chosen in the design study); its
// local copy of the grid quantities has TILE_SIZE = 28 cells per side: one
// ghost cell below and two above each dimension. The local current of each
// lane is held in NCOPY = 12 copies, one per (basic movement, boundary
// current) pair, and a lane starts a new particle every ADV_II = 6 cycles.
//
// Arithmetic: the published design works in IEEE single precision. This RTL
// uses signed 32-bit fixed point with FRAC fractional bits (Q7.24 plus sign)
// so that the datapath stays small and exact to reason about; fx_mul, fx_div
// and fx_rsqrt1 are the only arithmetic primitives. This substitution is a
// choice of this implementation, not of the original design.
//
// Particle record (part_t): global cell index (ix, iy), position inside the
// cell (x, y in [0,1)) and generalised momentum u = gamma*v/c.
// emf_t packs the E and B vectors of one grid point; vec3_t is one 3-vector.
package pic_pkg;

  localparam int FRAC      = 24;
  localparam int TILE_NX   = 25;   // interior cells per tile side
  localparam int GHOST_LO  = 1;    // ghost cells below the tile
  localparam int GHOST_HI  = 2;    // ghost cells above the tile
  localparam int TILE_SIZE = TILE_NX + GHOST_LO + GHOST_HI;  // 28
  localparam int TILE_CELLS = TILE_SIZE * TILE_SIZE;         // 784
  localparam int NMOVE     = 3;    // basic movements per particle (max)
  localparam int NCUR      = 4;    // cells written per basic movement
  localparam int NCOPY     = NMOVE * NCUR;                   // 12
  localparam int ADV_II    = 6;    // initiation interval of a lane
  localparam int CADDR_W   = $clog2(TILE_CELLS);             // 10

  typedef logic signed [31:0] fx_t;
  localparam fx_t FX_ONE  = 32'sd1 <<< FRAC;
  localparam fx_t FX_HALF = 32'sd1 <<< (FRAC - 1);

  typedef struct packed {
    fx_t x;
    fx_t y;
    fx_t z;
  } vec3_t;

  typedef struct packed {
    vec3_t e;
    vec3_t b;
  } emf_t;

  typedef struct packed {
    logic signed [15:0] ix;
    logic signed [15:0] iy;
    fx_t                x;
    fx_t                y;
    vec3_t              u;
  } part_t;

  localparam int PART_W = $bits(part_t);   // 192
  localparam int VEC3_W = $bits(vec3_t);   // 96
  localparam int EMF_W  = $bits(emf_t);    // 192

  // a*b with rounding toward minus infinity
  function automatic fx_t fx_mul(fx_t a, fx_t b);
    logic signed [63:0] p;
    p = 64'(a) * 64'(b);
    return fx_t'(p >>> FRAC);
  endfunction

  // a/b (b must be non-zero), truncated toward zero
  function automatic fx_t fx_div(fx_t a, fx_t b);
    logic signed [63:0] n;
    logic signed [63:0] q;
    n = 64'(a) <<< FRAC;
    q = n / 64'(b);
    return fx_t'(q);
  endfunction

  // integer square root of an unsigned 64-bit value (bit-serial method)
  function automatic logic [31:0] isqrt64(logic [63:0] v);
    logic [63:0] rem;
    logic [63:0] root;
    logic [63:0] bitv;
    rem  = v;
    root = '0;
    bitv = 64'h4000_0000_0000_0000;
    for (int k = 0; k < 32; k++) begin
      if (rem >= root + bitv) begin
        rem  = rem - (root + bitv);
        root = (root >> 1) + bitv;
      end else begin
        root = root >> 1;
      end
      bitv = bitv >> 2;
    end
    return root[31:0];
  endfunction

  // 1/sqrt(1 + s) for s >= 0: the inverse Lorentz factor when s = |u|^2
  function automatic fx_t fx_rsqrt1(fx_t s);
    logic [63:0] v;
    fx_t         r;
    v = 64'(unsigned'(FX_ONE + s)) << FRAC;
    r = fx_t'({1'b0, isqrt64(v)[30:0]});
    return fx_div(FX_ONE, r);
  endfunction

  function automatic fx_t dot3(vec3_t a, vec3_t b);
    return fx_mul(a.x, b.x) + fx_mul(a.y, b.y) + fx_mul(a.z, b.z);
  endfunction

  function automatic vec3_t add3(vec3_t a, vec3_t b);
    vec3_t r;
    r.x = a.x + b.x;
    r.y = a.y + b.y;
    r.z = a.z + b.z;
    return r;
  endfunction

  function automatic vec3_t scale3(vec3_t a, fx_t s);
    vec3_t r;
    r.x = fx_mul(a.x, s);
    r.y = fx_mul(a.y, s);
    r.z = fx_mul(a.z, s);
    return r;
  endfunction

  // a x b
  function automatic vec3_t cross3(vec3_t a, vec3_t b);
    vec3_t r;
    r.x = fx_mul(a.y, b.z) - fx_mul(a.z, b.y);
    r.y = fx_mul(a.z, b.x) - fx_mul(a.x, b.z);
    r.z = fx_mul(a.x, b.y) - fx_mul(a.y, b.x);
    return r;
  endfunction

  // local cell address inside a tile buffer (x fastest)
  function automatic logic [CADDR_W-1:0] caddr(int li, int lj);
    return CADDR_W'(lj * TILE_SIZE + li);
  endfunction

endpackage
