// zpic_fpga_top -- the FPGA side of the hybrid particle-in-cell time step.
//
// Per time step the FPGA runs the particle advance compute unit and then the
// particle sorting compute unit, one after the other, on particle, field and
// current arrays in the board's global memory; the host CPU meanwhile does
// the grid work (current reduction over ghost cells, filtering, field
// advance) once the advance has delivered the current. A pulse on start
// runs one time step: adv_done rises when the current is complete (the host
// may take it from then on) and done when the particles are sorted again.
//
// The memory channels of the two units are brought out unchanged (see
// particle_advance_cu and particle_sort_cu for the protocol); global memory
// and its controller are outside this module. Both units use the same
// particle array (part_base) and tile_offset array (toff_base).
// Parameters: LANES computing lanes of the advance unit (2, the dual-lane
// variant profiled in the design study), MAX_TILES tile counters of the sort
// unit (400 = the 20 x 20 tiles of a 500 x 500 grid).
module zpic_fpga_top
  import pic_pkg::*;
#(
  parameter int LANES     = 2,
  parameter int MAX_TILES = 400
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  output logic                 busy,
  output logic                 adv_done,
  output logic                 done,
  // simulation arguments
  input  logic [15:0]          nx,
  input  logic [15:0]          ny,
  input  logic [15:0]          ntx,
  input  logic [15:0]          nty,
  input  logic [31:0]          np,
  input  fx_t                  tem,
  input  fx_t                  dt_dx,
  input  fx_t                  dt_dy,
  input  fx_t                  qnx,
  input  fx_t                  qny,
  input  fx_t                  q,
  input  logic [31:0]          fld_base,
  input  logic [31:0]          j_base,
  input  logic [31:0]          part_base,
  input  logic [31:0]          tmp_base,
  input  logic [31:0]          toff_base,
  input  logic [31:0]          tgt_base,
  input  logic [31:0]          src_base,
  // advance unit: tile_offset, fields, particles, current
  output logic                 a_toff_req,
  output logic [31:0]          a_toff_addr,
  input  logic                 a_toff_gnt,
  input  logic                 a_toff_rvalid,
  input  logic [31:0]          a_toff_rdata,
  output logic                 a_fld_req,
  output logic [31:0]          a_fld_addr,
  input  logic                 a_fld_gnt,
  input  logic                 a_fld_rvalid,
  input  emf_t                 a_fld_rdata,
  output logic                 a_prd_req,
  output logic [31:0]          a_prd_addr,
  input  logic                 a_prd_gnt,
  input  logic                 a_prd_rvalid,
  input  part_t [LANES-1:0]    a_prd_rdata,
  output logic                 a_pwr_req,
  output logic [31:0]          a_pwr_addr,
  output logic [LANES-1:0]     a_pwr_mask,
  output part_t [LANES-1:0]    a_pwr_data,
  input  logic                 a_pwr_gnt,
  output logic                 a_jrd_req,
  output logic [31:0]          a_jrd_addr,
  input  logic                 a_jrd_gnt,
  input  logic                 a_jrd_rvalid,
  input  vec3_t                a_jrd_rdata,
  output logic                 a_jwr_req,
  output logic [31:0]          a_jwr_addr,
  output vec3_t                a_jwr_data,
  input  logic                 a_jwr_gnt,
  // sort unit: particles and index arrays
  output logic                 s_prd_req,
  output logic [31:0]          s_prd_addr,
  input  logic                 s_prd_gnt,
  input  logic                 s_prd_rvalid,
  input  part_t                s_prd_rdata,
  output logic                 s_pwr_req,
  output logic [31:0]          s_pwr_addr,
  output part_t                s_pwr_data,
  input  logic                 s_pwr_gnt,
  output logic                 s_idx_req,
  output logic                 s_idx_we,
  output logic [31:0]          s_idx_addr,
  output logic [31:0]          s_idx_wdata,
  input  logic                 s_idx_gnt,
  input  logic                 s_idx_rvalid,
  input  logic [31:0]          s_idx_rdata,
  // statistics
  output logic [31:0]          adv_cycles,
  output logic [31:0]          sort_cycles,
  output logic [31:0]          n_groups,
  output logic [31:0]          n_ooo
);
  typedef enum logic [2:0] {T_IDLE, T_ADV, T_SORT_GO, T_SORT, T_DONE} tstate_t;
  tstate_t state;

  logic adv_start, adv_busy, adv_fin;
  logic srt_start, srt_busy, srt_fin;
  logic [31:0] cyc_load, cyc_adv, cyc_store, cyc_count, cyc_reg, cyc_exch;

  assign adv_start = (state == T_IDLE || state == T_DONE) && start;
  assign srt_start = (state == T_SORT_GO);

  particle_advance_cu #(.LANES(LANES)) u_adv (
    .clk(clk), .rst_n(rst_n), .start(adv_start), .busy(adv_busy), .done(adv_fin),
    .nx(nx), .ny(ny), .ntx(ntx), .nty(nty), .tem(tem), .dt_dx(dt_dx), .dt_dy(dt_dy),
    .qnx(qnx), .qny(qny), .q(q), .fld_base(fld_base), .j_base(j_base),
    .part_base(part_base), .toff_base(toff_base),
    .toff_req(a_toff_req), .toff_addr(a_toff_addr), .toff_gnt(a_toff_gnt),
    .toff_rvalid(a_toff_rvalid), .toff_rdata(a_toff_rdata),
    .fld_req(a_fld_req), .fld_addr(a_fld_addr), .fld_gnt(a_fld_gnt),
    .fld_rvalid(a_fld_rvalid), .fld_rdata(a_fld_rdata),
    .prd_req(a_prd_req), .prd_addr(a_prd_addr), .prd_gnt(a_prd_gnt),
    .prd_rvalid(a_prd_rvalid), .prd_rdata(a_prd_rdata),
    .pwr_req(a_pwr_req), .pwr_addr(a_pwr_addr), .pwr_mask(a_pwr_mask),
    .pwr_data(a_pwr_data), .pwr_gnt(a_pwr_gnt),
    .jrd_req(a_jrd_req), .jrd_addr(a_jrd_addr), .jrd_gnt(a_jrd_gnt),
    .jrd_rvalid(a_jrd_rvalid), .jrd_rdata(a_jrd_rdata),
    .jwr_req(a_jwr_req), .jwr_addr(a_jwr_addr), .jwr_data(a_jwr_data), .jwr_gnt(a_jwr_gnt),
    .cyc_load(cyc_load), .cyc_adv(cyc_adv), .cyc_store(cyc_store), .n_groups(n_groups));

  particle_sort_cu #(.MAX_TILES(MAX_TILES)) u_sort (
    .clk(clk), .rst_n(rst_n), .start(srt_start), .busy(srt_busy), .done(srt_fin),
    .np(np), .ntx(ntx), .n_tiles(16'(ntx * nty)), .part_base(part_base),
    .tmp_base(tmp_base), .toff_base(toff_base), .tgt_base(tgt_base), .src_base(src_base),
    .prd_req(s_prd_req), .prd_addr(s_prd_addr), .prd_gnt(s_prd_gnt),
    .prd_rvalid(s_prd_rvalid), .prd_rdata(s_prd_rdata),
    .pwr_req(s_pwr_req), .pwr_addr(s_pwr_addr), .pwr_data(s_pwr_data), .pwr_gnt(s_pwr_gnt),
    .idx_req(s_idx_req), .idx_we(s_idx_we), .idx_addr(s_idx_addr), .idx_wdata(s_idx_wdata),
    .idx_gnt(s_idx_gnt), .idx_rvalid(s_idx_rvalid), .idx_rdata(s_idx_rdata),
    .n_ooo(n_ooo), .cyc_count(cyc_count), .cyc_reg(cyc_reg), .cyc_exch(cyc_exch));

  assign busy     = (state == T_ADV) || (state == T_SORT_GO) || (state == T_SORT);
  assign done     = (state == T_DONE);
  assign adv_cycles  = cyc_load + cyc_adv + cyc_store;
  assign sort_cycles = cyc_count + cyc_reg + cyc_exch;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= T_IDLE;
      adv_done <= 1'b0;
    end else begin
      case (state)
        T_IDLE, T_DONE: if (start) begin state <= T_ADV; adv_done <= 1'b0; end
        T_ADV:     if (adv_fin) begin state <= T_SORT_GO; adv_done <= 1'b1; end
        T_SORT_GO: state <= T_SORT;
        T_SORT:    if (srt_fin) state <= T_DONE;
        default:   state <= T_IDLE;
      endcase
    end
  end

  // the two units never run at the same time
  a_exclusive: assert property (@(posedge clk) disable iff (!rst_n) !(adv_busy && srt_busy));
endmodule
