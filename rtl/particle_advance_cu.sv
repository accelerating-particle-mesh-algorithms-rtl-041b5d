// particle_advance_cu -- the particle advance compute unit.
//
// For every tile, in tile order t = ty*ntx + tx, the unit runs three stages
// one after the other:
//   (1) LOAD  : stream the tile's 28 x 28 E/B points (tile interior plus
//               ghost cells) from global memory into tile_field_buffer, one
//               request per cycle.
//   (2) ADV   : the tile's particles, particles[tile_offset[t] ..
//               tile_offset[t+1]-1], are read LANES at a time in one wide
//               request and handed to LANES advance_lanes working in lock
//               step, one group every 6 cycles; the updated particles are
//               written back in place (pwr_mask drops the slots past the end
//               of the tile). Each lane deposits into its own current_buffer.
//   (3) STORE : for every point of the 28 x 28 tile the global current is
//               read, the sum of all copies of all lanes is added and the
//               result written back (one point per cycle); the local copies
//               are cleared as they are read.
// The global grid is stored row by row with (nx+3) points per row: one ghost
// column below and two above, as in the tile. Local point (li, lj) of tile
// (tx, ty) is global point (25*tx + li, 25*ty + lj) of that padded grid.
// nx and ny must be multiples of 25.
//
// Memory ports (global memory is outside the unit): every read channel is
// req/addr with gnt (request accepted when req & gnt) and returns rvalid/
// rdata in request order after any latency; write channels are req/addr/data
// with gnt. Addresses are word indices in the unit of each channel, offset by
// the *_base arguments. Read responses are buffered in FIFOs of depth FIFO_D
// and the unit never has more reads outstanding than buffer space, so
// FIFO_D must exceed the memory round trip (request to data, in cycles) for
// the current stage to sustain one point per cycle.
// cyc_load/cyc_adv/cyc_store count the cycles spent in each stage and
// n_groups the particle groups issued, for performance measurement.
//
// From the design: the three stages, LANES lanes in lock step each with a
// private 12-copy current buffer, the 25+3 tile, II = 6. This
// implementation's choices: the memory protocol, the FIFOs, fixed point,
// read-add-write of the global current.
module particle_advance_cu
  import pic_pkg::*;
#(
  parameter int LANES  = 2,
  parameter int FIFO_D = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  output logic                   busy,
  output logic                   done,
  // simulation arguments
  input  logic [15:0]            nx,
  input  logic [15:0]            ny,
  input  logic [15:0]            ntx,
  input  logic [15:0]            nty,
  input  fx_t                    tem,
  input  fx_t                    dt_dx,
  input  fx_t                    dt_dy,
  input  fx_t                    qnx,
  input  fx_t                    qny,
  input  fx_t                    q,
  input  logic [31:0]            fld_base,
  input  logic [31:0]            j_base,
  input  logic [31:0]            part_base,
  input  logic [31:0]            toff_base,
  // tile_offset read channel
  output logic                   toff_req,
  output logic [31:0]            toff_addr,
  input  logic                   toff_gnt,
  input  logic                   toff_rvalid,
  input  logic [31:0]            toff_rdata,
  // field read channel (E and B of one grid point)
  output logic                   fld_req,
  output logic [31:0]            fld_addr,
  input  logic                   fld_gnt,
  input  logic                   fld_rvalid,
  input  emf_t                   fld_rdata,
  // particle read channel (LANES consecutive particles)
  output logic                   prd_req,
  output logic [31:0]            prd_addr,
  input  logic                   prd_gnt,
  input  logic                   prd_rvalid,
  input  part_t [LANES-1:0]      prd_rdata,
  // particle write channel
  output logic                   pwr_req,
  output logic [31:0]            pwr_addr,
  output logic [LANES-1:0]       pwr_mask,
  output part_t [LANES-1:0]      pwr_data,
  input  logic                   pwr_gnt,
  // current read and write channels
  output logic                   jrd_req,
  output logic [31:0]            jrd_addr,
  input  logic                   jrd_gnt,
  input  logic                   jrd_rvalid,
  input  vec3_t                  jrd_rdata,
  output logic                   jwr_req,
  output logic [31:0]            jwr_addr,
  output vec3_t                  jwr_data,
  input  logic                   jwr_gnt,
  // performance counters
  output logic [31:0]            cyc_load,
  output logic [31:0]            cyc_adv,
  output logic [31:0]            cyc_store,
  output logic [31:0]            n_groups
);
  typedef enum logic [3:0] {S_IDLE, S_INIT, S_OFF_REQ, S_OFF_WAIT, S_LOAD, S_ADV, S_STORE,
                            S_NEXT, S_DONE} state_t;
  state_t state;

  localparam int CW = $clog2(FIFO_D + 1);

  logic [15:0] tx, ty;
  logic        first_off;
  logic [31:0] beg_q, end_q;
  logic [CADDR_W:0] ia, ra;          // issue / response counters (0..784)
  logic [4:0]  i_li, i_lj;           // point being requested
  logic [31:0] row_w;

  // ---------------------------------------------------------------- buffers
  logic                        fb_we;
  logic [LANES-1:0][4:0]       win_ci, win_cj;
  emf_t                        win [LANES][3][3];

  tile_field_buffer #(.NPORT(LANES)) u_fb (
    .clk(clk), .we(fb_we), .waddr(ra[CADDR_W-1:0]), .wdata(fld_rdata),
    .ci(win_ci), .cj(win_cj), .win(win));

  logic [LANES-1:0]            cb_ready;
  vec3_t                       cb_sum [LANES];
  logic                        cb_clr;
  logic [LANES-1:0]            lane_ready;
  logic                        lane_issue;
  logic [LANES-1:0]            lane_pv;
  logic [LANES-1:0]            res_valid;
  part_t                       res_part [LANES];
  part_t [LANES-1:0]           pf_rdata;

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic [NCOPY-1:0]              acc_en;
    logic [NCOPY-1:0][CADDR_W-1:0] acc_addr;
    vec3_t [NCOPY-1:0]             acc_data;
    logic [1:0]                    nmove;

    advance_lane u_lane (
      .clk(clk), .rst_n(rst_n), .issue(lane_issue), .pvalid(lane_pv[l]), .part(pf_rdata[l]),
      .ready(lane_ready[l]), .tile_cx0(16'(tx * 16'(TILE_NX))), .tile_cy0(16'(ty * 16'(TILE_NX))),
      .nx(nx), .ny(ny), .tem(tem), .dt_dx(dt_dx), .dt_dy(dt_dy), .qnx(qnx), .qny(qny), .q(q),
      .win_ci(win_ci[l]), .win_cj(win_cj[l]), .win(win[l]),
      .acc_en(acc_en), .acc_addr(acc_addr), .acc_data(acc_data),
      .res_valid(res_valid[l]), .res_part(res_part[l]), .res_nmove(nmove));

    current_buffer u_cb (
      .clk(clk), .rst_n(rst_n), .ready(cb_ready[l]), .acc_en(acc_en), .acc_addr(acc_addr),
      .acc_data(acc_data), .rd_addr(ra[CADDR_W-1:0]), .clr(cb_clr), .sum_out(cb_sum[l]));
  end

  // particle read FIFO
  logic          pf_push, pf_pop, pf_empty, pf_full;
  logic [CW-1:0] pf_cnt;
  logic [CW-1:0] p_out;              // particle reads outstanding
  logic [31:0]   kr, ki;             // next particle to read / to issue
  logic [31:0]   grp_k;
  logic [LANES-1:0] grp_mask;

  sync_fifo #(.W(LANES * PART_W), .DEPTH(FIFO_D)) u_pf (
    .clk(clk), .rst_n(rst_n), .push(pf_push), .wdata(prd_rdata), .pop(pf_pop),
    .rdata(pf_rdata), .empty(pf_empty), .full(pf_full), .count(pf_cnt));

  // particle write-back FIFO
  typedef struct packed {
    logic [31:0]       addr;
    logic [LANES-1:0]  mask;
    part_t [LANES-1:0] data;
  } pwb_t;
  pwb_t          wb_in, wb_out;
  logic          wb_push, wb_pop, wb_empty, wb_full;
  logic [CW-1:0] wb_cnt;

  sync_fifo #(.W($bits(pwb_t)), .DEPTH(FIFO_D)) u_wb (
    .clk(clk), .rst_n(rst_n), .push(wb_push), .wdata(wb_in), .pop(wb_pop),
    .rdata(wb_out), .empty(wb_empty), .full(wb_full), .count(wb_cnt));

  // current write FIFO
  typedef struct packed {
    logic [31:0] addr;
    vec3_t       data;
  } jwb_t;
  jwb_t          jf_in, jf_out;
  logic          jf_push, jf_pop, jf_empty, jf_full;
  logic [CW-1:0] jf_cnt;
  logic [CW-1:0] j_out;              // current reads outstanding

  sync_fifo #(.W($bits(jwb_t)), .DEPTH(FIFO_D)) u_jf (
    .clk(clk), .rst_n(rst_n), .push(jf_push), .wdata(jf_in), .pop(jf_pop),
    .rdata(jf_out), .empty(jf_empty), .full(jf_full), .count(jf_cnt));

  // --------------------------------------------------------------- datapath
  logic [31:0] pt_base_off;          // padded-grid index of local point (0,0)
  logic [31:0] r_li, r_lj;           // point of the response being stored

  assign row_w       = 32'(nx) + 32'(GHOST_LO + GHOST_HI);
  assign pt_base_off = 32'(ty) * 32'(TILE_NX) * row_w + 32'(tx) * 32'(TILE_NX);
  assign r_li        = 32'(ra) % 32'(TILE_SIZE);
  assign r_lj        = 32'(ra) / 32'(TILE_SIZE);

  assign busy     = (state != S_IDLE) && (state != S_DONE);
  assign done     = (state == S_DONE);

  assign toff_req  = (state == S_OFF_REQ);
  assign toff_addr = toff_base + (first_off ? 32'd0 : 32'(ty) * 32'(ntx) + 32'(tx) + 32'd1);

  assign fld_req  = (state == S_LOAD) && (ia < (CADDR_W+1)'(TILE_CELLS));
  assign fld_addr = fld_base + pt_base_off + 32'(i_lj) * row_w + 32'(i_li);
  assign fb_we    = (state == S_LOAD) && fld_rvalid;

  assign prd_req  = (state == S_ADV) && (kr < end_q) && ((p_out + pf_cnt) < CW'(FIFO_D));
  assign prd_addr = part_base + kr;
  assign pf_push  = prd_rvalid;

  assign lane_issue = (state == S_ADV) && !pf_empty && (&lane_ready) && !wb_full;
  assign pf_pop     = lane_issue;
  for (genvar l = 0; l < LANES; l++) begin : g_pv
    assign lane_pv[l] = (ki + 32'(l)) < end_q;
  end

  always_comb begin
    wb_in.addr = grp_k;
    wb_in.mask = grp_mask;
    for (int l = 0; l < LANES; l++) wb_in.data[l] = res_part[l];
  end
  assign wb_push  = |res_valid;
  assign pwr_req  = !wb_empty;
  assign pwr_addr = part_base + wb_out.addr;
  assign pwr_mask = wb_out.mask;
  assign pwr_data = wb_out.data;
  assign wb_pop   = pwr_req && pwr_gnt;

  assign jrd_req  = (state == S_STORE) && (ia < (CADDR_W+1)'(TILE_CELLS)) &&
                    ((j_out + jf_cnt) < CW'(FIFO_D));
  assign jrd_addr = j_base + pt_base_off + 32'(i_lj) * row_w + 32'(i_li);
  assign cb_clr   = (state == S_STORE) && jrd_rvalid;
  assign jf_push  = cb_clr;
  always_comb begin
    jf_in.addr = j_base + pt_base_off + r_lj * row_w + r_li;
    jf_in.data = jrd_rdata;
    for (int l = 0; l < LANES; l++) jf_in.data = add3(jf_in.data, cb_sum[l]);
  end
  assign jwr_req  = !jf_empty;
  assign jwr_addr = jf_out.addr;
  assign jwr_data = jf_out.data;
  assign jf_pop   = jwr_req && jwr_gnt;

  // ------------------------------------------------------------ control FSM
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      tx <= '0; ty <= '0; first_off <= 1'b1;
      beg_q <= '0; end_q <= '0;
      ia <= '0; ra <= '0; i_li <= '0; i_lj <= '0;
      kr <= '0; ki <= '0; p_out <= '0; j_out <= '0;
      grp_k <= '0; grp_mask <= '0;
      cyc_load <= '0; cyc_adv <= '0; cyc_store <= '0; n_groups <= '0;
    end else begin
      // outstanding read counters
      p_out <= p_out + CW'(prd_req && prd_gnt) - CW'(prd_rvalid);
      j_out <= j_out + CW'(jrd_req && jrd_gnt) - CW'(jrd_rvalid);
      if (lane_issue) begin
        grp_k    <= ki;
        grp_mask <= lane_pv;
        ki       <= ki + 32'(LANES);
        n_groups <= n_groups + 1;
      end
      if (prd_req && prd_gnt) kr <= kr + 32'(LANES);
      // point request counters (LOAD and STORE)
      if ((fld_req && fld_gnt) || (jrd_req && jrd_gnt)) begin
        ia <= ia + 1'b1;
        if (i_li == 5'(TILE_SIZE - 1)) begin i_li <= '0; i_lj <= i_lj + 1'b1; end
        else i_li <= i_li + 1'b1;
      end
      if ((state == S_LOAD && fld_rvalid) || (state == S_STORE && jrd_rvalid)) ra <= ra + 1'b1;

      case (state)
        S_LOAD:  cyc_load  <= cyc_load + 1;
        S_ADV:   cyc_adv   <= cyc_adv + 1;
        S_STORE: cyc_store <= cyc_store + 1;
        default: ;
      endcase

      case (state)
        S_IDLE, S_DONE: if (start) begin
          state <= S_INIT;
          tx <= '0; ty <= '0; first_off <= 1'b1;
          cyc_load <= '0; cyc_adv <= '0; cyc_store <= '0; n_groups <= '0;
        end
        S_INIT: if (&cb_ready) state <= S_OFF_REQ;
        S_OFF_REQ: if (toff_gnt) state <= S_OFF_WAIT;
        S_OFF_WAIT: if (toff_rvalid) begin
          if (first_off) begin
            beg_q     <= toff_rdata;
            first_off <= 1'b0;
            state     <= S_OFF_REQ;
          end else begin
            end_q <= toff_rdata;
            ia <= '0; ra <= '0; i_li <= '0; i_lj <= '0;
            state <= S_LOAD;
          end
        end
        S_LOAD: if (ra == (CADDR_W+1)'(TILE_CELLS)) begin
          kr <= beg_q; ki <= beg_q;
          state <= S_ADV;
        end
        S_ADV: if (ki >= end_q && kr >= end_q && (&lane_ready) && !(|res_valid) && wb_empty &&
                   p_out == '0) begin
          ia <= '0; ra <= '0; i_li <= '0; i_lj <= '0;
          state <= S_STORE;
        end
        S_STORE: if (ra == (CADDR_W+1)'(TILE_CELLS) && jf_empty && j_out == '0) state <= S_NEXT;
        S_NEXT: begin
          beg_q <= end_q;
          if (tx + 1'b1 == ntx) begin
            tx <= '0;
            ty <= ty + 1'b1;
            state <= (ty + 1'b1 == nty) ? S_DONE : S_OFF_REQ;
          end else begin
            tx <= tx + 1'b1;
            state <= S_OFF_REQ;
          end
        end
        default: ;
      endcase
    end
  end

  a_pf_room: assert property (@(posedge clk) disable iff (!rst_n) !(pf_push && pf_full));
  a_jf_room: assert property (@(posedge clk) disable iff (!rst_n) !(jf_push && jf_full));
  a_wb_room: assert property (@(posedge clk) disable iff (!rst_n) !(wb_push && wb_full));
endmodule
