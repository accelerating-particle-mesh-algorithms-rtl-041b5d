// particle_sort_cu -- the particle sorting compute unit. After a particle
// advance it restores the order of the particle array by tile, moving only
// the particles that are out of order.
//
// The particles of tile t occupy particles[tile_offset[t] .. tile_offset[t+1]-1];
// tile t = (iy / 25) * ntx + (ix / 25). The unit works in five steps:
//   (1) COUNT : stream all np particles, count how many are now in each tile
//               (local counters), then write the new tile_offset[0..n_tiles]
//               (prefix sum) to global memory.
//   (2-4) REG : stream the particles again. Position p belongs to the tile s
//               whose new section holds p. A particle now in tile t != s is
//               out of order: its position is registered as a free slot of
//               tile s, target_idx[tile_offset[s] + ntgt[s]++] = p, and the
//               particle itself as one entering tile t,
//               source_idx[tile_offset[t] + nsrc[t]++] = p. The section of a
//               tile in target_idx / source_idx is its new section, so it is
//               always large enough; every tile ends with ntgt = nsrc.
//               In-order particles take one cycle each.
//   (5) EXCH  : for each tile and each of its registered pairs, the particle
//               at source_idx is copied to a scratch array (pass A), then the
//               scratch copies are written to the target_idx positions
//               (pass B). The two passes keep a source from being overwritten
//               before it is read, since sources and targets are the same set
//               of positions. Each pass is a stream: index reads, particle
//               reads and particle writes are decoupled by FIFOs and each
//               moves one item per cycle (pass A: source index -> particle
//               read -> scratch write; pass B: target index and scratch read
//               -> particle write). A pass ends when all its FIFOs are empty.
// Memory ports: particle read (req/addr/gnt, rvalid/rdata in order), particle
// write (req/addr/data/gnt) and one 32-bit index port (req/we/addr/wdata/gnt,
// rvalid/rdata) for tile_offset, target_idx and source_idx. Addresses are
// word indices offset by the *_base arguments. Every stream keeps at most
// FIFO_D reads outstanding, so FIFO_D must exceed the memory round trip for
// one item per cycle. Counting, registering and exchanging each run at one
// particle per cycle, the initiation interval given for the design; an
// out-of-order particle costs two index writes while registering, and the
// unit pauses one cycle per tile to step its tile counters.
// From the design: the algorithm, the buffers and the rates. This
// implementation's choices: the scratch array and the two-pass exchange, the
// memory protocol, the new tile sections serving as the index sections.
module particle_sort_cu
  import pic_pkg::*;
#(
  parameter int MAX_TILES = 400,
  parameter int FIFO_D    = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  output logic        busy,
  output logic        done,
  input  logic [31:0] np,
  input  logic [15:0] ntx,
  input  logic [15:0] n_tiles,
  input  logic [31:0] part_base,
  input  logic [31:0] tmp_base,
  input  logic [31:0] toff_base,
  input  logic [31:0] tgt_base,
  input  logic [31:0] src_base,
  // particle read channel
  output logic        prd_req,
  output logic [31:0] prd_addr,
  input  logic        prd_gnt,
  input  logic        prd_rvalid,
  input  part_t       prd_rdata,
  // particle write channel
  output logic        pwr_req,
  output logic [31:0] pwr_addr,
  output part_t       pwr_data,
  input  logic        pwr_gnt,
  // index channel
  output logic        idx_req,
  output logic        idx_we,
  output logic [31:0] idx_addr,
  output logic [31:0] idx_wdata,
  input  logic        idx_gnt,
  input  logic        idx_rvalid,
  input  logic [31:0] idx_rdata,
  // statistics
  output logic [31:0] n_ooo,
  output logic [31:0] cyc_count,
  output logic [31:0] cyc_reg,
  output logic [31:0] cyc_exch
);
  localparam int TW = $clog2(MAX_TILES + 1);
  localparam int CW = $clog2(FIFO_D + 1);

  typedef enum logic [4:0] {
    S_IDLE, S_CLR, S_COUNT, S_SCAN, S_REG, S_REG_TGT, S_REG_SRC, S_XCH, S_DONE
  } state_t;
  state_t state;

  logic [31:0] cnt  [MAX_TILES];
  logic [31:0] off  [MAX_TILES + 1];
  logic [31:0] ntgt [MAX_TILES];
  logic [31:0] nsrc [MAX_TILES];

  logic [TW-1:0] t, s;              // tile counter / owner of position kp
  logic [31:0]   kr, kp, acc, j, k;
  logic [CW-1:0] r_out;             // particle reads outstanding
  logic [CW-1:0] i_out;             // index reads outstanding (exchange)
  logic          streaming;
  logic          pass_b;            // exchange pass B (scratch -> targets)
  logic          x_issue_done;      // all index reads of the pass issued
  logic          x_idx_rd, x_prd, x_wr;

  // response FIFO for the streaming passes
  part_t         rf_head;
  logic          rf_pop, rf_empty, rf_full;
  logic [CW-1:0] rf_cnt;

  sync_fifo #(.W(PART_W), .DEPTH(FIFO_D)) u_rf (
    .clk(clk), .rst_n(rst_n), .push(prd_rvalid), .wdata(prd_rdata), .pop(rf_pop),
    .rdata(rf_head), .empty(rf_empty), .full(rf_full), .count(rf_cnt));

  // index response FIFO for the exchange
  logic [31:0]   if_head;
  logic          if_pop, if_empty, if_full;
  logic [CW-1:0] if_cnt;

  sync_fifo #(.W(32), .DEPTH(FIFO_D)) u_if (
    .clk(clk), .rst_n(rst_n), .push(state == S_XCH && idx_rvalid), .wdata(idx_rdata),
    .pop(if_pop), .rdata(if_head), .empty(if_empty), .full(if_full), .count(if_cnt));

  function automatic logic [TW-1:0] tile_of(part_t p, logic [15:0] ntiles_x);
    return TW'((32'(p.iy) / TILE_NX) * 32'(ntiles_x) + 32'(p.ix) / TILE_NX);
  endfunction

  logic [TW-1:0] head_t;
  assign head_t    = tile_of(rf_head, ntx);
  assign streaming = (state == S_COUNT) || (state == S_REG) || (state == S_REG_TGT) ||
                     (state == S_REG_SRC);

  assign busy = (state != S_IDLE) && (state != S_DONE);
  assign done = (state == S_DONE);

  // particle reads: streamed in COUNT and REG; in the exchange pass A reads
  // the particles named by source_idx, pass B the scratch array in order
  assign x_issue_done = (32'(t) == 32'(n_tiles));
  assign x_idx_rd = (state == S_XCH) && !x_issue_done && (j < ntgt[t]) &&
                    ((i_out + if_cnt) < CW'(FIFO_D));
  always_comb begin
    prd_req  = 1'b0;
    prd_addr = part_base + kr;
    x_prd    = 1'b0;
    if (streaming)
      prd_req = (kr < np) && ((r_out + rf_cnt) < CW'(FIFO_D));
    else if (state == S_XCH && !pass_b) begin
      x_prd    = !if_empty && ((r_out + rf_cnt) < CW'(FIFO_D));
      prd_req  = x_prd;
      prd_addr = part_base + if_head;
    end else if (state == S_XCH) begin
      x_prd    = (kr < n_ooo) && ((r_out + rf_cnt) < CW'(FIFO_D));
      prd_req  = x_prd;
      prd_addr = tmp_base + kr;
    end
  end

  // particle writes: pass A fills the scratch array in order, pass B pairs
  // each scratch particle with the next target index
  assign x_wr     = (state == S_XCH) && !rf_empty && (!pass_b || !if_empty);
  assign pwr_req  = x_wr;
  assign pwr_addr = pass_b ? part_base + if_head : tmp_base + k;
  assign pwr_data = rf_head;
  assign if_pop   = (state == S_XCH) && (pass_b ? (pwr_req && pwr_gnt) : (prd_req && prd_gnt));

  always_comb begin
    idx_req   = 1'b0;
    idx_we    = 1'b0;
    idx_addr  = '0;
    idx_wdata = '0;
    case (state)
      S_SCAN:    begin idx_req = 1'b1; idx_we = 1'b1; idx_addr = toff_base + 32'(t); idx_wdata = acc; end
      S_REG_TGT: begin idx_req = 1'b1; idx_we = 1'b1; idx_addr = tgt_base + off[s] + ntgt[s]; idx_wdata = kp; end
      S_REG_SRC: begin idx_req = 1'b1; idx_we = 1'b1; idx_addr = src_base + off[head_t] + nsrc[head_t]; idx_wdata = kp; end
      S_XCH:     begin idx_req = x_idx_rd; idx_addr = (pass_b ? tgt_base : src_base) + off[t] + j; end
      default: ;
    endcase
  end

  // pop: COUNT pops every response; REG pops in-order particles directly and
  // out-of-order ones after both registrations
  always_comb begin
    rf_pop = 1'b0;
    if (state == S_COUNT) rf_pop = !rf_empty;
    else if (state == S_REG && !rf_empty && kp < off[s+1] && head_t == s) rf_pop = 1'b1;
    else if (state == S_REG_SRC && idx_gnt) rf_pop = 1'b1;
    else if (state == S_XCH && pwr_req && pwr_gnt) rf_pop = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      t <= '0; s <= '0; kr <= '0; kp <= '0; acc <= '0; j <= '0; k <= '0;
      r_out <= '0; i_out <= '0; pass_b <= 1'b0;
      n_ooo <= '0; cyc_count <= '0; cyc_reg <= '0; cyc_exch <= '0;
    end else begin
      r_out <= r_out + CW'(prd_req && prd_gnt) - CW'(prd_rvalid);
      i_out <= i_out + CW'(x_idx_rd && idx_gnt) - CW'(state == S_XCH && idx_rvalid);
      if ((streaming || (state == S_XCH && pass_b)) && prd_req && prd_gnt) kr <= kr + 1;
      if (rf_pop) kp <= kp + 1;
      case (state)
        S_COUNT, S_SCAN, S_CLR:                         cyc_count <= cyc_count + 1;
        S_REG, S_REG_TGT, S_REG_SRC:                    cyc_reg   <= cyc_reg + 1;
        S_XCH:                                          cyc_exch  <= cyc_exch + 1;
        default:                                        ;
      endcase

      case (state)
        S_IDLE, S_DONE: if (start) begin
          state <= S_CLR;
          t <= '0;
          pass_b <= 1'b0;
          n_ooo <= '0; cyc_count <= '0; cyc_reg <= '0; cyc_exch <= '0;
        end
        S_CLR: begin
          cnt[t] <= '0; ntgt[t] <= '0; nsrc[t] <= '0;
          if (t + 1'b1 == TW'(n_tiles)) begin
            state <= S_COUNT; kr <= '0; kp <= '0;
          end
          t <= t + 1'b1;
        end
        // (1) count particles per tile
        S_COUNT: begin
          if (!rf_empty) cnt[head_t] <= cnt[head_t] + 1;
          if (kp == np) begin
            state <= S_SCAN; t <= '0; acc <= '0;
          end
        end
        S_SCAN: if (idx_gnt) begin
          off[t] <= acc;
          if (t == TW'(n_tiles)) begin
            state <= S_REG; kr <= '0; kp <= '0; s <= '0;
          end else begin
            acc <= acc + cnt[t];
            t   <= t + 1'b1;
          end
        end
        // (2-4) register out-of-order particles
        S_REG: begin
          if (kp == np) begin
            state <= S_XCH; t <= '0; j <= '0; k <= '0; kr <= '0;
          end else if (!rf_empty) begin
            if (kp >= off[s+1]) s <= s + 1'b1;
            else if (head_t != s) state <= S_REG_TGT;
          end
        end
        S_REG_TGT: if (idx_gnt) begin
          ntgt[s] <= ntgt[s] + 1;
          state   <= S_REG_SRC;
        end
        S_REG_SRC: if (idx_gnt) begin
          nsrc[head_t] <= nsrc[head_t] + 1;
          n_ooo        <= n_ooo + 1;
          state        <= S_REG;
        end
        // (5) exchange: t/j walk the registered pairs of each tile and issue
        // one index read per cycle; a pass ends when everything has drained
        S_XCH: begin
          if (x_idx_rd && idx_gnt) j <= j + 1;
          else if (!x_issue_done && j >= ntgt[t]) begin t <= t + 1'b1; j <= '0; end
          if (pwr_req && pwr_gnt) k <= k + 1;
          if (x_issue_done && i_out == '0 && if_empty && r_out == '0 && rf_empty &&
              (!pass_b || kr == n_ooo)) begin
            if (!pass_b) begin
              pass_b <= 1'b1; t <= '0; j <= '0; kr <= '0;
            end else begin
              state <= S_DONE;
            end
          end
        end
        default: ;
      endcase
    end
  end

  a_rf_room: assert property (@(posedge clk) disable iff (!rst_n) !(prd_rvalid && rf_full));
  a_if_room: assert property (@(posedge clk) disable iff (!rst_n) !(state == S_XCH && idx_rvalid && if_full));
  a_pairs:   assert property (@(posedge clk) disable iff (!rst_n) (state == S_DONE) |-> (k == 2 * n_ooo));
endmodule
