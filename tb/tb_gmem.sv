// tb_gmem -- behavioural model of one global (off-chip DDR) memory region
// as the compute units see it; used only by testbenches.
//
// DEPTH words of W bits. Read channel: a request is accepted when
// rd_req & rd_gnt; its data (NW consecutive words from rd_addr, read at
// acceptance) returns LAT cycles later on rd_rvalid/rd_rdata, in order.
// Write channel: wr_req & wr_gnt writes word i of wr_data to wr_addr+i for
// every set bit i of wr_mask. With stall=1 each grant is withheld at random
// one cycle in four, to exercise back-pressure. Testbenches initialise and
// inspect mem[] directly.
module tb_gmem #(
  parameter int W     = 32,
  parameter int NW    = 1,
  parameter int DEPTH = 1024,
  parameter int LAT   = 3
) (
  input  logic              clk,
  input  logic              stall,
  input  logic              rd_req,
  input  logic [31:0]       rd_addr,
  output logic              rd_gnt,
  output logic              rd_rvalid,
  output logic [NW*W-1:0]   rd_rdata,
  input  logic              wr_req,
  input  logic [31:0]       wr_addr,
  input  logic [NW-1:0]     wr_mask,
  input  logic [NW*W-1:0]   wr_data,
  output logic              wr_gnt
);
  logic [W-1:0] mem [DEPTH];
  logic [NW*W-1:0] pipe_d [LAT];
  logic            pipe_v [LAT];
  int unsigned     stalls;

  initial begin
    stalls = 0;
    for (int i = 0; i < DEPTH; i++) mem[i] = '0;
    for (int i = 0; i < LAT; i++) begin pipe_v[i] = 1'b0; pipe_d[i] = '0; end
    rd_gnt = 1'b1;
    wr_gnt = 1'b1;
  end

  assign rd_rvalid = pipe_v[LAT-1];
  assign rd_rdata  = pipe_d[LAT-1];

  always @(posedge clk) begin
    logic [NW*W-1:0] d;
    for (int i = LAT - 1; i > 0; i--) begin
      pipe_v[i] <= pipe_v[i-1];
      pipe_d[i] <= pipe_d[i-1];
    end
    for (int i = 0; i < NW; i++)
      d[i*W +: W] = (rd_addr + 32'(i) < DEPTH) ? mem[rd_addr + 32'(i)] : '0;
    pipe_v[0] <= rd_req && rd_gnt;
    pipe_d[0] <= d;
    if (wr_req && wr_gnt)
      for (int i = 0; i < NW; i++)
        if (wr_mask[i] && wr_addr + 32'(i) < DEPTH) mem[wr_addr + 32'(i)] <= wr_data[i*W +: W];
    if ((rd_req && !rd_gnt) || (wr_req && !wr_gnt)) stalls <= stalls + 1;
    rd_gnt <= !stall || ($urandom % 4 != 0);
    wr_gnt <= !stall || ($urandom % 4 != 0);
  end

  a_rd_range: assert property (@(posedge clk) rd_req |-> rd_addr < DEPTH);
  a_wr_range: assert property (@(posedge clk) wr_req |-> wr_addr < DEPTH);
endmodule
