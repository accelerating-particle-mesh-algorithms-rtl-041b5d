// sync_fifo -- single-clock FIFO used to buffer memory responses and
// write-backs in the compute units.
//
// Push when push=1 and full=0; pop when pop=1 and empty=0. rdata shows the
// oldest entry combinationally (first-word fall-through). count gives the
// occupancy, so a requester can keep (outstanding + count) <= DEPTH and
// never overflow it. Pushing while full or popping while empty is an error
// caught by assertions. Helper of this implementation.
module sync_fifo #(
  parameter int W     = 32,
  parameter int DEPTH = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push,
  input  logic [W-1:0]               wdata,
  input  logic                       pop,
  output logic [W-1:0]               rdata,
  output logic                       empty,
  output logic                       full,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int CW = $clog2(DEPTH+1);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;

  assign empty = (count == 0);
  assign full  = (count == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign rdata = mem[rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (push && !full) begin
        mem[wp] <= wdata;
        wp      <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      end
      if (pop && !empty)
        rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + CW'(push && !full) - CW'(pop && !empty);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
endmodule
