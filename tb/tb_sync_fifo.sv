// tb_sync_fifo -- random push/pop traffic against a queue model; checks data
// order, empty/full flags and count.
module tb_sync_fifo;
  logic clk = 0, rst_n = 0;
  logic push, pop, empty, full;
  logic [15:0] wdata, rdata;
  logic [2:0]  count;
  logic [15:0] model [$];
  int checks = 0, failures = 0;

  sync_fifo #(.W(16), .DEPTH(4)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push = 0; pop = 0; wdata = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      checks++;
      if (empty != (model.size() == 0) || full != (model.size() == 4) || count != 3'(model.size())) begin
        failures++;
        $display("FAIL flags size=%0d empty=%0d full=%0d count=%0d", model.size(), empty, full, count);
      end
      if (model.size() > 0) begin
        checks++;
        if (rdata != model[0]) begin failures++; $display("FAIL data %h exp %h", rdata, model[0]); end
      end
      push  = !full && ($urandom % 2 == 0);
      pop   = !empty && ($urandom % 3 != 0);
      wdata = 16'($urandom);
      @(posedge clk);
      #1;
      if (pop) void'(model.pop_front());
      if (push) model.push_back(wdata);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
