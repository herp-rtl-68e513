// tb_query_fifo: random pushes and pops against a software queue; checks data order,
// full/empty flags and level, and that a push when full is dropped.
module tb_query_fifo;
  localparam int W = 16, DEPTH = 4;
  logic clk = 0, rst_n = 1, push = 0, pop = 0;
  logic [W-1:0] wdata = '0, rdata;
  logic full, empty; logic [$clog2(DEPTH):0] level;
  int checks = 0, failures = 0;
  logic [W-1:0] q [$];
  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // falling edge applies the asynchronous reset at once
  query_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      checks++;
      if (int'(level) != q.size() || full != (q.size() == DEPTH) || empty != (q.size() == 0) ||
          (q.size() > 0 && rdata != q[0])) begin
        failures++; if (failures < 10) $display("FAIL i=%0d level=%0d exp %0d", i, level, q.size());
      end
      push = ($urandom % 2) && !full; pop = ($urandom % 3 == 0) && !empty; wdata = W'($urandom);
      if (i > 500) push = !full && ($urandom % 4 != 0);
      @(posedge clk); #1;
      if (pop) void'(q.pop_front());
      if (push) q.push_back(wdata);
      push = 0; pop = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
