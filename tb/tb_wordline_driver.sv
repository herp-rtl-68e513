// tb_wordline_driver: every address raises exactly its own word line one cycle later; no
// line is raised without write_en.
module tb_wordline_driver;
  localparam int ROWS = 128;
  logic clk = 0, rst_n = 1, write_en = 0;
  logic [$clog2(ROWS)-1:0] addr = '0;
  logic [ROWS-1:0] wl;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // falling edge applies the asynchronous reset at once
  wordline_driver #(.ROWS(ROWS)) dut (.*);
  initial begin
    repeat (3000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 2*ROWS; i++) begin
      logic [ROWS-1:0] exp;
      @(negedge clk);
      write_en = (i % 3 != 2); addr = $clog2(ROWS)'(i * 37);
      exp = '0; if (write_en) exp[addr] = 1'b1;
      @(negedge clk);
      checks++;
      if (wl !== exp) begin failures++; $display("FAIL addr=%0d we=%0b wl=%h", addr, write_en, wl); end
      write_en = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
