// tb_write_search_driver: checks that a search drives S=q, S'=~q, a write BL=d, BL'=~d, one
// cycle later, and that idle lines are low.
module tb_write_search_driver;
  localparam int COLS = 128;
  logic clk = 0, rst_n = 1;
  logic search_en = 0, write_en = 0;
  logic [COLS-1:0] query = '0, wdata = '0, s, s_n, bl, bl_n;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // falling edge applies the asynchronous reset at once
  write_search_driver #(.COLS(COLS)) dut (.*);

  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(logic [COLS-1:0] es, esn, ebl, ebln);
    checks++;
    if (s !== es || s_n !== esn || bl !== ebl || bl_n !== ebln) begin
      failures++; $display("FAIL s/s_n/bl/bl_n mismatch at %0t", $time);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      int m; logic [COLS-1:0] q, d;
      m = $urandom % 3;
      for (int w = 0; w < COLS/32; w++) begin q[w*32 +: 32] = $urandom; d[w*32 +: 32] = $urandom; end
      @(negedge clk);
      search_en = (m == 1); write_en = (m == 2); query = q; wdata = d;
      @(negedge clk);
      case (m)
        0: chk('0, '0, '0, '0);
        1: chk(q, ~q, '0, '0);
        default: chk('0, '0, d, ~d);
      endcase
      search_en = 0; write_en = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
