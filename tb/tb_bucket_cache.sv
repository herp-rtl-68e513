// tb_bucket_cache: fills two slots, checks lookup hit/miss, header fields, row read data
// (one cycle latency), invalidation through the header, and the round-robin victim pointer.
module tb_bucket_cache;
  import herp_pkg::*;
  localparam int HV = 128, R = 8, SL = 4, DW = 12, RW = $clog2(R), SW = 2;
  logic clk = 0, rst_n = 1;
  bucket_t lk_bucket = '0; logic lk_hit; logic [SW-1:0] lk_slot; logic [RW:0] lk_count; logic [DW-1:0] lk_thr;
  logic rd_en = 0; logic [SW-1:0] rd_slot = '0; logic [RW-1:0] rd_row = '0; logic [HV-1:0] rd_hv;
  logic wr_en = 0; logic [SW-1:0] wr_slot = '0; logic [RW-1:0] wr_row = '0; logic [HV-1:0] wr_hv = '0;
  logic hw_en = 0; logic [SW-1:0] hw_slot = '0; logic hw_valid = 0; bucket_t hw_bucket = '0; logic [RW:0] hw_count = '0; logic [DW-1:0] hw_thr = '0;
  logic alloc = 0; logic [SW-1:0] victim;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  initial #1 rst_n = 0;
  bucket_cache #(.HV_DIM(HV), .R(R), .SLOTS(SL), .DW(DW)) dut (.*);
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic logic [HV-1:0] pat(int s, int r); return {4{32'(s * 1000 + r) ^ 32'h5bd1e995}}; endfunction
  task automatic chk(bit c, string m); checks++; if (!c) begin failures++; $display("FAIL %s", m); end endtask
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); lk_bucket = 0; #1 chk(!lk_hit, "miss on empty cache");
    for (int s = 0; s < 2; s++) begin
      for (int r = 0; r < R; r++) begin
        wr_en = 1; wr_slot = SW'(s); wr_row = RW'(r); wr_hv = pat(s, r); @(negedge clk);
      end
      wr_en = 0; hw_en = 1; hw_slot = SW'(s); hw_valid = 1; hw_bucket = bucket_t'(100 + s); hw_count = (RW+1)'(3 + s); hw_thr = DW'(50 + s);
      @(negedge clk); hw_en = 0;
    end
    for (int s = 0; s < 2; s++) begin
      lk_bucket = bucket_t'(100 + s); #1;
      chk(lk_hit && lk_slot == SW'(s) && lk_count == (RW+1)'(3 + s) && lk_thr == DW'(50 + s), "lookup");
      for (int r = 0; r < R; r++) begin
        @(negedge clk); rd_en = 1; rd_slot = SW'(s); rd_row = RW'(r);
        @(negedge clk); rd_en = 0; chk(rd_hv == pat(s, r), "row read");
      end
    end
    lk_bucket = 102; #1 chk(!lk_hit, "miss on absent bucket");
    @(negedge clk); hw_en = 1; hw_slot = 0; hw_valid = 0; hw_bucket = 100; @(negedge clk); hw_en = 0;
    lk_bucket = 100; #1 chk(!lk_hit, "invalidated slot misses");
    for (int i = 0; i < 6; i++) begin
      chk(victim == SW'(i % SL), "round-robin victim");
      @(negedge clk); alloc = 1; @(negedge clk); alloc = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
