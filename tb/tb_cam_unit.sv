// tb_cam_unit: a reduced unit (HV 256 bits = 4 arrays of 64 columns, 2 row blocks of 16
// rows) is loaded with generated HVs; queries near a chosen row and random queries are
// searched. Checks min distance and index against software, the 3-cycle latency, that rows
// at or above row_count never win, back-to-back searches, and a write followed by a search.
module tb_cam_unit;
  import tb_herp_pkg::*;
  localparam int HV = 256, AR = 16, AC = 64, RB = 2, R = AR*RB, RW = $clog2(R), DW = $clog2(HV+1);
  logic clk = 0, rst_n = 1;
  logic wr_en = 0, search_en = 0;
  logic [RW-1:0] wr_row = '0;
  logic [HV-1:0] wr_hv = '0, query = '0;
  logic [RW:0] row_count = '0;
  logic res_valid, any_valid;
  logic [DW-1:0] min_dist;
  logic [RW-1:0] min_idx;
  logic [HV-1:0] ref_rows [R];
  int checks = 0, failures = 0, cyc = 0;
  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // falling edge applies the asynchronous reset at once
  always @(posedge clk) cyc++;
  cam_unit #(.HV_DIM(HV), .ARR_ROWS(AR), .ARR_COLS(AC), .ROW_BLOCKS(RB)) dut (.*);
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic expect_min(logic [HV-1:0] q, output int em, output int ei, output bit ea);
    ea = 0; em = 0; ei = 0;
    for (int r = 0; r < int'(row_count); r++) begin
      int d; d = $countones(ref_rows[r] ^ q);
      if (!ea || d < em) begin ea = 1; em = d; ei = r; end
    end
  endtask

  // issue one search, wait for the result and check value and latency
  task automatic one(logic [HV-1:0] q);
    int em, ei, t0; bit ea;
    expect_min(q, em, ei, ea);
    @(negedge clk); search_en = 1; query = q; t0 = cyc;
    @(negedge clk); search_en = 0;
    while (!res_valid) @(negedge clk);
    checks++;
    if (cyc - t0 != 3) begin failures++; $display("FAIL latency %0d", cyc - t0); end
    checks++;
    if (any_valid != ea || (ea && (int'(min_dist) != em || int'(min_idx) != ei))) begin
      failures++; $display("FAIL got %0d@%0d any=%0b exp %0d@%0d any=%0b", min_dist, min_idx, any_valid, em, ei, ea);
    end
  endtask

  initial begin
    logic [MAXD-1:0] g;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int r = 0; r < R; r++) begin
      g = gen_hv(7, r); ref_rows[r] = g[HV-1:0];
      @(negedge clk); wr_en = 1; wr_row = RW'(r); wr_hv = ref_rows[r];
    end
    @(negedge clk); wr_en = 0;
    row_count = 0;  one(ref_rows[0]);                  // empty bucket
    row_count = R;
    for (int i = 0; i < 40; i++) begin
      int r; r = $urandom % R; g = flip_bits({{(MAXD-HV){1'b0}}, ref_rows[r]}, $urandom % 40, HV, i); one(g[HV-1:0]);
    end
    for (int i = 0; i < 10; i++) begin g = gen_hv(99, i); one(g[HV-1:0]); end
    row_count = 20; one(ref_rows[25]);                 // row 25 is not valid
    one(ref_rows[19]);                                 // second row block
    // back-to-back searches: results on consecutive cycles
    begin
      int e0, e1, i0, i1, n; bit a0, a1;
      expect_min(ref_rows[3], e0, i0, a0); expect_min(ref_rows[17], e1, i1, a1);
      @(negedge clk); search_en = 1; query = ref_rows[3];
      @(negedge clk); query = ref_rows[17];
      @(negedge clk); search_en = 0;
      @(negedge clk); checks++; if (!res_valid || min_idx != RW'(i0)) begin failures++; $display("FAIL b2b 0"); end
      @(negedge clk); checks++; if (!res_valid || min_idx != RW'(i1)) begin failures++; $display("FAIL b2b 1"); end
      n = 0;
    end
    // write then search next cycle sees the new row
    g = gen_hv(55, 1); ref_rows[20] = g[HV-1:0]; row_count = 21;
    @(negedge clk); wr_en = 1; wr_row = 20; wr_hv = ref_rows[20];
    @(negedge clk); wr_en = 0;
    one(ref_rows[20]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
