// tb_cluster_id_unit: loads bucket specs, then feeds search results and checks each
// decision: match (dist <= threshold) keeps the winning row, outlier takes row `count` and
// increments it with add_req, an empty bucket gives an outlier at row 0, a full bucket
// gives overflow without add_req. Results appear one cycle after res_valid.
module tb_cluster_id_unit;
  import herp_pkg::*;
  localparam int CAP = 8, DW = 12, RW = $clog2(CAP);
  logic clk = 0, rst_n = 1;
  logic cfg_valid = 0; bucket_t cfg_bucket = '0; logic [RW:0] cfg_count = '0; logic [DW-1:0] cfg_thr = '0;
  logic [RW:0] count; bucket_t bucket;
  logic res_valid = 0; logic [DW-1:0] min_dist = '0; logic [RW-1:0] min_idx = '0; logic any_valid = 0; qid_t res_qid = '0;
  logic out_valid; result_t out; logic add_req; logic [RW-1:0] add_row;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // falling edge applies the asynchronous reset at once
  cluster_id_unit #(.CAP(CAP), .DW(DW)) dut (.*);
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic cfg(int b, int c, int t);
    @(negedge clk); cfg_valid = 1; cfg_bucket = bucket_t'(b); cfg_count = (RW+1)'(c); cfg_thr = DW'(t);
    @(negedge clk); cfg_valid = 0;
  endtask
  // present one result; software decision; compare
  int sw_count;
  task automatic res(int d, int idx, bit any, int q, int thr, int b);
    bit m; int erow; bit enew, eovf;
    m = any && d <= thr;
    enew = 0; eovf = 0;
    if (m) erow = idx;
    else if (sw_count < CAP) begin erow = sw_count; enew = 1; sw_count++; end
    else begin erow = 0; eovf = 1; end
    @(negedge clk); res_valid = 1; min_dist = DW'(d); min_idx = RW'(idx); any_valid = any; res_qid = qid_t'(q);
    @(negedge clk); res_valid = 0;
    checks++;
    if (!out_valid || out.qid != qid_t'(q) || out.bucket != bucket_t'(b) || int'(out.row) != erow ||
        out.is_new != enew || out.overflow != eovf || add_req != enew || (enew && int'(add_row) != erow) ||
        int'(out.distance) != (any ? d : 0) && any) begin
      failures++; $display("FAIL q=%0d row=%0d new=%0b ovf=%0b add=%0b exp row=%0d new=%0b ovf=%0b", q, out.row, out.is_new, out.overflow, add_req, erow, enew, eovf);
    end
    checks++;
    if (int'(count) != sw_count) begin failures++; $display("FAIL count %0d exp %0d", count, sw_count); end
  endtask
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    cfg(321, 3, 200); sw_count = 3;
    res(150, 2, 1, 1, 200, 321);    // match
    res(200, 1, 1, 2, 200, 321);    // match at threshold
    res(201, 0, 1, 3, 200, 321);    // outlier -> row 3
    for (int i = 0; i < 30; i++) begin
      int d; d = $urandom % 400;
      res(d, $urandom % CAP, 1, 10 + i, 200, 321);   // runs into a full bucket
    end
    cfg(77, 0, 50); sw_count = 0;
    res(0, 0, 0, 100, 50, 77);      // empty bucket: new cluster at 0
    res(10, 0, 1, 101, 50, 77);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
