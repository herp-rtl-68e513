// tb_scheduler: 2 units, 6-entry buffer model. Checks (1) a preload fills a free unit,
// (2) a query of a resident bucket is dispatched to that unit's FIFO and overtakes an older
// query of an absent bucket, (3) a demand load is issued for an absent bucket into the
// free unit, (4) with both units taken, the least frequently used idle unit not needed by
// buffered queries is evicted, (5) a busy unit is never evicted, and the counters.
module tb_scheduler;
  import herp_pkg::*;
  localparam int U = 2, QB = 6, UW = 1, IW = 3;
  logic clk = 0, rst_n = 1;
  logic [QB-1:0] e_valid = '0; bucket_t [QB-1:0] e_bucket = '0;
  logic rm; logic [IW-1:0] rm_idx;
  logic [U-1:0] u_full = '0, u_busy = '0; logic push; logic [UW-1:0] push_unit;
  logic pl_valid = 0; bucket_t pl_bucket = '0; logic pl_ready;
  logic ld_req_valid, ld_req_ready = 1; bucket_t ld_req_bucket; logic [UW-1:0] ld_req_unit; logic ld_done = 0;
  logic [U-1:0] res_valid; bucket_t [U-1:0] res_bucket;
  logic [31:0] n_dispatch, n_demand_loads, n_preloads, n_evictions, n_overtakes;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  initial #1 rst_n = 0;
  scheduler #(.UNITS(U), .QB_DEPTH(QB)) dut (.*);
  initial begin
    repeat (3000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(bit c, string m); checks++; if (!c) begin failures++; $display("FAIL %s at %0t", m, $time); end endtask
  // buffer model: list of buckets
  int buf_b [$];
  always_comb begin
    e_valid = '0; e_bucket = '0;
    for (int i = 0; i < QB; i++) if (i < buf_b.size()) begin e_valid[i] = 1; e_bucket[i] = bucket_t'(buf_b[i]); end
  end
  // controller model: finish a load 3 cycles after it was accepted
  int ld_cnt = 0;
  int loads_b [$]; int loads_u [$];
  always @(posedge clk) begin
    ld_done <= 0;
    if (ld_req_valid && ld_req_ready) begin ld_cnt <= 3; loads_b.push_back(int'(ld_req_bucket)); loads_u.push_back(int'(ld_req_unit)); end
    else if (ld_cnt > 0) begin ld_cnt <= ld_cnt - 1; if (ld_cnt == 1) ld_done <= 1; end
  end
  int pushes_u [$]; int pushes_idx [$];
  always @(posedge clk) if (push) begin pushes_u.push_back(int'(push_unit)); pushes_idx.push_back(int'(rm_idx)); end
  always @(posedge clk) begin
    automatic bit r = rm; automatic int k = int'(rm_idx);
    #1 if (r) buf_b.delete(k);
  end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    // (1) preload bucket 5
    @(negedge clk); pl_valid = 1; pl_bucket = 5;
    while (!pl_ready) @(negedge clk);
    @(negedge clk); pl_valid = 0;
    repeat (8) @(negedge clk);
    chk(res_valid == 2'b01 && res_bucket[0] == 5, "preload into unit 0");
    // (2) buffer: [9, 5] -> 5 overtakes 9; (3) 9 is demand-loaded into unit 1
    buf_b.push_back(9); buf_b.push_back(5);
    @(negedge clk);
    repeat (10) @(negedge clk);
    chk(pushes_u.size() >= 1 && pushes_u[0] == 0 && pushes_idx[0] == 1, "resident query overtakes");
    chk(res_valid == 2'b11 && res_bucket[1] == 9, "demand load into free unit 1");
    chk(pushes_u.size() == 2 && pushes_u[1] == 1, "query of bucket 9 dispatched after load");
    chk(n_overtakes == 1, "overtake counted");
    // make unit 1 more used: three more queries of bucket 9
    for (int i = 0; i < 3; i++) begin buf_b.push_back(9); @(negedge clk); @(negedge clk); end
    // (4) absent bucket 11: LFU is unit 0 (1 use) vs unit 1 (4 uses)
    buf_b.push_back(11);
    repeat (10) @(negedge clk);
    chk(loads_b.size() == 3 && loads_b[2] == 11 && loads_u[2] == 0, "LFU eviction of unit 0");
    chk(n_evictions == 1 && res_bucket[0] == 11, "eviction counted");
    // (5) both busy: absent bucket waits; then unit 1 becomes idle and is evicted
    u_busy = 2'b11; buf_b.push_back(20);
    repeat (10) @(negedge clk);
    chk(loads_b.size() == 3, "no eviction of busy units");
    u_busy = 2'b01;
    repeat (10) @(negedge clk);
    chk(loads_b.size() == 4 && loads_u[3] == 1 && res_bucket[1] == 20, "idle unit evicted after busy");
    // (6) full FIFO blocks dispatch
    u_full = 2'b10; buf_b.push_back(20);
    repeat (5) @(negedge clk);
    chk(buf_b.size() == 1, "full FIFO holds query");
    u_full = 2'b00; repeat (3) @(negedge clk);
    chk(buf_b.size() == 0, "query dispatched after FIFO frees");
    chk(n_preloads == 1 && n_demand_loads == 3 && n_evictions == 2 && n_dispatch == 8, "counters");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
