// tb_controller: controller with its bucket cache against the behavioural DRAM.
// Checks: a first load of a bucket misses the cache and copies header and rows from DRAM
// into the unit; a second load of it hits the cache and reads no DRAM; a new cluster is
// written through to DRAM and into the cached copy; after the cache slot is reused the
// bucket reloads from DRAM including the new cluster; two slots offering new clusters at
// once are both served. Unit writes are captured into a software image of each unit.
module tb_controller;
  import herp_pkg::*;
  import tb_herp_pkg::*;
  localparam int HV = 256, R = 8, U = 2, CS = 2, DW = 12, RW = $clog2(R), UW = 1, THR = 300;
  logic clk = 0, rst_n = 1;
  logic ld_req_valid = 0, ld_req_ready; bucket_t ld_req_bucket = '0; logic [UW-1:0] ld_req_unit = '0; logic ld_done;
  logic [UW-1:0] ld_unit; logic ld_wr_en; logic [RW-1:0] ld_wr_row; logic [HV-1:0] ld_wr_hv;
  logic ld_cfg_valid; bucket_t ld_cfg_bucket; logic [RW:0] ld_cfg_count; logic [DW-1:0] ld_cfg_thr;
  logic [U-1:0] nc_valid = '0, nc_ready; bucket_t [U-1:0] nc_bucket = '0; logic [U-1:0][RW-1:0] nc_row = '0;
  logic [U-1:0][RW:0] nc_count = '0; logic [U-1:0][HV-1:0] nc_hv = '0;
  logic mem_rd_valid, mem_rd_ready, mem_rd_hdr; bucket_t mem_rd_bucket; logic [RW-1:0] mem_rd_row;
  logic mem_rsp_valid; logic [HV-1:0] mem_rsp_hv; logic [RW:0] mem_rsp_count; logic [DW-1:0] mem_rsp_thr;
  logic mem_wr_valid, mem_wr_ready; bucket_t mem_wr_bucket; logic [RW-1:0] mem_wr_row; logic [HV-1:0] mem_wr_hv; logic [RW:0] mem_wr_count;
  logic [31:0] n_cache_hits, n_cache_misses, n_writethrough;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  initial #1 rst_n = 0;
  controller #(.HV_DIM(HV), .R(R), .UNITS(U), .CACHE_SLOTS(CS), .DW(DW)) dut (.*);
  dram_model #(.HV_DIM(HV), .R(R), .DW(DW), .LAT(3), .THR(THR)) mem (
    .clk, .rd_valid(mem_rd_valid), .rd_ready(mem_rd_ready), .rd_hdr(mem_rd_hdr), .rd_bucket(mem_rd_bucket), .rd_row(mem_rd_row),
    .rsp_valid(mem_rsp_valid), .rsp_hv(mem_rsp_hv), .rsp_count(mem_rsp_count), .rsp_thr(mem_rsp_thr),
    .wr_valid(mem_wr_valid), .wr_ready(mem_wr_ready), .wr_bucket(mem_wr_bucket), .wr_row(mem_wr_row), .wr_hv(mem_wr_hv), .wr_count(mem_wr_count));
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(bit c, string m); checks++; if (!c) begin failures++; $display("FAIL %s at %0t", m, $time); end endtask

  // software image of the units
  logic [HV-1:0] img [U][R];
  int img_cnt [U]; int img_b [U]; int img_thr [U];
  always @(posedge clk) begin
    if (ld_wr_en) img[ld_unit][ld_wr_row] <= ld_wr_hv;
    if (ld_cfg_valid) begin img_cnt[ld_unit] <= int'(ld_cfg_count); img_b[ld_unit] <= int'(ld_cfg_bucket); img_thr[ld_unit] <= int'(ld_cfg_thr); end
  end
  // reference contents of each bucket
  logic [HV-1:0] ref_rows [int]; int ref_cnt [int];
  function automatic void ref_init(int b);
    logic [MAXD-1:0] g;
    if (ref_cnt.exists(b)) return;
    ref_cnt[b] = gen_count(b, R);
    for (int r = 0; r < R; r++) begin g = gen_hv(b, r); ref_rows[b*64+r] = g[HV-1:0]; end
  endfunction

  task automatic load(int b, int u, bit exp_hit);
    int rd0, h0; rd0 = mem.n_rd; h0 = int'(n_cache_hits);
    ref_init(b);
    @(negedge clk); ld_req_valid = 1; ld_req_bucket = bucket_t'(b); ld_req_unit = UW'(u);
    while (!ld_req_ready) @(negedge clk);
    @(negedge clk); ld_req_valid = 0;
    while (!ld_done) @(negedge clk);
    @(negedge clk);
    chk(img_b[u] == b && img_cnt[u] == ref_cnt[b] && img_thr[u] == THR, $sformatf("specs of bucket %0d", b));
    for (int r = 0; r < ref_cnt[b]; r++) chk(img[u][r] == ref_rows[b*64+r], $sformatf("row %0d of bucket %0d", r, b));
    if (exp_hit) chk(mem.n_rd == rd0 && int'(n_cache_hits) == h0 + 1, "cache hit reads no DRAM");
    else         chk(mem.n_rd == rd0 + 1 + ref_cnt[b] && int'(n_cache_hits) == h0, "miss reads header and rows from DRAM");
  endtask

  task automatic new_clusters(int mask, int b0, int b1);
    int bs [2]; bs[0] = b0; bs[1] = b1;
    @(negedge clk);
    for (int u = 0; u < U; u++) if (mask[u]) begin
      logic [MAXD-1:0] g; int b; b = bs[u]; ref_init(b);
      g = gen_hv(5000 + b, ref_cnt[b]);
      nc_valid[u] = 1; nc_bucket[u] = bucket_t'(b); nc_row[u] = RW'(ref_cnt[b]); nc_count[u] = (RW+1)'(ref_cnt[b] + 1); nc_hv[u] = g[HV-1:0];
      ref_rows[b*64+ref_cnt[b]] = g[HV-1:0]; ref_cnt[b]++;
    end
    while (nc_valid != 0) begin
      @(posedge clk); #1; nc_valid = nc_valid & ~nc_ready_q;
    end
  endtask
  logic [U-1:0] nc_ready_q;
  always @(posedge clk) nc_ready_q <= nc_ready;

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    load(3, 1, 0);         // miss
    load(3, 0, 1);         // hit
    new_clusters(2'b10, 0, 3);
    chk(n_writethrough == 1 && mem.n_wr == 1, "write-through");
    load(3, 0, 1);         // hit, includes the new cluster
    load(4, 0, 0);         // miss, fills the other slot
    load(6, 1, 0);         // miss, reuses bucket 3's slot
    load(3, 1, 0);         // miss again: DRAM has the new cluster
    new_clusters(2'b11, 4, 3);
    chk(n_writethrough == 3, "two slots served");
    load(3, 0, 1);         // hit: the cached copy got the second new cluster too
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
