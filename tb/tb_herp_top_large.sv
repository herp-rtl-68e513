// tb_herp_top_large: end-to-end test of the accelerator at the published array and HV sizes:
// HV 2048, 128x128 arrays, 4 cache slots, with 16 units instead of the default 2048 (a
// 2048-unit build is too large to simulate). 17 buckets compete for 16 units, so
// loads, evictions and cache reuse all occur. The test body is in herp_top_test.svh.
module tb_herp_top_large;
  import herp_pkg::*;
  import tb_herp_pkg::*;
  localparam int HV = 2048, AR = 128, AC = 128, U = 16, QB = 16, CS = 4, THR = 800, NQ = 160, NB = 17, BASE = 600;
  logic clk = 0, rst_n = 1;
  logic q_valid = 0, q_ready; qid_t q_qid = '0; logic [31:0] q_mz = '0; logic [2:0] q_charge = '0; logic [HV-1:0] q_hv = '0;
  logic pl_valid = 0, pl_ready; bucket_t pl_bucket = '0;
  logic mem_rd_valid, mem_rd_ready, mem_rd_hdr; bucket_t mem_rd_bucket; logic [$clog2(AR)-1:0] mem_rd_row;
  logic mem_rsp_valid; logic [HV-1:0] mem_rsp_hv; logic [$clog2(AR):0] mem_rsp_count; logic [$clog2(HV+1)-1:0] mem_rsp_thr;
  logic mem_wr_valid, mem_wr_ready; bucket_t mem_wr_bucket; logic [$clog2(AR)-1:0] mem_wr_row; logic [HV-1:0] mem_wr_hv; logic [$clog2(AR):0] mem_wr_count;
  logic [U-1:0] res_valid; result_t [U-1:0] res;
  logic [U-1:0] unit_valid; bucket_t [U-1:0] unit_bucket;
  logic [31:0] n_dispatch, n_demand_loads, n_preloads, n_evictions, n_overtakes, n_cache_hits, n_cache_misses, n_writethrough;

  herp_top #(.UNITS(U)) dut (.*);
  dram_model #(.HV_DIM(HV), .R(AR), .DW($clog2(HV+1)), .LAT(4), .THR(THR)) mem (
    .clk, .rd_valid(mem_rd_valid), .rd_ready(mem_rd_ready), .rd_hdr(mem_rd_hdr), .rd_bucket(mem_rd_bucket), .rd_row(mem_rd_row),
    .rsp_valid(mem_rsp_valid), .rsp_hv(mem_rsp_hv), .rsp_count(mem_rsp_count), .rsp_thr(mem_rsp_thr),
    .wr_valid(mem_wr_valid), .wr_ready(mem_wr_ready), .wr_bucket(mem_wr_bucket), .wr_row(mem_wr_row), .wr_hv(mem_wr_hv), .wr_count(mem_wr_count));

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("watchdog expired"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

`include "herp_top_test.svh"
endmodule
