// tb_herp_top: end-to-end test of the accelerator at reduced sizes (HV 256 bits, 16-row
// arrays of 64 columns, 2 units, 3 cache slots) so that eviction and every other
// mechanism happen many times in a short run. The test body is in herp_top_test.svh.
module tb_herp_top;
  import herp_pkg::*;
  import tb_herp_pkg::*;
  localparam int HV = 256, AR = 16, AC = 64, U = 2, QB = 4, CS = 3, THR = 60, NQ = 120, NB = 5, BASE = 600;
  logic clk = 0, rst_n = 1;
  logic q_valid = 0, q_ready; qid_t q_qid = '0; logic [31:0] q_mz = '0; logic [2:0] q_charge = '0; logic [HV-1:0] q_hv = '0;
  logic pl_valid = 0, pl_ready; bucket_t pl_bucket = '0;
  logic mem_rd_valid, mem_rd_ready, mem_rd_hdr; bucket_t mem_rd_bucket; logic [$clog2(AR)-1:0] mem_rd_row;
  logic mem_rsp_valid; logic [HV-1:0] mem_rsp_hv; logic [$clog2(AR):0] mem_rsp_count; logic [$clog2(HV+1)-1:0] mem_rsp_thr;
  logic mem_wr_valid, mem_wr_ready; bucket_t mem_wr_bucket; logic [$clog2(AR)-1:0] mem_wr_row; logic [HV-1:0] mem_wr_hv; logic [$clog2(AR):0] mem_wr_count;
  logic [U-1:0] res_valid; result_t [U-1:0] res;
  logic [U-1:0] unit_valid; bucket_t [U-1:0] unit_bucket;
  logic [31:0] n_dispatch, n_demand_loads, n_preloads, n_evictions, n_overtakes, n_cache_hits, n_cache_misses, n_writethrough;

  herp_top #(.HV_DIM(HV), .ARR_ROWS(AR), .ARR_COLS(AC), .UNITS(U), .FIFO_DEPTH(2), .QB_DEPTH(QB), .CACHE_SLOTS(CS)) dut (.*);
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
