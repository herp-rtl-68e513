// herp_top: HERP accelerator for database search and cluster expansion of encoded spectra.
//
// Queries (binary hypervectors with precursor m/z and charge) enter the query buffer with
// their bucket index from bucket_calc. The scheduler dispatches each query to the FIFO of
// the bucket slot (CAM unit) that holds its bucket, loading the bucket first through the
// controller (from the bucket cache or main memory, evicting the least frequently used
// idle unit) when it is not resident. All UNITS slots search in parallel, one query per
// bucket at a time; each result says whether the query matched an existing cluster or was
// an outlier that defined a new cluster in its bucket, and new clusters are written through
// to main memory and the cache.
//
// Setup (the paper's Phase II) is done by presenting bucket IDs on pl_* before queries:
// each preload fills a free unit. Runtime (Phase III) needs no further control.
// Ports: q_* valid/ready query input; pl_* preload; mem_* main memory (see controller);
// res_valid[u]/res[u] one result per slot and cycle; statistics counters.
// Sizes: HV 2048 and 128x128 arrays follow the paper. Its 512 MB of CAM would be 16384 units;
// the UNITS default of 2048 keeps the flattened design within the memory of the lint and
// synthesis tools, and any other value can be set.
//
// Lint note: the assertions are disabled with 'disable iff (!rst_n)', which samples rst_n at
// the clock, while the flops use it as an asynchronous reset. Lint reports this as a net used
// both synchronously and asynchronously (SYNCASYNCNET); only simulation checks read the
// synchronous use, so the circuit itself has a purely asynchronous reset.
module herp_top
  import herp_pkg::*;
#(
  parameter int unsigned HV_DIM      = herp_pkg::HERP_HV_DIM,
  parameter int unsigned ARR_ROWS    = herp_pkg::HERP_ARR_ROWS,
  parameter int unsigned ARR_COLS    = herp_pkg::HERP_ARR_COLS,
  parameter int unsigned ROW_BLOCKS  = 1,
  parameter int unsigned UNITS       = 2048,
  parameter int unsigned FIFO_DEPTH  = 4,
  parameter int unsigned QB_DEPTH    = 16,
  parameter int unsigned CACHE_SLOTS = 4,
  localparam int unsigned R  = ROW_BLOCKS * ARR_ROWS,
  localparam int unsigned RW = $clog2(R),
  localparam int unsigned DW = $clog2(HV_DIM + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // queries
  input  logic                 q_valid,
  output logic                 q_ready,
  input  qid_t                 q_qid,
  input  logic [31:0]          q_mz,        // precursor m/z, Q16.16
  input  logic [2:0]           q_charge,
  input  logic [HV_DIM-1:0]    q_hv,
  // setup preload
  input  logic                 pl_valid,
  input  bucket_t              pl_bucket,
  output logic                 pl_ready,
  // main memory
  output logic                 mem_rd_valid,
  input  logic                 mem_rd_ready,
  output logic                 mem_rd_hdr,
  output bucket_t              mem_rd_bucket,
  output logic [RW-1:0]        mem_rd_row,
  input  logic                 mem_rsp_valid,
  input  logic [HV_DIM-1:0]    mem_rsp_hv,
  input  logic [RW:0]          mem_rsp_count,
  input  logic [DW-1:0]        mem_rsp_thr,
  output logic                 mem_wr_valid,
  input  logic                 mem_wr_ready,
  output bucket_t              mem_wr_bucket,
  output logic [RW-1:0]        mem_wr_row,
  output logic [HV_DIM-1:0]    mem_wr_hv,
  output logic [RW:0]          mem_wr_count,
  // results, one lane per slot
  output logic [UNITS-1:0]     res_valid,
  output result_t [UNITS-1:0]  res,
  // residency: which bucket each unit holds
  output logic [UNITS-1:0]     unit_valid,
  output bucket_t [UNITS-1:0]  unit_bucket,
  // statistics
  output logic [31:0]          n_dispatch,
  output logic [31:0]          n_demand_loads,
  output logic [31:0]          n_preloads,
  output logic [31:0]          n_evictions,
  output logic [31:0]          n_overtakes,
  output logic [31:0]          n_cache_hits,
  output logic [31:0]          n_cache_misses,
  output logic [31:0]          n_writethrough
);
  localparam int unsigned UW = (UNITS > 1) ? $clog2(UNITS) : 1;
  localparam int unsigned IW = $clog2(QB_DEPTH);

  // query buffer
  bucket_t q_bucket;
  bucket_calc u_bcalc (.mz(q_mz), .charge(q_charge), .bucket(q_bucket));

  logic [QB_DEPTH-1:0]             e_valid;
  bucket_t [QB_DEPTH-1:0]          e_bucket;
  qid_t [QB_DEPTH-1:0]             e_qid;
  logic [QB_DEPTH-1:0][HV_DIM-1:0] e_hv;
  logic                            rm;
  logic [IW-1:0]                   rm_idx;
  query_buffer #(.HV_DIM(HV_DIM), .DEPTH(QB_DEPTH)) u_qbuf (
    .clk, .rst_n, .in_valid(q_valid), .in_ready(q_ready), .in_qid(q_qid), .in_bucket(q_bucket),
    .in_hv(q_hv), .e_valid, .e_bucket, .e_qid, .e_hv, .rm, .rm_idx);

  // scheduler
  logic [UNITS-1:0] u_full, u_busy;
  logic             push;
  logic [UW-1:0]    push_unit;
  logic             ld_req_valid, ld_req_ready, ld_done;
  bucket_t          ld_req_bucket;
  logic [UW-1:0]    ld_req_unit;
  scheduler #(.UNITS(UNITS), .QB_DEPTH(QB_DEPTH)) u_sched (
    .clk, .rst_n, .e_valid, .e_bucket, .rm, .rm_idx, .u_full, .u_busy, .push, .push_unit,
    .pl_valid, .pl_bucket, .pl_ready,
    .ld_req_valid, .ld_req_ready, .ld_req_bucket, .ld_req_unit, .ld_done,
    .res_valid(unit_valid), .res_bucket(unit_bucket),
    .n_dispatch, .n_demand_loads, .n_preloads, .n_evictions, .n_overtakes);

  // controller with bucket cache
  logic [UW-1:0]                  ld_unit;
  logic                           ld_wr_en, ld_cfg_valid;
  logic [RW-1:0]                  ld_wr_row;
  logic [HV_DIM-1:0]              ld_wr_hv;
  bucket_t                        ld_cfg_bucket;
  logic [RW:0]                    ld_cfg_count;
  logic [DW-1:0]                  ld_cfg_thr;
  logic [UNITS-1:0]               nc_valid, nc_ready;
  bucket_t [UNITS-1:0]            nc_bucket;
  logic [UNITS-1:0][RW-1:0]       nc_row;
  logic [UNITS-1:0][RW:0]         nc_count;
  logic [UNITS-1:0][HV_DIM-1:0]   nc_hv;
  controller #(.HV_DIM(HV_DIM), .R(R), .UNITS(UNITS), .CACHE_SLOTS(CACHE_SLOTS), .DW(DW)) u_ctrl (
    .clk, .rst_n, .ld_req_valid, .ld_req_ready, .ld_req_bucket, .ld_req_unit, .ld_done,
    .ld_unit, .ld_wr_en, .ld_wr_row, .ld_wr_hv, .ld_cfg_valid, .ld_cfg_bucket, .ld_cfg_count, .ld_cfg_thr,
    .nc_valid, .nc_ready, .nc_bucket, .nc_row, .nc_count, .nc_hv,
    .mem_rd_valid, .mem_rd_ready, .mem_rd_hdr, .mem_rd_bucket, .mem_rd_row,
    .mem_rsp_valid, .mem_rsp_hv, .mem_rsp_count, .mem_rsp_thr,
    .mem_wr_valid, .mem_wr_ready, .mem_wr_bucket, .mem_wr_row, .mem_wr_hv, .mem_wr_count,
    .n_cache_hits, .n_cache_misses, .n_writethrough);

  // bucket slots
  for (genvar u = 0; u < UNITS; u++) begin : g_slot
    logic sel;
    assign sel = (ld_unit == UW'(u));
    bucket_slot #(.HV_DIM(HV_DIM), .ARR_ROWS(ARR_ROWS), .ARR_COLS(ARR_COLS), .ROW_BLOCKS(ROW_BLOCKS),
                  .FIFO_DEPTH(FIFO_DEPTH)) u_slot (
      .clk, .rst_n,
      .push(push && push_unit == UW'(u)), .push_qid(e_qid[rm_idx]), .push_hv(e_hv[rm_idx]),
      .fifo_full(u_full[u]), .busy(u_busy[u]),
      .ld_wr_en(ld_wr_en && sel), .ld_wr_row, .ld_wr_hv,
      .ld_cfg_valid(ld_cfg_valid && sel), .ld_cfg_bucket, .ld_cfg_count, .ld_cfg_thr,
      .res_valid(res_valid[u]), .res(res[u]),
      .nc_valid(nc_valid[u]), .nc_ready(nc_ready[u]), .nc_bucket(nc_bucket[u]),
      .nc_row(nc_row[u]), .nc_count(nc_count[u]), .nc_hv(nc_hv[u]));
  end
endmodule
