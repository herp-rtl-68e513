// controller: bucket load engine, main-memory interface and owner of the bucket cache.
//
// Load: for a request (bucket b, unit u) from the scheduler the controller looks b up in
// the bucket cache.
//   cache hit  - it copies count rows from the cache into unit u (2 cycles per row: read,
//                write), then writes the bucket specs (ID, count, threshold) into the unit;
//   cache miss - it reads the bucket header (count, threshold) and then each row from main
//                memory, one request outstanding at a time; each row goes into unit u and
//                into the cache slot picked by the cache's round-robin pointer, which is
//                marked invalid during the fill and valid with its specs at the end.
// ld_done pulses when the unit holds the bucket.
// New cluster (write-through): when a slot offers a new cluster (nc_*) and no load is
// running, the controller writes the HV and the new cluster count to main memory and, if
// the bucket is cached, into the cache row and header, then acknowledges the slot. Slots
// are served round-robin. New clusters go before a waiting load because slots stall on them.
//
// Main memory port: rd_* request (hdr=1 asks for the header of the bucket) with valid/ready,
// answered by one rsp_valid cycle; wr_* with valid/ready. The controller, DRAM transfers and
// the bucket cache are from the paper; this protocol, the serial row transfer and the
// write-through of new clusters are this design's choices (the paper only says a new
// cluster is added to the bucket's CAM block in the next update).
//
// Lint note: the assertions are disabled with 'disable iff (!rst_n)', which samples rst_n at
// the clock, while the flops use it as an asynchronous reset. Lint reports this as a net used
// both synchronously and asynchronously (SYNCASYNCNET); only simulation checks read the
// synchronous use, so the circuit itself has a purely asynchronous reset.
module controller
  import herp_pkg::*;
#(
  parameter int unsigned HV_DIM       = 2048,
  parameter int unsigned R            = 128,
  parameter int unsigned UNITS        = 2048,
  parameter int unsigned CACHE_SLOTS  = 4,
  parameter int unsigned DW           = 12,
  localparam int unsigned RW          = $clog2(R),
  localparam int unsigned UW          = (UNITS > 1) ? $clog2(UNITS) : 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // load requests from the scheduler
  input  logic                          ld_req_valid,
  output logic                          ld_req_ready,
  input  bucket_t                       ld_req_bucket,
  input  logic [UW-1:0]                 ld_req_unit,
  output logic                          ld_done,
  // write port into the CAM units (ld_unit selects the unit)
  output logic [UW-1:0]                 ld_unit,
  output logic                          ld_wr_en,
  output logic [RW-1:0]                 ld_wr_row,
  output logic [HV_DIM-1:0]             ld_wr_hv,
  output logic                          ld_cfg_valid,
  output bucket_t                       ld_cfg_bucket,
  output logic [RW:0]                   ld_cfg_count,
  output logic [DW-1:0]                 ld_cfg_thr,
  // new clusters from the slots
  input  logic [UNITS-1:0]              nc_valid,
  output logic [UNITS-1:0]              nc_ready,
  input  bucket_t [UNITS-1:0]           nc_bucket,
  input  logic [UNITS-1:0][RW-1:0]      nc_row,
  input  logic [UNITS-1:0][RW:0]        nc_count,
  input  logic [UNITS-1:0][HV_DIM-1:0]  nc_hv,
  // main memory
  output logic                          mem_rd_valid,
  input  logic                          mem_rd_ready,
  output logic                          mem_rd_hdr,
  output bucket_t                       mem_rd_bucket,
  output logic [RW-1:0]                 mem_rd_row,
  input  logic                          mem_rsp_valid,
  input  logic [HV_DIM-1:0]             mem_rsp_hv,
  input  logic [RW:0]                   mem_rsp_count,
  input  logic [DW-1:0]                 mem_rsp_thr,
  output logic                          mem_wr_valid,
  input  logic                          mem_wr_ready,
  output bucket_t                       mem_wr_bucket,
  output logic [RW-1:0]                 mem_wr_row,
  output logic [HV_DIM-1:0]             mem_wr_hv,
  output logic [RW:0]                   mem_wr_count,
  // statistics
  output logic [31:0]                   n_cache_hits,
  output logic [31:0]                   n_cache_misses,
  output logic [31:0]                   n_writethrough
);
  localparam int unsigned SW = (CACHE_SLOTS > 1) ? $clog2(CACHE_SLOTS) : 1;

  typedef enum logic [3:0] {
    C_IDLE, C_NC, C_LOOK, C_CRD, C_CWR, C_MHDR, C_MHDRW, C_MROW, C_MROWW, C_CFG
  } state_e;
  state_e st;

  bucket_t       bkt;
  logic [RW:0]   cnt, row;
  logic [DW-1:0] thr;
  logic [SW-1:0] cslot;
  logic [UW-1:0] ncsel, rr;
  logic          hit_q;     // the running load hit in the cache

  // cache
  logic              lk_hit;
  logic [SW-1:0]     lk_slot, victim;
  logic [RW:0]       lk_count;
  logic [DW-1:0]     lk_thr;
  logic              c_rd_en, c_wr_en, c_hw_en, c_hw_valid, c_alloc;
  logic [SW-1:0]     c_wr_slot, c_hw_slot;
  logic [RW-1:0]     c_wr_row;
  logic [HV_DIM-1:0] c_wr_hv, c_rd_hv;
  bucket_t           c_lk_bucket, c_hw_bucket;
  logic [RW:0]       c_hw_count;
  logic [DW-1:0]     c_hw_thr;

  bucket_cache #(.HV_DIM(HV_DIM), .R(R), .SLOTS(CACHE_SLOTS), .DW(DW)) u_cache (
    .clk, .rst_n,
    .lk_bucket(c_lk_bucket), .lk_hit, .lk_slot, .lk_count, .lk_thr,
    .rd_en(c_rd_en), .rd_slot(cslot), .rd_row(RW'(row)), .rd_hv(c_rd_hv),
    .wr_en(c_wr_en), .wr_slot(c_wr_slot), .wr_row(c_wr_row), .wr_hv(c_wr_hv),
    .hw_en(c_hw_en), .hw_slot(c_hw_slot), .hw_valid(c_hw_valid), .hw_bucket(c_hw_bucket),
    .hw_count(c_hw_count), .hw_thr(c_hw_thr),
    .alloc(c_alloc), .victim);

  // round-robin choice among slots offering a new cluster
  logic          nc_any;
  logic [UW-1:0] nc_pick;
  always_comb begin
    nc_any = 1'b0; nc_pick = '0;
    for (int k = UNITS-1; k >= 0; k--) begin
      logic [UW-1:0] u;
      u = UW'((int'(rr) + k) % UNITS);
      if (nc_valid[u]) begin nc_any = 1'b1; nc_pick = UW'(u); end
    end
  end

  assign ld_req_ready = (st == C_IDLE) && !nc_any;
  assign c_lk_bucket  = (st == C_NC) ? nc_bucket[ncsel] : bkt;

  always_comb begin
    // defaults
    ld_wr_en = 1'b0; ld_wr_row = RW'(row); ld_wr_hv = c_rd_hv;
    ld_cfg_valid = (st == C_CFG); ld_cfg_bucket = bkt; ld_cfg_count = cnt; ld_cfg_thr = thr;
    mem_rd_valid = (st == C_MHDR) || (st == C_MROW);
    mem_rd_hdr = (st == C_MHDR); mem_rd_bucket = bkt; mem_rd_row = RW'(row);
    mem_wr_valid = (st == C_NC);
    mem_wr_bucket = nc_bucket[ncsel]; mem_wr_row = nc_row[ncsel];
    mem_wr_hv = nc_hv[ncsel]; mem_wr_count = nc_count[ncsel];
    nc_ready = '0;
    c_rd_en = (st == C_CRD);
    c_wr_en = 1'b0; c_wr_slot = cslot; c_wr_row = RW'(row); c_wr_hv = mem_rsp_hv;
    c_hw_en = 1'b0; c_hw_slot = cslot; c_hw_valid = 1'b1; c_hw_bucket = bkt; c_hw_count = cnt; c_hw_thr = thr;
    c_alloc = 1'b0;
    unique case (st)
      C_CWR: ld_wr_en = 1'b1;
      C_MROWW: if (mem_rsp_valid) begin
        ld_wr_en = 1'b1; ld_wr_hv = mem_rsp_hv;
        c_wr_en  = 1'b1;
      end
      C_LOOK: if (!lk_hit) begin            // claim a cache slot for the fill
        c_alloc = 1'b1; c_hw_en = 1'b1; c_hw_slot = victim; c_hw_valid = 1'b0;
      end
      C_CFG: if (!hit_q) c_hw_en = 1'b1;    // fill complete: slot becomes valid
      C_NC: if (mem_wr_ready) begin
        nc_ready[ncsel] = 1'b1;
        if (lk_hit) begin
          c_wr_en = 1'b1; c_wr_slot = lk_slot; c_wr_row = nc_row[ncsel]; c_wr_hv = nc_hv[ncsel];
          c_hw_en = 1'b1; c_hw_slot = lk_slot; c_hw_bucket = nc_bucket[ncsel];
          c_hw_count = nc_count[ncsel]; c_hw_thr = lk_thr;
        end
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_IDLE; bkt <= '0; cnt <= '0; row <= '0; thr <= '0; cslot <= '0; ncsel <= '0; rr <= '0;
      ld_unit <= '0; ld_done <= 1'b0; hit_q <= 1'b0;
      n_cache_hits <= '0; n_cache_misses <= '0; n_writethrough <= '0;
    end else begin
      ld_done <= 1'b0;
      unique case (st)
        C_IDLE: if (nc_any) begin
                  ncsel <= nc_pick; st <= C_NC;
                end else if (ld_req_valid) begin
                  bkt <= ld_req_bucket; ld_unit <= ld_req_unit; st <= C_LOOK;
                end
        C_NC:   if (mem_wr_ready) begin
                  n_writethrough <= n_writethrough + 1;
                  rr <= (32'(ncsel) == UNITS-1) ? '0 : ncsel + 1'b1;
                  st <= C_IDLE;
                end
        C_LOOK: begin
                  row <= '0; hit_q <= lk_hit;
                  if (lk_hit) begin
                    n_cache_hits <= n_cache_hits + 1;
                    cslot <= lk_slot; cnt <= lk_count; thr <= lk_thr;
                    st <= (lk_count == '0) ? C_CFG : C_CRD;
                  end else begin
                    n_cache_misses <= n_cache_misses + 1;
                    cslot <= victim; st <= C_MHDR;
                  end
                end
        C_CRD:  st <= C_CWR;
        C_CWR:  begin
                  row <= row + 1'b1;
                  st  <= (row + 1'b1 == cnt) ? C_CFG : C_CRD;
                end
        C_MHDR: if (mem_rd_ready) st <= C_MHDRW;
        C_MHDRW: if (mem_rsp_valid) begin
                  cnt <= mem_rsp_count; thr <= mem_rsp_thr;
                  st  <= (mem_rsp_count == '0) ? C_CFG : C_MROW;
                end
        C_MROW: if (mem_rd_ready) st <= C_MROWW;
        C_MROWW: if (mem_rsp_valid) begin
                  row <= row + 1'b1;
                  st  <= (row + 1'b1 == cnt) ? C_CFG : C_MROW;
                end
        C_CFG:  begin ld_done <= 1'b1; st <= C_IDLE; end
        default: st <= C_IDLE;
      endcase
    end
  end

  a_cnt: assert property (@(posedge clk) disable iff (!rst_n) (st == C_MHDRW && mem_rsp_valid) |-> (32'(mem_rsp_count) <= R));
endmodule
