// bucket_slot: one bucket's search lane: query FIFO, CAM unit and cluster ID unit.
//
// Every slot works on its own bucket in parallel with the others (bucket-wise
// parallelism). A slot takes the oldest query of its FIFO, searches it against all clusters
// of the bucket, lets the cluster ID unit decide match or outlier, and for an outlier writes
// the query HV into the new row of the CAM unit and offers it on the nc_* port so that the
// controller can write the new cluster through to main memory and the bucket cache.
// The next query of the bucket is issued only after that, so it already sees a cluster the
// previous query defined (the paper's walkthrough: a query matches the cluster defined one
// cycle before). That serialisation is this design's way of honouring it; the paper does
// not say how the hardware resolves the dependence.
//
// Sequence per query (clock cycles): pop+search (1), CAM pipeline (3), decision (1), and for
// an outlier CAM write (1) plus the nc handshake (>=1). A match therefore takes 5 cycles
// from issue to the next issue, an outlier at least 7.
// Loading: while the slot is idle and its FIFO empty the controller may write rows with
// ld_wr_* and then the bucket specs with ld_cfg_*; the scheduler guarantees this.
//
// Lint note: the assertions are disabled with 'disable iff (!rst_n)', which samples rst_n at
// the clock, while the flops use it as an asynchronous reset. Lint reports this as a net used
// both synchronously and asynchronously (SYNCASYNCNET); only simulation checks read the
// synchronous use, so the circuit itself has a purely asynchronous reset.
module bucket_slot
  import herp_pkg::*;
#(
  parameter int unsigned HV_DIM     = 2048,
  parameter int unsigned ARR_ROWS   = 128,
  parameter int unsigned ARR_COLS   = 128,
  parameter int unsigned ROW_BLOCKS = 1,
  parameter int unsigned FIFO_DEPTH = 4,
  localparam int unsigned R  = ROW_BLOCKS * ARR_ROWS,
  localparam int unsigned RW = $clog2(R),
  localparam int unsigned DW = $clog2(HV_DIM + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // queries from the scheduler
  input  logic              push,
  input  qid_t              push_qid,
  input  logic [HV_DIM-1:0] push_hv,
  output logic              fifo_full,
  output logic              busy,        // FIFO not empty or a query in flight
  // bucket loading from the controller
  input  logic              ld_wr_en,
  input  logic [RW-1:0]     ld_wr_row,
  input  logic [HV_DIM-1:0] ld_wr_hv,
  input  logic              ld_cfg_valid,
  input  bucket_t           ld_cfg_bucket,
  input  logic [RW:0]       ld_cfg_count,
  input  logic [DW-1:0]     ld_cfg_thr,
  // results
  output logic              res_valid,
  output result_t           res,
  // new cluster, to be written through
  output logic              nc_valid,
  input  logic              nc_ready,
  output bucket_t           nc_bucket,
  output logic [RW-1:0]     nc_row,
  output logic [RW:0]       nc_count,
  output logic [HV_DIM-1:0] nc_hv
);
  typedef enum logic [1:0] {S_IDLE, S_WAIT, S_ADD, S_NC} state_e;
  state_e st;

  logic              f_empty, f_pop;
  logic [QID_W+HV_DIM-1:0] f_rdata;
  logic [$clog2(FIFO_DEPTH):0] f_level;   // occupancy, checked by an assertion
  query_fifo #(.W(QID_W + HV_DIM), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .push, .wdata({push_qid, push_hv}), .pop(f_pop),
    .rdata(f_rdata), .full(fifo_full), .empty(f_empty), .level(f_level));

  qid_t              cur_qid;
  logic [HV_DIM-1:0] cur_hv;
  logic              search_en;
  assign f_pop     = (st == S_IDLE) && !f_empty && !ld_wr_en && !ld_cfg_valid;
  assign search_en = f_pop;

  logic              c_res_valid, c_any;
  logic [DW-1:0]     c_dist;
  logic [RW-1:0]     c_idx;
  logic [RW:0]       count;
  bucket_t           bucket;
  logic              add_req;
  logic [RW-1:0]     add_row;
  logic              cam_wr;
  logic [RW-1:0]     cam_wr_row;
  logic [HV_DIM-1:0] cam_wr_hv;

  assign cam_wr     = ld_wr_en || (st == S_ADD);
  assign cam_wr_row = ld_wr_en ? ld_wr_row : nc_row;
  assign cam_wr_hv  = ld_wr_en ? ld_wr_hv  : cur_hv;

  cam_unit #(.HV_DIM(HV_DIM), .ARR_ROWS(ARR_ROWS), .ARR_COLS(ARR_COLS), .ROW_BLOCKS(ROW_BLOCKS)) u_cam (
    .clk, .rst_n,
    .wr_en(cam_wr), .wr_row(cam_wr_row), .wr_hv(cam_wr_hv),
    .search_en, .query(f_rdata[HV_DIM-1:0]), .row_count(count),
    .res_valid(c_res_valid), .min_dist(c_dist), .min_idx(c_idx), .any_valid(c_any));

  cluster_id_unit #(.CAP(R), .DW(DW)) u_cid (
    .clk, .rst_n,
    .cfg_valid(ld_cfg_valid), .cfg_bucket(ld_cfg_bucket), .cfg_count(ld_cfg_count), .cfg_thr(ld_cfg_thr),
    .count, .bucket,
    .res_valid(c_res_valid), .min_dist(c_dist), .min_idx(c_idx), .any_valid(c_any), .res_qid(cur_qid),
    .out_valid(res_valid), .out(res), .add_req, .add_row);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; cur_qid <= '0; cur_hv <= '0; nc_row <= '0; nc_count <= '0;
    end else begin
      unique case (st)
        S_IDLE: if (f_pop) begin
                  cur_qid <= f_rdata[QID_W+HV_DIM-1:HV_DIM];
                  cur_hv  <= f_rdata[HV_DIM-1:0];
                  st      <= S_WAIT;
                end
        S_WAIT: if (res_valid) begin
                  if (add_req) begin
                    nc_row   <= add_row;
                    nc_count <= count;
                    st       <= S_ADD;
                  end else st <= S_IDLE;
                end
        S_ADD:  st <= S_NC;                       // CAM row written this cycle
        S_NC:   if (nc_ready) st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end

  assign nc_valid  = (st == S_NC);
  assign nc_bucket = bucket;
  assign nc_hv     = cur_hv;
  assign busy      = (st != S_IDLE) || !f_empty;

  a_ld_idle: assert property (@(posedge clk) disable iff (!rst_n) (ld_wr_en || ld_cfg_valid) |-> (st == S_IDLE))
    else $error("bucket_slot: load while a query is in flight");
  a_full: assert property (@(posedge clk) disable iff (!rst_n)
                           (32'(f_level) == FIFO_DEPTH) == fifo_full)
    else $error("bucket_slot: FIFO level and full flag disagree");
endmodule
