// dram_model: behavioural main memory for the testbenches (not synthesizable).
//
// Holds every bucket: its header (cluster count, distance threshold) and its consensus HVs.
// Buckets not yet written read as generated by tb_herp_pkg::gen_hv/gen_count with threshold
// THR. Read requests are accepted one at a time and answered after LAT cycles with one
// rsp_valid pulse; writes (new clusters) are accepted immediately and update the row and
// the count. The main memory itself is outside the accelerator.
module dram_model
  import herp_pkg::*;
  import tb_herp_pkg::*;
#(
  parameter int unsigned HV_DIM = 2048,
  parameter int unsigned R      = 128,
  parameter int unsigned DW     = 12,
  parameter int unsigned LAT    = 4,
  parameter int unsigned THR    = 300,
  localparam int unsigned RW    = $clog2(R)
) (
  input  logic              clk,
  input  logic              rd_valid,
  output logic              rd_ready,
  input  logic              rd_hdr,
  input  bucket_t           rd_bucket,
  input  logic [RW-1:0]     rd_row,
  output logic              rsp_valid,
  output logic [HV_DIM-1:0] rsp_hv,
  output logic [RW:0]       rsp_count,
  output logic [DW-1:0]     rsp_thr,
  input  logic              wr_valid,
  output logic              wr_ready,
  input  bucket_t           wr_bucket,
  input  logic [RW-1:0]     wr_row,
  input  logic [HV_DIM-1:0] wr_hv,
  input  logic [RW:0]       wr_count
);
  logic [HV_DIM-1:0] rows [int unsigned];
  int unsigned       cnts [int unsigned];
  int unsigned       n_rd = 0, n_wr = 0;

  function automatic int unsigned count_of(int unsigned b);
    return cnts.exists(b) ? cnts[b] : gen_count(b, R);
  endfunction
  function automatic logic [HV_DIM-1:0] row_of(int unsigned b, int unsigned r);
    logic [MAXD-1:0] g;
    if (rows.exists(b * 65536 + r)) return rows[b * 65536 + r];
    g = gen_hv(b, r);
    return g[HV_DIM-1:0];
  endfunction

  int  busy = 0;
  logic pend_hdr; int unsigned pend_b, pend_r;
  assign rd_ready = (busy == 0);
  assign wr_ready = 1'b1;

  initial begin rsp_valid = 0; rsp_hv = '0; rsp_count = '0; rsp_thr = '0; end

  always @(posedge clk) begin
    rsp_valid <= 1'b0;
    if (busy > 0) begin
      busy <= busy - 1;
      if (busy == 1) begin
        rsp_valid <= 1'b1;
        rsp_count <= (RW+1)'(count_of(pend_b));
        rsp_thr   <= DW'(THR);
        rsp_hv    <= pend_hdr ? '0 : row_of(pend_b, pend_r);
      end
    end else if (rd_valid) begin
      busy <= LAT; pend_hdr <= rd_hdr; pend_b <= rd_bucket; pend_r <= rd_row; n_rd <= n_rd + 1;
    end
    if (wr_valid) begin
      rows[32'(wr_bucket) * 65536 + 32'(wr_row)] = wr_hv;
      cnts[32'(wr_bucket)] = 32'(wr_count);
      n_wr <= n_wr + 1;
    end
  end
endmodule
