// cluster_id_unit: threshold comparator and Cluster ID assignment/generation of one bucket.
//
// Holds the specs of the bucket its CAM unit currently stores: bucket ID, number of
// clusters (rows in use) and the heuristic distance threshold derived from the initial
// clustering. For each search result it decides:
//   match   - the bucket has clusters and min_dist <= threshold: the query gets the cluster
//             ID (bucket, min_idx) of the winning row;
//   outlier - otherwise a new cluster is defined at row `count`, the query gets that ID,
//             count is incremented and add_req asks the caller to write the query HV into
//             that row (cluster expansion, no re-clustering);
//   overflow- outlier in a full bucket (count == CAP): no cluster is assigned.
// cfg_valid (bucket loaded) overwrites bucket, count and threshold.
//
// Timing: the decision is registered, out_valid follows res_valid by one cycle, and the new
// count is visible from that cycle on. The match/outlier rule follows the paper; "<=" as the
// match test, the per-bucket threshold register and the overflow case are this design's.
// The row and distance fields of result_t are 16 bits wide for any size; with CAP=128 and
// DW=12 their upper bits are always zero.
//
// Lint note: the assertions are disabled with 'disable iff (!rst_n)', which samples rst_n at
// the clock, while the flops use it as an asynchronous reset. Lint reports this as a net used
// both synchronously and asynchronously (SYNCASYNCNET); only simulation checks read the
// synchronous use, so the circuit itself has a purely asynchronous reset.
module cluster_id_unit
  import herp_pkg::*;
#(
  parameter int unsigned CAP = 128,               // clusters a CAM unit can hold
  parameter int unsigned DW  = 12,                // distance width
  localparam int unsigned RW = $clog2(CAP)
) (
  input  logic          clk,
  input  logic          rst_n,
  // bucket specs, loaded with the bucket
  input  logic          cfg_valid,
  input  bucket_t       cfg_bucket,
  input  logic [RW:0]   cfg_count,
  input  logic [DW-1:0] cfg_thr,
  output logic [RW:0]   count,
  output bucket_t       bucket,
  // search result of the CAM unit
  input  logic          res_valid,
  input  logic [DW-1:0] min_dist,
  input  logic [RW-1:0] min_idx,
  input  logic          any_valid,
  input  qid_t          res_qid,
  // decision
  output logic          out_valid,
  output result_t       out,
  output logic          add_req,    // write the query HV into row add_row
  output logic [RW-1:0] add_row
);
  logic [DW-1:0] thr;
  logic match;
  assign match = any_valid && (min_dist <= thr);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0; bucket <= '0; thr <= '0;
      out_valid <= 1'b0; out <= '0; add_req <= 1'b0; add_row <= '0;
    end else begin
      out_valid <= 1'b0;
      add_req   <= 1'b0;
      if (cfg_valid) begin
        bucket <= cfg_bucket; count <= cfg_count; thr <= cfg_thr;
      end else if (res_valid) begin
        out_valid    <= 1'b1;
        out.qid      <= res_qid;
        out.bucket   <= bucket;
        out.distance     <= 16'(min_dist);
        out.is_new   <= 1'b0;
        out.overflow <= 1'b0;
        if (match) begin
          out.row <= 16'(min_idx);
        end else if (32'(count) < CAP) begin
          out.row    <= 16'(count);
          out.is_new <= 1'b1;
          add_req    <= 1'b1;
          add_row    <= RW'(count);
          count      <= count + 1'b1;
        end else begin
          out.row      <= '0;
          out.overflow <= 1'b1;
        end
      end
    end
  end

  a_cfg_res: assert property (@(posedge clk) disable iff (!rst_n) !(cfg_valid && res_valid));
endmodule
