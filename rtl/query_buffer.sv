// query_buffer: on-chip buffer of encoded queries waiting to be scheduled.
//
// Entries are kept in arrival order, entry 0 the oldest. A new query is appended behind the
// last valid entry; removing entry k (the scheduler picks any entry, not only the oldest)
// shifts the younger entries down by one, so arrival order is always preserved and the
// scheduler can search from the oldest entry up. Insert and remove may happen in the same
// cycle. The buffer itself is from the paper; its depth, the compacting organisation and
// the valid/ready input handshake are this design's choices.
//
// Lint note: the assertions are disabled with 'disable iff (!rst_n)', which samples rst_n at
// the clock, while the flops use it as an asynchronous reset. Lint reports this as a net used
// both synchronously and asynchronously (SYNCASYNCNET); only simulation checks read the
// synchronous use, so the circuit itself has a purely asynchronous reset.
module query_buffer
  import herp_pkg::*;
#(
  parameter int unsigned HV_DIM = 2048,
  parameter int unsigned DEPTH  = 16,
  localparam int unsigned IW    = $clog2(DEPTH)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  qid_t                    in_qid,
  input  bucket_t                 in_bucket,
  input  logic [HV_DIM-1:0]       in_hv,
  output logic [DEPTH-1:0]        e_valid,
  output bucket_t [DEPTH-1:0]     e_bucket,
  output qid_t [DEPTH-1:0]        e_qid,
  output logic [DEPTH-1:0][HV_DIM-1:0] e_hv,
  input  logic                    rm,
  input  logic [IW-1:0]           rm_idx
);
  logic [IW:0] n;                       // number of valid entries
  assign in_ready = (32'(n) < DEPTH);
  always_comb for (int i = 0; i < DEPTH; i++) e_valid[i] = (32'(i) < 32'(n));

  logic do_in, do_rm;
  assign do_in = in_valid && in_ready;
  assign do_rm = rm && e_valid[rm_idx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n <= '0;
    end else begin
      n <= n + (IW+1)'(do_in) - (IW+1)'(do_rm);
    end
  end

  // data needs no reset: only valid entries are read
  always_ff @(posedge clk) begin
    for (int i = 0; i < DEPTH; i++) begin
      if (do_rm && i >= int'(rm_idx) && i < DEPTH-1) begin
        e_bucket[i] <= e_bucket[i+1]; e_qid[i] <= e_qid[i+1]; e_hv[i] <= e_hv[i+1];
      end
    end
    if (do_in) begin
      // slot for the new entry: behind the current last, one lower if an entry leaves
      e_bucket[IW'(n - (IW+1)'(do_rm))] <= in_bucket;
      e_qid   [IW'(n - (IW+1)'(do_rm))] <= in_qid;
      e_hv    [IW'(n - (IW+1)'(do_rm))] <= in_hv;
    end
  end

  a_rm: assert property (@(posedge clk) disable iff (!rst_n) rm |-> e_valid[rm_idx])
    else $error("query_buffer: removing an empty entry");
endmodule
