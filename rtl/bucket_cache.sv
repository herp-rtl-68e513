// bucket_cache: on-chip cache of whole buckets.
//
// SLOTS entries, each holding one bucket: a tag (bucket ID), valid bit, the bucket specs
// (cluster count, distance threshold) and up to R consensus HVs. Lookup is fully
// associative and combinational. Rows are read with a one-cycle latency and written one per
// cycle. The header (tag, valid, count, threshold) is written separately, so a bucket being
// filled can stay invalid until its last row is in. A round-robin pointer names the slot
// to replace next; `alloc` advances it. The cache and its purpose (reloading evicted
// buckets without main memory) are from the paper; its size, associativity, replacement
// policy and port timing are this design's choices.
module bucket_cache
  import herp_pkg::*;
#(
  parameter int unsigned HV_DIM = 2048,
  parameter int unsigned R      = 128,     // rows per bucket
  parameter int unsigned SLOTS  = 4,
  parameter int unsigned DW     = 12,
  localparam int unsigned RW    = $clog2(R),
  localparam int unsigned SW    = (SLOTS > 1) ? $clog2(SLOTS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // lookup
  input  bucket_t           lk_bucket,
  output logic              lk_hit,
  output logic [SW-1:0]     lk_slot,
  output logic [RW:0]       lk_count,
  output logic [DW-1:0]     lk_thr,
  // row read (data one cycle later)
  input  logic              rd_en,
  input  logic [SW-1:0]     rd_slot,
  input  logic [RW-1:0]     rd_row,
  output logic [HV_DIM-1:0] rd_hv,
  // row write
  input  logic              wr_en,
  input  logic [SW-1:0]     wr_slot,
  input  logic [RW-1:0]     wr_row,
  input  logic [HV_DIM-1:0] wr_hv,
  // header write
  input  logic              hw_en,
  input  logic [SW-1:0]     hw_slot,
  input  logic              hw_valid,
  input  bucket_t           hw_bucket,
  input  logic [RW:0]       hw_count,
  input  logic [DW-1:0]     hw_thr,
  // replacement
  input  logic              alloc,
  output logic [SW-1:0]     victim
);
  logic [HV_DIM-1:0] mem [SLOTS*R];
  logic [SLOTS-1:0]  v;
  bucket_t           tag [SLOTS];
  logic [RW:0]       cnt [SLOTS];
  logic [DW-1:0]     thr [SLOTS];

  always_comb begin
    lk_hit = 1'b0; lk_slot = '0;
    for (int s = SLOTS-1; s >= 0; s--)
      if (v[s] && tag[s] == lk_bucket) begin lk_hit = 1'b1; lk_slot = SW'(s); end
    lk_count = cnt[lk_slot];
    lk_thr   = thr[lk_slot];
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_hv <= mem[32'(rd_slot)*R + 32'(rd_row)];
    if (wr_en) mem[32'(wr_slot)*R + 32'(wr_row)] <= wr_hv;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v <= '0; victim <= '0;
      for (int s = 0; s < SLOTS; s++) begin tag[s] <= '0; cnt[s] <= '0; thr[s] <= '0; end
    end else begin
      if (hw_en) begin
        v[hw_slot] <= hw_valid; tag[hw_slot] <= hw_bucket; cnt[hw_slot] <= hw_count; thr[hw_slot] <= hw_thr;
      end
      if (alloc) victim <= (32'(victim) == SLOTS-1) ? '0 : victim + 1'b1;
    end
  end
endmodule
