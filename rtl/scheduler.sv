// scheduler: bucket residency, query dispatch and bucket replacement.
//
// The scheduler keeps a table with one entry per CAM unit: valid, the bucket ID held and a
// use counter (LFU). Every cycle it
//   1. dispatches one query: the oldest query-buffer entry whose bucket is resident in a
//      unit with room in its FIFO is removed from the buffer and pushed into that FIFO, and
//      the unit's use counter is incremented. Queries of resident buckets thus overtake
//      older queries of absent buckets, which is how the paper avoids evictions, while the
//      order within one bucket is kept;
//   2. if no load is running, starts one: a setup preload (pl_*) first, otherwise a demand
//      load for the oldest buffered query whose bucket is not resident. The target unit is
//      a free unit if there is one, otherwise the unit with the smallest use count among
//      those that are idle and whose bucket no buffered query still needs (least frequently
//      used eviction). With no such unit the load waits.
// The controller then fills the unit (from the bucket cache or main memory) and pulses
// ld_done; the unit becomes valid with its use count cleared.
//
// Residency table, sorting into per-bucket FIFOs, LFU eviction and preferring queries of
// resident buckets follow the paper. One load at a time, one dispatch per cycle, the
// counter width, the idle/not-needed eviction condition and lowest-index tie-breaking are
// this design's choices.
//
// Lint note: the assertions are disabled with 'disable iff (!rst_n)', which samples rst_n at
// the clock, while the flops use it as an asynchronous reset. Lint reports this as a net used
// both synchronously and asynchronously (SYNCASYNCNET); only simulation checks read the
// synchronous use, so the circuit itself has a purely asynchronous reset.
module scheduler
  import herp_pkg::*;
#(
  parameter int unsigned UNITS    = 2048,
  parameter int unsigned QB_DEPTH = 16,
  parameter int unsigned LFU_W    = 8,
  localparam int unsigned UW      = (UNITS > 1) ? $clog2(UNITS) : 1,
  localparam int unsigned IW      = $clog2(QB_DEPTH)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // query buffer view
  input  logic [QB_DEPTH-1:0]      e_valid,
  input  bucket_t [QB_DEPTH-1:0]   e_bucket,
  output logic                     rm,
  output logic [IW-1:0]            rm_idx,
  // dispatch to units (push_unit selects the FIFO)
  input  logic [UNITS-1:0]         u_full,
  input  logic [UNITS-1:0]         u_busy,
  output logic                     push,
  output logic [UW-1:0]            push_unit,
  // setup preload
  input  logic                     pl_valid,
  input  bucket_t                  pl_bucket,
  output logic                     pl_ready,
  // load requests to the controller
  output logic                     ld_req_valid,
  input  logic                     ld_req_ready,
  output bucket_t                  ld_req_bucket,
  output logic [UW-1:0]            ld_req_unit,
  input  logic                     ld_done,
  // residency (observability) and statistics
  output logic [UNITS-1:0]         res_valid,
  output bucket_t [UNITS-1:0]      res_bucket,
  output logic [31:0]              n_dispatch,
  output logic [31:0]              n_demand_loads,
  output logic [31:0]              n_preloads,
  output logic [31:0]              n_evictions,
  output logic [31:0]              n_overtakes
);
  logic [LFU_W-1:0] lfu [UNITS];
  logic             loading;     // a load request was accepted, waiting for ld_done
  logic             req_pend;    // ld_req_valid held until accepted

  // which unit (if any) holds each entry's bucket
  logic [QB_DEPTH-1:0]         e_hit;
  logic [QB_DEPTH-1:0][UW-1:0] e_unit;
  always_comb begin
    for (int i = 0; i < QB_DEPTH; i++) begin
      e_hit[i] = 1'b0; e_unit[i] = '0;
      for (int u = UNITS-1; u >= 0; u--)
        if (e_valid[i] && res_valid[u] && res_bucket[u] == e_bucket[i]) begin
          e_hit[i] = 1'b1; e_unit[i] = UW'(u);
        end
    end
  end

  // 1. dispatch the oldest entry that can go
  always_comb begin
    push = 1'b0; push_unit = '0; rm_idx = '0;
    for (int i = QB_DEPTH-1; i >= 0; i--)
      if (e_hit[i] && !u_full[e_unit[i]]) begin
        push = 1'b1; push_unit = e_unit[i]; rm_idx = IW'(i);
      end
    rm = push;
  end

  // 2. what to load next and where
  logic    miss_found;
  bucket_t miss_bucket;
  logic    pl_resident;
  logic [UNITS-1:0] needed;
  always_comb begin
    miss_found = 1'b0; miss_bucket = '0;
    for (int i = QB_DEPTH-1; i >= 0; i--)
      if (e_valid[i] && !e_hit[i]) begin miss_found = 1'b1; miss_bucket = e_bucket[i]; end
    needed = '0;
    for (int i = 0; i < QB_DEPTH; i++) if (e_hit[i]) needed[e_unit[i]] = 1'b1;
    pl_resident = 1'b0;
    for (int u = 0; u < UNITS; u++) if (res_valid[u] && res_bucket[u] == pl_bucket) pl_resident = 1'b1;
  end

  logic          vic_found, vic_evict;
  logic [UW-1:0] vic;
  always_comb begin
    vic_found = 1'b0; vic_evict = 1'b0; vic = '0;
    // a free unit first
    for (int u = UNITS-1; u >= 0; u--)
      if (!res_valid[u] && !u_busy[u]) begin vic_found = 1'b1; vic = UW'(u); end
    // otherwise the least frequently used idle unit nobody waits for
    if (!vic_found) begin
      for (int u = 0; u < UNITS; u++)
        if (!u_busy[u] && !needed[u] && (!vic_found || lfu[u] < lfu[vic])) begin
          vic_found = 1'b1; vic_evict = 1'b1; vic = UW'(u);
        end
    end
  end

  logic start_pl, start_dm, pl_ack;
  assign pl_ack   = pl_valid && !loading && !req_pend && pl_resident;
  assign start_pl = pl_valid && !loading && !req_pend && !pl_resident && vic_found;
  assign start_dm = !pl_valid && miss_found && !loading && !req_pend && vic_found;
  assign pl_ready = pl_ack || start_pl;
  assign ld_req_valid = req_pend;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      res_valid <= '0; loading <= 1'b0; req_pend <= 1'b0;
      ld_req_bucket <= '0; ld_req_unit <= '0;
      n_dispatch <= '0; n_demand_loads <= '0; n_preloads <= '0; n_evictions <= '0; n_overtakes <= '0;
      for (int u = 0; u < UNITS; u++) begin lfu[u] <= '0; res_bucket[u] <= '0; end
    end else begin
      if (push) begin
        n_dispatch <= n_dispatch + 1;
        if (rm_idx != '0) n_overtakes <= n_overtakes + 1;   // an older query was passed
        if (lfu[push_unit] != '1) lfu[push_unit] <= lfu[push_unit] + 1'b1;
      end
      if (start_pl || start_dm) begin
        req_pend      <= 1'b1;
        ld_req_bucket <= start_pl ? pl_bucket : miss_bucket;
        ld_req_unit   <= vic;
        res_valid[vic] <= 1'b0;              // unit no longer holds its old bucket
        if (vic_evict) n_evictions <= n_evictions + 1;
        if (start_pl) n_preloads <= n_preloads + 1; else n_demand_loads <= n_demand_loads + 1;
      end
      if (req_pend && ld_req_ready) begin
        req_pend <= 1'b0; loading <= 1'b1;
      end
      if (loading && ld_done) begin
        loading <= 1'b0;
        res_valid[ld_req_unit]  <= 1'b1;
        res_bucket[ld_req_unit] <= ld_req_bucket;
        lfu[ld_req_unit]        <= '0;
      end
    end
  end

  a_push_ok: assert property (@(posedge clk) disable iff (!rst_n) push |-> !u_full[push_unit]);
endmodule
