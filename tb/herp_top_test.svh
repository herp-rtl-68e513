// herp_top_test.svh: end-to-end test body shared by tb_herp_top (reduced sizes) and
// tb_herp_top_full (published sizes). The including module defines HV, AR, AC, U, QB, CS,
// THR, NQ, NB, BASE and instantiates `dut` (herp_top) and `mem` (dram_model).
//
// Queries are generated for NB buckets starting at index BASE (m/z chosen so that Eq. 1
// gives the bucket): near-copies of stored clusters (expected match), fresh random HVs
// (expected outlier, new cluster) and near-copies of earlier outliers (expected match with
// the new cluster), then three rounds over all buckets in turn and a burst of outliers
// into one bucket. A software model of every bucket, fed in arrival order, predicts each
// result; the DRAM model holds the buckets. Setup preloads the first U buckets. The test
// counts every mechanism (preload, demand load, eviction, cache hit and miss, overtaking,
// match, new cluster, overflow, write-through, FIFO back-pressure, full query buffer) and
// counts a failure for any that never happened.

  localparam int R = AR, RW = $clog2(R), DW = $clog2(HV + 1);
  int checks = 0, failures = 0, cyc = 0;
  always #5 clk = ~clk;
  initial #1 rst_n = 0;
  always @(posedge clk) cyc++;
  task automatic chk(bit c, string m); checks++; if (!c) begin failures++; $display("FAIL %s at %0t", m, $time); end endtask

  // software model of the buckets
  logic [HV-1:0] sw_rows [int];     // key bucket*1024 + row
  int sw_cnt [int];
  function automatic void sw_init(int b);
    logic [MAXD-1:0] g;
    if (sw_cnt.exists(b)) return;
    sw_cnt[b] = gen_count(b, R);
    for (int r = 0; r < sw_cnt[b]; r++) begin g = gen_hv(b, r); sw_rows[b*1024 + r] = g[HV-1:0]; end
  endfunction
  function automatic result_t sw_search(int qid, int b, logic [HV-1:0] h);
    result_t e; int best, bi;
    sw_init(b);
    e = '0; e.qid = qid_t'(qid); e.bucket = bucket_t'(b);
    best = -1; bi = 0;
    for (int r = 0; r < sw_cnt[b]; r++) begin
      int d; d = $countones(sw_rows[b*1024 + r] ^ h);
      if (best < 0 || d < best) begin best = d; bi = r; end
    end
    e.distance = (best < 0) ? 16'd0 : 16'(best);
    if (best >= 0 && best <= THR) e.row = 16'(bi);
    else if (sw_cnt[b] < R) begin e.row = 16'(sw_cnt[b]); e.is_new = 1; sw_rows[b*1024 + sw_cnt[b]] = h; sw_cnt[b]++; end
    else e.overflow = 1;
    return e;
  endfunction

  result_t exp_res [int];
  int n_sent = 0, n_got = 0, n_match = 0, n_new = 0, n_ovf = 0, n_qfull = 0, n_fifo_full = 0;
  always @(negedge clk) begin
    if (rst_n) begin
      if (!q_ready) n_qfull++;
      if (|dut.u_full) n_fifo_full++;
    end
    for (int u = 0; u < U; u++) if (res_valid[u]) begin
      int q; q = int'(res[u].qid);
      n_got++;
      checks++;
      if (!exp_res.exists(q)) begin failures++; $display("FAIL unexpected qid %0d", q); end
      else begin
        if (res[u] != exp_res[q]) begin
          failures++;
          $display("FAIL qid=%0d b=%0d row=%0d new=%0b ovf=%0b d=%0d | exp b=%0d row=%0d new=%0b ovf=%0b d=%0d", q,
            res[u].bucket, res[u].row, res[u].is_new, res[u].overflow, res[u].distance,
            exp_res[q].bucket, exp_res[q].row, exp_res[q].is_new, exp_res[q].overflow, exp_res[q].distance);
        end
        exp_res.delete(q);
      end
      if (res[u].is_new) n_new++; else if (res[u].overflow) n_ovf++; else n_match++;
    end
  end

  // m/z (Q16.16) in the middle of bucket b for charge 2
  function automatic logic [31:0] mz_of(int b);
    real x; x = (real'(b) + 0.5) * 1.0005079 / 2.0 + 1.00794;
    return 32'(longint'(x * 65536.0));
  endfunction

  task automatic send(int b, logic [HV-1:0] h);
    @(negedge clk);
    q_valid = 1; q_qid = qid_t'(n_sent); q_mz = mz_of(b); q_charge = 3'd2; q_hv = h;
    #1;
    chk(dut.q_bucket == bucket_t'(b), "bucket index of query");
    while (!q_ready) begin @(negedge clk); end
    exp_res[n_sent] = sw_search(n_sent, b, h);
    n_sent++;
    @(posedge clk); #1;
    q_valid = 0;
  endtask

  logic [HV-1:0] outl [$];
  int outl_b [$];
  initial begin
    int t0;
    logic [MAXD-1:0] g;
    repeat (3) @(posedge clk); rst_n = 1;
    // Phase II: preload the first U buckets
    for (int i = 0; i < U; i++) begin
      @(negedge clk); pl_valid = 1; pl_bucket = bucket_t'(BASE + i);
      @(posedge clk); while (!pl_ready) @(posedge clk);
      #1 pl_valid = 0;
    end
    t0 = cyc;
    while (n_preloads != 32'(U) || dut.u_sched.loading || dut.u_sched.req_pend) @(negedge clk);
    $display("setup: %0d buckets preloaded in %0d cycles", U, cyc - t0);
    // Phase III: queries
    for (int i = 0; i < NQ; i++) begin
      int b, kind; logic [HV-1:0] h;
      kind = $urandom % 10;
      b = BASE + ((i < NQ/2) ? ($urandom % U) : ($urandom % NB));   // first half resident buckets
      sw_init(b);
      if (kind < 5) begin                                   // near a stored cluster
        int r; r = $urandom % sw_cnt[b];
        g = flip_bits({{(MAXD-HV){1'b0}}, sw_rows[b*1024 + r]}, $urandom % (THR/4), HV, i);
        h = g[HV-1:0];
      end else if (kind < 8 || outl.size() == 0) begin      // fresh outlier
        g = gen_hv(100000 + i, 1); h = g[HV-1:0];
        outl.push_back(h); outl_b.push_back(b);
      end else begin                                        // revisit an outlier
        int k; k = $urandom % outl.size();
        b = outl_b[k];
        g = flip_bits({{(MAXD-HV){1'b0}}, outl[k]}, $urandom % (THR/4), HV, 7 * i);
        h = g[HV-1:0];
      end
      send(b, h);
    end
    // rotation over all buckets: forces reloads of recently evicted buckets
    for (int rnd = 0; rnd < 3; rnd++)
      for (int k = 0; k < NB; k++) begin
        int b; b = BASE + k; sw_init(b);
        g = flip_bits({{(MAXD-HV){1'b0}}, sw_rows[b*1024]}, 3, HV, 1000 * rnd + k);
        send(b, g[HV-1:0]);
      end
    // overflow: a burst of outliers into one bucket
    for (int i = 0; i < R + 2; i++) begin g = gen_hv(200000 + i, 2); send(BASE, g[HV-1:0]); end
    t0 = cyc;
    while (exp_res.size() != 0 && cyc - t0 < 200000) @(negedge clk);
    repeat (50) @(negedge clk);
    chk(exp_res.size() == 0, "every query answered");
    chk(n_got == n_sent, "one result per query");
    $display("queries=%0d matches=%0d new=%0d overflow=%0d", n_sent, n_match, n_new, n_ovf);
    $display("preloads=%0d demand_loads=%0d evictions=%0d cache_hits=%0d cache_misses=%0d overtakes=%0d writethrough=%0d fifo_full_cycles=%0d qbuf_full_cycles=%0d",
      n_preloads, n_demand_loads, n_evictions, n_cache_hits, n_cache_misses, n_overtakes, n_writethrough, n_fifo_full, n_qfull);
    chk(n_preloads == 32'(U), "mechanism: preload");
    chk(n_demand_loads > 0, "mechanism: demand load");
    chk(n_evictions > 0, "mechanism: LFU eviction");
    chk(n_cache_hits > 0, "mechanism: bucket cache hit");
    chk(n_cache_misses > 0, "mechanism: bucket cache miss");
    chk(n_overtakes > 0, "mechanism: query overtaking");
    chk(n_match > 0, "mechanism: match");
    chk(n_new > 0, "mechanism: new cluster");
    chk(n_ovf > 0, "mechanism: bucket overflow");
    chk(n_writethrough == 32'(n_new), "mechanism: write-through of every new cluster");
    chk(n_fifo_full > 0, "mechanism: FIFO back-pressure");
    chk(n_qfull > 0, "mechanism: query buffer full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
