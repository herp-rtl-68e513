// tb_bucket_slot: one reduced slot (HV 256, 16 rows of 4 arrays) is loaded with 5 clusters,
// then receives near-duplicates of stored clusters (matches), random HVs (outliers) and
// repeats of earlier outliers, which must match the cluster the earlier query defined.
// Every result is compared with a software model of the bucket; new clusters must appear
// on the nc port with the right row, count and HV; back-to-back matches must take 5 cycles
// each; filling the bucket must give overflow.
module tb_bucket_slot;
  import herp_pkg::*;
  import tb_herp_pkg::*;
  localparam int HV = 256, AR = 16, AC = 64, R = AR, RW = $clog2(R), DW = $clog2(HV+1), THR = 60;
  logic clk = 0, rst_n = 1;
  logic push = 0; qid_t push_qid = '0; logic [HV-1:0] push_hv = '0; logic fifo_full, busy;
  logic ld_wr_en = 0; logic [RW-1:0] ld_wr_row = '0; logic [HV-1:0] ld_wr_hv = '0;
  logic ld_cfg_valid = 0; bucket_t ld_cfg_bucket = '0; logic [RW:0] ld_cfg_count = '0; logic [DW-1:0] ld_cfg_thr = '0;
  logic res_valid; result_t res;
  logic nc_valid, nc_ready = 0; bucket_t nc_bucket; logic [RW-1:0] nc_row; logic [RW:0] nc_count; logic [HV-1:0] nc_hv;
  int checks = 0, failures = 0, cyc = 0;
  always #5 clk = ~clk;
  initial #1 rst_n = 0;
  always @(posedge clk) cyc++;
  bucket_slot #(.HV_DIM(HV), .ARR_ROWS(AR), .ARR_COLS(AC), .ROW_BLOCKS(1), .FIFO_DEPTH(4)) dut (.*);
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // software bucket
  logic [HV-1:0] sw_rows [R];
  int sw_n;
  result_t expq [$];
  logic [HV-1:0] q_hvs [int];
  function automatic result_t model(int qid, logic [HV-1:0] h);
    result_t e; int best, bi;
    e = '0; e.qid = qid_t'(qid); e.bucket = bucket_t'(42);
    best = -1; bi = 0;
    for (int r = 0; r < sw_n; r++) begin
      int d; d = $countones(sw_rows[r] ^ h);
      if (best < 0 || d < best) begin best = d; bi = r; end
    end
    e.distance = (best < 0) ? 16'd0 : 16'(best);
    if (best >= 0 && best <= THR) e.row = 16'(bi);
    else if (sw_n < R) begin e.row = 16'(sw_n); e.is_new = 1; sw_rows[sw_n] = h; sw_n++; end
    else e.overflow = 1;
    return e;
  endfunction

  // results checker
  int n_res = 0, n_new = 0, n_ovf = 0, last_res = -1, n_b2b = 0;
  always @(negedge clk) if (res_valid) begin
    result_t e; e = expq.pop_front();
    checks++; n_res++;
    if (res != e) begin
      failures++; $display("FAIL qid=%0d row=%0d new=%0b ovf=%0b d=%0d exp row=%0d new=%0b ovf=%0b d=%0d",
        res.qid, res.row, res.is_new, res.overflow, res.distance, e.row, e.is_new, e.overflow, e.distance);
    end
    if (res.is_new) n_new++;
    if (res.overflow) n_ovf++;
  end
  // nc port: random acceptance delay, check content
  always @(negedge clk) begin
    nc_ready = nc_valid && ($urandom % 3 == 0);
    if (nc_valid && nc_ready) begin
      checks++;
      if (nc_bucket != bucket_t'(42) || nc_hv != sw_rows[nc_row] || int'(nc_count) != int'(nc_row) + 1) begin
        failures++; $display("FAIL nc row=%0d count=%0d", nc_row, nc_count);
      end
    end
  end

  task automatic send(int qid, logic [HV-1:0] h);
    while (fifo_full) @(negedge clk);
    push = 1; push_qid = qid_t'(qid); push_hv = h;
    expq.push_back(model(qid, h));
    @(negedge clk); push = 0;
  endtask

  initial begin
    logic [MAXD-1:0] g;
    int t0, t1;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk);
    sw_n = 5;
    for (int r = 0; r < 5; r++) begin
      g = gen_hv(42, r); sw_rows[r] = g[HV-1:0];
      ld_wr_en = 1; ld_wr_row = RW'(r); ld_wr_hv = sw_rows[r]; @(negedge clk);
    end
    ld_wr_en = 0; ld_cfg_valid = 1; ld_cfg_bucket = 42; ld_cfg_count = 5; ld_cfg_thr = THR; @(negedge clk);
    ld_cfg_valid = 0;
    // four matches back to back, measure issue spacing
    for (int i = 0; i < 4; i++) begin g = flip_bits({{(MAXD-HV){1'b0}}, sw_rows[i]}, 10, HV, i); send(i, g[HV-1:0]); end
    wait (n_res == 1); t0 = cyc; wait (n_res == 4); t1 = cyc;
    checks++;
    if (t1 - t0 != 15) begin failures++; $display("FAIL match spacing %0d cycles for 3 (exp 15)", t1 - t0); end
    // outliers and their repeats
    for (int i = 0; i < 6; i++) begin
      logic [HV-1:0] o; g = gen_hv(1000 + i, 0); o = g[HV-1:0];
      send(100 + 2*i, o);
      g = flip_bits({{(MAXD-HV){1'b0}}, o}, 5, HV, 77 + i);
      send(101 + 2*i, g[HV-1:0]);
    end
    // fill up the bucket
    for (int i = 0; i < 10; i++) begin g = gen_hv(2000 + i, 3); send(200 + i, g[HV-1:0]); end
    wait (expq.size() == 0);
    repeat (20) @(negedge clk);
    checks++;
    if (n_new != R - 5 || n_ovf != 5) begin failures++; $display("FAIL new=%0d ovf=%0d", n_new, n_ovf); end
    $display("slot: results=%0d new=%0d overflow=%0d", n_res, n_new, n_ovf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
