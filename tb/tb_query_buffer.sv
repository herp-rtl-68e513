// tb_query_buffer: random inserts and removals at random positions against a software
// list; checks that entries keep arrival order, the valid vector and in_ready.
module tb_query_buffer;
  import herp_pkg::*;
  localparam int HV = 64, D = 8, IW = $clog2(D);
  logic clk = 0, rst_n = 1;
  logic in_valid = 0, in_ready; qid_t in_qid = '0; bucket_t in_bucket = '0; logic [HV-1:0] in_hv = '0;
  logic [D-1:0] e_valid; bucket_t [D-1:0] e_bucket; qid_t [D-1:0] e_qid; logic [D-1:0][HV-1:0] e_hv;
  logic rm = 0; logic [IW-1:0] rm_idx = '0;
  int checks = 0, failures = 0;
  int qids [$];
  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // falling edge applies the asynchronous reset at once
  query_buffer #(.HV_DIM(HV), .DEPTH(D)) dut (.*);
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int next = 1; bit acc;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 1500; i++) begin
      @(negedge clk);
      checks++;
      begin
        bit bad; bad = (in_ready != (qids.size() < D));
        for (int k = 0; k < D; k++) begin
          if (e_valid[k] != (k < qids.size())) bad = 1;
          if (k < qids.size() && (int'(e_qid[k]) != qids[k] || e_bucket[k] != bucket_t'(qids[k] * 3) || e_hv[k] != HV'(qids[k]) * 64'h9e3779b97f4a7c15))
            bad = 1;
        end
        if (bad) begin failures++; if (failures < 10) $display("FAIL i=%0d size=%0d", i, qids.size()); end
      end
      in_valid = (i < 1000) ? ($urandom % 2) : ($urandom % 4 == 0);
      in_qid = qid_t'(next); in_bucket = bucket_t'(next * 3); in_hv = HV'(next) * 64'h9e3779b97f4a7c15;
      rm = (qids.size() > 0) && ($urandom % 2);
      rm_idx = (qids.size() > 0) ? IW'($urandom % qids.size()) : '0;
      acc = in_valid && in_ready;
      @(posedge clk); #1;
      if (rm) qids.delete(int'(rm_idx));
      if (acc) begin qids.push_back(next); next++; end
      in_valid = 0; rm = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
