// tb_lta_tree: random distances and valid masks against a software minimum search
// (smallest value, lowest index on ties, invalid inputs never win), for N = 128 and a
// non-power-of-two N = 37.
module tb_lta_tree;
  localparam int W = 12;
  int checks = 0, failures = 0;

  logic [127:0][W-1:0] v1; logic [127:0] k1; logic [W-1:0] m1; logic [6:0] i1; logic a1;
  logic [36:0][W-1:0]  v2; logic [36:0]  k2; logic [W-1:0] m2; logic [5:0] i2; logic a2;
  lta_tree #(.N(128), .W(W)) dut1 (.val(v1), .valid(k1), .min_val(m1), .min_idx(i1), .any_valid(a1));
  lta_tree #(.N(37),  .W(W)) dut2 (.val(v2), .valid(k2), .min_val(m2), .min_idx(i2), .any_valid(a2));

  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 400; t++) begin
      int em, ei; bit ea; int mode;
      mode = t % 4;
      for (int i = 0; i < 128; i++) begin
        v1[i] = W'((mode == 3) ? ($urandom % 4) : $urandom);
        k1[i] = (mode == 0) ? 1'b1 : (mode == 1) ? ($urandom % 8 == 0) : (mode == 2 && t % 8 == 2) ? 1'b0 : ($urandom % 2 == 0);
      end
      for (int i = 0; i < 37; i++) begin v2[i] = v1[i+50]; k2[i] = k1[i+50]; end
      #1;
      ea = 0; em = 0; ei = 0;
      for (int i = 0; i < 128; i++) if (k1[i] && (!ea || v1[i] < em)) begin ea = 1; em = v1[i]; ei = i; end
      checks++;
      if (a1 != ea || (ea && (m1 != em || i1 != ei))) begin failures++; $display("FAIL N=128 t=%0d got %0d@%0d exp %0d@%0d", t, m1, i1, em, ei); end
      ea = 0; em = 0; ei = 0;
      for (int i = 0; i < 37; i++) if (k2[i] && (!ea || v2[i] < em)) begin ea = 1; em = v2[i]; ei = i; end
      checks++;
      if (a2 != ea || (ea && (m2 != em || i2 != ei))) begin failures++; $display("FAIL N=37 t=%0d got %0d@%0d exp %0d@%0d", t, m2, i2, em, ei); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
