// tb_bucket_calc: compares the fixed-point bucket index with Eq. 1 evaluated in double
// precision, bucket = floor((mz - 1.00794) * C / 1.0005079), over random m/z and charges;
// cases within 1e-4 of a bucket boundary are skipped (rounding of the real constants).
module tb_bucket_calc;
  import herp_pkg::*;
  logic [31:0] mz; logic [2:0] charge; bucket_t bucket;
  int checks = 0, failures = 0;
  bucket_calc dut (.*);
  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 2000; i++) begin
      real x, e; longint ei;
      mz = 32'(100 * 65536 + ($urandom % (1900 * 65536)));
      charge = 3'(1 + $urandom % 4);
      if (i == 0) begin mz = 32'd60000; charge = 3'd2; end      // m/z below m_q
      #1;
      x = (real'(mz) / 65536.0 - 1.00794) * real'(charge) / 1.0005079;
      if (x < 0) x = 0;
      e = $floor(x); ei = longint'(e);
      if (x - e < 1e-4 || x - e > 1.0 - 1e-4) continue;
      if (ei > 16383) ei = 16383;
      checks++;
      if (longint'(bucket) != ei) begin failures++; $display("FAIL mz=%f C=%0d got %0d exp %0d", real'(mz)/65536.0, charge, bucket, ei); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
