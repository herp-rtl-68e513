// tb_cam_array: writes random rows through WL/BL/BL', then searches random queries through
// S/S' and compares every row's distance with a software Hamming distance. Also checks
// that idle search lines give distance 0 and that a write changes only its own row.
module tb_cam_array;
  localparam int ROWS = 128, COLS = 128, DW = $clog2(COLS + 1);
  logic clk = 0;
  logic [ROWS-1:0] wl = '0;
  logic [COLS-1:0] bl = '0, bl_n = '1, s = '0, s_n = '0;
  logic [ROWS-1:0][DW-1:0] distance;
  logic [COLS-1:0] ref_mem [ROWS];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  cam_array #(.ROWS(ROWS), .COLS(COLS)) dut (.*);
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic logic [COLS-1:0] rnd();
    logic [COLS-1:0] v; for (int w = 0; w < COLS/32; w++) v[w*32 +: 32] = $urandom; return v;
  endfunction
  task automatic wr(int r, logic [COLS-1:0] d);
    @(negedge clk); wl = '0; wl[r] = 1'b1; bl = d; bl_n = ~d; ref_mem[r] = d;
    @(negedge clk); wl = '0;
  endtask
  task automatic search(logic [COLS-1:0] q, bit idle);
    @(negedge clk); s = idle ? '0 : q; s_n = idle ? '0 : ~q;
    @(negedge clk); s = '0; s_n = '0;
    for (int r = 0; r < ROWS; r++) begin
      int e; e = idle ? 0 : $countones(ref_mem[r] ^ q);
      checks++;
      if (int'(distance[r]) != e) begin failures++; if (failures < 10) $display("FAIL row %0d dist %0d exp %0d", r, distance[r], e); end
    end
  endtask
  initial begin
    for (int r = 0; r < ROWS; r++) wr(r, rnd());
    wr(5, '0); wr(6, '1);
    for (int i = 0; i < 20; i++) search(rnd(), 0);
    search(ref_mem[9], 0);             // exact match: row 9 distance 0
    search(rnd(), 1);                  // idle search lines
    for (int i = 0; i < 10; i++) begin wr($urandom % ROWS, rnd()); search(rnd(), 0); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
