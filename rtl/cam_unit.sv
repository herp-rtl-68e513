// cam_unit: one CAM unit, the CAM arrays that hold one bucket, with its LTA tree.
//
// A 2048-element HV does not fit in one 128-column array, so NA = HV_DIM/ARR_COLS arrays sit
// side by side and each stores one 128-element slice of every HV; the distances of the
// slices of a row are added, as the paper adds the match-line currents of the arrays. If a
// bucket has more clusters than one array has rows, ROW_BLOCKS groups of arrays are stacked
// and the LTA tree spans all of their rows. Every array has its own write-search driver and
// wordline driver, so the whole unit writes one HV row per cycle and searches all rows at
// once.
//
// Interface: wr_en/wr_row/wr_hv store one HV in one row. search_en/query start a search.
// row_count says how many rows (from row 0) hold valid clusters; the others never win.
// Timing: a search issued in cycle t returns res_valid, min_dist, min_idx and any_valid in
// cycle t+3 (driver register, array register, accumulate + LTA register). A write issued in
// cycle t is visible to a search issued in cycle t+1 or later. Searches may be issued every
// cycle; a write and a search may not share a cycle.
//
// Slicing across arrays, current accumulation and the per-bucket LTA follow the paper; the
// row-at-a-time write and the three-cycle pipeline are this design's choices.
//
// Lint note: the assertions are disabled with 'disable iff (!rst_n)', which samples rst_n at
// the clock, while the flops use it as an asynchronous reset. Lint reports this as a net used
// both synchronously and asynchronously (SYNCASYNCNET); only simulation checks read the
// synchronous use, so the circuit itself has a purely asynchronous reset.
module cam_unit #(
  parameter int unsigned HV_DIM     = 2048,
  parameter int unsigned ARR_ROWS   = 128,
  parameter int unsigned ARR_COLS   = 128,
  parameter int unsigned ROW_BLOCKS = 1,
  localparam int unsigned R   = ROW_BLOCKS * ARR_ROWS,
  localparam int unsigned RW  = $clog2(R),
  localparam int unsigned DW  = $clog2(HV_DIM + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              wr_en,
  input  logic [RW-1:0]     wr_row,
  input  logic [HV_DIM-1:0] wr_hv,
  input  logic              search_en,
  input  logic [HV_DIM-1:0] query,
  input  logic [RW:0]       row_count,
  output logic              res_valid,
  output logic [DW-1:0]     min_dist,
  output logic [RW-1:0]     min_idx,
  output logic              any_valid
);
  localparam int unsigned NA  = HV_DIM / ARR_COLS;
  localparam int unsigned ADW = $clog2(ARR_COLS + 1);
  localparam int unsigned ARW = $clog2(ARR_ROWS);

  logic [ROW_BLOCKS-1:0][NA-1:0][ARR_ROWS-1:0][ADW-1:0] part;   // partial distances

  for (genvar b = 0; b < ROW_BLOCKS; b++) begin : g_blk
    logic blk_sel;
    if (ROW_BLOCKS > 1) begin : g_sel
      assign blk_sel = (wr_row[RW-1:ARW] == (RW-ARW)'(b));
    end else begin : g_one
      assign blk_sel = 1'b1;
    end
    for (genvar a = 0; a < NA; a++) begin : g_arr
      logic [ARR_COLS-1:0] s, s_n, bl, bl_n;
      logic [ARR_ROWS-1:0] wl;
      write_search_driver #(.COLS(ARR_COLS)) u_wsd (
        .clk, .rst_n,
        .search_en (search_en),
        .query     (query[a*ARR_COLS +: ARR_COLS]),
        .write_en  (wr_en && blk_sel),
        .wdata     (wr_hv[a*ARR_COLS +: ARR_COLS]),
        .s, .s_n, .bl, .bl_n);
      wordline_driver #(.ROWS(ARR_ROWS)) u_wld (
        .clk, .rst_n,
        .write_en (wr_en && blk_sel),
        .addr     (wr_row[ARW-1:0]),
        .wl);
      cam_array #(.ROWS(ARR_ROWS), .COLS(ARR_COLS)) u_arr (
        .clk, .wl, .bl, .bl_n, .s, .s_n,
        .distance (part[b][a]));
    end
  end

  // accumulate the slices of each row
  logic [R-1:0][DW-1:0] rdist;
  logic [R-1:0]         rvalid;
  always_comb begin
    for (int b = 0; b < ROW_BLOCKS; b++)
      for (int r = 0; r < ARR_ROWS; r++) begin
        rdist[b*ARR_ROWS + r] = '0;
        for (int a = 0; a < NA; a++)
          rdist[b*ARR_ROWS + r] = rdist[b*ARR_ROWS + r] + DW'(part[b][a][r]);
      end
    for (int i = 0; i < R; i++) rvalid[i] = ((RW+1)'(i) < row_count);
  end

  logic [DW-1:0] t_val;
  logic [RW-1:0] t_idx;
  logic          t_any;
  lta_tree #(.N(R), .W(DW)) u_lta (.val(rdist), .valid(rvalid), .min_val(t_val), .min_idx(t_idx), .any_valid(t_any));

  logic [1:0] sv;   // search in flight: driver stage, array stage
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sv <= '0; res_valid <= 1'b0; min_dist <= '0; min_idx <= '0; any_valid <= 1'b0;
    end else begin
      sv        <= {sv[0], search_en};
      res_valid <= sv[1];
      if (sv[1]) begin
        min_dist  <= t_val;
        min_idx   <= t_idx;
        any_valid <= t_any;
      end
    end
  end

  a_no_rw: assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && search_en))
    else $error("cam_unit: write and search in the same cycle");
endmodule
