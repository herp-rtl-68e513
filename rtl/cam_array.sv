// cam_array: one ROWS x COLS SOT-CAM array, digital model of the 3T2MTJ array.
//
// Each row stores one COLS-bit slice of a consensus HV; each column is one HV element.
// Write: the row whose word line is high takes the bit-line value BL (BL' must be its
// complement). Search: a cell mismatches when its stored bit differs from the search bit,
// i.e. stored 1 with S' high or stored 0 with S high; a mismatching cell sinks current from
// its row's match line, so the ML current encodes the row's Hamming distance. This model
// replaces the analog ML current (linearised by search-voltage scaling in silicon) with the
// exact mismatch count, registered one cycle after the search lines are driven. With S and
// S' both low no cell mismatches and every distance is 0.
//
// The array structure, complementary lines and distance meaning follow the paper; storage
// as flip-flops, the integer distance and the one-cycle timing are this model's choices.
// Contents are not reset: like the non-volatile array, a row holds what was last written.
module cam_array #(
  parameter int unsigned ROWS = 128,
  parameter int unsigned COLS = 128,
  localparam int unsigned DW  = $clog2(COLS + 1)
) (
  input  logic                 clk,
  input  logic [ROWS-1:0]      wl,      // word lines (one-hot during a write)
  input  logic [COLS-1:0]      bl,      // bit lines BL
  input  logic [COLS-1:0]      bl_n,    // bit lines BL'
  input  logic [COLS-1:0]      s,       // search lines S
  input  logic [COLS-1:0]      s_n,     // search lines S'
  output logic [ROWS-1:0][DW-1:0] distance  // per-row mismatch count (match-line "current")
);
  logic [COLS-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    for (int r = 0; r < ROWS; r++)
      if (wl[r]) mem[r] <= bl;
  end

  always_ff @(posedge clk) begin
    for (int r = 0; r < ROWS; r++)
      distance[r] <= DW'($countones((mem[r] & s_n) | (~mem[r] & s)));
  end

  a_bl_comp: assert property (@(posedge clk) (|wl) |-> ((bl ^ bl_n) == '1))
    else $error("cam_array: BL and BL' not complementary during a write");
endmodule
