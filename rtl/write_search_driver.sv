// write_search_driver: column driver of one SOT-CAM array (the "Write-Search Driver" on top
// of the array).
//
// A search puts the query slice on the search lines as a complementary pair, S = q and
// S' = ~q, which is how the cell compares against its two complementary MTJs. A write puts
// the data on the bit lines as a complementary pair, BL = d and BL' = ~d, which drive WR and
// WR' of the cells on the raised word line. Lines not in use are held low, so an idle
// array draws no match-line current. The complementary pairs follow the paper; the
// register stage and the idle-low convention are choices of this design.
//
// Timing: inputs sampled on a rising edge appear on the lines one cycle later. Search and
// write in the same cycle are not allowed (assertion).
//
// Lint note: the assertions are disabled with 'disable iff (!rst_n)', which samples rst_n at
// the clock, while the flops use it as an asynchronous reset. Lint reports this as a net used
// both synchronously and asynchronously (SYNCASYNCNET); only simulation checks read the
// synchronous use, so the circuit itself has a purely asynchronous reset.
module write_search_driver #(
  parameter int unsigned COLS = 128
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            search_en,   // drive the search lines this cycle
  input  logic [COLS-1:0] query,       // query slice
  input  logic            write_en,    // drive the bit lines this cycle
  input  logic [COLS-1:0] wdata,       // data to store
  output logic [COLS-1:0] s,           // search line S
  output logic [COLS-1:0] s_n,         // search line S'
  output logic [COLS-1:0] bl,          // bit line BL  (to WR)
  output logic [COLS-1:0] bl_n         // bit line BL' (to WR')
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s <= '0; s_n <= '0; bl <= '0; bl_n <= '0;
    end else begin
      s    <= search_en ? query  : '0;
      s_n  <= search_en ? ~query : '0;
      bl   <= write_en  ? wdata  : '0;
      bl_n <= write_en  ? ~wdata : '0;
    end
  end

  a_excl: assert property (@(posedge clk) disable iff (!rst_n) !(search_en && write_en))
    else $error("write_search_driver: search and write in the same cycle");
endmodule
