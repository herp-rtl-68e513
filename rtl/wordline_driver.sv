// wordline_driver: row decoder of one SOT-CAM array (the "Wordline Driver" beside the array).
//
// A write raises exactly one word line, WL[addr], for one cycle; with write_en low all word
// lines stay low. The output is registered so that it lines up with the bit lines of
// write_search_driver, which also have one register stage. Only the decoder function is from
// the paper; the registered, one-hot form is this design's choice.
//
// Lint note: the assertions are disabled with 'disable iff (!rst_n)', which samples rst_n at
// the clock, while the flops use it as an asynchronous reset. Lint reports this as a net used
// both synchronously and asynchronously (SYNCASYNCNET); only simulation checks read the
// synchronous use, so the circuit itself has a purely asynchronous reset.
module wordline_driver #(
  parameter int unsigned ROWS = 128
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    write_en,
  input  logic [$clog2(ROWS)-1:0] addr,
  output logic [ROWS-1:0]         wl
);
  logic [ROWS-1:0] dec;
  always_comb begin
    dec = '0;
    if (write_en && (32'(addr) < ROWS)) dec[addr] = 1'b1;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) wl <= '0;
    else        wl <= dec;
  end

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(wl));
endmodule
