// query_fifo: synchronous FIFO of queries waiting for one bucket's CAM unit.
//
// The scheduler pushes queries of the bucket a unit holds; the unit pops one per search.
// Order is kept, so queries of a bucket are searched in arrival order. A push while full
// and a pop while empty are ignored (and flagged by assertions). Pop data is valid while
// `empty` is low (first-word fall-through). The FIFO itself is from the paper; its depth
// and this handshake are this design's choices.
//
// Lint note: the assertions are disabled with 'disable iff (!rst_n)', which samples rst_n at
// the clock, while the flops use it as an asynchronous reset. Lint reports this as a net used
// both synchronously and asynchronously (SYNCASYNCNET); only simulation checks read the
// synchronous use, so the circuit itself has a purely asynchronous reset.
module query_fifo #(
  parameter int unsigned W     = 16,
  parameter int unsigned DEPTH = 4,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] wdata,
  input  logic         pop,
  output logic [W-1:0] rdata,
  output logic         full,
  output logic         empty,
  output logic [AW:0]  level
);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic do_push, do_pop;

  assign full    = (32'(level) == DEPTH);
  assign empty   = (level == '0);
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign rdata   = mem[rp];

  function automatic logic [AW-1:0] inc(logic [AW-1:0] p);
    return (32'(p) == DEPTH-1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; level <= '0;
    end else begin
      if (do_push) wp <= inc(wp);
      if (do_pop)  rp <= inc(rp);
      level <= level + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end
  always_ff @(posedge clk) if (do_push) mem[wp] <= wdata;

  a_ovf: assert property (@(posedge clk) disable iff (!rst_n) !(push && full))  else $error("query_fifo: push while full");
  a_udf: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty))  else $error("query_fifo: pop while empty");
endmodule
