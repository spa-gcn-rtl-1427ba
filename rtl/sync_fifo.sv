// sync_fifo: single-clock first-in first-out queue used as the channel
// between dataflow stages. Any packed type can be carried. push is ignored
// when full and pop when empty (the callers only do either when allowed).
// The head entry is visible combinationally on rd_data; a write and a read in
// the same cycle are both performed. Synchronous active-low reset empties it.
module sync_fifo #(
  parameter type T     = logic [31:0],
  parameter int  DEPTH = 16
) (
  input  logic clk,
  input  logic rst_n,
  input  logic push,
  input  T     wr_data,
  input  logic pop,
  output T     rd_data,
  output logic full,
  output logic empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  T mem [DEPTH];
  logic [AW-1:0] wp, rp;

  wire do_push = push && !full;
  wire do_pop  = pop && !empty;

  assign full    = (count == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign empty   = (count == '0);
  assign rd_data = mem[rp];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (do_push) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (do_pop)  rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + $bits(count)'(do_push) - $bits(count)'(do_pop);
    end
  end

  always_ff @(posedge clk) if (do_push) mem[wp] <= wr_data;

endmodule
