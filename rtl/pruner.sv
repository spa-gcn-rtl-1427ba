// pruner: on-the-fly zero pruning of a node-embedding stream.
//
// Each accepted beat carries up to P elements of the node-embedding matrix,
// each already packed with its (row, column) address. Every element whose
// value is non-zero is written into its own lane FIFO (lane p -> FIFO p);
// zero elements are dropped. A beat is accepted only when every FIFO it has
// to write has room, so writes never block half-way ("write only when not
// full"). An end-of-graph beat (in_eog) writes one eog token, carrying the
// node count, into every FIFO so that the consumer sees the graph boundary
// on all lanes. The FIFO heads, empty flags and pop strobes form the output
// side, read by the arbiter of the next MULT module.
//
// Following the paper: P elements evaluated per cycle, one FIFO per lane, a
// non-zero test per lane, non-blocking FIFO access. Own choices: lane-to-FIFO
// mapping is fixed by position, FIFO depth, and the eog token protocol.
// Timing: in_ready is combinational from the FIFO full flags; an element is
// visible at the FIFO head the cycle after it is accepted.
//
// Tool notes: the lane FIFOs' fill counts are not used and are left open.
module pruner import spa_pkg::*; #(
  parameter int P     = 8,
  parameter int DEPTH = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [P-1:0]      in_lane_valid,
  input  elem_t             in_lane [P],
  input  logic              in_eog,
  input  logic [NODE_W-1:0] in_nodes,
  input  logic [P-1:0]      pop,
  output elem_t             head [P],
  output logic [P-1:0]      empty,
  output logic [$clog2(P+1)-1:0] n_dropped   // zeros dropped by the accepted beat
);
  logic [P-1:0] need, full, push;
  elem_t        wdata [P];

  always_comb begin
    for (int p = 0; p < P; p++) begin
      need[p]  = in_eog || (in_lane_valid[p] && in_lane[p].val != '0);
      wdata[p] = in_eog ? elem_t'{eog: 1'b1, row: in_nodes, col: '0, val: '0} : in_lane[p];
    end
    in_ready = ((need & full) == '0);
    push     = (in_valid && in_ready) ? need : '0;
    n_dropped = '0;
    if (in_valid && in_ready && !in_eog)
      for (int p = 0; p < P; p++)
        if (in_lane_valid[p] && in_lane[p].val == '0) n_dropped = n_dropped + 1'b1;
  end

  for (genvar p = 0; p < P; p++) begin : g_lane
    sync_fifo #(.T(elem_t), .DEPTH(DEPTH)) u_fifo (
      .clk, .rst_n, .push(push[p]), .wr_data(wdata[p]), .pop(pop[p]),
      .rd_data(head[p]), .full(full[p]), .empty(empty[p]), .count());
  end

endmodule
