// gcn_layer: one complete GCN layer, H_out = ReLU(A' * (H_in * W) + b),
// built from a pruner, a MULT module, a product FIFO and an ACG module, plus
// the FIFO that holds the graph's edges until the Aggregation phase needs
// them.
//
// Input beats carry up to P_IN elements of H_in (column-major), already
// addressed; zeros are pruned here. Output beats carry P_OUT elements of
// H_out, column-major, for the next layer (or the Att stage). Edges enter on
// edge_in and, if FWD_EDGES, leave on edge_out once used, for the next layer.
// All channels are valid/ready. The layer works on one graph at a time per
// module, but its modules overlap: MULT can start on the next graph while
// ACG is still aggregating the previous one.
//
// Tool notes: FIFO fill counts, the MULT issue count and the ACG MAC strobe
// are not needed at this level and are left open.
module gcn_layer import spa_pkg::*; #(
  parameter int       F_IN       = F0,
  parameter int       F_OUT      = F1,
  parameter int       SIMD_FT    = SIMD_FT1,
  parameter int       SIMD_AGG   = SIMD_AG1,
  parameter int       DF         = DF1,
  parameter int       P_IN       = P1,
  parameter int       P_OUT      = P2,
  parameter int       LMUL       = L_MUL,
  parameter int       LADD       = L_ADD,
  parameter int       NODES      = MAX_NODES,
  parameter int       EDGE_DEPTH = MAX_EDGES + 2,
  parameter int       LANE_DEPTH = 16,
  parameter bit       FWD_EDGES  = 1'b1,
  parameter ptarget_e W_TARGET   = PT_W1,
  parameter ptarget_e B_TARGET   = PT_B1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  pwr_t              pwr,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [P_IN-1:0]   in_lane_valid,
  input  elem_t             in_lane [P_IN],
  input  logic              in_eog,
  input  logic [NODE_W-1:0] in_nodes,
  input  logic              edge_valid,
  output logic              edge_ready,
  input  edge_t             edge_in,
  output logic              edge_out_valid,
  input  logic              edge_out_ready,
  output edge_t             edge_out,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [P_OUT-1:0]  out_lane_valid,
  output elem_t             out_lane [P_OUT],
  output logic              out_eog,
  output logic [NODE_W-1:0] out_nodes,
  output logic [$clog2(P_IN+1)-1:0] n_dropped,
  output logic              bubble,
  output logic              raw_stall
);
  // ---------------- pruner + lane FIFOs ----------------
  elem_t        head [P_IN];
  logic [P_IN-1:0] empty, pop;

  pruner #(.P(P_IN), .DEPTH(LANE_DEPTH)) u_pruner (
    .clk, .rst_n, .in_valid, .in_ready, .in_lane_valid, .in_lane, .in_eog, .in_nodes,
    .pop, .head, .empty, .n_dropped);

  // ---------------- MULT ----------------
  typedef struct packed {
    logic                        eog;
    logic [NODE_W-1:0]           nodes;
    logic [DF-1:0]               lv;
    logic [DF-1:0][NODE_W-1:0]   row;
    logic [DF-1:0][FEAT_W-1:0]   blk;
    data_t [DF-1:0][SIMD_FT-1:0] prod;
  } pword_t;

  pword_t m_w, a_w;
  logic   m_valid, m_ready, a_valid, a_ready, pf_full, pf_empty;

  gcn_mult #(.F_IN(F_IN), .F_OUT(F_OUT), .SIMD(SIMD_FT), .DF(DF), .P(P_IN), .LMUL(LMUL),
             .DEP(LADD + 1), .NODES(NODES), .W_TARGET(W_TARGET)) u_mult (
    .clk, .rst_n, .pwr, .head, .empty, .pop,
    .out_valid(m_valid), .out_ready(m_ready), .out_eog(m_w.eog), .out_nodes(m_w.nodes),
    .out_lv(m_w.lv), .out_row(m_w.row), .out_blk(m_w.blk), .out_prod(m_w.prod),
    .bubble, .n_issued());

  assign m_ready = !pf_full;
  assign a_valid = !pf_empty;

  sync_fifo #(.T(pword_t), .DEPTH(4)) u_pfifo (
    .clk, .rst_n, .push(m_valid), .wr_data(m_w), .pop(a_valid && a_ready),
    .rd_data(a_w), .full(pf_full), .empty(pf_empty), .count());

  // ---------------- edge FIFO ----------------
  edge_t e_head;
  logic  e_full, e_empty, e_pop;
  assign edge_ready = !e_full;

  sync_fifo #(.T(edge_t), .DEPTH(EDGE_DEPTH)) u_efifo (
    .clk, .rst_n, .push(edge_valid), .wr_data(edge_in), .pop(e_pop),
    .rd_data(e_head), .full(e_full), .empty(e_empty), .count());

  // ---------------- ACG ----------------
  gcn_acg #(.F_OUT(F_OUT), .SIMD_FT(SIMD_FT), .SIMD_AGG(SIMD_AGG), .DF(DF), .P_OUT(P_OUT),
            .LMUL(LMUL), .LADD(LADD), .NODES(NODES), .FWD_EDGES(FWD_EDGES),
            .B_TARGET(B_TARGET)) u_acg (
    .clk, .rst_n, .pwr,
    .in_valid(a_valid), .in_ready(a_ready), .in_eog(a_w.eog), .in_nodes(a_w.nodes),
    .in_lv(a_w.lv), .in_row(a_w.row), .in_blk(a_w.blk), .in_prod(a_w.prod),
    .edge_valid(!e_empty), .edge_ready(e_pop), .edge_in(e_head),
    .edge_out_valid, .edge_out_ready, .edge_out,
    .out_valid, .out_ready, .out_lane_valid, .out_lane, .out_eog, .out_nodes,
    .raw_stall, .agg_issue());

endmodule
