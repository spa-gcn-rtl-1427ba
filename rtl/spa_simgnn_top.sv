// spa_simgnn_top: SimGNN graph-similarity accelerator built on the SPA-GCN
// layer architecture.
//
// Data flow (every arrow is a valid/ready channel, every stage runs on its
// own as soon as it has data):
//
//   global memory words -> prefetcher -+-> parameter bus -> all weight/bias buffers
//                                      +-> GCN layer 1 -> GCN layer 2 -> GCN layer 3
//                                      |   (features)  (pruned, P2)   (pruned, P3)
//                                      +-> edges -> layer 1 -> layer 2 -> layer 3
//   GCN layer 3 -> Att (graph embedding) -> NTN + FCN -> score output
//
// A query is two graphs sent one after the other; the GCN layers work on the
// second graph while Att finishes the first, and NTN + FCN runs once both
// embeddings are present. Queries of a batch follow each other with no gap;
// the control unit frames the batch. Every layer has its own hardware with
// its own parallelism (SIMD_FT / SIMD_Agg / DF / P = 32/32/2/8, 32/32/1/2,
// 16/16/1/2), as in the paper's best configuration.
//
// Ports: the global-memory stream (mem_*), scores to the output buffer
// (score_*), start/num_queries/busy/done/cycles/queries_done/graphs_read for
// the batch, and event strobes for observing the sparse machinery.
//
// Tool notes: layer 3 forwards no edges (FWD_EDGES = 0) so its edge outputs
// are left open; index truncation warnings come from the lower modules and
// are explained there.
module spa_simgnn_top import spa_pkg::*; #(
  parameter int NODES = MAX_NODES,
  parameter int EDGES = MAX_EDGES
) (
  input  logic        clk,
  input  logic        rst_n,
  // batch control
  input  logic        start,
  input  logic [15:0] num_queries,
  output logic        busy,
  output logic        done,
  output logic [31:0] cycles,
  output logic [15:0] queries_done,
  output logic [15:0] graphs_read,     // graphs taken from memory since reset
  // global memory read stream
  input  logic        mem_valid,
  output logic        mem_ready,
  input  mem_word_t   mem_word,
  // result stream to the output buffer
  output logic        score_valid,
  input  logic        score_ready,
  output data_t       score,
  output logic [15:0] score_query,
  // observation strobes (one bit per GCN layer)
  output logic [2:0]  ev_bubble,
  output logic [2:0]  ev_raw_stall,
  output logic [2:0]  ev_zero_dropped
);
  pwr_t pwr;
  logic fetch_en;

  control_unit u_ctrl (
    .clk, .rst_n, .start, .num_queries, .score_fire(score_valid && score_ready),
    .fetch_en, .busy, .done, .queries_done, .cycles);

  // ---------------- prefetcher ----------------
  logic              f_valid, f_ready, f_eog;
  logic [P1-1:0]     f_lv;
  elem_t             f_lane [P1];
  logic [NODE_W-1:0] f_nodes;
  logic              e0_valid, e0_ready;
  edge_t             e0;

  prefetcher #(.P(P1)) u_pref (
    .clk, .rst_n, .en(fetch_en), .mem_valid, .mem_ready, .mem_word, .pwr,
    .feat_valid(f_valid), .feat_ready(f_ready), .feat_lane_valid(f_lv), .feat_lane(f_lane),
    .feat_eog(f_eog), .feat_nodes(f_nodes),
    .edge_valid(e0_valid), .edge_ready(e0_ready), .edge_out(e0), .graphs_seen(graphs_read));

  // ---------------- GCN layers ----------------
  logic              l1_valid, l1_ready, l1_eog;
  logic [P2-1:0]     l1_lv;
  elem_t             l1_lane [P2];
  logic [NODE_W-1:0] l1_nodes;
  logic              l2_valid, l2_ready, l2_eog;
  logic [P3-1:0]     l2_lv;
  elem_t             l2_lane [P3];
  logic [NODE_W-1:0] l2_nodes;
  logic              l3_valid, l3_ready, l3_eog;
  logic [P_ATT-1:0]  l3_lv;
  elem_t             l3_lane [P_ATT];
  logic [NODE_W-1:0] l3_nodes;
  logic              e1_valid, e1_ready, e2_valid, e2_ready;
  edge_t             e1, e2;
  logic [$clog2(P1+1)-1:0] d1;
  logic [$clog2(P2+1)-1:0] d2;
  logic [$clog2(P3+1)-1:0] d3;

  gcn_layer #(.F_IN(F0), .F_OUT(F1), .SIMD_FT(SIMD_FT1), .SIMD_AGG(SIMD_AG1), .DF(DF1),
              .P_IN(P1), .P_OUT(P2), .NODES(NODES), .EDGE_DEPTH(EDGES + 2), .FWD_EDGES(1'b1),
              .W_TARGET(PT_W1), .B_TARGET(PT_B1)) u_l1 (
    .clk, .rst_n, .pwr,
    .in_valid(f_valid), .in_ready(f_ready), .in_lane_valid(f_lv), .in_lane(f_lane),
    .in_eog(f_eog), .in_nodes(f_nodes),
    .edge_valid(e0_valid), .edge_ready(e0_ready), .edge_in(e0),
    .edge_out_valid(e1_valid), .edge_out_ready(e1_ready), .edge_out(e1),
    .out_valid(l1_valid), .out_ready(l1_ready), .out_lane_valid(l1_lv), .out_lane(l1_lane),
    .out_eog(l1_eog), .out_nodes(l1_nodes),
    .n_dropped(d1), .bubble(ev_bubble[0]), .raw_stall(ev_raw_stall[0]));

  gcn_layer #(.F_IN(F1), .F_OUT(F2), .SIMD_FT(SIMD_FT2), .SIMD_AGG(SIMD_AG2), .DF(DF2),
              .P_IN(P2), .P_OUT(P3), .NODES(NODES), .EDGE_DEPTH(EDGES + 2), .FWD_EDGES(1'b1),
              .W_TARGET(PT_W2), .B_TARGET(PT_B2)) u_l2 (
    .clk, .rst_n, .pwr,
    .in_valid(l1_valid), .in_ready(l1_ready), .in_lane_valid(l1_lv), .in_lane(l1_lane),
    .in_eog(l1_eog), .in_nodes(l1_nodes),
    .edge_valid(e1_valid), .edge_ready(e1_ready), .edge_in(e1),
    .edge_out_valid(e2_valid), .edge_out_ready(e2_ready), .edge_out(e2),
    .out_valid(l2_valid), .out_ready(l2_ready), .out_lane_valid(l2_lv), .out_lane(l2_lane),
    .out_eog(l2_eog), .out_nodes(l2_nodes),
    .n_dropped(d2), .bubble(ev_bubble[1]), .raw_stall(ev_raw_stall[1]));

  gcn_layer #(.F_IN(F2), .F_OUT(F3), .SIMD_FT(SIMD_FT3), .SIMD_AGG(SIMD_AG3), .DF(DF3),
              .P_IN(P3), .P_OUT(P_ATT), .NODES(NODES), .EDGE_DEPTH(EDGES + 2), .FWD_EDGES(1'b0),
              .W_TARGET(PT_W3), .B_TARGET(PT_B3)) u_l3 (
    .clk, .rst_n, .pwr,
    .in_valid(l2_valid), .in_ready(l2_ready), .in_lane_valid(l2_lv), .in_lane(l2_lane),
    .in_eog(l2_eog), .in_nodes(l2_nodes),
    .edge_valid(e2_valid), .edge_ready(e2_ready), .edge_in(e2),
    .edge_out_valid(), .edge_out_ready(1'b1), .edge_out(),
    .out_valid(l3_valid), .out_ready(l3_ready), .out_lane_valid(l3_lv), .out_lane(l3_lane),
    .out_eog(l3_eog), .out_nodes(l3_nodes),
    .n_dropped(d3), .bubble(ev_bubble[2]), .raw_stall(ev_raw_stall[2]));

  assign ev_zero_dropped = {d3 != '0, d2 != '0, d1 != '0};

  // ---------------- Att ----------------
  logic          hg_valid, hg_ready;
  data_t [F3-1:0] hg;

  att_module #(.F(F3), .P(P_ATT), .NODES(NODES)) u_att (
    .clk, .rst_n, .pwr,
    .in_valid(l3_valid), .in_ready(l3_ready), .in_lane_valid(l3_lv), .in_lane(l3_lane),
    .in_eog(l3_eog), .in_nodes(l3_nodes),
    .out_valid(hg_valid), .out_ready(hg_ready), .out_hg(hg));

  // ---------------- NTN + FCN ----------------
  ntn_fcn #(.F(F3), .K(K_NTN), .F_FC(F_FC1)) u_ntn (
    .clk, .rst_n, .pwr,
    .in_valid(hg_valid), .in_ready(hg_ready), .in_hg(hg),
    .out_valid(score_valid), .out_ready(score_ready), .out_score(score), .out_query(score_query));

endmodule
