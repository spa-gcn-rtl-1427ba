// gcn_acg: ACG module of one GCN layer - the accumulation half of the Feature
// Transformation, the Aggregation, and bias + ReLU.
//
// One graph passes through three phases:
//  1. FT accumulate. Words from the MULT module carry DF lanes of SIMD_FT
//     partial products, each addressed by (node row, column block). The DF
//     SIMD accumulation units add them into the features buffer X. X is read
//     when a word is accepted, the sum travels LADD cycles (adder latency) and
//     is written back. The phase ends with the MULT eog word.
//  2. Aggregation. The edges (src, dst, w) of the normalized adjacency matrix
//     A' are streamed in; each edge is applied to all F_OUT features of dst,
//     SIMD_AGG at a time: O[dst] += w * X[src] in the SIMD MAC unit (latency
//     LMUL + LADD) writing the out-features buffer O. Each consumed edge is
//     forwarded to the next layer (FWD_EDGES), so edges are read from global
//     memory only once. The phase ends with the eog edge.
//  3. Readout. O is read column by column, P_OUT nodes per beat, the column
//     bias is added and ReLU applied; the beat goes to the next layer's pruner
//     (or to the Att stage). An eog beat with the node count closes the graph.
// Buffer entries never written in a graph read as zero (valid bitmaps cleared
// after each graph), so no clearing pass is needed.
//
// RAW safety: the MULT module already spaces updates of one node by its
// dependency distance, and the host orders edges so equal destinations are
// far apart. Because FIFOs between modules can close those gaps, this module
// also compares every new update address against the updates still in its
// pipelines and holds the input while they collide (counted on raw_stall).
// This interlock is an addition of this implementation.
//
// Follows the paper: merged ACC + Aggregation module sharing X, features and
// out-features buffers, SIMD_FT accumulation, SIMD_AGG MAC over streamed
// edges, bias + ReLU at the end. Own choices: phase sequencing, readout order
// (column-major, as the next MULT wants its input), the interlock.
//
// Tool notes: the 8-bit node row / column block and the 16-bit bus address are
// wider than the buffer and bank indices they select (1 bit when DF = 1);
// rows stay below NODES and bus writes are range-tested, so the reported
// truncation drops only zero bits. The forwarded edge data is a wire copy of
// the accepted input edge, which a synthesis report lists as outputs driven
// straight from inputs.
module gcn_acg import spa_pkg::*; #(
  parameter int       F_OUT     = F1,
  parameter int       SIMD_FT   = SIMD_FT1,
  parameter int       SIMD_AGG  = SIMD_AG1,
  parameter int       DF        = DF1,
  parameter int       P_OUT     = P2,
  parameter int       LMUL      = L_MUL,
  parameter int       LADD      = L_ADD,
  parameter int       NODES     = MAX_NODES,
  parameter bit       FWD_EDGES = 1'b1,
  parameter ptarget_e B_TARGET  = PT_B1
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  pwr_t                           pwr,
  // from MULT
  input  logic                           in_valid,
  output logic                           in_ready,
  input  logic                           in_eog,
  input  logic [NODE_W-1:0]              in_nodes,
  input  logic [DF-1:0]                  in_lv,
  input  logic [DF-1:0][NODE_W-1:0]      in_row,
  input  logic [DF-1:0][FEAT_W-1:0]      in_blk,
  input  data_t [DF-1:0][SIMD_FT-1:0]    in_prod,
  // edges in / forwarded
  input  logic                           edge_valid,
  output logic                           edge_ready,
  input  edge_t                          edge_in,
  output logic                           edge_out_valid,
  input  logic                           edge_out_ready,
  output edge_t                          edge_out,
  // readout beats
  output logic                           out_valid,
  input  logic                           out_ready,
  output logic [P_OUT-1:0]               out_lane_valid,
  output elem_t                          out_lane [P_OUT],
  output logic                           out_eog,
  output logic [NODE_W-1:0]              out_nodes,
  // event strobes
  output logic                           raw_stall,
  output logic                           agg_issue
);
  localparam int NBF = F_OUT / SIMD_FT;
  localparam int NBA = F_OUT / SIMD_AGG;
  localparam int LAG = LMUL + LADD;
  localparam int NW  = (NODES > 1) ? $clog2(NODES) : 1;

  typedef enum logic [1:0] {S_FT, S_AGG, S_OUT, S_EOG} state_e;
  state_e state;

  // ---------------- buffers ----------------
  data_t xbuf [NODES*F_OUT];            // features buffer X
  data_t obuf [NODES*F_OUT];            // out features buffer
  logic [NODES-1:0][NBF-1:0] xval;
  logic [NODES-1:0][NBA-1:0] oval;
  data_t bias [F_OUT];

  always_ff @(posedge clk)
    if (pwr.we && pwr.target == B_TARGET && int'(pwr.addr) < F_OUT)
      bias[pwr.addr] <= pwr.data;

  logic [NODE_W-1:0] nodes;

  // ---------------- FT accumulation pipeline ----------------
  typedef struct packed {
    logic [DF-1:0]               lv;
    logic [DF-1:0][NODE_W-1:0]   row;
    logic [DF-1:0][FEAT_W-1:0]   blk;
    data_t [DF-1:0][SIMD_FT-1:0] sum;
  } ft_stage_t;
  ft_stage_t ft_pipe [LADD];
  ft_stage_t ft_s0;

  logic ft_haz, ft_busy;
  always_comb begin
    ft_haz  = 1'b0;
    ft_busy = 1'b0;
    for (int i = 0; i < LADD; i++) begin
      ft_busy |= (ft_pipe[i].lv != '0);
      for (int a = 0; a < DF; a++)
        for (int d = 0; d < DF; d++)
          if (ft_pipe[i].lv[a] && in_lv[d] && ft_pipe[i].row[a] == in_row[d] && ft_pipe[i].blk[a] == in_blk[d])
            ft_haz = 1'b1;
    end
  end

  wire ft_take = (state == S_FT) && in_valid && !in_eog && !ft_haz;
  wire ft_end  = (state == S_FT) && in_valid && in_eog && !ft_busy;

  always_comb begin
    ft_s0 = '0;
    ft_s0.lv  = ft_take ? in_lv : '0;
    ft_s0.row = in_row;
    ft_s0.blk = in_blk;
    for (int d = 0; d < DF; d++)
      for (int s = 0; s < SIMD_FT; s++)
        ft_s0.sum[d][s] = (xval[NW'(in_row[d])][in_blk[d]] ?
                           xbuf[int'(in_row[d])*F_OUT + int'(in_blk[d])*SIMD_FT + s] : '0)
                          + in_prod[d][s];
  end

  // ---------------- aggregation MAC pipeline ----------------
  typedef struct packed {
    logic                       v;
    logic [NODE_W-1:0]          dst;
    logic [FEAT_W-1:0]          blk;
    data_t [SIMD_AGG-1:0]       sum;
  } ag_stage_t;
  ag_stage_t ag_pipe [LAG];
  ag_stage_t ag_s0;
  logic [FEAT_W-1:0] ablk;

  logic ag_haz, ag_busy;
  always_comb begin
    ag_haz  = 1'b0;
    ag_busy = 1'b0;
    for (int i = 0; i < LAG; i++) begin
      ag_busy |= ag_pipe[i].v;
      if (ag_pipe[i].v && ag_pipe[i].dst == edge_in.dst && ag_pipe[i].blk == ablk) ag_haz = 1'b1;
    end
  end

  wire ag_last  = (int'(ablk) == NBA-1);
  wire ag_fwdok = !FWD_EDGES || edge_out_ready;
  wire ag_take  = (state == S_AGG) && edge_valid && !edge_in.eog && !ag_haz && (!ag_last || ag_fwdok);
  wire ag_end   = (state == S_AGG) && edge_valid && edge_in.eog && !ag_busy && ag_fwdok;

  data_t ag_xv [SIMD_AGG], ag_ov [SIMD_AGG];
  for (genvar s = 0; s < SIMD_AGG; s++) begin : g_ag_rd
    assign ag_xv[s] = xval[NW'(edge_in.src)][(int'(ablk)*SIMD_AGG + s) / SIMD_FT] ?
                      xbuf[int'(edge_in.src)*F_OUT + int'(ablk)*SIMD_AGG + s] : '0;
    assign ag_ov[s] = oval[NW'(edge_in.dst)][ablk] ? obuf[int'(edge_in.dst)*F_OUT + int'(ablk)*SIMD_AGG + s] : '0;
  end

  always_comb begin
    ag_s0     = '0;
    ag_s0.v   = ag_take;
    ag_s0.dst = edge_in.dst;
    ag_s0.blk = ablk;
    for (int s = 0; s < SIMD_AGG; s++) ag_s0.sum[s] = ag_ov[s] + fx_mul(edge_in.w, ag_xv[s]);
  end

  assign edge_ready     = ag_take ? ag_last : ag_end;
  assign edge_out_valid = FWD_EDGES && ((ag_take && ag_last) || ag_end);
  assign edge_out       = edge_in;
  assign in_ready       = ft_take || ft_end;
  assign raw_stall      = ((state == S_FT) && in_valid && !in_eog && ft_haz) ||
                          ((state == S_AGG) && edge_valid && !edge_in.eog && ag_haz);
  assign agg_issue      = ag_take;

  // ---------------- readout ----------------
  logic [FEAT_W-1:0] rcol;
  logic [NODE_W-1:0] rbase;
  for (genvar p = 0; p < P_OUT; p++) begin : g_rd
    wire [NODE_W:0] n  = {1'b0, rbase} + (NODE_W+1)'(p);
    wire            in_range = int'(n) < NODES;
    data_t          ov;
    assign ov = (in_range && oval[NW'(n)][int'(rcol) / SIMD_AGG]) ? obuf[int'(NW'(n))*F_OUT + int'(rcol)] : '0;
    assign out_lane_valid[p] = (state == S_OUT) && (n < {1'b0, nodes});
    assign out_lane[p]       = elem_t'{eog: 1'b0, row: NODE_W'(n), col: rcol, val: relu(ov + bias[rcol])};
  end
  assign out_valid = (state == S_OUT) || (state == S_EOG);
  assign out_eog   = (state == S_EOG);
  assign out_nodes = nodes;

  // ---------------- sequencing and buffer writes ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_FT;
      nodes <= '0;
      ablk  <= '0;
      rcol  <= '0;
      rbase <= '0;
      xval  <= '0;
      oval  <= '0;
      for (int i = 0; i < LADD; i++) ft_pipe[i] <= '0;
      for (int i = 0; i < LAG; i++)  ag_pipe[i] <= '0;
    end else begin
      ft_pipe[0] <= ft_s0;
      for (int i = 1; i < LADD; i++) ft_pipe[i] <= ft_pipe[i-1];
      ag_pipe[0] <= ag_s0;
      for (int i = 1; i < LAG; i++) ag_pipe[i] <= ag_pipe[i-1];

      for (int d = 0; d < DF; d++)
        if (ft_pipe[LADD-1].lv[d]) begin
          for (int s = 0; s < SIMD_FT; s++)
            xbuf[int'(ft_pipe[LADD-1].row[d])*F_OUT + int'(ft_pipe[LADD-1].blk[d])*SIMD_FT + s]
              <= ft_pipe[LADD-1].sum[d][s];
          xval[NW'(ft_pipe[LADD-1].row[d])][ft_pipe[LADD-1].blk[d]] <= 1'b1;
        end
      if (ag_pipe[LAG-1].v) begin
        for (int s = 0; s < SIMD_AGG; s++)
          obuf[int'(ag_pipe[LAG-1].dst)*F_OUT + int'(ag_pipe[LAG-1].blk)*SIMD_AGG + s] <= ag_pipe[LAG-1].sum[s];
        oval[NW'(ag_pipe[LAG-1].dst)][ag_pipe[LAG-1].blk] <= 1'b1;
      end

      unique case (state)
        S_FT: if (ft_end) begin
          nodes <= in_nodes;
          ablk  <= '0;
          state <= S_AGG;
        end
        S_AGG: begin
          if (ag_take) ablk <= ag_last ? '0 : ablk + 1'b1;
          if (ag_end) begin
            rcol  <= '0;
            rbase <= '0;
            state <= (nodes == '0) ? S_EOG : S_OUT;
          end
        end
        S_OUT: if (out_ready) begin
          if (int'(rbase) + P_OUT >= int'(nodes)) begin
            rbase <= '0;
            if (int'(rcol) == F_OUT-1) state <= S_EOG;
            else rcol <= rcol + 1'b1;
          end else begin
            rbase <= rbase + NODE_W'(P_OUT);
          end
        end
        S_EOG: if (out_ready) begin
          xval  <= '0;
          oval  <= '0;
          state <= S_FT;
        end
        default: state <= S_FT;
      endcase
    end
  end

  a_ft_bank: assert property (@(posedge clk) disable iff (!rst_n)
    ft_take |-> (DF == 1 || $countones(in_lv) <= 1 || in_row[0] != in_row[DF-1]));

endmodule
