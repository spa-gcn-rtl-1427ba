// gcn_mult: MULT module of one GCN layer (multiplications of the Feature
// Transformation X = H * W), with the sparse front end.
//
// Input: P lane FIFOs (from a pruner) holding only the non-zero elements of
// the layer's input embedding H, each packed with its (row, col) address and
// streamed column by column. Output: words of DF lanes, each lane carrying a
// node row, a column block and SIMD partial products h[row][col] * W[col][blk]
// for the ACG module, which accumulates them.
//
// How it works. The weight matrix W (F_IN x F_OUT) is held in the weight
// buffer, loaded from the parameter bus. Every F_OUT/SIMD cycles (a "slot")
// the arbiter/dispatcher scans the P FIFO heads in round-robin order starting
// at the FIFO whose turn it is, and dispatches up to DF elements, at most one
// per memory bank (bank = row mod DF), so each of the DF SIMD PEs owns one
// bank. A PE then spends the slot's cycles multiplying its element by all
// F_OUT weights of row col of W, SIMD at a time, so every output location of
// that node is touched once per element. Before dispatching an element the
// prev-iter buffer is consulted: it holds, per node, the iteration at which
// that node was last dispatched. If fewer than DEP iterations have passed,
// the earlier update may still be in the accumulator pipeline, so the element
// is held back (a bubble) and retried in a later slot. A graph ends when every
// FIFO head is an end-of-graph token; the tokens are popped, the prev-iter
// buffer is invalidated and an eog word (with the node count) follows the
// graph's products.
//
// Follows the paper: weight buffer, P-to-DF round-robin arbiter, next-turn
// pointer, prev-iter buffer compared against current iteration plus a
// dependency distance, bubbles, one element per bank, SIMD PEs with II = 1.
// Own choices: the bank mapping row mod DF, slot-synchronous PEs, the
// iteration counter advancing only when the output is not stalled, and the
// eog token. Timing: products leave LMUL cycles after dispatch; the whole
// pipeline stalls while out_ready is low at a valid output.
//
// Tool notes: the 16-bit parameter-bus address and the 8-bit node row are
// wider than the indices of the weight buffer and the per-node tables; every
// write is guarded by an explicit range test and rows never exceed NODES-1,
// so the truncation the linter reports drops only zero bits.
module gcn_mult import spa_pkg::*; #(
  parameter int       F_IN     = F0,
  parameter int       F_OUT    = F1,
  parameter int       SIMD     = SIMD_FT1,
  parameter int       DF       = DF1,
  parameter int       P        = P1,
  parameter int       LMUL     = L_MUL,
  parameter int       DEP      = L_ADD + 1,
  parameter int       NODES    = MAX_NODES,
  parameter ptarget_e W_TARGET = PT_W1
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  pwr_t                           pwr,
  // lane FIFOs
  input  elem_t                          head [P],
  input  logic [P-1:0]                   empty,
  output logic [P-1:0]                   pop,
  // products to ACG
  output logic                           out_valid,
  input  logic                           out_ready,
  output logic                           out_eog,
  output logic [NODE_W-1:0]              out_nodes,
  output logic [DF-1:0]                  out_lv,
  output logic [DF-1:0][NODE_W-1:0]      out_row,
  output logic [DF-1:0][FEAT_W-1:0]      out_blk,
  output data_t [DF-1:0][SIMD-1:0]       out_prod,
  // event strobes
  output logic                           bubble,     // an element was held back by the RAW check
  output logic [$clog2(DF+1)-1:0]        n_issued    // elements dispatched this cycle
);
  localparam int NB = F_OUT / SIMD;
  localparam int BW = (NB > 1) ? $clog2(NB) : 1;
  localparam int PW = (P > 1) ? $clog2(P) : 1;

  // ---------------- weight buffer ----------------
  data_t wbuf [F_IN*F_OUT];
  always_ff @(posedge clk)
    if (pwr.we && pwr.target == W_TARGET && int'(pwr.addr) < F_IN*F_OUT)
      wbuf[pwr.addr] <= pwr.data;

  // ---------------- PE pipeline ----------------
  typedef struct packed {
    logic                      v;
    logic                      eog;
    logic [NODE_W-1:0]         nodes;
    logic [DF-1:0]             lv;
    logic [DF-1:0][NODE_W-1:0] row;
    logic [DF-1:0][FEAT_W-1:0] blk;
    data_t [DF-1:0][SIMD-1:0]  prod;
  } stage_t;

  stage_t pipe [LMUL];
  stage_t s0;
  wire adv = !pipe[LMUL-1].v || out_ready;

  // ---------------- dispatcher state ----------------
  logic [BW-1:0]      bcnt;
  elem_t              cur [DF];
  logic [DF-1:0]      cur_v;
  logic [PW-1:0]      rr;           // next turn
  logic [31:0]        iter;         // current iteration
  logic [31:0]        prev_iter [NODES];
  logic [NODES-1:0]   pv_valid;

  // ---------------- arbiter (combinational) ----------------
  logic [P-1:0]  sel;
  logic [DF-1:0] taken;
  elem_t         sel_e [DF];
  logic          all_eog, haz_seen;

  // per-FIFO view of the heads: eligible element, its bank, its RAW hazard
  logic [P-1:0]    elig, haz;
  logic [DF-1:0]   bank_oh [P];
  logic [PW-1:0]   qidx [P];          // FIFO visited i-th in this slot's order

  for (genvar q = 0; q < P; q++) begin : g_head
    assign elig[q]    = !empty[q] && !head[q].eog;
    assign bank_oh[q] = DF'(1) << (int'(head[q].row) % DF);
    assign haz[q]     = pv_valid[head[q].row] && ((iter - prev_iter[head[q].row]) < 32'(DEP));
    assign qidx[q]    = PW'((int'(rr) + q) % P);
  end

  always_comb begin
    sel      = '0;
    taken    = '0;
    haz_seen = 1'b0;
    all_eog  = 1'b1;
    for (int d = 0; d < DF; d++) sel_e[d] = '0;
    for (int i = 0; i < P; i++) all_eog &= !empty[i] && head[i].eog;
    for (int i = 0; i < P; i++) begin
      if (elig[qidx[i]] && (taken & bank_oh[qidx[i]]) == '0) begin
        if (haz[qidx[i]]) haz_seen = 1'b1;
        else begin
          sel[qidx[i]] = 1'b1;
          taken        = taken | bank_oh[qidx[i]];
          for (int d = 0; d < DF; d++)
            if (bank_oh[qidx[i]][d]) sel_e[d] = head[qidx[i]];
        end
      end
    end
  end

  wire slot_start = (bcnt == '0);
  wire issue_eog  = slot_start && all_eog;

  assign pop      = (adv && slot_start) ? (issue_eog ? {P{1'b1}} : sel) : '0;
  assign bubble   = adv && slot_start && haz_seen;
  always_comb begin
    n_issued = '0;
    if (adv && slot_start)
      for (int d = 0; d < DF; d++) n_issued = n_issued + $bits(n_issued)'(taken[d]);
  end

  // ---------------- stage 0: multiply ----------------
  elem_t pe_e [DF];                  // element each PE works on this cycle
  for (genvar d = 0; d < DF; d++) begin : g_pe_e
    assign pe_e[d] = slot_start ? sel_e[d] : cur[d];
  end

  always_comb begin
    s0 = '0;
    if (slot_start) begin
      s0.lv    = taken;
      s0.eog   = issue_eog;
      s0.nodes = issue_eog ? head[0].row : '0;
    end else begin
      s0.lv = cur_v;
    end
    s0.v = (s0.lv != '0) || s0.eog;
    for (int d = 0; d < DF; d++) begin
      s0.row[d] = pe_e[d].row;
      s0.blk[d] = FEAT_W'(bcnt);
      for (int s = 0; s < SIMD; s++)
        s0.prod[d][s] = fx_mul(pe_e[d].val, wbuf[int'(pe_e[d].col)*F_OUT + int'(bcnt)*SIMD + s]);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < LMUL; i++) pipe[i] <= '0;
      bcnt     <= '0;
      cur_v    <= '0;
      rr       <= '0;
      iter     <= '0;
      pv_valid <= '0;
    end else if (adv) begin
      pipe[0] <= s0;
      for (int i = 1; i < LMUL; i++) pipe[i] <= pipe[i-1];
      iter <= iter + 1;
      if (slot_start) begin
        rr <= (int'(rr) == P-1) ? '0 : rr + 1'b1;
        if (issue_eog) pv_valid <= '0;
        for (int d = 0; d < DF; d++)
          if (taken[d]) begin
            prev_iter[sel_e[d].row] <= iter;
            pv_valid[sel_e[d].row]  <= 1'b1;
          end
        cur   <= sel_e;
        cur_v <= taken;
        if (NB > 1 && taken != '0) bcnt <= BW'(1);
      end else begin
        bcnt <= (int'(bcnt) == NB-1) ? '0 : bcnt + 1'b1;
      end
    end
  end

  assign out_valid = pipe[LMUL-1].v;
  assign out_eog   = pipe[LMUL-1].eog;
  assign out_nodes = pipe[LMUL-1].nodes;
  assign out_lv    = pipe[LMUL-1].lv;
  assign out_row   = pipe[LMUL-1].row;
  assign out_blk   = pipe[LMUL-1].blk;
  assign out_prod  = pipe[LMUL-1].prod;

  // never pop an empty lane FIFO
  a_pop_nonempty: assert property (@(posedge clk) disable iff (!rst_n) (pop & empty) == '0);

endmodule
