// tb_spa_simgnn_top: end-to-end test of the accelerator at its default sizes.
//
// Builds a batch of graph-pair queries shaped like AIDS molecules (tree-like
// graphs with a few rings, 2..40 nodes, one-hot labels out of 29), random
// weights for every stage, and the global-memory word stream a host would
// prepare (normalized adjacency weights, edges interleaved by destination so
// equal destinations are far apart). The stream is fed with random gaps and
// the score output is back-pressured at random. Every score is compared,
// bit for bit, with a reference model of the whole network computed here.
// It also counts how often each mechanism of the design happened (zero
// pruning, arbiter bubbles, ACG interlock stalls, GCN/Att and GCN/NTN overlap, stream
// and output back-pressure, batch completion) and fails any that never did.
module tb_spa_simgnn_top;
  import spa_pkg::*;
  import spa_ref_pkg::*;

  localparam int NQ = 8;            // queries in the batch
  localparam int NG = 2 * NQ;
  localparam int F  = F3;
  localparam int K  = K_NTN;
  localparam int FC = F_FC1;

  int checks = 0, failures = 0;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        start = 1'b0, busy, done;
  logic [15:0] num_queries = 16'(NQ), queries_done, score_query, graphs_read;
  logic [31:0] cycles;
  logic        mem_valid, mem_ready, score_valid, score_ready;
  mem_word_t   mem_word;
  data_t       score;
  logic [2:0]  ev_bubble, ev_raw_stall, ev_zero_dropped;

  spa_simgnn_top dut (.*);

  // ---------------- model parameters ----------------
  data_t W1 [F0][F1];  data_t B1 [F1];
  data_t W2 [F1][F2];  data_t B2 [F2];
  data_t W3 [F2][F3];  data_t B3 [F3];
  data_t WATT [F][F];
  data_t WNTN [K][F][F]; data_t VNTN [K][2*F]; data_t BNTN [K];
  data_t WFC1 [FC][K]; data_t BFC1 [FC]; data_t WFC2 [FC]; data_t BFC2;

  // ---------------- graphs ----------------
  int    gn   [NG];
  int    glab [NG][MAX_NODES];
  int    esrc [NG][$];
  int    edst [NG][$];
  data_t ew   [NG][$];
  data_t expected [NQ];

  mem_word_t mem [$];

  function automatic mem_word_t mw(tag_e t, int a, int b, data_t d);
    return mem_word_t'{tag: t, a: 16'(a), b: 16'(b), data: d};
  endfunction

  // ---------------- graph generation + host preprocessing ----------------
  task automatic make_graph(int g, int n);
    int adj [MAX_NODES][MAX_NODES];
    int deg [MAX_NODES];
    int lists [MAX_NODES][$];
    int j, more, left;
    gn[g] = n;
    for (int a = 0; a < n; a++) begin
      deg[a] = 0;
      for (int b = 0; b < n; b++) adj[a][b] = 0;
      glab[g][a] = int'($urandom % 32'(F0));
    end
    for (int a = 1; a < n; a++) begin            // spanning tree
      j = int'($urandom % 32'(a));
      adj[a][j] = 1; adj[j][a] = 1;
    end
    more = (n > 4) ? n / 8 + 1 : 0;              // a few rings
    for (int r = 0; r < more; r++) begin
      int a, b;
      a = int'($urandom % 32'(n)); b = int'($urandom % 32'(n));
      if (a != b) begin adj[a][b] = 1; adj[b][a] = 1; end
    end
    for (int a = 0; a < n; a++) adj[a][a] = 1;   // self connections
    for (int a = 0; a < n; a++) for (int b = 0; b < n; b++) deg[a] += adj[a][b];
    // edges grouped by destination, then interleaved across destinations
    for (int d = 0; d < n; d++)
      for (int s = 0; s < n; s++)
        if (adj[d][s] != 0) lists[d].push_back(s);
    left = 1;
    while (left != 0) begin
      left = 0;
      for (int d = 0; d < n; d++)
        if (lists[d].size() > 0) begin
          int s;
          s = lists[d].pop_front();
          esrc[g].push_back(s); edst[g].push_back(d); ew[g].push_back(r_adj_weight(deg[d], deg[s]));
          left = 1;
        end
    end
  endtask

  // ---------------- reference network ----------------
  task automatic gcn_ref(int g, int fin, int fout, const ref data_t hin [MAX_NODES][64],
                         input int layer, ref data_t hout [MAX_NODES][64]);
    data_t x [MAX_NODES][64];
    data_t o [MAX_NODES][64];
    int n;
    data_t wv;
    n = gn[g];
    for (int a = 0; a < n; a++)
      for (int j = 0; j < fout; j++) begin
        x[a][j] = 0; o[a][j] = 0;
        for (int k = 0; k < fin; k++) begin
          wv = (layer == 1) ? W1[k][j] : (layer == 2) ? W2[k][j] : W3[k][j];
          x[a][j] += r_mul(hin[a][k], wv);
        end
      end
    for (int e = 0; e < esrc[g].size(); e++)
      for (int j = 0; j < fout; j++)
        o[edst[g][e]][j] += r_mul(ew[g][e], x[esrc[g][e]][j]);
    for (int a = 0; a < n; a++)
      for (int j = 0; j < fout; j++)
        hout[a][j] = r_relu(o[a][j] + ((layer == 1) ? B1[j] : (layer == 2) ? B2[j] : B3[j]));
  endtask

  task automatic graph_embedding(int g, ref data_t hg [F]);
    data_t h0 [MAX_NODES][64], h1 [MAX_NODES][64], h2 [MAX_NODES][64], h3 [MAX_NODES][64];
    data_t v [F], c [F], an [MAX_NODES];
    data_t recip, s;
    int n;
    n = gn[g];
    for (int a = 0; a < MAX_NODES; a++) for (int k = 0; k < 64; k++) h0[a][k] = 0;
    for (int a = 0; a < n; a++) h0[a][glab[g][a]] = 65536;
    gcn_ref(g, F0, F1, h0, 1, h1);
    gcn_ref(g, F1, F2, h1, 2, h2);
    gcn_ref(g, F2, F3, h2, 3, h3);
    recip = 65536 / n;
    for (int i = 0; i < F; i++) begin
      v[i] = 0;
      for (int a = 0; a < n; a++) for (int k = 0; k < F; k++) v[i] += r_mul(WATT[i][k], h3[a][k]);
      c[i] = r_tanh(r_mul(v[i], recip));
    end
    for (int a = 0; a < n; a++) begin
      s = 0;
      for (int k = 0; k < F; k++) s += r_mul(h3[a][k], c[k]);
      an[a] = r_sigmoid(s);
    end
    for (int i = 0; i < F; i++) begin
      hg[i] = 0;
      for (int a = 0; a < n; a++) hg[i] += r_mul(an[a], h3[a][i]);
    end
  endtask

  function automatic data_t ntn_fcn_ref(const ref data_t ha [F], const ref data_t hb [F]);
    data_t t, s1, s2, sk [K], y [FC], sc;
    for (int k = 0; k < K; k++) begin
      s1 = 0; s2 = 0;
      for (int j = 0; j < F; j++) begin
        t = 0;
        for (int i = 0; i < F; i++) t += r_mul(ha[i], WNTN[k][i][j]);
        s1 += r_mul(t, hb[j]);
        s2 += r_mul(VNTN[k][j], ha[j]) + r_mul(VNTN[k][F + j], hb[j]);
      end
      sk[k] = r_relu(s1 + s2 + BNTN[k]);
    end
    for (int o = 0; o < FC; o++) begin
      y[o] = BFC1[o];
      for (int k = 0; k < K; k++) y[o] += r_mul(WFC1[o][k], sk[k]);
      y[o] = r_relu(y[o]);
    end
    sc = BFC2;
    for (int o = 0; o < FC; o++) sc += r_mul(WFC2[o], y[o]);
    return sc;
  endfunction

  // ---------------- build everything ----------------
  task automatic build();
    data_t hga [F], hgb [F];
    for (int k = 0; k < F0; k++) for (int j = 0; j < F1; j++) W1[k][j] = r_rand(65536);
    for (int k = 0; k < F1; k++) for (int j = 0; j < F2; j++) W2[k][j] = r_rand(40000);
    for (int k = 0; k < F2; k++) for (int j = 0; j < F3; j++) W3[k][j] = r_rand(40000);
    for (int j = 0; j < F1; j++) B1[j] = r_rand(20000);
    for (int j = 0; j < F2; j++) B2[j] = r_rand(20000);
    for (int j = 0; j < F3; j++) B3[j] = r_rand(20000);
    for (int i = 0; i < F; i++) for (int k = 0; k < F; k++) WATT[i][k] = r_rand(65536);
    for (int k = 0; k < K; k++) begin
      for (int i = 0; i < F; i++) for (int j = 0; j < F; j++) WNTN[k][i][j] = r_rand(65536);
      for (int m = 0; m < 2 * F; m++) VNTN[k][m] = r_rand(65536);
      BNTN[k] = r_rand(32768);
    end
    for (int o = 0; o < FC; o++) begin
      for (int k = 0; k < K; k++) WFC1[o][k] = r_rand(65536);
      BFC1[o] = r_rand(32768);
      WFC2[o] = r_rand(65536);
    end
    BFC2 = r_rand(32768);

    // parameter words
    for (int k = 0; k < F0; k++) for (int j = 0; j < F1; j++) mem.push_back(mw(TAG_PARAM, PT_W1, k*F1 + j, W1[k][j]));
    for (int k = 0; k < F1; k++) for (int j = 0; j < F2; j++) mem.push_back(mw(TAG_PARAM, PT_W2, k*F2 + j, W2[k][j]));
    for (int k = 0; k < F2; k++) for (int j = 0; j < F3; j++) mem.push_back(mw(TAG_PARAM, PT_W3, k*F3 + j, W3[k][j]));
    for (int j = 0; j < F1; j++) mem.push_back(mw(TAG_PARAM, PT_B1, j, B1[j]));
    for (int j = 0; j < F2; j++) mem.push_back(mw(TAG_PARAM, PT_B2, j, B2[j]));
    for (int j = 0; j < F3; j++) mem.push_back(mw(TAG_PARAM, PT_B3, j, B3[j]));
    for (int i = 0; i < F; i++) for (int k = 0; k < F; k++) mem.push_back(mw(TAG_PARAM, PT_WATT, i*F + k, WATT[i][k]));
    for (int k = 0; k < K; k++) begin
      for (int i = 0; i < F; i++) for (int j = 0; j < F; j++) mem.push_back(mw(TAG_PARAM, PT_WNTN, (k*F + i)*F + j, WNTN[k][i][j]));
      for (int m = 0; m < 2 * F; m++) mem.push_back(mw(TAG_PARAM, PT_VNTN, k*2*F + m, VNTN[k][m]));
      mem.push_back(mw(TAG_PARAM, PT_BNTN, k, BNTN[k]));
    end
    for (int o = 0; o < FC; o++) begin
      for (int k = 0; k < K; k++) mem.push_back(mw(TAG_PARAM, PT_WFC1, o*K + k, WFC1[o][k]));
      mem.push_back(mw(TAG_PARAM, PT_BFC1, o, BFC1[o]));
      mem.push_back(mw(TAG_PARAM, PT_WFC2, o, WFC2[o]));
    end
    mem.push_back(mw(TAG_PARAM, PT_BFC2, 0, BFC2));

    // graphs: sizes 2..40 nodes, a few tiny ones to provoke RAW hazards
    for (int g = 0; g < NG; g++) begin
      int n;
      n = (g % 5 == 1) ? 2 + int'($urandom % 3) : 10 + int'($urandom % 31);
      make_graph(g, n);
      for (int k = 0; k < F0; k++)                  // column-major, non-zeros only
        for (int a = 0; a < n; a++)
          if (glab[g][a] == k) mem.push_back(mw(TAG_FEAT, a, k, 65536));
      for (int e = 0; e < esrc[g].size(); e++) mem.push_back(mw(TAG_EDGE, esrc[g][e], edst[g][e], ew[g][e]));
      mem.push_back(mw(TAG_EOG, n, 0, 0));
    end
    for (int q = 0; q < NQ; q++) begin
      graph_embedding(2*q, hga);
      graph_embedding(2*q + 1, hgb);
      expected[q] = ntn_fcn_ref(hga, hgb);
    end
  endtask

  // ---------------- stimulus ----------------
  int ptr = 0;
  logic gap;
  assign mem_valid = (ptr < mem.size()) && !gap;
  assign mem_word  = (ptr < mem.size()) ? mem[ptr] : '0;

  always_ff @(posedge clk) begin
    gap         <= ($urandom % 8) == 0;
    score_ready <= ($urandom % 4) != 0;
    if (rst_n && mem_valid && mem_ready) ptr <= ptr + 1;
  end

  // ---------------- event counters ----------------
  int n_drop = 0, n_bubble = 0, n_stall = 0, n_overlap = 0, n_mem_bp = 0, n_out_bp = 0, n_scores = 0, n_ntn_overlap = 0;
  always_ff @(posedge clk) if (rst_n) begin
    n_drop    <= n_drop    + $countones(ev_zero_dropped);
    n_bubble  <= n_bubble  + $countones(ev_bubble);
    n_stall   <= n_stall   + $countones(ev_raw_stall);
    if (!dut.u_att.in_ready && dut.f_valid && dut.f_ready) n_overlap <= n_overlap + 1;
    if (!dut.u_ntn.in_ready && dut.f_valid && dut.f_ready) n_ntn_overlap <= n_ntn_overlap + 1;
    if (mem_valid && !mem_ready && busy) n_mem_bp <= n_mem_bp + 1;
    if (score_valid && !score_ready) n_out_bp <= n_out_bp + 1;
    if (score_valid && score_ready) begin
      n_scores <= n_scores + 1;
      checks <= checks + 1;
      $display("  query %0d score %0d (expected %0d)", score_query, score, expected[score_query]);
      if (score !== expected[score_query]) begin
        failures <= failures + 1;
        $display("FAIL query %0d: score %0d expected %0d", score_query, score, expected[score_query]);
      end
    end
  end

  task automatic expect_seen(string what, int n);
    checks++;
    if (n == 0) begin failures++; $display("FAIL mechanism never happened: %s", what); end
    else $display("  %-34s %0d", what, n);
  endtask

  localparam int WATCHDOG = 3_000_000;
  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    build();
    $display("batch: %0d queries, %0d memory words", NQ, mem.size());
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    start = 1'b1;
    @(posedge clk);
    start = 1'b0;
    wait (done);
    repeat (5) @(posedge clk);
    checks++;
    checks++;
    if (graphs_read != 16'(NG)) begin
      failures++; $display("FAIL graphs_read %0d, expected %0d", graphs_read, NG);
    end
    if (n_scores != NQ || queries_done != 16'(NQ)) begin
      failures++; $display("FAIL %0d scores, queries_done %0d", n_scores, queries_done);
    end
    // The paper reports 0.327 ms per query at 290 MHz (about 94,800 cycles,
    // global memory included); the pipeline must stay well inside that.
    checks++;
    if (cycles / NQ > 94_800) begin failures++; $display("FAIL %0d cycles per query", cycles / NQ); end
    $display("  kernel cycles %0d, %0d per query", cycles, cycles / NQ);
    expect_seen("zero elements pruned", n_drop);
    expect_seen("arbiter bubbles (prev-iter check)", n_bubble);
    expect_seen("ACG RAW interlock stalls", n_stall);
    expect_seen("GCN busy while Att busy", n_overlap);
    expect_seen("GCN busy while NTN+FCN busy", n_ntn_overlap);
    expect_seen("memory stream back-pressure", n_mem_bp);
    expect_seen("score output back-pressure", n_out_bp);
    expect_seen("batch done", int'(done));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
