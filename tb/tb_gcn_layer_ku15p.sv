// tb_gcn_layer_ku15p: one whole GCN layer (pruner, MULT, product FIFO, ACG,
// edge FIFO) at the layer-1 sizes (29 -> 64 features, SIMD 32/32, DF 2, P 8 in,
// P 2 out) but with the slower operator latencies of the Kintex UltraScale+
// KU15P build: multiply 5 cycles, add 8 cycles (the default is 4 / 7). The
// RAW spacing of the MULT arbiter follows (DEP = 9).
//
// Three random graphs (2..40 nodes, chains plus rings, self loops) with about
// half of the input features zero are streamed column-major, P nodes per
// beat, with random gaps; the edges arrive interleaved by destination; the
// output is back-pressured at random. Checks: every element of
// ReLU(A' * (H * W) + b), computed here, arrives exactly once with the right
// address; the eog beat carries the node count; the edges leave unchanged and
// in order; zeros were pruned, the arbiter inserted bubbles and the ACG
// interlock stalled at least once over the run. A watchdog ends a hung run.
module tb_gcn_layer_ku15p;
  import spa_pkg::*;
  import spa_ref_pkg::*;
  localparam int FI = F0, FO = F1, PI = P1, PO = P2;
  localparam int NG = 3;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  pwr_t pwr = '0;
  logic in_valid = 0, in_eog = 0;
  logic in_ready;
  logic [PI-1:0] in_lane_valid = '0;
  elem_t in_lane [PI];
  logic [NODE_W-1:0] in_nodes = '0, out_nodes;
  logic edge_valid = 0, edge_ready, edge_out_valid, edge_out_ready = 1;
  edge_t edge_in = '0, edge_out;
  logic out_valid, out_ready = 1, out_eog;
  logic [PO-1:0] out_lane_valid;
  elem_t out_lane [PO];
  logic [$clog2(PI+1)-1:0] n_dropped;
  logic bubble, raw_stall;

  gcn_layer #(.LMUL(5), .LADD(8)) dut (.*);

  data_t W [FI][FO];
  data_t B [FO];
  int    gn [NG];
  data_t H [NG][MAX_NODES][FI];
  int    esrc [NG][$], edst [NG][$];
  data_t ew [NG][$];
  data_t expect_y [NG][MAX_NODES][FO];
  int    seen [MAX_NODES][FO];
  edge_t fwd [$];
  int    n_drop = 0, n_bubble = 0, n_stall = 0, g_out = 0;

  // ---------------- graph generation ----------------
  task automatic make_graph(int g);
    int n, deg [MAX_NODES], left;
    logic adj [MAX_NODES][MAX_NODES];
    int lists [MAX_NODES][$];
    n = 2 + int'($urandom % 39);
    gn[g] = n;
    for (int a = 0; a < MAX_NODES; a++) begin
      deg[a] = 0;
      for (int b = 0; b < MAX_NODES; b++) adj[a][b] = 0;
    end
    for (int a = 1; a < n; a++) begin
      int b;
      b = int'($urandom % 32'(a));
      adj[a][b] = 1; adj[b][a] = 1;
    end
    for (int r = 0; r < n / 6; r++) begin
      int a, b;
      a = int'($urandom % 32'(n)); b = int'($urandom % 32'(n));
      if (a != b) begin adj[a][b] = 1; adj[b][a] = 1; end
    end
    for (int a = 0; a < n; a++) adj[a][a] = 1;
    for (int a = 0; a < n; a++) for (int b = 0; b < n; b++) deg[a] += int'(adj[a][b]);
    for (int d = 0; d < n; d++)
      for (int s = 0; s < n; s++)
        if (adj[d][s]) lists[d].push_back(s);
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
    for (int a = 0; a < MAX_NODES; a++)
      for (int k = 0; k < FI; k++)
        H[g][a][k] = (a < n && ($urandom % 2) == 0) ? data_t'($urandom % 131072) : '0;
  endtask

  task automatic reference(int g);
    data_t X [MAX_NODES][FO];
    data_t acc;
    for (int a = 0; a < gn[g]; a++)
      for (int j = 0; j < FO; j++) begin
        acc = 0;
        for (int k = 0; k < FI; k++) acc += r_mul(H[g][a][k], W[k][j]);
        X[a][j] = acc;
      end
    for (int d = 0; d < gn[g]; d++)
      for (int j = 0; j < FO; j++) begin
        acc = 0;
        for (int e = 0; e < esrc[g].size(); e++)
          if (edst[g][e] == d) acc += r_mul(ew[g][e], X[esrc[g][e]][j]);
        expect_y[g][d][j] = r_relu(acc + B[j]);
      end
  endtask

  // ---------------- drivers ----------------
  task automatic load(ptarget_e t, int a, data_t v);
    @(negedge clk);
    pwr = '{we: 1'b1, target: t, addr: 16'(a), data: v};
  endtask

  task automatic send_beat(bit eog, int n, int k, int base, int g);
    @(negedge clk);
    while (($urandom % 5) == 0) begin in_valid = 0; @(negedge clk); end
    in_valid = 1; in_eog = eog; in_nodes = NODE_W'(n);
    for (int p = 0; p < PI; p++) begin
      in_lane_valid[p] = !eog && (base + p < n);
      in_lane[p] = '{eog: 1'b0, row: NODE_W'(base + p), col: FEAT_W'(k),
                     val: (!eog && base + p < n) ? H[g][base + p][k] : '0};
    end
    #1;                                  // in_ready depends on the lanes just driven
    while (!in_ready) @(negedge clk);
    @(posedge clk);
    @(negedge clk) in_valid = 0;
  endtask

  task automatic send_edge(edge_t e);
    @(negedge clk);
    edge_valid = 1; edge_in = e;
    #1;
    while (!edge_ready) @(negedge clk);
    @(posedge clk);
    @(negedge clk) edge_valid = 0;
  endtask

  // ---------------- monitors ----------------
  always_ff @(posedge clk) begin
    out_ready      <= ($urandom % 4) != 0;
    edge_out_ready <= ($urandom % 3) != 0;
    if (rst_n) begin
      n_drop   <= n_drop + int'(n_dropped);
      n_bubble <= n_bubble + int'(bubble);
      n_stall  <= n_stall + int'(raw_stall);
    end
    if (rst_n && edge_out_valid && edge_out_ready) fwd.push_back(edge_out);
    if (rst_n && out_valid && out_ready) begin
      if (out_eog) begin
        checks++;
        if (int'(out_nodes) != gn[g_out]) begin
          failures++; $display("FAIL graph %0d eog nodes %0d", g_out, out_nodes);
        end
        for (int a = 0; a < gn[g_out]; a++)
          for (int j = 0; j < FO; j++) begin
            checks++;
            if (seen[a][j] != 1) begin
              failures++; $display("FAIL graph %0d element (%0d,%0d) seen %0d times", g_out, a, j, seen[a][j]);
            end
            seen[a][j] = 0;
          end
        g_out++;
      end else begin
        for (int p = 0; p < PO; p++)
          if (out_lane_valid[p]) begin
            int a, j;
            a = int'(out_lane[p].row); j = int'(out_lane[p].col);
            checks++;
            if (a >= gn[g_out] || j >= FO) begin
              failures++; $display("FAIL graph %0d address (%0d,%0d)", g_out, a, j);
            end else begin
              seen[a][j]++;
              if (out_lane[p].val !== expect_y[g_out][a][j]) begin
                failures++;
                $display("FAIL graph %0d y[%0d][%0d] = %0d, expected %0d", g_out, a, j,
                         out_lane[p].val, expect_y[g_out][a][j]);
              end
            end
          end
      end
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < MAX_NODES; a++) for (int j = 0; j < FO; j++) seen[a][j] = 0;
    for (int k = 0; k < FI; k++) for (int j = 0; j < FO; j++) W[k][j] = r_rand(65536);
    for (int j = 0; j < FO; j++) B[j] = r_rand(16384);
    for (int g = 0; g < NG; g++) begin make_graph(g); reference(g); end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < FI; k++) for (int j = 0; j < FO; j++) load(PT_W1, k*FO + j, W[k][j]);
    for (int j = 0; j < FO; j++) load(PT_B1, j, B[j]);
    @(negedge clk) pwr = '0;
    fork
      for (int g = 0; g < NG; g++) begin
        for (int k = 0; k < FI; k++)
          for (int base = 0; base < gn[g]; base += PI) send_beat(0, gn[g], k, base, g);
        send_beat(1, gn[g], 0, 0, g);
      end
      for (int g = 0; g < NG; g++) begin
        for (int e = 0; e < esrc[g].size(); e++)
          send_edge('{eog: 1'b0, src: NODE_W'(esrc[g][e]), dst: NODE_W'(edst[g][e]), w: ew[g][e]});
        send_edge('{eog: 1'b1, src: '0, dst: '0, w: '0});
      end
    join
    while (g_out < NG) @(posedge clk);
    repeat (20) @(posedge clk);
    // edges forwarded unchanged and in order
    begin
      int i;
      i = 0;
      checks++;
      for (int g = 0; g < NG; g++) begin
        for (int e = 0; e < esrc[g].size(); e++) begin
          if (i >= fwd.size() || fwd[i].eog || int'(fwd[i].src) != esrc[g][e] ||
              int'(fwd[i].dst) != edst[g][e] || fwd[i].w != ew[g][e]) begin
            failures++; $display("FAIL forwarded edge %0d of graph %0d", e, g); break;
          end
          i++;
        end
        if (i >= fwd.size() || !fwd[i].eog) begin failures++; $display("FAIL forwarded eog %0d", g); end
        i++;
      end
    end
    $display("  graphs %0d, zeros pruned %0d, bubbles %0d, interlock stalls %0d",
             g_out, n_drop, n_bubble, n_stall);
    checks++; if (n_drop == 0)   begin failures++; $display("FAIL no zero was pruned"); end
    checks++; if (n_bubble == 0) begin failures++; $display("FAIL the arbiter never inserted a bubble"); end
    checks++; if (n_stall == 0)  begin failures++; $display("FAIL the ACG interlock never stalled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
