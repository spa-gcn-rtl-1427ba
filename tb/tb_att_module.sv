// tb_att_module: streams the layer-3 embeddings of several graphs (1, 7, 20
// and 40 nodes, random non-negative values as after a ReLU) column by
// column into the Att stage, P lanes per beat, and compares each graph
// embedding bit for bit with
//   h_G = sum_n sigmoid(h_n . tanh(W_att * sum_n h_n / N)) * h_n
// computed here with the reference arithmetic. It also checks the schedule:
// from the eog beat to the result takes N*F + F + 2N + 2 cycles (one
// (node, feature) pair per cycle for W_att*H, one tanh per feature, one dot
// product per node, one MVM step per node), and the output is held while
// out_ready is low.
module tb_att_module;
  import spa_pkg::*;
  import spa_ref_pkg::*;
  localparam int F = F3, P = P_ATT;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  pwr_t pwr;
  logic in_valid, in_ready, in_eog, out_valid, out_ready;
  logic [P-1:0] in_lane_valid;
  elem_t in_lane [P];
  logic [NODE_W-1:0] in_nodes;
  data_t [F-1:0] out_hg;

  att_module dut (.*);

  data_t WATT [F][F];

  task automatic beat(bit eog, int n, logic [P-1:0] lv, elem_t l [P]);
    @(negedge clk);
    in_valid = 1; in_eog = eog; in_nodes = NODE_W'(n); in_lane_valid = lv; in_lane = l;
    #1;
    while (!in_ready) @(negedge clk);
    @(posedge clk);
    #1 in_valid = 0;
  endtask

  task automatic run_graph(int n);
    data_t h [MAX_NODES][F];
    data_t v, c [F], an [MAX_NODES], s, hg [F], recip;
    elem_t l [P];
    logic [P-1:0] lv;
    int t0, t1;
    for (int a = 0; a < n; a++) for (int k = 0; k < F; k++)
      h[a][k] = (($urandom % 3) == 0) ? 0 : data_t'($urandom % 65536);
    recip = 65536 / n;
    for (int i = 0; i < F; i++) begin
      v = 0;
      for (int a = 0; a < n; a++) for (int k = 0; k < F; k++) v += r_mul(WATT[i][k], h[a][k]);
      c[i] = r_tanh(r_mul(v, recip));
    end
    for (int a = 0; a < n; a++) begin
      s = 0;
      for (int k = 0; k < F; k++) s += r_mul(h[a][k], c[k]);
      an[a] = r_sigmoid(s);
    end
    for (int i = 0; i < F; i++) begin
      hg[i] = 0;
      for (int a = 0; a < n; a++) hg[i] += r_mul(an[a], h[a][i]);
    end
    for (int k = 0; k < F; k++)
      for (int a0 = 0; a0 < n; a0 += P) begin
        for (int p = 0; p < P; p++) begin
          lv[p] = (a0 + p) < n;
          l[p]  = elem_t'{eog: 0, row: NODE_W'(a0 + p), col: FEAT_W'(k), val: lv[p] ? h[a0 + p][k] : 0};
        end
        beat(0, n, lv, l);
      end
    beat(1, n, '0, l);
    t0 = $time;
    out_ready = 0;
    while (!out_valid) @(posedge clk);
    t1 = $time;
    repeat (3) @(posedge clk);
    checks++;
    if (!out_valid) begin failures++; $display("FAIL output not held"); end
    checks++;
    if ((t1 - t0) / 10 != n * F + F + 2 * n + 2) begin
      failures++; $display("FAIL latency %0d cycles, expected %0d", (t1 - t0) / 10, n * F + F + 2 * n + 2);
    end
    for (int i = 0; i < F; i++) begin
      checks++;
      if (out_hg[i] != hg[i]) begin failures++; $display("FAIL n=%0d hg[%0d] %0d exp %0d", n, i, out_hg[i], hg[i]); end
    end
    @(negedge clk) out_ready = 1;
    @(negedge clk) out_ready = 0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    elem_t l0 [P];
    pwr = '0; in_valid = 0; in_eog = 0; in_lane_valid = '0; in_nodes = '0; out_ready = 0;
    for (int p = 0; p < P; p++) begin l0[p] = '0; in_lane[p] = '0; end
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < F; i++) for (int k = 0; k < F; k++) begin
      WATT[i][k] = r_rand(65536);
      @(negedge clk) pwr = pwr_t'{we: 1, target: PT_WATT, addr: 16'(i*F + k), data: WATT[i][k]};
    end
    @(negedge clk) pwr = '0;
    run_graph(7);
    run_graph(1);
    run_graph(20);
    run_graph(40);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
