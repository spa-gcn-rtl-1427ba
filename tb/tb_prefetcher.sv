// tb_prefetcher: sends a random mix of parameter, feature, edge and
// end-of-graph words with both sinks stalling at random, and checks that
// every parameter word appears once on the parameter bus (one cycle later,
// right target/address/data), every feature arrives as a single-lane beat
// on lane node mod P, every edge and every eog reaches both sinks exactly
// once and in order, nothing is taken while en is low, and graphs_seen
// counts the graphs.
module tb_prefetcher;
  import spa_pkg::*;
  localparam int P = P1;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic en, mem_valid, mem_ready, feat_valid, feat_ready, feat_eog, edge_valid, edge_ready;
  mem_word_t mem_word;
  pwr_t pwr;
  logic [P-1:0] feat_lane_valid;
  elem_t feat_lane [P];
  logic [NODE_W-1:0] feat_nodes;
  edge_t edge_out;
  logic [15:0] graphs_seen;

  prefetcher dut (.*);

  mem_word_t words [$];
  pwr_t  exp_p [$];
  string exp_f [$];
  edge_t exp_e [$];
  int ptr = 0, n_eog = 0, taken_while_off = 0;

  assign mem_valid = ptr < words.size();
  assign mem_word  = mem_valid ? words[ptr] : '0;

  always_ff @(posedge clk) begin
    feat_ready <= ($urandom % 3) != 0;
    edge_ready <= ($urandom % 3) != 0;
    if (rst_n && mem_valid && mem_ready) ptr <= ptr + 1;
    if (!en && mem_ready) taken_while_off++;
    if (rst_n && pwr.we) begin
      checks++;
      if (exp_p.size() == 0 || pwr != exp_p[0]) begin failures++; $display("FAIL pwr %h exp %h left %0d", pwr, exp_p[0], exp_p.size()); end
      else void'(exp_p.pop_front());
    end
    if (feat_valid && feat_ready) begin
      string s;
      checks++;
      if (feat_eog) s = $sformatf("E%0d", feat_nodes);
      else begin
        s = "";
        for (int p = 0; p < P; p++) if (feat_lane_valid[p])
          s = {s, $sformatf("L%0d:%0d,%0d=%0d", p, feat_lane[p].row, feat_lane[p].col, feat_lane[p].val)};
      end
      if (exp_f.size() == 0 || s != exp_f[0]) begin failures++; $display("FAIL feat %s", s); end
      else void'(exp_f.pop_front());
    end
    if (edge_valid && edge_ready) begin
      checks++;
      if (exp_e.size() == 0 || edge_out != exp_e[0]) begin failures++; $display("FAIL edge %h", edge_out); end
      else void'(exp_e.pop_front());
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    en = 0;
    for (int i = 0; i < 2000; i++) begin
      mem_word_t w;
      int r, node;
      r = int'($urandom % 10);
      node = int'($urandom % 64);
      w.a = 16'(node); w.b = 16'($urandom % 64); w.data = data_t'($urandom);
      if (r < 3) begin
        w.tag = TAG_PARAM; w.a = 16'($urandom % 14);
        exp_p.push_back(pwr_t'{we: 1, target: ptarget_e'(w.a[3:0]), addr: w.b, data: w.data});
      end else if (r < 6) begin
        w.tag = TAG_FEAT;
        exp_f.push_back($sformatf("L%0d:%0d,%0d=%0d", node % P, node, w.b, w.data));
      end else if (r < 9) begin
        w.tag = TAG_EDGE;
        exp_e.push_back(edge_t'{eog: 0, src: NODE_W'(w.a), dst: NODE_W'(w.b), w: w.data});
      end else begin
        w.tag = TAG_EOG; n_eog++;
        exp_f.push_back($sformatf("E%0d", node));
        exp_e.push_back(edge_t'{eog: 1, src: NODE_W'(w.a), dst: NODE_W'(w.b), w: '0});
      end
      words.push_back(w);
    end
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (20) @(posedge clk);            // en low: nothing may be taken
    en = 1;
    while (ptr < words.size()) @(posedge clk);
    repeat (5) @(posedge clk);
    checks++; if (exp_p.size() + exp_f.size() + exp_e.size() != 0) begin failures++; $display("FAIL undelivered %0d/%0d/%0d", exp_p.size(), exp_f.size(), exp_e.size()); end
    checks++; if (int'(graphs_seen) != n_eog) begin failures++; $display("FAIL graphs_seen %0d exp %0d", graphs_seen, n_eog); end
    checks++; if (taken_while_off != 0) begin failures++; $display("FAIL words taken while disabled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
