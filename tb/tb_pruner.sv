// tb_pruner: drives random beats of P addressed elements (about half zero)
// and end-of-graph beats into the pruner while popping its lane FIFOs at
// random, and checks that each FIFO delivers exactly the non-zero elements of
// its lane, in order, followed by the eog token with the node count; that the
// dropped-zero count is right; and that the input is refused while a needed
// FIFO is full.
module tb_pruner;
  import spa_pkg::*;
  localparam int P = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, in_eog;
  logic [P-1:0] in_lane_valid, pop, empty;
  elem_t in_lane [P], head [P];
  logic [NODE_W-1:0] in_nodes;
  logic [$clog2(P+1)-1:0] n_dropped;

  pruner dut (.*);

  elem_t exp_q [P][$];
  int    exp_drop = 0, got_drop = 0, refused = 0;
  logic  pop_en = 1'b0;

  // checker: pop at random, compare heads
  always_ff @(posedge clk) begin
    for (int p = 0; p < P; p++)
      if (pop[p]) begin
        checks++;
        if (exp_q[p].size() == 0 || head[p] != exp_q[p][0]) begin
          failures++; $display("FAIL lane %0d head %h", p, head[p]);
        end
        if (exp_q[p].size() != 0) void'(exp_q[p].pop_front());
      end
    if (in_valid && in_ready) got_drop += int'(n_dropped);
    if (in_valid && !in_ready) refused++;
  end
  always_comb for (int p = 0; p < P; p++) pop[p] = pop_en && !empty[p] && ($urandom % 3 != 0);

  task automatic beat(bit eog, int nodes);
    @(negedge clk);
    in_valid = 1; in_eog = eog; in_nodes = NODE_W'(nodes);
    for (int p = 0; p < P; p++) begin
      in_lane_valid[p] = ($urandom % 4) != 0;
      in_lane[p] = elem_t'{eog: 0, row: NODE_W'($urandom), col: FEAT_W'($urandom),
                           val: (($urandom % 2) == 0) ? '0 : data_t'($urandom)};
    end
    #1;
    while (!in_ready) @(negedge clk);
    @(posedge clk);
    for (int p = 0; p < P; p++) begin
      if (eog) exp_q[p].push_back(elem_t'{eog: 1, row: NODE_W'(nodes), col: '0, val: '0});
      else if (in_lane_valid[p] && in_lane[p].val != 0) exp_q[p].push_back(in_lane[p]);
      else if (in_lane_valid[p]) exp_drop++;
    end
    #1 in_valid = 0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int left;
    in_valid = 0; in_eog = 0; in_lane_valid = '0; in_nodes = '0;
    for (int p = 0; p < P; p++) in_lane[p] = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    // fill without popping: the pruner must refuse once a lane FIFO is full
    fork begin repeat (400) @(posedge clk); pop_en = 1; end join_none
    for (int i = 0; i < 60; i++) beat(0, 0);
    for (int g = 0; g < 20; g++) begin
      for (int i = 0; i < 30; i++) beat(0, 0);
      beat(1, 5 + g);
    end
    repeat (200) @(posedge clk);
    left = 0;
    for (int p = 0; p < P; p++) left += exp_q[p].size();
    checks++; if (left != 0) begin failures++; $display("FAIL %0d elements never delivered", left); end
    checks++; if (got_drop != exp_drop) begin failures++; $display("FAIL dropped %0d expected %0d", got_drop, exp_drop); end
    checks++; if (refused == 0) begin failures++; $display("FAIL input never refused while full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
