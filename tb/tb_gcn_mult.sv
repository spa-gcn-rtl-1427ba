// tb_gcn_mult: the MULT module at its layer-1 sizes (29 x 64 weights,
// SIMD 32, DF 2, P 8). The lane FIFOs are modelled here. Three graphs of
// sparse elements are sent: a wide one (many distinct nodes, no hazards),
// one with very few nodes (RAW hazards, bubbles) and one with a stalling
// output. Checks: the accumulated products equal H * W computed here; every
// eog word carries the node count; with the output never stalled, two
// updates of the same (node, block) leave at least DEP cycles apart; the
// wide graph keeps both PEs busy (no more slots than the busier bank has elements, plus 4); bubbles occur.
module tb_gcn_mult;
  import spa_pkg::*;
  import spa_ref_pkg::*;
  localparam int FI = F0, FO = F1, SIMD = SIMD_FT1, DF = DF1, P = P1, DEP = L_ADD + 1;
  localparam int NB = FO / SIMD;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  pwr_t pwr;
  elem_t head [P];
  logic [P-1:0] empty, pop;
  logic out_valid, out_ready, out_eog, bubble;
  logic [NODE_W-1:0] out_nodes;
  logic [DF-1:0] out_lv;
  logic [DF-1:0][NODE_W-1:0] out_row;
  logic [DF-1:0][FEAT_W-1:0] out_blk;
  data_t [DF-1:0][SIMD-1:0] out_prod;
  logic [$clog2(DF+1)-1:0] n_issued;

  gcn_mult dut (.*);

  data_t W [FI][FO];
  elem_t q [P][$];
  always_comb for (int p = 0; p < P; p++) begin
    empty[p] = (q[p].size() == 0);
    head[p]  = empty[p] ? '0 : q[p][0];
  end
  always_ff @(posedge clk) for (int p = 0; p < P; p++) if (pop[p]) void'(q[p].pop_front());

  // output collection
  data_t xacc [MAX_NODES][FO];
  int    last_cyc [MAX_NODES][NB];
  int    cyc = 0, n_bubble = 0, eogs = 0, first_out = -1, last_out = 0, gap_viol = 0;
  int    exp_nodes;
  bit    check_gap;
  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (bubble) n_bubble <= n_bubble + 1;
    if (out_valid && out_ready) begin
      if (first_out < 0) first_out <= cyc;
      last_out <= cyc;
      if (out_eog) begin
        eogs++; checks++;
        if (int'(out_nodes) != exp_nodes) begin failures++; $display("FAIL eog nodes %0d", out_nodes); end
      end
      for (int d = 0; d < DF; d++) if (out_lv[d]) begin
        if (check_gap && last_cyc[out_row[d]][out_blk[d]] >= 0 && cyc - last_cyc[out_row[d]][out_blk[d]] < DEP)
          gap_viol++;
        last_cyc[out_row[d]][out_blk[d]] = cyc;
        for (int s = 0; s < SIMD; s++)
          xacc[out_row[d]][int'(out_blk[d])*SIMD + s] += out_prod[d][s];
      end
    end
  end

  task automatic run_graph(int n, int density, bit stall, int max_slots);
    data_t h [MAX_NODES][FI];
    int nnz, t0, nb0, nb1;
    nnz = 0; nb0 = 0; nb1 = 0;
    for (int a = 0; a < MAX_NODES; a++) begin
      for (int j = 0; j < FO; j++) xacc[a][j] = 0;
      for (int b = 0; b < NB; b++) last_cyc[a][b] = -1;
    end
    for (int a = 0; a < n; a++) for (int k = 0; k < FI; k++)
      h[a][k] = (($urandom % 100) < density) ? r_rand(131072) : 0;
    for (int k = 0; k < FI; k++) for (int a = 0; a < n; a++)
      if (h[a][k] != 0) begin q[a % P].push_back(elem_t'{eog: 0, row: NODE_W'(a), col: FEAT_W'(k), val: h[a][k]}); nnz++;
        if (a % DF == 0) nb0++; else nb1++; end
    for (int p = 0; p < P; p++) q[p].push_back(elem_t'{eog: 1, row: NODE_W'(n), col: '0, val: '0});
    exp_nodes = n; check_gap = !stall;
    first_out = -1; t0 = eogs;
    while (eogs == t0) begin
      @(posedge clk);
      out_ready <= stall ? (($urandom % 3) == 0) : 1'b1;
    end
    out_ready <= 1'b1;
    for (int a = 0; a < n; a++) for (int j = 0; j < FO; j++) begin
      data_t e;
      e = 0;
      for (int k = 0; k < FI; k++) e += r_mul(h[a][k], W[k][j]);
      checks++;
      if (xacc[a][j] != e) begin failures++; if (failures < 10) $display("FAIL X[%0d][%0d] %0d exp %0d", a, j, xacc[a][j], e); end
    end
    if (max_slots > 0) begin
      checks++;
      // each slot serves one element per bank: the busier bank sets the time
      if ((last_out - first_out) / NB > ((nb0 > nb1) ? nb0 : nb1) + 4) begin
        failures++; $display("FAIL rate: %0d cycles for %0d elements", last_out - first_out, nnz);
      end else $display("  %0d elements in %0d cycles (%0d per slot)", nnz, last_out - first_out, NB);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    pwr = '0; out_ready = 1;
    for (int k = 0; k < FI; k++) for (int j = 0; j < FO; j++) W[k][j] = r_rand(131072);
    repeat (3) @(posedge clk); rst_n = 1;
    for (int k = 0; k < FI; k++) for (int j = 0; j < FO; j++) begin
      pwr <= pwr_t'{we: 1, target: PT_W1, addr: 16'(k*FO + j), data: W[k][j]};
      @(posedge clk);
    end
    pwr <= '0;
    @(posedge clk);
    run_graph(64, 40, 0, 1);     // wide, no hazards
    run_graph(3, 80, 0, 0);      // tiny: hazards and bubbles
    run_graph(20, 50, 1, 0);     // output back-pressure
    checks++; if (gap_viol != 0) begin failures++; $display("FAIL %0d same-address updates closer than %0d", gap_viol, DEP); end
    checks++; if (n_bubble == 0) begin failures++; $display("FAIL no bubble inserted"); end
    $display("  bubbles %0d", n_bubble);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
