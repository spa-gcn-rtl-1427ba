// tb_gcn_acg: the ACG module at its layer-1 sizes (64 output features,
// SIMD_FT 32, SIMD_Agg 32, DF 2, P_OUT 2). For two graphs it sends product
// words (including back-to-back updates of the same node and block, which
// must be held by the interlock), then edges (including repeated
// destinations), and reads the output beats. Checks: every output element
// equals ReLU(A' * X + b) computed here from the same products and edges;
// each graph yields exactly F_OUT * ceil(N / P_OUT) beats, one per cycle,
// then an eog beat with the node count; the edges are forwarded unchanged and
// in order, eog included; the interlock stalled at least once.
module tb_gcn_acg;
  import spa_pkg::*;
  import spa_ref_pkg::*;
  localparam int FO = F1, SF = SIMD_FT1, DF = DF1, PO = P2;
  localparam int NB = FO / SF;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  pwr_t pwr;
  logic in_valid, in_ready, in_eog;
  logic [NODE_W-1:0] in_nodes, out_nodes;
  logic [DF-1:0] in_lv;
  logic [DF-1:0][NODE_W-1:0] in_row;
  logic [DF-1:0][FEAT_W-1:0] in_blk;
  data_t [DF-1:0][SF-1:0] in_prod;
  logic edge_valid, edge_ready, edge_out_valid, edge_out_ready;
  edge_t edge_in, edge_out;
  logic out_valid, out_ready, out_eog, raw_stall, agg_issue;
  logic [PO-1:0] out_lane_valid;
  elem_t out_lane [PO];

  gcn_acg dut (.*);

  data_t B [FO];
  data_t X [MAX_NODES][FO];
  data_t Y [MAX_NODES][FO];
  edge_t elist [$], fwd [$];
  int n_stall = 0, beats = 0, t_first = 0, t_eog = 0, cyc = 0;
  bit got_eog;

  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (raw_stall) n_stall <= n_stall + 1;
    if (edge_out_valid && edge_out_ready) fwd.push_back(edge_out);
    if (out_valid && out_ready) begin
      if (out_eog) begin
        got_eog = 1; t_eog = cyc;
        checks++; if (out_nodes != in_nodes) begin failures++; $display("FAIL eog nodes"); end
      end else begin
        if (beats == 0) t_first = cyc;
        beats++;
        for (int p = 0; p < PO; p++) if (out_lane_valid[p]) Y[out_lane[p].row][out_lane[p].col] = out_lane[p].val;
      end
    end
  end

  task automatic send_word(bit eog, int n);
    @(negedge clk);
    in_valid = 1; in_eog = eog; in_nodes = NODE_W'(n);
    #1;
    while (!in_ready) @(negedge clk);
    @(posedge clk);
    #1 in_valid = 0;
  endtask

  task automatic run_graph(int n);
    int ne;
    data_t O [MAX_NODES][FO];
    for (int a = 0; a < MAX_NODES; a++) for (int j = 0; j < FO; j++) begin X[a][j] = 0; Y[a][j] = 'h7fff_ffff; O[a][j] = 0; end
    // FT products: 4*n words, every other one repeats the previous address
    for (int w = 0; w < 4 * n; w++) begin
      if (w % 2 == 0) begin
        for (int d = 0; d < DF; d++) begin
          in_row[d] = NODE_W'((int'($urandom % 32'((n + 1) / 2)) * 2 + d) % n);
          in_blk[d] = FEAT_W'($urandom % NB);
        end
        in_lv = DF'($urandom % (1 << DF)) | DF'(1);
        if (in_row[0] == in_row[DF-1]) in_lv = DF'(1);
      end
      for (int d = 0; d < DF; d++) for (int s = 0; s < SF; s++) in_prod[d][s] = r_rand(65536);
      for (int d = 0; d < DF; d++) if (in_lv[d])
        for (int s = 0; s < SF; s++) X[in_row[d]][int'(in_blk[d])*SF + s] += in_prod[d][s];
      send_word(0, n);
    end
    in_lv = '0;
    send_word(1, n);
    // edges (a repeated destination now and then)
    ne = 3 * n;
    elist.delete(); fwd.delete();
    for (int e = 0; e < ne; e++)
      elist.push_back(edge_t'{eog: 0, src: NODE_W'($urandom % n), dst: NODE_W'((e % 4 == 1) ? elist[e-1].dst : $urandom % n),
                             w: r_rand(65536)});
    elist.push_back(edge_t'{eog: 1, src: '0, dst: '0, w: '0});
    for (int e = 0; e < ne; e++)
      for (int j = 0; j < FO; j++) O[elist[e].dst][j] += r_mul(elist[e].w, X[elist[e].src][j]);
    beats = 0; got_eog = 0;
    for (int e = 0; e <= ne; e++) begin
      @(negedge clk);
      edge_valid = 1; edge_in = elist[e];
      #1;
      while (!edge_ready) @(negedge clk);
      @(posedge clk);
      #1 edge_valid = 0;
    end
    while (!got_eog) @(posedge clk);
    for (int a = 0; a < n; a++) for (int j = 0; j < FO; j++) begin
      checks++;
      if (Y[a][j] != r_relu(O[a][j] + B[j])) begin
        failures++; if (failures < 10) $display("FAIL out[%0d][%0d] %0d exp %0d", a, j, Y[a][j], r_relu(O[a][j] + B[j]));
      end
    end
    checks++;
    if (beats != FO * ((n + PO - 1) / PO) || t_eog - t_first != beats) begin
      failures++; $display("FAIL %0d beats in %0d cycles", beats, t_eog - t_first);
    end
    checks++;
    if (fwd.size() != elist.size()) begin failures++; $display("FAIL forwarded %0d edges", fwd.size()); end
    else for (int e = 0; e < fwd.size(); e++) if (fwd[e] != elist[e]) begin failures++; $display("FAIL edge %0d", e); break; end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    pwr = '0; in_valid = 0; in_eog = 0; in_lv = '0; in_nodes = '0; in_row = '0; in_blk = '0; in_prod = '0;
    edge_valid = 0; edge_in = '0; edge_out_ready = 1; out_ready = 1;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int j = 0; j < FO; j++) begin
      B[j] = r_rand(65536);
      @(negedge clk) pwr = pwr_t'{we: 1, target: PT_B1, addr: 16'(j), data: B[j]};
    end
    @(negedge clk) pwr = '0;
    run_graph(10);
    run_graph(3);
    run_graph(33);
    checks++; if (n_stall == 0) begin failures++; $display("FAIL interlock never stalled"); end
    $display("  interlock stalls %0d", n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
