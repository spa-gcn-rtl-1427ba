// tb_ntn_fcn: loads random NTN and FCN weights over the parameter bus, then
// sends the two graph embeddings of forty queries and compares each score bit
// for bit with
//   s = ReLU(h1' W[k] h2 + V [h1; h2] + b),  y = ReLU(Wf1 s + bf1),
//   score = wf2 . y + bf2
// computed here. Also checks the query numbering, that the second embedding
// is refused while a score waits, and the schedule: K*F + K + 1 + F_FC + 1
// cycles from the second embedding to the score.
module tb_ntn_fcn;
  import spa_pkg::*;
  import spa_ref_pkg::*;
  localparam int F = F3, K = K_NTN, FC = F_FC1;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  pwr_t pwr;
  logic in_valid, in_ready, out_valid, out_ready;
  data_t [F-1:0] in_hg;
  data_t out_score;
  logic [15:0] out_query;

  ntn_fcn dut (.*);

  data_t WN [K][F][F], VN [K][2*F], BN [K], WF1 [FC][K], BF1 [FC], WF2 [FC], BF2;

  task automatic load(ptarget_e t, int a, data_t d);
    @(negedge clk) pwr = pwr_t'{we: 1, target: t, addr: 16'(a), data: d};
  endtask

  task automatic send(data_t h [F]);
    @(negedge clk);
    in_valid = 1;
    for (int i = 0; i < F; i++) in_hg[i] = h[i];
    #1;
    while (!in_ready) @(negedge clk);
    @(posedge clk);
    #1 in_valid = 0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    data_t h1 [F], h2 [F], t, s1, s2, sk [K], y [FC], sc;
    int t0, t1;
    pwr = '0; in_valid = 0; in_hg = '0; out_ready = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int k = 0; k < K; k++) begin
      for (int i = 0; i < F; i++) for (int j = 0; j < F; j++) begin WN[k][i][j] = r_rand(65536); load(PT_WNTN, (k*F + i)*F + j, WN[k][i][j]); end
      for (int m = 0; m < 2*F; m++) begin VN[k][m] = r_rand(65536); load(PT_VNTN, k*2*F + m, VN[k][m]); end
      BN[k] = r_rand(32768); load(PT_BNTN, k, BN[k]);
    end
    for (int o = 0; o < FC; o++) begin
      for (int k = 0; k < K; k++) begin WF1[o][k] = r_rand(65536); load(PT_WFC1, o*K + k, WF1[o][k]); end
      BF1[o] = r_rand(32768); load(PT_BFC1, o, BF1[o]);
      WF2[o] = r_rand(65536); load(PT_WFC2, o, WF2[o]);
    end
    BF2 = r_rand(32768); load(PT_BFC2, 0, BF2);
    @(negedge clk) pwr = '0;
    for (int q = 0; q < 40; q++) begin
      for (int i = 0; i < F; i++) begin h1[i] = data_t'($urandom % 131072); h2[i] = data_t'($urandom % 131072); end
      for (int k = 0; k < K; k++) begin
        s1 = 0; s2 = 0;
        for (int j = 0; j < F; j++) begin
          t = 0;
          for (int i = 0; i < F; i++) t += r_mul(h1[i], WN[k][i][j]);
          s1 += r_mul(t, h2[j]);
          s2 += r_mul(VN[k][j], h1[j]) + r_mul(VN[k][F + j], h2[j]);
        end
        sk[k] = r_relu(s1 + s2 + BN[k]);
      end
      for (int o = 0; o < FC; o++) begin
        y[o] = BF1[o];
        for (int k = 0; k < K; k++) y[o] += r_mul(WF1[o][k], sk[k]);
        y[o] = r_relu(y[o]);
      end
      sc = BF2;
      for (int o = 0; o < FC; o++) sc += r_mul(WF2[o], y[o]);
      send(h1);
      send(h2);
      t0 = $time;
      while (!out_valid) @(posedge clk);
      t1 = $time;
      checks++;
      if ((t1 - t0) / 10 != K*F + K + 1 + FC + 1) begin failures++; $display("FAIL latency %0d", (t1 - t0) / 10); end
      repeat (2) @(posedge clk);
      checks++;
      if (in_ready) begin failures++; $display("FAIL accepts input while a score waits"); end
      checks++;
      if (out_score != sc || int'(out_query) != q) begin
        failures++; $display("FAIL query %0d score %0d exp %0d", out_query, out_score, sc);
      end
      @(negedge clk) out_ready = 1;
      @(negedge clk) out_ready = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
