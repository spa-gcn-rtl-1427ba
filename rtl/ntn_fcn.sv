// ntn_fcn: the Neural Tensor Network and fully connected stages of SimGNN.
// For the two graph embeddings h1, h2 of a query (F values each, arriving one
// after the other from the Att stage) it computes
//   s[k]  = ReLU( h1^T W[k] h2 + V[k,:] . [h1; h2] + b[k] ),   k = 1..K
//   y[o]  = ReLU( Wf1[o,:] . s + bf1[o] ),                      o = 1..F_FC
//   score = wf2 . y + bf2
// and writes the score, tagged with the query number, to the output buffer.
//
// Sub-units: the WeightLoader decodes the parameter bus into the weight
// stores (W: K x F x F, V: K x 2F, b, Wf1, bf1, wf2, bf2); the MVM unit for
// embedding 1 forms t[k][j] = sum_i h1[i] W[k][i][j] (one (k, i) pair per
// cycle, F lanes); the MVM unit for embedding 2 then reduces t[k] with h2
// while, in the same cycle, the third MVM unit forms V[k,:] . [h1; h2]
// (one k per cycle); add bias + ReLU; FCN1 (one output neuron per cycle);
// FCN2 (a reduction tree, one cycle).
//
// Follows the paper: the block diagram of this stage and the equations.
// Own choices: the activation of FCN1 (ReLU, as in SimGNN), no final sigmoid
// on the score (the paper only says the FCN reduces the vector to one
// score), the lane counts, and the sequential schedule.
//
// Tool notes: the 16-bit bus address is wider than each weight table index;
// every write is range-tested, so the reported truncation drops zero bits.
module ntn_fcn import spa_pkg::*; #(
  parameter int F    = F3,
  parameter int K    = K_NTN,
  parameter int F_FC = F_FC1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  pwr_t          pwr,
  input  logic          in_valid,
  output logic          in_ready,
  input  data_t [F-1:0] in_hg,
  output logic          out_valid,
  input  logic          out_ready,
  output data_t         out_score,
  output logic [15:0]   out_query
);
  localparam int KW = (K > 1) ? $clog2(K) : 1;
  localparam int FW = (F > 1) ? $clog2(F) : 1;
  localparam int CW = $clog2(F * K + F_FC + 2);

  typedef enum logic [2:0] {S_H1, S_H2, S_E1, S_E2V, S_BR, S_FC1, S_FC2, S_OUT} state_e;
  state_e state;

  // ---------------- WeightLoader ----------------
  data_t wntn [K*F*F];     // W[k][i][j] at (k*F + i)*F + j
  data_t vntn [K*2*F];     // V[k][m]    at k*2F + m
  data_t bntn [K];
  data_t wfc1 [F_FC*K];    // Wf1[o][k]  at o*K + k
  data_t bfc1 [F_FC];
  data_t wfc2 [F_FC];
  data_t bfc2;

  always_ff @(posedge clk)
    if (pwr.we) begin
      unique case (pwr.target)
        PT_WNTN: if (int'(pwr.addr) < K*F*F) wntn[pwr.addr] <= pwr.data;
        PT_VNTN: if (int'(pwr.addr) < K*2*F) vntn[pwr.addr] <= pwr.data;
        PT_BNTN: if (int'(pwr.addr) < K)     bntn[pwr.addr] <= pwr.data;
        PT_WFC1: if (int'(pwr.addr) < F_FC*K) wfc1[pwr.addr] <= pwr.data;
        PT_BFC1: if (int'(pwr.addr) < F_FC)  bfc1[pwr.addr] <= pwr.data;
        PT_WFC2: if (int'(pwr.addr) < F_FC)  wfc2[pwr.addr] <= pwr.data;
        PT_BFC2: bfc2 <= pwr.data;
        default: ;
      endcase
    end

  // ---------------- datapath state ----------------
  data_t h1 [F], h2 [F];
  data_t t [K][F];
  data_t s1 [K], s2 [K], s [K], y [F_FC];
  data_t score;
  logic [15:0] query;
  logic [CW-1:0] cnt_k, cnt_i;

  assign in_ready  = (state == S_H1) || (state == S_H2);
  assign out_valid = (state == S_OUT);
  assign out_score = score;
  assign out_query = query;

  // combinational reductions of the current step
  data_t e2_dot, v_dot, fc1_dot, fc2_dot;
  always_comb begin
    e2_dot = '0; v_dot = '0; fc1_dot = '0; fc2_dot = '0;
    for (int j = 0; j < F; j++) begin
      e2_dot += fx_mul(t[KW'(cnt_k)][j], h2[j]);
      v_dot  += fx_mul(vntn[int'(cnt_k)*2*F + j], h1[j]) + fx_mul(vntn[int'(cnt_k)*2*F + F + j], h2[j]);
    end
    for (int j = 0; j < K; j++)    fc1_dot += fx_mul(wfc1[int'(cnt_k)*K + j], s[j]);
    for (int j = 0; j < F_FC; j++) fc2_dot += fx_mul(wfc2[j], y[j]);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_H1;
      cnt_k <= '0; cnt_i <= '0;
      query <= '0; score <= '0;
    end else begin
      unique case (state)
        S_H1: if (in_valid) begin
          for (int j = 0; j < F; j++) h1[j] <= in_hg[j];
          state <= S_H2;
        end
        S_H2: if (in_valid) begin
          for (int j = 0; j < F; j++) h2[j] <= in_hg[j];
          for (int kk = 0; kk < K; kk++) for (int j = 0; j < F; j++) t[kk][j] <= '0;
          cnt_k <= '0; cnt_i <= '0;
          state <= S_E1;
        end
        S_E1: begin                                 // t[k] += h1[i] * W[k][i][:]
          for (int j = 0; j < F; j++)
            t[KW'(cnt_k)][j] <= t[KW'(cnt_k)][j] +
                                fx_mul(h1[FW'(cnt_i)], wntn[(int'(cnt_k)*F + int'(cnt_i))*F + j]);
          if (int'(cnt_i) == F-1) begin
            cnt_i <= '0;
            if (int'(cnt_k) == K-1) begin cnt_k <= '0; state <= S_E2V; end
            else cnt_k <= cnt_k + 1'b1;
          end else cnt_i <= cnt_i + 1'b1;
        end
        S_E2V: begin                                // s1 = t[k] . h2 ; s2 = V[k] . [h1;h2]
          s1[KW'(cnt_k)] <= e2_dot;
          s2[KW'(cnt_k)] <= v_dot;
          if (int'(cnt_k) == K-1) begin cnt_k <= '0; state <= S_BR; end
          else cnt_k <= cnt_k + 1'b1;
        end
        S_BR: begin
          for (int kk = 0; kk < K; kk++) s[kk] <= relu(s1[kk] + s2[kk] + bntn[kk]);
          state <= S_FC1;
        end
        S_FC1: begin
          y[int'(cnt_k) % F_FC] <= relu(fc1_dot + bfc1[int'(cnt_k) % F_FC]);
          if (int'(cnt_k) == F_FC-1) begin cnt_k <= '0; state <= S_FC2; end
          else cnt_k <= cnt_k + 1'b1;
        end
        S_FC2: begin
          score <= fc2_dot + bfc2;
          state <= S_OUT;
        end
        S_OUT: if (out_ready) begin
          query <= query + 1'b1;
          state <= S_H1;
        end
        default: state <= S_H1;
      endcase
    end
  end

endmodule
