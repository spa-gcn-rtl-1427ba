// att_module: the global-context attention stage of SimGNN. For one graph with
// node embeddings h_n (n = 1..N, F features each) it computes
//   v   = W_att * sum_n h_n           (computed as sum over n of W_att * h_n,
//                                      so one set of adders serves both sums)
//   c   = tanh(v / N)
//   a_n = sigmoid(h_n . c)
//   h_G = sum_n a_n * h_n             (matrix-vector product H * a)
// and hands the graph embedding h_G to the NTN stage.
//
// Sub-units, in order of use (one graph at a time, phases run back to back):
//  Repack   - the column-major element stream from GCN layer 3 (P lanes per
//             beat) is written into the node buffer H[N][F];
//  MULT+Acc - each cycle one (node n, input feature k) pair: F products
//             W_att[i][k] * h_n[k], accumulated into v[i];
//  Tanh     - c[i] = tanh(v[i] * (1/N)), one element per cycle;
//  Dot/Sigm - per node one F-wide dot product h_n . c, then sigmoid;
//  MVM      - per node h_G += a_n * h_n (F lanes).
// The next graph's stream is held off (in_ready low) until h_G is taken.
//
// Follows the paper: the sub-units and their order, the rewriting of
// W_att * sum(h_n) as a reduction of W_att * H. Own choices: the SIMD width of
// F lanes, 1/N as one division per graph, the piecewise-linear tanh/sigmoid.
//
// Tool notes: the 16-bit bus address is wider than the W_att index; the write
// is range-tested, so the reported truncation drops zero bits.
module att_module import spa_pkg::*; #(
  parameter int F     = F3,
  parameter int P     = P_ATT,
  parameter int NODES = MAX_NODES
) (
  input  logic              clk,
  input  logic              rst_n,
  input  pwr_t              pwr,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [P-1:0]      in_lane_valid,
  input  elem_t             in_lane [P],
  input  logic              in_eog,
  input  logic [NODE_W-1:0] in_nodes,
  output logic              out_valid,
  input  logic              out_ready,
  output data_t [F-1:0]     out_hg
);
  localparam int NW = (NODES > 1) ? $clog2(NODES) : 1;
  localparam int FW = (F > 1) ? $clog2(F) : 1;

  typedef enum logic [2:0] {S_IN, S_V, S_C, S_DOT, S_MVM, S_OUT} state_e;
  state_e state;

  data_t watt [F*F];                  // W_att[i][k] at i*F + k
  always_ff @(posedge clk)
    if (pwr.we && pwr.target == PT_WATT && int'(pwr.addr) < F*F) watt[pwr.addr] <= pwr.data;

  data_t hbuf [NODES][F];
  data_t v [F], c [F], hg [F];
  data_t a [NODES];
  data_t recip;
  logic [NODE_W-1:0] nn;
  logic [NODE_W:0]   n;              // node counter (one extra for pipelined units)
  logic [FW:0]       k;

  // tanh and sigmoid units (latency 1)
  data_t tanh_x, tanh_y, sig_x, sig_y;
  tanh_unit    u_tanh (.clk, .x(tanh_x), .y(tanh_y));
  sigmoid_unit u_sig  (.clk, .x(sig_x),  .y(sig_y));

  always_comb begin
    tanh_x = fx_mul(v[FW'(k)], recip);
    sig_x  = '0;
    for (int j = 0; j < F; j++) sig_x += fx_mul(hbuf[NW'(n)][j], c[j]);
  end

  assign in_ready  = (state == S_IN);
  assign out_valid = (state == S_OUT);
  always_comb for (int i = 0; i < F; i++) out_hg[i] = hg[i];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IN;
      n <= '0; k <= '0; nn <= '0; recip <= '0;
      for (int i = 0; i < F; i++) begin v[i] <= '0; hg[i] <= '0; c[i] <= '0; end
    end else begin
      unique case (state)
        S_IN: if (in_valid) begin
          if (in_eog) begin
            nn    <= in_nodes;
            recip <= (in_nodes == '0) ? '0 : data_t'((1 <<< FRAC) / int'(in_nodes));
            n <= '0; k <= '0;
            state <= (in_nodes == '0) ? S_OUT : S_V;
          end else begin
            for (int p = 0; p < P; p++)
              if (in_lane_valid[p]) hbuf[NW'(in_lane[p].row)][FW'(in_lane[p].col)] <= in_lane[p].val;
          end
        end
        S_V: begin                                  // v += W_att(:,k) * h_n[k]
          for (int i = 0; i < F; i++) v[i] <= v[i] + fx_mul(watt[i*F + int'(k)], hbuf[NW'(n)][FW'(k)]);
          if (int'(k) == F-1) begin
            k <= '0;
            if (int'(n) == int'(nn) - 1) begin n <= '0; state <= S_C; end
            else n <= n + 1'b1;
          end else k <= k + 1'b1;
        end
        S_C: begin                                  // c[k-1] = tanh(v[k-1] / N)
          if (k != '0) c[FW'(k - 1'b1)] <= tanh_y;
          if (int'(k) == F) begin k <= '0; n <= '0; state <= S_DOT; end
          else k <= k + 1'b1;
        end
        S_DOT: begin                                // a[n-1] = sigmoid(h_{n-1} . c)
          if (n != '0) a[NW'(n - 1'b1)] <= sig_y;
          if (n == {1'b0, nn}) begin n <= '0; state <= S_MVM; end
          else n <= n + 1'b1;
        end
        S_MVM: begin                                // h_G += a_n * h_n
          for (int i = 0; i < F; i++) hg[i] <= hg[i] + fx_mul(a[NW'(n)], hbuf[NW'(n)][i]);
          if (int'(n) == int'(nn) - 1) state <= S_OUT;
          else n <= n + 1'b1;
        end
        S_OUT: if (out_ready) begin
          for (int i = 0; i < F; i++) begin v[i] <= '0; hg[i] <= '0; end
          n <= '0; k <= '0;
          state <= S_IN;
        end
        default: state <= S_IN;
      endcase
    end
  end

endmodule
