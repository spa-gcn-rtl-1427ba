// prefetcher: entry point of the accelerator. It consumes the word stream read
// from global memory (valid/ready) and sends every word to where it is used:
//  - TAG_PARAM words become writes on the parameter bus, which every weight
//    and bias buffer of all stages watches (GCN, Att, NTN + FCN);
//  - TAG_FEAT words (non-zero input features, node-major within a column)
//    become single-lane beats for the first GCN layer, lane = node mod P;
//  - TAG_EDGE words go to the first layer's edge FIFO;
//  - TAG_EOG closes a graph: an eog beat (with the node count) to layer 1 and
//    an eog edge, in whichever order the two sinks accept them.
// Words are taken only while en is high (the control unit's run window).
// The parameter bus is registered (one cycle); the other outputs are
// combinational from the input word.
//
// The paper names this block and says it reads all weights and biases and
// distributes them; the tagged word format is this implementation's choice.
//
// Tool notes: feature and edge data pass from the memory word to the outputs
// without a register (only the parameter bus is registered), so a synthesis
// report lists them as outputs driven straight from inputs; the downstream
// FIFOs register them.
module prefetcher import spa_pkg::*; #(
  parameter int P = P1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              en,
  input  logic              mem_valid,
  output logic              mem_ready,
  input  mem_word_t         mem_word,
  output pwr_t              pwr,
  output logic              feat_valid,
  input  logic              feat_ready,
  output logic [P-1:0]      feat_lane_valid,
  output elem_t             feat_lane [P],
  output logic              feat_eog,
  output logic [NODE_W-1:0] feat_nodes,
  output logic              edge_valid,
  input  logic              edge_ready,
  output edge_t             edge_out,
  output logic [15:0]       graphs_seen
);
  logic sent_feat, sent_edge;   // parts of an eog already delivered
  wire  act = en && mem_valid;
  wire  is_param = mem_word.tag == TAG_PARAM;
  wire  is_feat  = mem_word.tag == TAG_FEAT;
  wire  is_edge  = mem_word.tag == TAG_EDGE;
  wire  is_eog   = mem_word.tag == TAG_EOG;

  wire  eog_feat_done = sent_feat || feat_ready;
  wire  eog_edge_done = sent_edge || edge_ready;

  always_comb begin
    for (int p = 0; p < P; p++) begin
      feat_lane_valid[p] = is_feat && (int'(mem_word.a) % P == p);
      feat_lane[p] = elem_t'{eog: 1'b0, row: NODE_W'(mem_word.a), col: FEAT_W'(mem_word.b), val: mem_word.data};
    end
    feat_eog   = is_eog;
    feat_nodes = NODE_W'(mem_word.a);
    feat_valid = act && (is_feat || (is_eog && !sent_feat));
    edge_valid = act && (is_edge || (is_eog && !sent_edge));
    edge_out   = edge_t'{eog: is_eog, src: NODE_W'(mem_word.a), dst: NODE_W'(mem_word.b),
                         w: is_eog ? '0 : mem_word.data};
    unique case (mem_word.tag)
      TAG_PARAM: mem_ready = en;
      TAG_FEAT:  mem_ready = en && feat_ready;
      TAG_EDGE:  mem_ready = en && edge_ready;
      default:   mem_ready = en && eog_feat_done && eog_edge_done;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pwr         <= '0;
      sent_feat   <= 1'b0;
      sent_edge   <= 1'b0;
      graphs_seen <= '0;
    end else begin
      pwr.we     <= act && is_param;
      pwr.target <= ptarget_e'(mem_word.a[3:0]);
      pwr.addr   <= mem_word.b;
      pwr.data   <= mem_word.data;
      if (act && is_eog) begin
        if (mem_ready) begin
          sent_feat   <= 1'b0;
          sent_edge   <= 1'b0;
          graphs_seen <= graphs_seen + 1'b1;
        end else begin
          if (feat_ready) sent_feat <= 1'b1;
          if (edge_ready) sent_edge <= 1'b1;
        end
      end
    end
  end

endmodule
