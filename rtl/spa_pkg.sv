// spa_pkg: types, sizes and arithmetic shared by every block of the SimGNN
// accelerator.
//
// Numbers are signed 32-bit fixed point with 16 fraction bits (Q15.16). The
// original design used vendor floating-point operators; fixed point is this
// implementation's choice, while the operator latencies (multiply 4 cycles,
// add 7 cycles, the figures given for the U280 build) are kept as pipeline
// depths so the scheduling behaviour of the GCN layers is preserved.
//
// The network sizes (29 one-hot node labels, GCN widths 64/32/16, 16 tensor
// slices, 16 hidden FCN neurons) are those of the SimGNN model on the AIDS
// data set; the per-layer parallelism (SIMD_FT, SIMD_Agg, DF, P) is the
// "extended sparsity" configuration of the accelerator.
//
// Tool notes: modules import the whole package, so a linter lists the package
// constants a given module does not use.
package spa_pkg;

  // ---------------- number format ----------------
  parameter int DW   = 32;
  parameter int FRAC = 16;
  typedef logic signed [DW-1:0] data_t;

  // ---------------- graph limits ----------------
  parameter int MAX_NODES = 64;     // nodes per graph held on chip
  parameter int MAX_EDGES = 512;    // directed edges incl. self loops per graph
  parameter int NODE_W    = 8;      // node index width
  parameter int FEAT_W    = 8;      // feature index width

  // ---------------- network sizes ----------------
  parameter int F0    = 29;         // input one-hot labels
  parameter int F1    = 64;         // GCN layer 1 output features
  parameter int F2    = 32;         // GCN layer 2 output features
  parameter int F3    = 16;         // GCN layer 3 output features (= F)
  parameter int K_NTN = 16;         // similarity scores of the NTN
  parameter int F_FC1 = 16;         // neurons of the first FCN layer

  // ---------------- operator latencies ----------------
  parameter int L_MUL = 4;
  parameter int L_ADD = 7;

  // ---------------- per-layer parallelism ----------------
  parameter int SIMD_FT1 = 32, SIMD_FT2 = 32, SIMD_FT3 = 16;
  parameter int SIMD_AG1 = 32, SIMD_AG2 = 32, SIMD_AG3 = 16;
  parameter int DF1 = 2, DF2 = 1, DF3 = 1;
  parameter int P1 = 8, P2 = 2, P3 = 2;
  parameter int P_ATT = 2;          // lanes from GCN layer 3 into Att

  // ---------------- sparse element / edge tokens ----------------
  // An element of a node-embedding matrix packed with its address. When eog
  // (end of graph) is set, row carries the node count of the graph.
  typedef struct packed {
    logic              eog;
    logic [NODE_W-1:0] row;
    logic [FEAT_W-1:0] col;
    data_t             val;
  } elem_t;

  // One edge of the normalized adjacency matrix: dst += w * src. With eog set
  // it closes the edge list of a graph.
  typedef struct packed {
    logic              eog;
    logic [NODE_W-1:0] src;
    logic [NODE_W-1:0] dst;
    data_t             w;
  } edge_t;

  // ---------------- global-memory stream ----------------
  typedef enum logic [1:0] {
    TAG_PARAM = 2'd0,   // a = parameter target, b = address, data = value
    TAG_FEAT  = 2'd1,   // a = node, b = feature, data = value (non-zero input feature)
    TAG_EDGE  = 2'd2,   // a = src, b = dst, data = normalized weight
    TAG_EOG   = 2'd3    // a = number of nodes; closes a graph
  } tag_e;

  typedef struct packed {
    tag_e        tag;
    logic [15:0] a;
    logic [15:0] b;
    data_t       data;
  } mem_word_t;

  // ---------------- parameter write bus ----------------
  typedef enum logic [3:0] {
    PT_W1 = 4'd0,  PT_B1 = 4'd1,  PT_W2 = 4'd2,  PT_B2 = 4'd3,
    PT_W3 = 4'd4,  PT_B3 = 4'd5,  PT_WATT = 4'd6,
    PT_WNTN = 4'd7, PT_VNTN = 4'd8, PT_BNTN = 4'd9,
    PT_WFC1 = 4'd10, PT_BFC1 = 4'd11, PT_WFC2 = 4'd12, PT_BFC2 = 4'd13
  } ptarget_e;

  typedef struct packed {
    logic        we;
    ptarget_e    target;
    logic [15:0] addr;
    data_t       data;
  } pwr_t;

  // ---------------- arithmetic ----------------
  function automatic data_t fx_mul(data_t a, data_t b);
    logic signed [2*DW-1:0] p;
    p = 64'(a) * 64'(b);
    return data_t'(p >>> FRAC);
  endfunction

  function automatic data_t relu(data_t a);
    return a[DW-1] ? '0 : a;
  endfunction

endpackage
