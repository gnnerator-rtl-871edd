// gnn_pkg: types and constants shared by the Dense Engine, the Graph Engine and the
// controllers of the GNN accelerator.
//
// Feature elements are 32-bit two's-complement integers. The accelerator is rated in
// floating-point operations; integer arithmetic with the same 4-byte storage is this
// design's own simplification (memories keep the same size per element). All off-chip
// memory ports use one request/response handshake: a request is taken when valid and
// ready are both high, and read data return in request order on rsp_valid, with no
// back-pressure on the response side.
package gnn_pkg;

  localparam int unsigned DATA_W = 32;   // bits per feature element
  localparam int unsigned ADDR_W = 32;   // word address width on every memory port
  localparam int unsigned GE_LANES = 32; // SIMD lanes of the Graph Engine units
  localparam int unsigned DE_DIM = 64;   // rows and columns of the systolic array

  typedef logic signed [DATA_W-1:0] elem_t;

  // Binary operation of the Apply Unit: op(h_u, h_v), h_u the source feature,
  // h_v the destination node's input feature.
  typedef enum logic [1:0] {
    AP_PASS_U = 2'd0,
    AP_ADD    = 2'd1,
    AP_MUL    = 2'd2,
    AP_SUB    = 2'd3
  } apply_op_e;

  // Aggregation of the Reduce Unit.
  typedef enum logic [1:0] {
    RD_SUM = 2'd0,
    RD_MAX = 2'd1,
    RD_MIN = 2'd2
  } reduce_op_e;

  // Activation applied after the last partial sum of a feature extraction.
  typedef enum logic {
    ACT_NONE = 1'b0,
    ACT_RELU = 1'b1
  } act_e;

  // Which engine produces and which consumes.
  typedef enum logic {
    MODE_GRAPH_FIRST = 1'b0, // aggregation, then feature extraction (GCN, Graphsage)
    MODE_DENSE_FIRST = 1'b1  // feature extraction, then aggregation (GraphsagePool)
  } order_e;

  // One edge word in Edge DRAM and in the Graph Metadata Buffer: local source and
  // destination node indices within the shard.
  typedef struct packed {
    logic [15:0] src;
    logic [15:0] dst;
  } edge_t;

  // One feature-extraction task of the Dense Engine: out[n] (+)= in[n][block] * W[block][:]
  // for nodes node_base .. node_base+node_cnt-1. All sizes are in DE_DIM-element words.
  typedef struct packed {
    logic [31:0] node_base;  // first global node
    logic [15:0] node_cnt;   // number of nodes
    logic [31:0] in_base;    // word address of the input feature array
    logic [15:0] in_wpn;     // input words per node
    logic [15:0] in_tile0;   // first input word (dimension tile) of the block
    logic [15:0] in_tiles;   // input words in the block
    logic [31:0] w_base;     // word address of W[in_dim][out_word] in Weight DRAM
    logic [31:0] out_base;   // word address of the output array
    logic [15:0] out_tiles;  // output words per node
    logic        first;      // no partial sum to reload before this block
    logic        last;       // last block: apply the activation
    act_e        act;
  } dense_task_t;

  // Run-time configuration of the Graph Engine for one aggregation pass.
  typedef struct packed {
    logic [31:0] num_nodes;     // V
    logic [15:0] shard_n;       // n: nodes per source/destination interval
    logic [15:0] grid;          // S: intervals per side of the shard grid
    logic [15:0] wpn;           // GE_LANES-wide words per node feature in Feature DRAM
    logic [7:0]  wpb;           // words per node in one dimension block (B / GE_LANES)
    logic [15:0] nblk;          // dimension blocks, wpn / wpb
    logic [31:0] in_base;       // input features (GE words)
    logic [31:0] out_base;      // aggregated features (GE words)
    logic [31:0] edge_tab_base; // shard table in Edge DRAM, 2 words per shard
    logic [31:0] edge_base;     // edge lists in Edge DRAM
    apply_op_e   apply_op;
    reduce_op_e  reduce_op;
  } ge_cfg_t;

  // Run-time configuration of the whole accelerator for one GNN layer stage pair.
  typedef struct packed {
    order_e      order;       // which engine produces
    ge_cfg_t     ge;          // aggregation pass
    logic [31:0] de_in_base;  // dense-first: input features (DE_DIM-element words)
    logic [15:0] de_in_wpn;   // dense-first: input words per node
    logic [31:0] de_w_base;   // weights in Weight DRAM
    logic [31:0] de_out_base; // output features (DE_DIM-element words)
    logic [15:0] de_out_tiles;// output words per node
    act_e        de_act;
  } gnn_cfg_t;

  function automatic elem_t apply_fn(apply_op_e op, elem_t u, elem_t v);
    unique case (op)
      AP_PASS_U: apply_fn = u;
      AP_ADD:    apply_fn = u + v;
      AP_MUL:    apply_fn = u * v;
      default:   apply_fn = u - v;
    endcase
  endfunction

  function automatic elem_t reduce_fn(reduce_op_e op, elem_t acc, elem_t x);
    unique case (op)
      RD_SUM:  reduce_fn = acc + x;
      RD_MAX:  reduce_fn = (x > acc) ? x : acc;
      default: reduce_fn = (x < acc) ? x : acc;
    endcase
  endfunction

endpackage
