// graph_pkg: types and constants shared by the pattern-based graph accelerator.
//
// The accelerator splits a graph's adjacency matrix into C x C windows
// (subgraphs). Each distinct non-zero window is a "pattern". Frequent patterns
// are written once into the crossbars of "static" graph engines; the rest are
// written on demand into "dynamic" engines. This package holds the entry
// formats of the two tables kept in main memory (configuration table CT and
// subgraph table ST), the request/response bundle between the global
// controller and the graph engines, and the reduce operations of the ALU.
//
// Paper values: crossbar size C = 4, 8-bit vertex data. The bit widths of the
// table fields are this design's choice and are sized for the largest data set
// the paper evaluates (web-Google, 875K vertices, 5.1M edges).
package graph_pkg;

  // Crossbar size (C x C, 1-bit cells) and vertex data width.
  parameter int unsigned C      = 4;
  parameter int unsigned DATA_W = 8;

  // Vertex block index: a block is the C consecutive vertices one window
  // covers. 2^20 blocks = 4M vertices at C = 4.
  parameter int unsigned BLK_W  = 20;
  // Pattern id (CT address): at most 2^(C*C) - 1 distinct non-zero patterns.
  parameter int unsigned PAT_W  = 16;
  // Subgraph table address: up to 16M subgraphs.
  parameter int unsigned ST_AW  = 24;
  // Graph engine id and crossbar-in-engine id fields.
  parameter int unsigned GE_W   = 8;
  parameter int unsigned CB_W   = 2;

  // Value a vertex holds when not reached (BFS / SSSP "infinity").
  localparam logic [DATA_W-1:0] INF = '1;

  // Operation performed by the engines' ALU and by aggregation.
  typedef enum logic [0:0] {
    OP_MIN = 1'b0,   // BFS / SSSP: contribution = min over edges of (src + 1)
    OP_SUM = 1'b1    // PageRank-style: contribution = sum over edges of src
  } alu_op_e;

  typedef logic [C-1:0][C-1:0]      pattern_t;  // [row=src][col=dst]
  typedef logic [C-1:0][DATA_W-1:0] vblock_t;   // C vertex values

  // Configuration table entry (one per pattern, ranked by frequency).
  typedef struct packed {
    pattern_t          pattern;   // cell values
    logic [C-1:0]      row_mask;  // rows holding at least one edge
    logic              is_static; // assigned to a static engine
    logic [GE_W-1:0]   ge;        // static engine (ignored if dynamic)
    logic [CB_W-1:0]   cb;        // crossbar inside that engine
  } ct_entry_t;

  // Subgraph table entry.
  typedef struct packed {
    logic [BLK_W-1:0]  src_blk;   // first source vertex / C
    logic [BLK_W-1:0]  dst_blk;   // first destination vertex / C
    logic [PAT_W-1:0]  pat;       // pattern id (CT index)
  } st_entry_t;

  // One entry of a graph engine's input buffer.
  typedef struct packed {
    logic              has_cfg;   // reconfigure the crossbar first
    logic              has_data;  // process vertex data (returns a result)
    logic [CB_W-1:0]   cb;        // target crossbar
    alu_op_e           op;
    pattern_t          cfg;       // configuration (edge data)
    logic [C-1:0]      row_mask;
    vblock_t           vdata;     // source vertex values
    logic [BLK_W-1:0]  tag;       // destination block, returned with result
  } ge_req_t;

  // One entry of a graph engine's output buffer.
  typedef struct packed {
    logic [BLK_W-1:0]  tag;
    vblock_t           pv;        // processed contribution per destination
  } ge_rsp_t;

  // Reduce used by the ALU and by aggregation. OP_MIN saturates at INF,
  // OP_SUM saturates at the maximum value.
  function automatic logic [DATA_W-1:0] reduce2(alu_op_e op,
                                                logic [DATA_W-1:0] a,
                                                logic [DATA_W-1:0] b);
    logic [DATA_W:0] s;
    if (op == OP_MIN) return (a < b) ? a : b;
    s = {1'b0, a} + {1'b0, b};
    return s[DATA_W] ? '1 : s[DATA_W-1:0];
  endfunction

  // Identity of reduce2 for an engine's accumulator.
  function automatic logic [DATA_W-1:0] reduce_identity(alu_op_e op);
    return (op == OP_MIN) ? INF : '0;
  endfunction

endpackage
