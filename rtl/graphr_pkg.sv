// graphr_pkg: types and constants shared by the GraphR node.
//
// Vertex properties and edge weights are 16-bit unsigned fixed point. A
// 16-bit weight is stored across four crossbars of 4-bit cells (one slice
// each); the shift-and-add unit recombines the four bitline results. The
// value 16'hFFFF is the reserved "no edge / infinite distance" level M used
// by the add-op algorithms. The 16-bit width and 4-bit cell follow the
// paper's data-format description; the rest are this design's choices.
package graphr_pkg;

  localparam int VAL_W   = 16;               // vertex value / edge weight width
  localparam int CELL_W  = 4;                // bits per ReRAM cell
  localparam int SLICES  = VAL_W / CELL_W;   // crossbars per 16-bit column
  localparam int IN_W    = VAL_W + 1;        // wordline input level, 1.0 = 2**16
  localparam int VID_W   = 32;               // vertex id width in the edge list
  localparam int FRAC    = 16;               // Q0.16 rescale in MAC mode

  localparam logic [VAL_W-1:0] VAL_INF = '1; // reserved maximum M
  localparam logic [IN_W-1:0]  IN_ONE_Q = IN_W'(1) << FRAC; // 1.0 in MAC mode

  // Processing pattern of the loaded algorithm.
  typedef enum logic {
    MODE_MAC   = 1'b0,  // parallel MAC  (PageRank, SpMV)
    MODE_ADDOP = 1'b1   // parallel add-op (SSSP, BFS)
  } mode_e;

  // Reduction performed by the sALU.
  typedef enum logic [1:0] {
    OP_ADD    = 2'd0,
    OP_MIN    = 2'd1,
    OP_BYPASS = 2'd2
  } salu_op_e;

  // One entry of the coordinate list held in memory ReRAM.
  typedef struct packed {
    logic [VID_W-1:0] src;
    logic [VID_W-1:0] dst;
    logic [VAL_W-1:0] weight;
  } edge_t;

  localparam int EDGE_W = $bits(edge_t);

  // Per-block counters kept by the controller and readable by the host.
  typedef struct packed {
    logic [31:0] conv_cnt;    // vertices not yet converged / still active
    logic [31:0] sg_proc;     // subgraphs programmed and computed
    logic [31:0] sg_skip;     // empty subgraphs skipped
    logic [31:0] stall;       // cycles waiting for a busy driver
    logic [31:0] inact_skip;  // add-op time slots skipped (inactive source)
    logic [31:0] ge_cycles;   // GE cycles run
    logic [31:0] cycles;      // clock cycles from start to done
  } stats_t;

endpackage
