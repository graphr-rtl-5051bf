// mem_reram: memory ReRAM of a GraphR node.
//
// Holds the block of the graph currently being processed:
//   - the edge list of the block in coordinate-list (COO) form, already
//     sorted by the host into the order the subgraphs are processed in;
//   - the source-vertex chunk: value and active indicator of the B vertices
//     whose out-edges the block holds;
//   - the destination-vertex chunk: the running value (read at the start of
//     a strip, written back at its end), the new active indicators, and the
//     previous-iteration value used for the convergence check.
// The host writes everything through its port and reads the destination
// chunk back; the controller streams edges and vertex values through its
// own ports. Reads are asynchronous (combinational), writes take effect at
// the clock edge. Sizes are this design's choice: the paper leaves the
// memory ReRAM capacity open. The ReRAM cells themselves are modelled as
// plain arrays, so read and write latencies of the device are not modelled.
module mem_reram
  import graphr_pkg::*;
#(
  parameter int EDGE_DEPTH = 65536,
  parameter int B          = 8192,
  localparam int EAW       = $clog2(EDGE_DEPTH),
  localparam int VAW       = $clog2(B)
) (
  input  logic               clk,
  // host port
  input  logic               h_e_we,
  input  logic [EAW-1:0]     h_e_addr,
  input  edge_t              h_e_wdata,
  input  logic               h_src_we,
  input  logic               h_dval_we,
  input  logic               h_dold_we,
  input  logic [VAW-1:0]     h_v_addr,
  input  logic [VAL_W-1:0]   h_v_wdata,
  input  logic               h_v_wact,
  output logic [VAL_W-1:0]   h_dval_rdata,
  output logic               h_dact_rdata,
  // controller port
  input  logic [EAW-1:0]     e_raddr,
  output edge_t              e_rdata,
  input  logic [VAW-1:0]     s_raddr,
  output logic [VAL_W-1:0]   s_val,
  output logic               s_act,
  input  logic [VAW-1:0]     d_addr,
  output logic [VAL_W-1:0]   d_val,
  output logic [VAL_W-1:0]   d_old,
  input  logic               d_we,
  input  logic [VAL_W-1:0]   d_wdata,
  input  logic               d_wact
);

  edge_t            edges    [EDGE_DEPTH];
  logic [VAL_W-1:0] src_val  [B];
  logic             src_act  [B];
  logic [VAL_W-1:0] dst_val  [B];
  logic             dst_act  [B];
  logic [VAL_W-1:0] dst_old  [B];

  always_ff @(posedge clk) begin
    if (h_e_we)    edges[h_e_addr]   <= h_e_wdata;
    if (h_src_we) begin
      src_val[h_v_addr] <= h_v_wdata;
      src_act[h_v_addr] <= h_v_wact;
    end
    if (h_dold_we) dst_old[h_v_addr] <= h_v_wdata;
    // controller write-back has priority over a host write to the same word
    if (d_we) begin
      dst_val[d_addr] <= d_wdata;
      dst_act[d_addr] <= d_wact;
    end
    if (h_dval_we && !(d_we && d_addr == h_v_addr)) begin
      dst_val[h_v_addr] <= h_v_wdata;
      dst_act[h_v_addr] <= 1'b0;
    end
  end

  assign e_rdata      = edges[e_raddr];
  assign s_val        = src_val[s_raddr];
  assign s_act        = src_act[s_raddr];
  assign d_val        = dst_val[d_addr];
  assign d_old        = dst_old[d_addr];
  assign h_dval_rdata = dst_val[h_v_addr];
  assign h_dact_rdata = dst_act[h_v_addr];

endmodule
