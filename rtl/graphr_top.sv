// graphr_top: one GraphR node.
//
// GraphR accelerates vertex programs that can be written as a sparse
// matrix-vector product. The graph is kept compressed (a coordinate list) in
// memory ReRAM; small C x (C*N*G/4) windows of the adjacency matrix
// (subgraphs) are expanded into ReRAM crossbars inside G graph engines,
// which multiply them by the source-vertex vector in place; the results are
// reduced into the destination vertices by simple ALUs.
//
// The node contains:
//   io_if       host bus: load edges and vertex chunks, configure, start,
//               read results and counters;
//   mem_reram   the edge list and vertex chunks of the loaded block;
//   controller  streaming-apply sequencing of strips and subgraphs;
//   G x ge      graph engines, each N crossbars with drivers, S/H, shared
//               ADCs, shift-and-add units, sALUs, RegI and RegO.
// Default sizes are the paper's evaluated node: 8x8 crossbars (plus the
// extra row), 32 crossbars per engine, 64 engines. The block size B and the
// edge capacity are this design's choices. done pulses when the loaded block
// has been processed.
//
// Timing: the host writes one word per clock; a run takes about
// 2*B cycles for loading and storing the destination values, plus, per
// non-empty subgraph, one array fill (WRITE_LAT), the edge programming
// (WRITE_LAT per edge, overlapped across column groups and engines), C
// cycles of RegI loading and one GE cycle of ADC_CH+6 clocks (MAC) or one
// per active source row (add-op).
//
// Lint notes: every engine's busy output and the unused address bits of the
// host bus are left open on purpose (the controller waits on done; the
// regions use only the low address bits they need). rst_n is an
// asynchronous reset of the flops and is also the disable condition of the
// lockstep assertion, which lint reports as a mixed sync/async use.
module graphr_top
  import graphr_pkg::*;
#(
  parameter int C          = 8,
  parameter int N          = 32,
  parameter int G          = 64,
  parameter int B          = 8192,
  parameter int EDGE_DEPTH = 65536,
  parameter int ADC_CH     = 64,
  parameter int WRITE_LAT  = 51
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               hwe,
  input  logic [31:0]        haddr,
  input  logic [EDGE_W-1:0]  hwdata,
  output logic [31:0]        hrdata,
  output logic               done
);

  localparam int NGRP    = N / SLICES;
  localparam int GE_COLS = C * N / SLICES;
  localparam int EAW     = $clog2(EDGE_DEPTH);
  localparam int VAW     = $clog2(B);
  localparam int AW      = $clog2(GE_COLS);
  localparam int GRW     = (NGRP > 1) ? $clog2(NGRP) : 1;
  localparam int CW      = $clog2(C);

  // host port of memory ReRAM
  logic               h_e_we, h_src_we, h_dval_we, h_dold_we, h_v_wact, h_dact_rdata;
  logic [EAW-1:0]     h_e_addr;
  edge_t              h_e_wdata;
  logic [VAW-1:0]     h_v_addr;
  logic [VAL_W-1:0]   h_v_wdata, h_dval_rdata;

  // configuration
  logic               start, cfg_bias_en, ctl_busy;
  mode_e              cfg_mode;
  salu_op_e           cfg_op;
  logic [EAW:0]       cfg_num_edges;
  logic [VID_W-1:0]   cfg_row_base, cfg_col_base;
  logic [VAL_W-1:0]   cfg_bias_w, cfg_thresh;
  stats_t             stats;

  // controller <-> memory
  logic [EAW-1:0]     e_raddr;
  edge_t              e_rdata;
  logic [VAW-1:0]     s_raddr, d_addr;
  logic [VAL_W-1:0]   s_val, d_val, d_old, d_wdata;
  logic               s_act, d_we, d_wact;

  // controller <-> engines
  logic [G-1:0]             ge_prog_we, ge_rego_ld_we, ge_rego_rd_act, ge_done, ge_busy;
  logic [GRW-1:0]           ge_prog_grp;
  logic [$clog2(C+1)-1:0]   ge_prog_row;
  logic [CW-1:0]            ge_prog_col, ge_regi_addr, ge_sel_row;
  logic [VAL_W-1:0]         ge_prog_w, ge_fill_body, ge_fill_extra, ge_regi_data, ge_rego_ld_data;
  logic                     ge_fill_req, ge_regi_we, ge_regi_act, ge_start;
  logic [G-1:0][NGRP-1:0]   ge_grp_busy;
  logic [G-1:0][C-1:0]      ge_regi_act_q;
  logic [AW-1:0]            ge_rego_addr;
  logic [G-1:0][VAL_W-1:0]  ge_rego_rd_data;
  mode_e                    ge_mode;
  salu_op_e                 ge_op;
  logic [IN_W-1:0]          ge_bias_in;
  logic [4:0]               ge_shift;

  io_if #(.EDGE_DEPTH(EDGE_DEPTH), .B(B)) u_io (
    .clk, .rst_n, .hwe, .haddr, .hwdata, .hrdata,
    .h_e_we, .h_e_addr, .h_e_wdata, .h_src_we, .h_dval_we, .h_dold_we,
    .h_v_addr, .h_v_wdata, .h_v_wact, .h_dval_rdata, .h_dact_rdata,
    .start, .cfg_mode, .cfg_op, .cfg_num_edges, .cfg_row_base, .cfg_col_base,
    .cfg_bias_en, .cfg_bias_w, .cfg_thresh,
    .ctl_busy, .ctl_done(done), .stats);

  mem_reram #(.EDGE_DEPTH(EDGE_DEPTH), .B(B)) u_mem (
    .clk,
    .h_e_we, .h_e_addr, .h_e_wdata, .h_src_we, .h_dval_we, .h_dold_we,
    .h_v_addr, .h_v_wdata, .h_v_wact, .h_dval_rdata, .h_dact_rdata,
    .e_raddr, .e_rdata, .s_raddr, .s_val, .s_act,
    .d_addr, .d_val, .d_old, .d_we, .d_wdata, .d_wact);

  controller #(.C(C), .N(N), .G(G), .B(B), .EDGE_DEPTH(EDGE_DEPTH)) u_ctl (
    .clk, .rst_n, .start, .cfg_mode, .cfg_op, .cfg_num_edges,
    .cfg_row_base, .cfg_col_base, .cfg_bias_en, .cfg_bias_w, .cfg_thresh,
    .busy(ctl_busy), .done, .stats,
    .e_raddr, .e_rdata, .s_raddr, .s_val, .s_act,
    .d_addr, .d_val, .d_old, .d_we, .d_wdata, .d_wact,
    .ge_prog_we, .ge_prog_grp, .ge_prog_row, .ge_prog_col, .ge_prog_w,
    .ge_fill_req, .ge_fill_body, .ge_fill_extra, .ge_grp_busy,
    .ge_regi_we, .ge_regi_addr, .ge_regi_data, .ge_regi_act,
    .ge_rego_ld_we, .ge_rego_addr, .ge_rego_ld_data, .ge_rego_rd_data,
    .ge_rego_rd_act, .ge_start, .ge_mode, .ge_sel_row, .ge_bias_in, .ge_op,
    .ge_shift, .ge_done, .ge_regi_act_q(ge_regi_act_q[0]));

  for (genvar g = 0; g < G; g++) begin : g_ge
    ge #(.C(C), .N(N), .ADC_CH(ADC_CH), .WRITE_LAT(WRITE_LAT)) u_ge (
      .clk, .rst_n,
      .prog_we(ge_prog_we[g]), .prog_grp(ge_prog_grp), .prog_row(ge_prog_row),
      .prog_col(ge_prog_col), .prog_w(ge_prog_w),
      .fill_req(ge_fill_req), .fill_body_w(ge_fill_body), .fill_extra_w(ge_fill_extra),
      .grp_busy(ge_grp_busy[g]),
      .regi_we(ge_regi_we), .regi_addr(ge_regi_addr), .regi_data(ge_regi_data),
      .regi_act(ge_regi_act), .regi_act_q(ge_regi_act_q[g]),
      .rego_ld_we(ge_rego_ld_we[g]), .rego_ld_addr(ge_rego_addr),
      .rego_ld_data(ge_rego_ld_data), .rego_rd_addr(ge_rego_addr),
      .rego_rd_data(ge_rego_rd_data[g]), .rego_rd_act(ge_rego_rd_act[g]),
      .start(ge_start), .mode(ge_mode), .sel_row(ge_sel_row), .bias_in(ge_bias_in),
      .op(ge_op), .shift(ge_shift), .busy(ge_busy[g]), .done(ge_done[g]));
  end

  // every engine runs the same GE cycle in lockstep
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    ge_done[0] |-> &ge_done)
    else $error("graphr_top: graph engines out of step");

endmodule
