// controller: sequences one GraphR node through a loaded block in the
// streaming-apply, column-major order.
//
// The block (B x B sub-matrix of the adjacency matrix) is cut into strips of
// STRIP_W destination vertices; a strip is cut into B/C subgraphs of C
// source rows. All G graph engines work on one subgraph at a time, each on
// its own GE_COLS columns. For every strip the controller
//   1. LOAD_O  copies the strip's destination values into the RegOs;
//   2. for each subgraph row that holds edges (empty ones are skipped; with
//      bias on, row 0 is always processed so that the bias row adds e0
//      exactly once per destination):
//        FILL     resets every crossbar (body = 0 for MAC, M for add-op;
//                 extra row = e0 for MAC, 1 for add-op),
//        PROG     streams the subgraph's edges from memory ReRAM, writing
//                 each weight into its column group; it stalls while that
//                 group's drivers are still busy with an earlier write,
//        LOADI    loads the C source values and active bits into RegI,
//        COMP     runs one GE cycle (MAC) or one GE cycle per active
//                 source row (add-op: inactive rows are skipped);
//   3. STORE_O writes RegO values and active bits back and counts the
//      vertices that have not converged: |new - old| > thresh in MAC mode,
//      active in add-op mode.
// The edge list must be sorted in processing order (the host's
// preprocessing); an assertion checks this. done pulses once at the end,
// stats holds the counters of the last run.
//
// The order, the skipping of empty subgraphs and inactive sources, and the
// convergence check follow the paper. The register-level configuration
// (instead of the paper's controller instructions, which are not given),
// the fill-based reset and the row-0 rule for the bias are this design's
// choices.
module controller
  import graphr_pkg::*;
#(
  parameter int C          = 8,
  parameter int N          = 32,
  parameter int G          = 64,
  parameter int B          = 8192,
  parameter int EDGE_DEPTH = 65536,
  localparam int NGRP      = N / SLICES,
  localparam int GE_COLS   = C * N / SLICES,
  localparam int STRIP_W   = GE_COLS * G,
  localparam int NSTRIP    = B / STRIP_W,
  localparam int ROWS      = B / C,
  localparam int EAW       = $clog2(EDGE_DEPTH),
  localparam int VAW       = $clog2(B),
  localparam int AW        = $clog2(GE_COLS),
  localparam int GRW       = (NGRP > 1) ? $clog2(NGRP) : 1,
  localparam int GEW       = (G > 1) ? $clog2(G) : 1,
  localparam int RW        = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int SW        = (NSTRIP > 1) ? $clog2(NSTRIP) : 1,
  localparam int CW        = $clog2(C)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // configuration
  input  logic                      start,
  input  mode_e                     cfg_mode,
  input  salu_op_e                  cfg_op,
  input  logic [EAW:0]              cfg_num_edges,
  input  logic [VID_W-1:0]          cfg_row_base,
  input  logic [VID_W-1:0]          cfg_col_base,
  input  logic                      cfg_bias_en,
  input  logic [VAL_W-1:0]          cfg_bias_w,
  input  logic [VAL_W-1:0]          cfg_thresh,
  output logic                      busy,
  output logic                      done,
  output stats_t                    stats,
  // memory ReRAM
  output logic [EAW-1:0]            e_raddr,
  input  edge_t                     e_rdata,
  output logic [VAW-1:0]            s_raddr,
  input  logic [VAL_W-1:0]          s_val,
  input  logic                      s_act,
  output logic [VAW-1:0]            d_addr,
  input  logic [VAL_W-1:0]          d_val,
  input  logic [VAL_W-1:0]          d_old,
  output logic                      d_we,
  output logic [VAL_W-1:0]          d_wdata,
  output logic                      d_wact,
  // graph engines (broadcast signals and per-engine selects)
  output logic [G-1:0]              ge_prog_we,
  output logic [GRW-1:0]            ge_prog_grp,
  output logic [$clog2(C+1)-1:0]    ge_prog_row,
  output logic [CW-1:0]             ge_prog_col,
  output logic [VAL_W-1:0]          ge_prog_w,
  output logic                      ge_fill_req,
  output logic [VAL_W-1:0]          ge_fill_body,
  output logic [VAL_W-1:0]          ge_fill_extra,
  input  logic [G-1:0][NGRP-1:0]    ge_grp_busy,
  output logic                      ge_regi_we,
  output logic [CW-1:0]             ge_regi_addr,
  output logic [VAL_W-1:0]          ge_regi_data,
  output logic                      ge_regi_act,
  input  logic [C-1:0]              ge_regi_act_q,
  output logic [G-1:0]              ge_rego_ld_we,
  output logic [AW-1:0]             ge_rego_addr,
  output logic [VAL_W-1:0]          ge_rego_ld_data,
  input  logic [G-1:0][VAL_W-1:0]   ge_rego_rd_data,
  input  logic [G-1:0]              ge_rego_rd_act,
  output logic                      ge_start,
  output mode_e                     ge_mode,
  output logic [CW-1:0]             ge_sel_row,
  output logic [IN_W-1:0]           ge_bias_in,
  output salu_op_e                  ge_op,
  output logic [4:0]                ge_shift,
  input  logic [G-1:0]              ge_done
);

  typedef enum logic [3:0] {
    C_IDLE, C_LOAD_O, C_NEXT_SG, C_FILL, C_FILL_W, C_PROG, C_PROG_W,
    C_LOADI, C_COMP, C_COMP_W, C_STORE_O, C_DONE
  } ctl_state_e;

  ctl_state_e             st;
  logic [EAW:0]           eptr;
  logic [SW-1:0]          strip;
  logic [RW-1:0]          cur_row;
  logic                   row0_done;
  logic [$clog2(STRIP_W+1)-1:0] idx;
  logic [CW-1:0]          t;
  stats_t                 cnt;

  // ------------------------------------------------ current edge mapping
  logic                   m_in_block;
  logic [RW-1:0]          m_sg_row;
  logic [CW-1:0]          m_row_in, m_col;
  logic [SW-1:0]          m_strip;
  logic [GEW-1:0]         m_ge;
  logic [GRW-1:0]         m_grp;
  logic [RW+SW-1:0]       m_order, last_order;

  assign e_raddr = EAW'(eptr);

  edge_mapper #(.C(C), .N(N), .G(G), .B(B)) u_map (
    .src(e_rdata.src), .dst(e_rdata.dst),
    .row_base(cfg_row_base), .col_base(cfg_col_base),
    .in_block(m_in_block), .sg_row(m_sg_row), .row_in(m_row_in),
    .strip(m_strip), .ge(m_ge), .grp(m_grp), .col(m_col), .order(m_order));

  logic have_edge, edge_in_strip, edge_in_sg;
  assign have_edge     = (eptr < cfg_num_edges);
  assign edge_in_strip = have_edge && (m_strip == strip);
  assign edge_in_sg    = edge_in_strip && (m_sg_row == cur_row);

  // ------------------------------------------------------- static config
  always_comb begin
    ge_mode       = cfg_mode;
    ge_op         = cfg_op;
    ge_shift      = (cfg_mode == MODE_MAC) ? 5'(FRAC) : 5'd0;
    ge_fill_body  = (cfg_mode == MODE_MAC) ? '0 : VAL_INF;
    ge_fill_extra = (cfg_mode == MODE_MAC) ? (cfg_bias_en ? cfg_bias_w : '0)
                                           : VAL_W'(1);
    ge_bias_in    = (cfg_bias_en && cur_row == '0) ? IN_ONE_Q : '0;
    ge_sel_row    = t;
  end

  // ----------------------------------------------- datapath to memories
  logic [GEW-1:0] idx_ge;
  logic [VAL_W-1:0] ro_val, diff;
  logic ro_act;
  assign idx_ge       = GEW'(idx / GE_COLS);
  assign ge_rego_addr = AW'(idx % GE_COLS);
  assign ro_val       = ge_rego_rd_data[idx_ge];
  assign ro_act       = ge_rego_rd_act[idx_ge];
  assign diff         = (ro_val > d_old) ? ro_val - d_old : d_old - ro_val;

  assign d_addr  = VAW'(int'(strip) * STRIP_W) + VAW'(idx);
  assign s_raddr = VAW'(int'(cur_row) * C) + VAW'(idx);

  always_comb begin
    ge_rego_ld_we   = '0;
    ge_rego_ld_data = d_val;
    ge_prog_we      = '0;
    ge_prog_grp     = m_grp;
    ge_prog_row     = ($clog2(C+1))'(m_row_in);
    ge_prog_col     = m_col;
    ge_prog_w       = e_rdata.weight;
    ge_fill_req     = (st == C_FILL);
    ge_regi_we      = (st == C_LOADI);
    ge_regi_addr    = CW'(idx);
    ge_regi_data    = s_val;
    ge_regi_act     = s_act;
    ge_start        = 1'b0;
    d_we            = (st == C_STORE_O);
    d_wdata         = ro_val;
    d_wact          = ro_act;
    if (st == C_LOAD_O) ge_rego_ld_we[idx_ge] = 1'b1;
    if (st == C_PROG && edge_in_sg && !ge_grp_busy[m_ge][m_grp])
      ge_prog_we[m_ge] = 1'b1;
    if (st == C_COMP && (cfg_mode == MODE_MAC || ge_regi_act_q[t]))
      ge_start = 1'b1;
  end

  logic any_busy;
  always_comb begin
    any_busy = 1'b0;
    for (int g = 0; g < G; g++) any_busy |= |ge_grp_busy[g];
  end

  assign busy  = (st != C_IDLE);
  assign stats = cnt;

  // ------------------------------------------------------------------ FSM
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= C_IDLE;
      eptr       <= '0;
      strip      <= '0;
      cur_row    <= '0;
      row0_done  <= 1'b0;
      idx        <= '0;
      t          <= '0;
      cnt        <= '0;
      done       <= 1'b0;
      last_order <= '0;
    end else begin
      done <= 1'b0;
      if (st != C_IDLE) cnt.cycles <= cnt.cycles + 1;
      unique case (st)
        C_IDLE: if (start) begin
          st         <= C_LOAD_O;
          eptr       <= '0;
          strip      <= '0;
          idx        <= '0;
          cnt        <= '0;
          last_order <= '0;
        end
        C_LOAD_O: begin
          idx <= idx + 1'b1;
          if (int'(idx) == STRIP_W - 1) begin
            st        <= C_NEXT_SG;
            row0_done <= 1'b0;
          end
        end
        C_NEXT_SG: begin
          if (cfg_mode == MODE_MAC && cfg_bias_en && !row0_done) begin
            cur_row <= '0;
            st      <= C_FILL;
          end else if (edge_in_strip) begin
            cur_row <= m_sg_row;
            st      <= C_FILL;
          end else begin
            st  <= C_STORE_O;
            idx <= '0;
          end
        end
        C_FILL:   st <= C_FILL_W;
        C_FILL_W: if (!any_busy) st <= C_PROG;
        C_PROG: begin
          if (edge_in_sg) begin
            if (ge_grp_busy[m_ge][m_grp]) cnt.stall <= cnt.stall + 1;
            else begin
              eptr       <= eptr + 1'b1;
              last_order <= m_order;
            end
          end else st <= C_PROG_W;
        end
        C_PROG_W: if (!any_busy) begin
          st  <= C_LOADI;
          idx <= '0;
        end
        C_LOADI: begin
          idx <= idx + 1'b1;
          if (int'(idx) == C - 1) begin
            st <= C_COMP;
            t  <= '0;
            cnt.sg_proc <= cnt.sg_proc + 1;
          end
        end
        C_COMP: begin
          if (cfg_mode == MODE_MAC || ge_regi_act_q[t]) st <= C_COMP_W;
          else begin
            cnt.inact_skip <= cnt.inact_skip + 1;
            if (int'(t) == C - 1) st <= C_NEXT_SG;
            else t <= t + 1'b1;
          end
        end
        C_COMP_W: if (&ge_done) begin
          cnt.ge_cycles <= cnt.ge_cycles + 1;
          if (cur_row == '0) row0_done <= 1'b1;
          if (cfg_mode == MODE_MAC || int'(t) == C - 1) st <= C_NEXT_SG;
          else begin
            t  <= t + 1'b1;
            st <= C_COMP;
          end
        end
        C_STORE_O: begin
          if (cfg_mode == MODE_MAC ? (diff > cfg_thresh) : ro_act)
            cnt.conv_cnt <= cnt.conv_cnt + 1;
          idx <= idx + 1'b1;
          if (int'(idx) == STRIP_W - 1) begin
            idx <= '0;
            if (int'(strip) == NSTRIP - 1) st <= C_DONE;
            else begin
              strip <= strip + 1'b1;
              st    <= C_LOAD_O;
            end
          end
        end
        C_DONE: begin
          cnt.sg_skip <= 32'(NSTRIP * ROWS) - cnt.sg_proc;
          done <= 1'b1;
          st   <= C_IDLE;
        end
        default: st <= C_IDLE;
      endcase
    end
  end

  // edges must belong to the block and come in processing order
  a_in_block: assert property (@(posedge clk) disable iff (!rst_n)
    (st == C_PROG && have_edge) |-> m_in_block)
    else $error("controller: edge outside the loaded block");
  a_ordered: assert property (@(posedge clk) disable iff (!rst_n)
    (st == C_PROG && edge_in_sg && eptr != '0) |-> m_order >= last_order)
    else $error("controller: edge list not in subgraph order");

endmodule
