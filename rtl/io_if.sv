// io_if: host I/O interface of a GraphR node.
//
// A simple memory-mapped bus through which the host (the out-of-core
// framework) loads a block into memory ReRAM, configures the controller,
// starts it and reads the results. Writes take one cycle (hwe with haddr and
// hwdata); reads are combinational on haddr. Address map, region in
// haddr[31:28], word index in the low bits:
//   0x0  edge list entry            write {src, dst, weight} (80 bits)
//   0x1  source vertex              write value [15:0], active [16]
//   0x2  destination vertex value   write value [15:0]; read {act, value}
//   0x3  destination old value      write value [15:0]
//   0x4  configuration register     0 mode, 1 sALU op, 2 edge count,
//                                   3 row base, 4 column base, 5 bias on,
//                                   6 bias weight e0, 7 threshold,
//                                   8 start (write any value)
//   0x5  status (read)              0 {done, busy}, 1 not-converged count,
//                                   2 subgraphs run, 3 subgraphs skipped,
//                                   4 stall cycles, 5 skipped time slots,
//                                   6 GE cycles, 7 clock cycles
// `done` is sticky until the next start. The map is this design's choice;
// the paper only names the interface.
module io_if
  import graphr_pkg::*;
#(
  parameter int EDGE_DEPTH = 65536,
  parameter int B          = 8192,
  localparam int EAW       = $clog2(EDGE_DEPTH),
  localparam int VAW       = $clog2(B)
) (
  input  logic               clk,
  input  logic               rst_n,
  // host bus
  input  logic               hwe,
  input  logic [31:0]        haddr,
  input  logic [EDGE_W-1:0]  hwdata,
  output logic [31:0]        hrdata,
  // memory ReRAM host port
  output logic               h_e_we,
  output logic [EAW-1:0]     h_e_addr,
  output edge_t              h_e_wdata,
  output logic               h_src_we,
  output logic               h_dval_we,
  output logic               h_dold_we,
  output logic [VAW-1:0]     h_v_addr,
  output logic [VAL_W-1:0]   h_v_wdata,
  output logic               h_v_wact,
  input  logic [VAL_W-1:0]   h_dval_rdata,
  input  logic               h_dact_rdata,
  // controller configuration and status
  output logic               start,
  output mode_e              cfg_mode,
  output salu_op_e           cfg_op,
  output logic [EAW:0]       cfg_num_edges,
  output logic [VID_W-1:0]   cfg_row_base,
  output logic [VID_W-1:0]   cfg_col_base,
  output logic               cfg_bias_en,
  output logic [VAL_W-1:0]   cfg_bias_w,
  output logic [VAL_W-1:0]   cfg_thresh,
  input  logic               ctl_busy,
  input  logic               ctl_done,
  input  stats_t             stats
);

  logic [3:0] region;
  logic       done_q;
  assign region = haddr[31:28];

  // memory writes
  assign h_e_we    = hwe && region == 4'h0;
  assign h_src_we  = hwe && region == 4'h1;
  assign h_dval_we = hwe && region == 4'h2;
  assign h_dold_we = hwe && region == 4'h3;
  assign h_e_addr  = EAW'(haddr);
  assign h_e_wdata = edge_t'(hwdata);
  assign h_v_addr  = VAW'(haddr);
  assign h_v_wdata = hwdata[VAL_W-1:0];
  assign h_v_wact  = hwdata[VAL_W];

  // configuration registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg_mode      <= MODE_MAC;
      cfg_op        <= OP_ADD;
      cfg_num_edges <= '0;
      cfg_row_base  <= '0;
      cfg_col_base  <= '0;
      cfg_bias_en   <= 1'b0;
      cfg_bias_w    <= '0;
      cfg_thresh    <= '0;
      start         <= 1'b0;
      done_q        <= 1'b0;
    end else begin
      start <= 1'b0;
      if (ctl_done) done_q <= 1'b1;
      if (hwe && region == 4'h4) begin
        unique case (haddr[3:0])
          4'd0: cfg_mode      <= mode_e'(hwdata[0]);
          4'd1: cfg_op        <= salu_op_e'(hwdata[1:0]);
          4'd2: cfg_num_edges <= (EAW+1)'(hwdata);
          4'd3: cfg_row_base  <= hwdata[VID_W-1:0];
          4'd4: cfg_col_base  <= hwdata[VID_W-1:0];
          4'd5: cfg_bias_en   <= hwdata[0];
          4'd6: cfg_bias_w    <= hwdata[VAL_W-1:0];
          4'd7: cfg_thresh    <= hwdata[VAL_W-1:0];
          4'd8: begin
            start  <= 1'b1;
            done_q <= 1'b0;
          end
          default: ;
        endcase
      end
    end
  end

  // reads
  always_comb begin
    hrdata = '0;
    unique case (region)
      4'h2: hrdata = {15'd0, h_dact_rdata, h_dval_rdata};
      4'h5: unique case (haddr[2:0])
        3'd0: hrdata = {30'd0, done_q, ctl_busy};
        3'd1: hrdata = stats.conv_cnt;
        3'd2: hrdata = stats.sg_proc;
        3'd3: hrdata = stats.sg_skip;
        3'd4: hrdata = stats.stall;
        3'd5: hrdata = stats.inact_skip;
        3'd6: hrdata = stats.ge_cycles;
        default: hrdata = stats.cycles;
      endcase
      default: hrdata = '0;
    endcase
  end

endmodule
