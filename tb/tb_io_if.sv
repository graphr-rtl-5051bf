// tb_io_if: self-checking test of the host I/O interface.
// Register writes must reach the configuration outputs, a write to the
// start register must give a one-cycle start pulse and clear done, memory
// regions must raise the right write strobe with the right address/data,
// and status reads must return the controller's counters.
module tb_io_if;
  timeunit 1ns; timeprecision 1ps;
  import graphr_pkg::*;
  localparam int ED = 256, B = 64;
  logic clk = 0, rst_n = 0, hwe = 0;
  logic [31:0] haddr = '0, hrdata;
  logic [EDGE_W-1:0] hwdata = '0;
  logic h_e_we, h_src_we, h_dval_we, h_dold_we, h_v_wact;
  logic [7:0] h_e_addr;
  edge_t h_e_wdata;
  logic [5:0] h_v_addr;
  logic [15:0] h_v_wdata, h_dval_rdata = 16'h1234;
  logic h_dact_rdata = 1'b1;
  logic start, cfg_bias_en, ctl_busy = 0, ctl_done = 0;
  mode_e cfg_mode;
  salu_op_e cfg_op;
  logic [8:0] cfg_num_edges;
  logic [31:0] cfg_row_base, cfg_col_base;
  logic [15:0] cfg_bias_w, cfg_thresh;
  stats_t stats;
  int checks = 0, failures = 0;

  io_if #(.EDGE_DEPTH(ED), .B(B)) dut (.*);
  always #0.5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic wr(int region, int idx, logic [EDGE_W-1:0] d);
    hwe = 1; haddr = {4'(region), 28'(idx)}; hwdata = d;
    @(posedge clk); #0.1 hwe = 0;
  endtask

  initial begin
    stats = '{conv_cnt: 11, sg_proc: 22, sg_skip: 33, stall: 44, inact_skip: 55, ge_cycles: 66, cycles: 77};
    #2.2 rst_n = 1;
    @(posedge clk); #0.1;
    wr(4, 0, 1); wr(4, 1, 1); wr(4, 2, 200); wr(4, 3, 32); wr(4, 4, 96);
    wr(4, 5, 1); wr(4, 6, 3277); wr(4, 7, 9);
    chk(cfg_mode == MODE_ADDOP && cfg_op == OP_MIN && cfg_num_edges == 200 &&
        cfg_row_base == 32 && cfg_col_base == 96 && cfg_bias_en && cfg_bias_w == 3277 &&
        cfg_thresh == 9, "configuration registers");
    // done is sticky, cleared by start
    ctl_done = 1; @(posedge clk); #0.1 ctl_done = 0;
    haddr = {4'h5, 28'd0}; #0.1;
    chk(hrdata[1] == 1'b1, "done sticky");
    hwe = 1; haddr = {4'h4, 28'd8}; hwdata = 1;
    @(posedge clk); #0.1 hwe = 0;
    chk(start == 1'b1, "start pulse");
    @(posedge clk); #0.1;
    chk(start == 1'b0, "start one cycle");
    haddr = {4'h5, 28'd0}; #0.1;
    chk(hrdata[1] == 1'b0, "done cleared");
    // memory strobes (combinational, checked before the clock edge)
    for (int r = 0; r < 4; r++) begin
      hwe = 1; haddr = {4'(r), 28'd37}; hwdata = {$urandom, $urandom, $urandom};
      #0.1;
      chk(h_e_we == (r == 0) && h_src_we == (r == 1) && h_dval_we == (r == 2) && h_dold_we == (r == 3),
          $sformatf("strobe region %0d", r));
      if (r == 0) chk(h_e_addr == 37 && h_e_wdata == edge_t'(hwdata), "edge write data");
      else chk(h_v_addr == 37 && h_v_wdata == hwdata[15:0] && h_v_wact == hwdata[16], "vertex write data");
      @(posedge clk); #0.1 hwe = 0;
    end
    haddr = {4'h2, 28'd5}; #0.1;
    chk(hrdata == 32'h11234, "destination read");
    for (int k = 1; k < 8; k++) begin
      haddr = {4'h5, 28'(k)}; #0.1;
      chk(hrdata == 32'(11 * k), $sformatf("status %0d = %0d", k, hrdata));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
