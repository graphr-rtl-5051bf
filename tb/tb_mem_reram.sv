// tb_mem_reram: self-checking test of the memory ReRAM model.
// Host writes of edges and vertex chunks, controller reads, controller
// write-back of destination values with active bits, and host read-back.
module tb_mem_reram;
  timeunit 1ns; timeprecision 1ps;
  import graphr_pkg::*;
  localparam int ED = 256, B = 64;
  logic clk = 0;
  logic h_e_we = 0, h_src_we = 0, h_dval_we = 0, h_dold_we = 0, h_v_wact = 0, d_we = 0, d_wact = 0;
  logic [7:0] h_e_addr = '0, e_raddr = '0;
  edge_t h_e_wdata = '0, e_rdata;
  logic [5:0] h_v_addr = '0, s_raddr = '0, d_addr = '0;
  logic [15:0] h_v_wdata = '0, h_dval_rdata, s_val, d_val, d_old, d_wdata = '0;
  logic h_dact_rdata, s_act;
  edge_t ee [ED];
  int sv [B], sa [B], dv [B], dold [B], da [B];
  int checks = 0, failures = 0;

  mem_reram #(.EDGE_DEPTH(ED), .B(B)) dut (.*);
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

  initial begin
    @(posedge clk); #0.1;
    for (int k = 0; k < ED; k++) begin
      ee[k] = '{src: $urandom, dst: $urandom, weight: 16'($urandom)};
      h_e_we = 1; h_e_addr = 8'(k); h_e_wdata = ee[k];
      @(posedge clk); #0.1;
    end
    h_e_we = 0;
    for (int k = 0; k < B; k++) begin
      sv[k] = $urandom_range(65535); sa[k] = $urandom_range(1);
      dv[k] = $urandom_range(65535); dold[k] = $urandom_range(65535);
      h_v_addr = 6'(k);
      h_src_we = 1; h_v_wdata = 16'(sv[k]); h_v_wact = sa[k][0];
      @(posedge clk); #0.1 h_src_we = 0;
      h_dval_we = 1; h_v_wdata = 16'(dv[k]);
      @(posedge clk); #0.1 h_dval_we = 0;
      h_dold_we = 1; h_v_wdata = 16'(dold[k]);
      @(posedge clk); #0.1 h_dold_we = 0;
      da[k] = 0;
    end
    for (int k = 0; k < ED; k += 7) begin
      e_raddr = 8'(k); #0.1;
      chk(e_rdata == ee[k], $sformatf("edge %0d", k));
    end
    for (int k = 0; k < B; k++) begin
      s_raddr = 6'(k); d_addr = 6'(k); #0.1;
      chk(int'(s_val) == sv[k] && int'(s_act) == sa[k], $sformatf("src %0d", k));
      chk(int'(d_val) == dv[k] && int'(d_old) == dold[k], $sformatf("dst %0d", k));
      // controller write-back
      d_we = 1; d_wdata = 16'($urandom); d_wact = 1'($urandom);
      dv[k] = d_wdata; da[k] = d_wact;
      @(posedge clk); #0.1 d_we = 0;
    end
    for (int k = 0; k < B; k++) begin
      h_v_addr = 6'(k); #0.1;
      chk(int'(h_dval_rdata) == dv[k] && int'(h_dact_rdata) == da[k], $sformatf("readback %0d", k));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
