// tb_reg_o: self-checking test of the output register (RegO).
// Random controller loads and lane write-backs against a reference model:
// a load writes the value and clears the active bit; a lane write replaces
// the value and ORs in the active flag (set once, stays set).
module tb_reg_o;
  timeunit 1ns; timeprecision 1ps;
  localparam int DEPTH = 64, W = 16, LANES = 4, AW = 6;
  logic clk = 0, rst_n = 0;
  logic ld_we = 0;
  logic [AW-1:0] ld_addr = '0, rd_addr = '0;
  logic [W-1:0] ld_data = '0, rd_data;
  logic rd_act;
  logic [LANES-1:0][AW-1:0] lane_addr = '0;
  logic [LANES-1:0][W-1:0] lane_rdata, lane_wdata = '0;
  logic [LANES-1:0] lane_we = '0, lane_wact = '0;
  int ev [DEPTH];
  bit ea [DEPTH];
  int checks = 0, failures = 0;

  reg_o #(.DEPTH(DEPTH), .W(W), .LANES(LANES)) dut (.*);
  always #1 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #3 rst_n = 1;
    @(posedge clk); #0.1;
    for (int i = 0; i < DEPTH; i++) begin
      ld_we = 1; ld_addr = AW'(i); ld_data = W'($urandom); ev[i] = ld_data; ea[i] = 0;
      @(posedge clk); #0.1;
    end
    ld_we = 0;
    for (int it = 0; it < 300; it++) begin
      // lanes own entries l*16 .. l*16+15
      for (int l = 0; l < LANES; l++) begin
        lane_addr[l] = AW'(l * 16 + $urandom_range(15));
        lane_we[l] = 1'($urandom); lane_wdata[l] = W'($urandom); lane_wact[l] = 1'($urandom);
      end
      #0.1;
      for (int l = 0; l < LANES; l++) begin
        checks++;
        if (int'(lane_rdata[l]) != ev[lane_addr[l]]) begin failures++; $display("FAIL lane read"); end
      end
      ld_we = ($urandom_range(4) == 0); ld_addr = AW'($urandom); ld_data = W'($urandom);
      for (int l = 0; l < LANES; l++)
        if (lane_we[l]) begin ev[lane_addr[l]] = lane_wdata[l]; ea[lane_addr[l]] |= lane_wact[l]; end
      if (ld_we) begin ev[ld_addr] = ld_data; ea[ld_addr] = 0; end
      @(posedge clk); #0.1;
      ld_we = 0; lane_we = '0;
      rd_addr = AW'($urandom);
      #0.1;
      checks++;
      if (int'(rd_data) != ev[rd_addr] || rd_act != ea[rd_addr]) begin
        failures++; $display("FAIL read %0d: %0d/%0d exp %0d/%0d", rd_addr, rd_data, rd_act, ev[rd_addr], ea[rd_addr]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
