// tb_reg_i: self-checking test of the input register (RegI).
module tb_reg_i;
  timeunit 1ns; timeprecision 1ps;
  localparam int C = 8;
  logic clk = 0, rst_n = 0, we = 0, wact = 0;
  logic [2:0] waddr = '0;
  logic [15:0] wdata = '0;
  logic [C-1:0][15:0] val, ev;
  logic [C-1:0] act, ea;
  int checks = 0, failures = 0;

  reg_i #(.C(C), .W(16)) dut (.*);
  always #1 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ev = '0; ea = '0;
    #3 rst_n = 1;
    @(posedge clk); #0.1;
    checks++; if (val != '0 || act != '0) begin failures++; $display("FAIL reset"); end
    for (int it = 0; it < 100; it++) begin
      we = $urandom_range(1); waddr = 3'($urandom); wdata = 16'($urandom); wact = 1'($urandom);
      if (we) begin ev[waddr] = wdata; ea[waddr] = wact; end
      @(posedge clk); #0.1;
      checks++;
      if (val != ev || act != ea) begin failures++; $display("FAIL it %0d", it); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
