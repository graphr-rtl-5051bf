// tb_sample_hold: self-checking test of the sample-and-hold model.
// The held value must follow d only on sample cycles and stay put otherwise.
module tb_sample_hold;
  timeunit 1ns; timeprecision 1ps;
  localparam int C = 8, W = 25;
  logic clk = 0, sample = 0;
  logic [C-1:0][W-1:0] d, q, exp_q;
  int checks = 0, failures = 0;

  sample_hold #(.C(C), .W(W)) dut (.*);
  always #1 clk = ~clk;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < C; c++) d[c] = W'($urandom);
    sample = 1; exp_q = d;
    @(posedge clk); #0.1;
    for (int it = 0; it < 100; it++) begin
      for (int c = 0; c < C; c++) d[c] = W'($urandom);
      sample = ($urandom_range(2) == 0);
      if (sample) exp_q = d;
      @(posedge clk); #0.1;
      checks++;
      if (q != exp_q) begin failures++; $display("FAIL it %0d", it); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
