// tb_shift_add: self-checking test of the shift-and-add unit.
// Four slice results D0..D3 are fed in slice order; the output must be
// (D3<<12 + D2<<8 + D1<<4 + D0) >> shift, saturated to 16 bits, one cycle
// after the last slice, with the tag of the last slice.
module tb_shift_add;
  timeunit 1ns; timeprecision 1ps;
  localparam int IN_W = 25;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [1:0] in_slice = '0;
  logic [IN_W-1:0] in_data = '0;
  logic [5:0] in_tag = '0, out_tag;
  logic [4:0] shift = '0;
  logic out_valid;
  logic [15:0] out_data;
  int checks = 0, failures = 0;

  shift_add #(.IN_W(IN_W), .CELL_W(4), .SLICES(4), .VAL_W(16), .TAG_W(6)) dut (.*);
  always #1 clk = ~clk;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #3 rst_n = 1;
    @(posedge clk); #0.1;
    for (int it = 0; it < 200; it++) begin
      longint d [4];
      longint exp;
      int tag;
      tag = $urandom_range(63);
      shift = (it % 2) ? 5'd16 : 5'd0;
      exp = 0;
      for (int k = 0; k < 4; k++) begin
        d[k] = (it < 3) ? 15 * k : (it % 3 == 0) ? longint'($urandom_range(255)) : longint'($urandom) & ((1 << IN_W) - 1);
        exp += d[k] << (4 * k);
      end
      exp = exp >> shift;
      if (exp > 65535) exp = 65535;
      for (int k = 0; k < 4; k++) begin
        in_valid = 1; in_slice = k[1:0]; in_data = IN_W'(d[k]); in_tag = tag[5:0];
        @(posedge clk); #0.1;
        checks++;
        if (out_valid != (k == 3)) begin failures++; $display("FAIL valid timing it %0d k %0d", it, k); end
      end
      in_valid = 0;
      checks++;
      if (longint'(out_data) != exp || int'(out_tag) != tag) begin
        failures++; $display("FAIL it %0d got %0d exp %0d", it, out_data, exp);
      end
      if (it % 4 == 0) begin @(posedge clk); #0.1; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
