// tb_adc: self-checking test of the shared ADC model.
// One sweep must deliver every channel exactly once, in channel order, one
// per cycle, the whole sweep within ADC_CH + 2 cycles of start (64 channels
// = one 64 ns GE cycle at 1 GHz); values above full scale must saturate.
module tb_adc;
  timeunit 1ns; timeprecision 1ps;
  localparam int CH = 64, IN_W = 25, BITS = 20;
  logic clk = 0, rst_n = 0, start = 0;
  logic [CH-1:0][IN_W-1:0] ain;
  logic busy, dout_valid;
  logic [$clog2(CH)-1:0] dout_ch;
  logic [BITS-1:0] dout;
  int checks = 0, failures = 0;

  adc #(.ADC_CH(CH), .IN_W(IN_W), .ADC_BITS(BITS)) dut (
    .clk, .rst_n, .start, .ain, .busy, .dout_valid, .dout_ch, .dout);
  always #1 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #3 rst_n = 1;
    for (int sweep = 0; sweep < 3; sweep++) begin
      int n, last;
      longint exp;
      n = 0; last = -1;
      for (int c = 0; c < CH; c++) ain[c] = (c % 5 == 0) ? IN_W'($urandom) : IN_W'($urandom_range(1 << BITS) - 1);
      @(posedge clk); #0.1 start = 1;
      @(posedge clk); #0.1 start = 0;
      for (int k = 0; k < CH + 2; k++) begin
        if (dout_valid) begin
          exp = longint'(ain[dout_ch]);
          if (exp > (1 << BITS) - 1) exp = (1 << BITS) - 1;
          checks++;
          if (int'(dout_ch) != last + 1 || longint'(dout) != exp) begin
            failures++;
            $display("FAIL ch %0d got %0d exp %0d", dout_ch, dout, exp);
          end
          last = dout_ch; n++;
        end
        @(posedge clk); #0.1;
      end
      checks++;
      if (n != CH || busy || dout_valid) begin
        failures++; $display("FAIL sweep converted %0d channels", n);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
