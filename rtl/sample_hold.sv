// sample_hold: behavioural model of the sample-and-hold stage of a crossbar.
//
// This is a behavioural model of an analog circuit. On a clock edge with
// sample high it captures the C bitline values; it holds them until the next
// sample so that the shared ADC can convert them one at a time while the
// crossbar is already free. The held value is exact (no droop).
module sample_hold #(
  parameter int C = 8,
  parameter int W = 24
) (
  input  logic              clk,
  input  logic              sample,
  input  logic [C-1:0][W-1:0] d,
  output logic [C-1:0][W-1:0] q
);

  always_ff @(posedge clk)
    if (sample) q <= d;

endmodule
