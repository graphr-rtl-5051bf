// adc: behavioural model of the analog-to-digital converter shared by the
// bitlines of several crossbars.
//
// This is a behavioural model of a mixed-signal circuit. A pulse on start
// begins a sweep over the ADC_CH held inputs: channel k is converted in the
// k-th cycle after start and appears on dout with dout_valid and dout_ch one
// cycle later, so a sweep takes ADC_CH cycles. With the assumed 1 GHz clock
// this is the paper's 1.0 GSps ADC converting 64 bitlines (eight 8-bitline
// crossbars) in one 64 ns GE cycle. Inputs above the ADC_BITS full scale
// saturate; the default resolution is this design's choice and is wide
// enough that nothing saturates in normal use. When the input is no wider
// than ADC_BITS the saturation compare is constant (lint reports it); the
// compare is kept so that narrower converters can be modelled.
module adc #(
  parameter int ADC_CH   = 64,
  parameter int IN_W     = 24,
  parameter int ADC_BITS = 24
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic [ADC_CH-1:0][IN_W-1:0]   ain,
  output logic                          busy,
  output logic                          dout_valid,
  output logic [$clog2(ADC_CH)-1:0]     dout_ch,
  output logic [ADC_BITS-1:0]           dout
);

  localparam int CHW = $clog2(ADC_CH);
  localparam logic [IN_W-1:0] FULL = (IN_W > ADC_BITS) ? IN_W'({ADC_BITS{1'b1}}) : '1;

  logic [CHW-1:0] ch;
  logic [IN_W-1:0] sel;

  assign sel = ain[ch];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy       <= 1'b0;
      ch         <= '0;
      dout_valid <= 1'b0;
      dout_ch    <= '0;
      dout       <= '0;
    end else begin
      dout_valid <= busy;
      if (busy) begin
        dout_ch <= ch;
        dout    <= ADC_BITS'((sel > FULL) ? FULL : sel);
        ch      <= ch + 1'b1;
        if (ch == CHW'(ADC_CH - 1)) busy <= 1'b0;
      end else if (start) begin
        busy <= 1'b1;
        ch   <= '0;
      end
    end
  end

endmodule
