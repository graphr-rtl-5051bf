// shift_add: shift-and-add unit (S/A).
//
// A 16-bit weight is split into four 4-bit slices held in four crossbars;
// for one output column the four slice results D0..D3 arrive from the ADC
// one per cycle, slice 0 first. The unit accumulates
//     D3 << 12 + D2 << 8 + D1 << 4 + D0
// (the paper's formula), then shifts the sum right by `shift` (16 to rescale
// a Q0.16 x Q0.16 product in MAC mode, 0 in add-op mode) and saturates it to
// VAL_W bits. The slice order and the rescale/saturation are this design's
// choices. A tag travels with the data so the result can be written to the
// right RegO entry.
//
// Timing: out_valid is registered and rises the cycle after the last slice
// (in_slice == SLICES-1) is presented.
module shift_add #(
  parameter int IN_W   = 24,
  parameter int CELL_W = 4,
  parameter int SLICES = 4,
  parameter int VAL_W  = 16,
  parameter int TAG_W  = 6
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  logic [$clog2(SLICES)-1:0]  in_slice,
  input  logic [IN_W-1:0]            in_data,
  input  logic [TAG_W-1:0]           in_tag,
  input  logic [4:0]                 shift,
  output logic                       out_valid,
  output logic [VAL_W-1:0]           out_data,
  output logic [TAG_W-1:0]           out_tag
);

  localparam int ACC_W = IN_W + CELL_W * (SLICES - 1) + 1;

  logic [ACC_W-1:0] acc, acc_next, scaled;

  always_comb begin
    acc_next = ((in_slice == '0) ? '0 : acc)
             + (ACC_W'(in_data) << (CELL_W * int'(in_slice)));
    scaled   = acc_next >> shift;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
      out_tag   <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        acc <= acc_next;
        if (in_slice == $clog2(SLICES)'(SLICES - 1)) begin
          out_valid <= 1'b1;
          out_tag   <= in_tag;
          out_data  <= (scaled > ACC_W'({VAL_W{1'b1}})) ? '1 : VAL_W'(scaled);
        end
      end
    end
  end

endmodule
