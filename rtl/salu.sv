// salu: simple ALU that reduces a freshly computed value into RegO.
//
// The operation is configured per algorithm, as in the paper: `add` for the
// parallel-MAC algorithms (PageRank, SpMV), `min` for the parallel add-op
// algorithms (SSSP, BFS). `updated` is high when min lowered the stored
// value; it feeds the destination's active indicator. `bypass` writes the
// new value unchanged. Add saturates at the 16-bit maximum (this design's
// choice). Purely combinational.
module salu
  import graphr_pkg::*;
#(
  parameter int W = 16
) (
  input  salu_op_e        op,
  input  logic [W-1:0]    a,        // new value from S/A
  input  logic [W-1:0]    b,        // old value from RegO
  output logic [W-1:0]    y,
  output logic            updated
);

  logic [W:0] sum;

  always_comb begin
    sum     = {1'b0, a} + {1'b0, b};
    updated = 1'b0;
    unique case (op)
      OP_ADD: y = sum[W] ? '1 : sum[W-1:0];
      OP_MIN: begin
        updated = (a < b);
        y       = (a < b) ? a : b;
      end
      default: y = a;
    endcase
  end

endmodule
