// reg_i: input register (RegI) of a graph engine.
//
// Holds the property value and the active indicator of the C source vertices
// of the subgraph row being processed, one entry per crossbar wordline. The
// controller writes one entry per cycle; all entries are visible in parallel
// to build the wordline inputs. Reset clears the entries. The size of C
// entries is this design's choice.
module reg_i #(
  parameter int C = 8,
  parameter int W = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  we,
  input  logic [$clog2(C)-1:0]  waddr,
  input  logic [W-1:0]          wdata,
  input  logic                  wact,
  output logic [C-1:0][W-1:0]   val,
  output logic [C-1:0]          act
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      val <= '0;
      act <= '0;
    end else if (we) begin
      val[waddr] <= wdata;
      act[waddr] <= wact;
    end
  end

endmodule
