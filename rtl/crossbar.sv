// crossbar: behavioural model of one ReRAM crossbar used as an in-situ
// matrix-vector multiplier.
//
// This is a behavioural model of an analog macro. The array has C+1 rows
// (wordlines) and C columns (bitlines) of CELL_W-bit multi-level cells. Every
// bitline carries the sum over all rows of wordline level times cell level,
// which is what the bitline current summation of a real crossbar computes.
// The model is exact: no noise, no IR drop, no nonlinearity.
//
// Rows 0..C-1 hold one slice of a C x C subgraph; row C is the extra row the
// paper adds for the bias / "add dist(u)" term. Cells are written by the
// driver only (wr_en for one cell, fill_en for the whole array with one level
// for the body rows and another for the extra row). Cells are not reset
// because ReRAM is non-volatile; the controller fills an array before use.
//
// Timing: writes take effect at the clock edge on which the driver commits
// them (the driver models the write latency). Bitline outputs are
// combinational in wl and the stored cells.
module crossbar #(
  parameter int C      = 8,
  parameter int CELL_W = 4,
  parameter int IN_W   = 17,
  parameter int OUT_W  = IN_W + CELL_W + $clog2(C + 1)
) (
  input  logic                       clk,
  input  logic                       wr_en,
  input  logic [$clog2(C+1)-1:0]     wr_row,
  input  logic [$clog2(C)-1:0]       wr_col,
  input  logic [CELL_W-1:0]          wr_data,
  input  logic                       fill_en,
  input  logic [CELL_W-1:0]          fill_body,
  input  logic [CELL_W-1:0]          fill_extra,
  input  logic [C:0][IN_W-1:0]       wl,
  output logic [C-1:0][OUT_W-1:0]    bl
);

  logic [C:0][C-1:0][CELL_W-1:0] cells;

  always_ff @(posedge clk) begin
    if (fill_en) begin
      for (int r = 0; r <= C; r++)
        for (int c = 0; c < C; c++)
          cells[r][c] <= (r == C) ? fill_extra : fill_body;
    end else if (wr_en) begin
      cells[wr_row][wr_col] <= wr_data;
    end
  end

  always_comb begin
    for (int c = 0; c < C; c++) begin
      bl[c] = '0;
      for (int r = 0; r <= C; r++)
        bl[c] = bl[c] + OUT_W'(wl[r]) * OUT_W'(cells[r][c]);
    end
  end

endmodule
