// tb_crossbar: self-checking test of the crossbar model.
// Checks the first time slot of the shortest-path example (one source row
// selected, its distance on the extra row, empty cells at the maximum
// level) and then random cell contents and wordline levels against a
// reference sum kept by the testbench.
module tb_crossbar;
  timeunit 1ns; timeprecision 1ps;
  localparam int C = 4, CELL_W = 4, IN_W = 17;
  localparam int OUT_W = IN_W + CELL_W + $clog2(C + 1);
  logic clk = 0;
  logic wr_en = 0, fill_en = 0;
  logic [$clog2(C+1)-1:0] wr_row;
  logic [$clog2(C)-1:0] wr_col;
  logic [CELL_W-1:0] wr_data, fill_body, fill_extra;
  logic [C:0][IN_W-1:0] wl;
  logic [C-1:0][OUT_W-1:0] bl;
  int checks = 0, failures = 0;
  int ref_cell [C+1][C];

  crossbar #(.C(C), .CELL_W(CELL_W), .IN_W(IN_W)) dut (.*);
  always #1 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(int r, int c, int v);
    wr_en = 1; wr_row = r[$clog2(C+1)-1:0]; wr_col = c[$clog2(C)-1:0];
    wr_data = v[CELL_W-1:0];
    @(posedge clk); #0.1 wr_en = 0;
    ref_cell[r][c] = v;
  endtask

  task automatic check_bl(string what);
    longint exp;
    #0.1;
    for (int c = 0; c < C; c++) begin
      exp = 0;
      for (int r = 0; r <= C; r++) exp += longint'(wl[r]) * ref_cell[r][c];
      checks++;
      if (longint'(bl[c]) != exp) begin
        failures++;
        $display("FAIL %s col %0d: got %0d exp %0d", what, c, bl[c], exp);
      end
    end
  endtask

  initial begin
    int w [4][4] = '{'{15,1,5,15},'{15,15,3,1},'{15,15,15,15},'{15,15,1,15}};
    // fill: body at the maximum level, extra row 1
    fill_en = 1; fill_body = 15; fill_extra = 1;
    @(posedge clk); #0.1 fill_en = 0;
    for (int r = 0; r <= C; r++) for (int c = 0; c < C; c++) ref_cell[r][c] = (r == C) ? 1 : 15;
    for (int r = 0; r < 4; r++) for (int c = 0; c < 4; c++) if (w[r][c] != 15) wr(r, c, w[r][c]);
    // time slot 1: select row 0, dist(i0) = 4 on the extra row
    wl = '0; wl[0] = 1; wl[C] = 4;
    #0.1;
    checks++;
    if (bl[1] != 5 || bl[2] != 9 || bl[0] != 19 || bl[3] != 19) begin
      failures++; $display("FAIL example: %0d %0d %0d %0d", bl[0], bl[1], bl[2], bl[3]);
    end
    check_bl("example");
    // random contents
    for (int it = 0; it < 40; it++) begin
      wr($urandom_range(C), $urandom_range(C-1), $urandom_range(15));
      for (int r = 0; r <= C; r++) wl[r] = IN_W'($urandom);
      check_bl("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
