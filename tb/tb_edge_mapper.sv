// tb_edge_mapper: self-checking test of the edge-to-crossbar address map.
//
// Configuration of the paper's preprocessing example: V = 64 vertices,
// blocks of B = 32, crossbar size C = 4, two engines. With four crossbars
// per 16-bit column group, N = 8 gives the example's 4 x 16 subgraph. For
// every edge (i, j) of the graph the global subgraph number
//     block_order * 16 + order + 1,
// with blocks taken column-major, must equal the number printed in the
// example's table: 1..8 down the first column of subgraphs, 9..16 down the
// second, 17..32 for the block below, and so on. The in-block flag, the
// row/column split and the engine/group/column fields are checked against
// the paper's equations (4)-(5) written out here.
module tb_edge_mapper;
  timeunit 1ns; timeprecision 1ps;
  localparam int C = 4, N = 8, G = 2, B = 32, V = 64;
  logic [31:0] src, dst, row_base, col_base;
  logic in_block;
  logic [2:0] sg_row;
  logic [1:0] row_in, col;
  logic [0:0] strip, ge;
  logic [0:0] grp;
  logic [3:0] order;
  int checks = 0, failures = 0;

  edge_mapper #(.C(C), .N(N), .G(G), .B(B)) dut (.*);

  // printed table of the example, rows of subgraphs (4 source rows each)
  // by columns of subgraphs (16 destinations each)
  function automatic int fig_number(int i, int j);
    int sr = i / 4, sc = j / 16;          // 16 x 4 grid of subgraphs
    int bi = sr / 8, bj = sc / 2;         // block coordinates
    return (bj * 2 + bi) * 16 + (sc % 2) * 8 + (sr % 8) + 1;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < V; i++)
      for (int j = 0; j < V; j += 3) begin
        int bi, bj, ip, jp, blk;
        bi = i / B; bj = j / B;
        src = i; dst = j; row_base = bi * B; col_base = bj * B;
        #1;
        ip = i - bi * B; jp = j - bj * B;
        blk = bi + (V / B) * bj;          // column-major block order
        checks++;
        if (!in_block || blk * 16 + int'(order) + 1 != fig_number(i, j)
            || int'(sg_row) != ip / C || int'(row_in) != ip % C
            || int'(strip) != jp / 16 || int'(ge) != (jp % 16) / 8
            || int'(grp) != (jp % 8) / 4 || int'(col) != jp % 4) begin
          failures++;
          $display("FAIL (%0d,%0d): order %0d fig %0d", i, j, order, fig_number(i, j));
        end
        // the same edge seen from a wrong block must be flagged
        col_base = ((bj + 1) % 2) * B;
        #1;
        checks++;
        if (in_block) begin failures++; $display("FAIL in_block (%0d,%0d)", i, j); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
