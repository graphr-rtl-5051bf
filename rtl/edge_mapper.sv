// edge_mapper: converts a COO edge of the loaded block into its place in
// the graph engines (the controller's "convert edges to matrix format").
//
// For edge (i, j) of the block whose first source is row_base and first
// destination is col_base (the paper's equations (4)-(5)):
//     i' = i - row_base,          j' = j - col_base
//     sg_row  = i' / C            subgraph row inside the block
//     row_in  = i' % C            wordline inside the crossbar
//     strip   = j' / STRIP_W      destination strip (subgraph column)
// and inside the strip, column j' % STRIP_W is owned by
//     ge  = (j' % STRIP_W) / GE_COLS,   grp = (... % GE_COLS) / C,
//     col = j' % C.
// STRIP_W = C*N*G/SLICES destination vertices: the paper's subgraph is C
// rows by C*N*G columns, divided here by the four crossbars that each
// 16-bit weight occupies. order = strip * (B/C) + sg_row is the position of
// the subgraph in the column-major streaming order. in_block is low for an
// edge outside the block. Purely combinational.
module edge_mapper
  import graphr_pkg::*;
#(
  parameter int C = 8,
  parameter int N = 32,
  parameter int G = 64,
  parameter int B = 8192,
  localparam int GE_COLS = C * N / SLICES,
  localparam int STRIP_W = GE_COLS * G,
  localparam int NSTRIP  = B / STRIP_W,
  localparam int ROWS    = B / C,
  localparam int RW      = (ROWS > 1)   ? $clog2(ROWS)   : 1,
  localparam int SW      = (NSTRIP > 1) ? $clog2(NSTRIP) : 1,
  localparam int GEW     = (G > 1)      ? $clog2(G)      : 1,
  localparam int GRW     = (N / SLICES > 1) ? $clog2(N / SLICES) : 1,
  localparam int OW      = RW + SW
) (
  input  logic [VID_W-1:0]     src,
  input  logic [VID_W-1:0]     dst,
  input  logic [VID_W-1:0]     row_base,
  input  logic [VID_W-1:0]     col_base,
  output logic                 in_block,
  output logic [RW-1:0]        sg_row,
  output logic [$clog2(C)-1:0] row_in,
  output logic [SW-1:0]        strip,
  output logic [GEW-1:0]       ge,
  output logic [GRW-1:0]       grp,
  output logic [$clog2(C)-1:0] col,
  output logic [OW-1:0]        order
);

  logic [VID_W-1:0] ip, jp, js;

  always_comb begin
    ip       = src - row_base;
    jp       = dst - col_base;
    in_block = (src >= row_base) && (dst >= col_base)
            && (ip < VID_W'(B)) && (jp < VID_W'(B));
    sg_row   = RW'(ip / VID_W'(C));
    row_in   = $clog2(C)'(ip % VID_W'(C));
    strip    = SW'(jp / VID_W'(STRIP_W));
    js       = jp % VID_W'(STRIP_W);
    ge       = GEW'(js / VID_W'(GE_COLS));
    grp      = GRW'((js % VID_W'(GE_COLS)) / VID_W'(C));
    col      = $clog2(C)'(jp % VID_W'(C));
    order    = OW'(strip) * OW'(ROWS) + OW'(sg_row);
  end

endmodule
