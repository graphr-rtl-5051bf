// drv: crossbar driver.
//
// The driver has the two jobs the paper gives it: it programs edge data into
// its crossbar, and it applies the input vector to the wordlines.
//
// Programming: a request (wr_req for one cell, fill_req for the whole array)
// is accepted when busy is low. The driver then stays busy for WRITE_LAT
// cycles, the ReRAM write latency, and commits the write to the crossbar on
// the last of them (cb_wr_en / cb_fill_en pulse for one cycle). Requests made
// while busy are ignored; an assertion flags them. The 51-cycle default is
// the paper's 50.88 ns write latency at an assumed 1 GHz clock; the
// single-latency whole-array fill is this design's choice.
//
// Input: on in_load the driver latches in_vec and holds it on wl until the
// next load, standing in for the wordline DACs.
module drv #(
  parameter int C         = 8,
  parameter int CELL_W    = 4,
  parameter int IN_W      = 17,
  parameter int WRITE_LAT = 51
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // programming request
  input  logic                    wr_req,
  input  logic [$clog2(C+1)-1:0]  wr_row,
  input  logic [$clog2(C)-1:0]    wr_col,
  input  logic [CELL_W-1:0]       wr_data,
  input  logic                    fill_req,
  input  logic [CELL_W-1:0]       fill_body,
  input  logic [CELL_W-1:0]       fill_extra,
  output logic                    busy,
  // wordline input
  input  logic                    in_load,
  input  logic [C:0][IN_W-1:0]    in_vec,
  output logic [C:0][IN_W-1:0]    wl,
  // to the crossbar
  output logic                    cb_wr_en,
  output logic                    cb_fill_en,
  output logic [$clog2(C+1)-1:0]  cb_row,
  output logic [$clog2(C)-1:0]    cb_col,
  output logic [CELL_W-1:0]       cb_data,
  output logic [CELL_W-1:0]       cb_fill_body,
  output logic [CELL_W-1:0]       cb_fill_extra
);

  localparam int CW = $clog2(WRITE_LAT + 1);

  logic [CW-1:0] cnt;
  logic          is_fill;

  assign busy = (cnt != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt           <= '0;
      is_fill       <= 1'b0;
      cb_row        <= '0;
      cb_col        <= '0;
      cb_data       <= '0;
      cb_fill_body  <= '0;
      cb_fill_extra <= '0;
      wl            <= '0;
    end else begin
      if (!busy && (wr_req || fill_req)) begin
        cnt           <= CW'(WRITE_LAT);
        is_fill       <= fill_req;
        cb_row        <= wr_row;
        cb_col        <= wr_col;
        cb_data       <= wr_data;
        cb_fill_body  <= fill_body;
        cb_fill_extra <= fill_extra;
      end else if (busy) begin
        cnt <= cnt - 1'b1;
      end
      if (in_load) wl <= in_vec;
    end
  end

  // commit on the last busy cycle
  assign cb_wr_en   = (cnt == CW'(1)) && !is_fill;
  assign cb_fill_en = (cnt == CW'(1)) &&  is_fill;

  a_no_req_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> !(wr_req || fill_req))
    else $error("drv: programming request while busy");

endmodule
