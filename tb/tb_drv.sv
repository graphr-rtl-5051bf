// tb_drv: self-checking test of the crossbar driver.
// Checks that a single-cell write and a fill each keep the driver busy for
// exactly WRITE_LAT cycles, that the crossbar write is committed once, on the
// last busy cycle, with the requested row, column and levels, and that the
// wordline vector is latched on in_load and held afterwards.
module tb_drv;
  timeunit 1ns; timeprecision 1ps;
  localparam int C = 8, CELL_W = 4, IN_W = 17, LAT = 7;
  logic clk = 0, rst_n = 0;
  logic wr_req = 0, fill_req = 0, in_load = 0;
  logic [$clog2(C+1)-1:0] wr_row = '0, cb_row;
  logic [$clog2(C)-1:0] wr_col = '0, cb_col;
  logic [CELL_W-1:0] wr_data = '0, fill_body = '0, fill_extra = '0, cb_data, cb_fill_body, cb_fill_extra;
  logic busy, cb_wr_en, cb_fill_en;
  logic [C:0][IN_W-1:0] in_vec = '0, wl;
  int checks = 0, failures = 0;

  drv #(.C(C), .CELL_W(CELL_W), .IN_W(IN_W), .WRITE_LAT(LAT)) dut (.*);
  always #1 clk = ~clk;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic one_write(bit fill);
    int nbusy = 0, ncommit = 0, commit_at = -1;
    int r = $urandom_range(C), c = $urandom_range(C-1), d = $urandom_range(15);
    int fb = $urandom_range(15), fe = $urandom_range(15);
    wr_row = r[$clog2(C+1)-1:0]; wr_col = c[$clog2(C)-1:0]; wr_data = d[3:0];
    fill_body = fb[3:0]; fill_extra = fe[3:0];
    if (fill) fill_req = 1; else wr_req = 1;
    @(posedge clk); #0.1 wr_req = 0; fill_req = 0;
    wr_row = '0; wr_col = '0; wr_data = '0;
    for (int k = 0; k < LAT + 5; k++) begin
      if (busy) nbusy++;
      if (cb_wr_en || cb_fill_en) begin
        ncommit++; commit_at = k;
        chk(cb_fill_en == fill && cb_wr_en == !fill, "commit kind");
        if (fill) chk(cb_fill_body == fb[3:0] && cb_fill_extra == fe[3:0], "fill levels");
        else chk(cb_row == r[$clog2(C+1)-1:0] && cb_col == c[$clog2(C)-1:0] && cb_data == d[3:0], "write address/data");
      end
      @(posedge clk); #0.1;
    end
    chk(nbusy == LAT, $sformatf("busy cycles %0d", nbusy));
    chk(ncommit == 1 && commit_at == LAT - 1, $sformatf("commit count %0d at %0d", ncommit, commit_at));
  endtask

  initial begin
    #3 rst_n = 1;
    @(posedge clk); #0.1;
    for (int i = 0; i < 6; i++) one_write(i % 2 == 1);
    for (int i = 0; i < 10; i++) begin
      logic [C:0][IN_W-1:0] v;
      for (int r = 0; r <= C; r++) v[r] = IN_W'($urandom);
      in_vec = v; in_load = 1;
      @(posedge clk); #0.1 in_load = 0; in_vec = '0;
      chk(wl == v, "wordlines latched");
      @(posedge clk); #0.1;
      chk(wl == v, "wordlines held");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
