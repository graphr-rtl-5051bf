// tb_ge: self-checking test of one graph engine, on the paper's two 4x4
// examples (C = 4, four crossbars = one 16-bit column group, one ADC).
//
// PageRank (parallel MAC): weights r*M of the example, e0 = 1/20 on the
// extra row, PR0 = 1/4 for all sources. One GE cycle must give PR1 =
// 9/60, 13/60, 25/60, 13/60 (checked exactly against the Q0.16 arithmetic
// and to 1e-3 against the fractions).
//
// SSSP (parallel add-op): W = [M 1 5 M; M M 3 1; M M M M; M M 1 M],
// source distances 4,3,1,2, destination distances 7,6,M,M. Four GE cycles
// (t = 1..4) must give 7,5,9,M after the first and 7,5,3,4 at the end, with
// j1, j2, j3 marked active. Each GE cycle must take ADC_CH + 6 clocks.
module tb_ge;
  timeunit 1ns; timeprecision 1ps;
  import graphr_pkg::*;
  localparam int C = 4, N = 4, ADC_CH = 16, LAT = 51;
  localparam int M = 65535;
  logic clk = 0, rst_n = 0;
  logic prog_we = 0, fill_req = 0, regi_we = 0, regi_act = 0, rego_ld_we = 0, start = 0;
  logic [0:0] prog_grp = '0;
  logic [2:0] prog_row = '0;
  logic [1:0] prog_col = '0, regi_addr = '0, sel_row = '0;
  logic [15:0] prog_w = '0, fill_body_w = '0, fill_extra_w = '0, regi_data = '0, rego_ld_data = '0, rego_rd_data;
  logic [0:0] grp_busy;
  logic [C-1:0] regi_act_q;
  logic [3:0] rego_ld_addr = '0, rego_rd_addr = '0;
  logic rego_rd_act, busy, done;
  mode_e mode = MODE_MAC;
  logic [IN_W-1:0] bias_in = '0;
  salu_op_e op = OP_ADD;
  logic [4:0] shift = '0;
  int checks = 0, failures = 0;

  ge #(.C(C), .N(N), .ADC_CH(ADC_CH), .WRITE_LAT(LAT)) dut (.*);
  always #0.5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic wait_idle();
    @(posedge clk); #0.1;
    while (grp_busy != '0) begin @(posedge clk); #0.1; end
  endtask

  task automatic fill(int body, int extra);
    fill_req = 1; fill_body_w = 16'(body); fill_extra_w = 16'(extra);
    @(posedge clk); #0.1 fill_req = 0;
    wait_idle();
  endtask

  task automatic prog(int r, int c, int w);
    prog_we = 1; prog_row = 3'(r); prog_col = 2'(c); prog_w = 16'(w);
    @(posedge clk); #0.1 prog_we = 0;
    wait_idle();
  endtask

  task automatic set_regi(int i, int v, bit a);
    regi_we = 1; regi_addr = 2'(i); regi_data = 16'(v); regi_act = a;
    @(posedge clk); #0.1 regi_we = 0;
  endtask

  task automatic set_rego(int i, int v);
    rego_ld_we = 1; rego_ld_addr = 4'(i); rego_ld_data = 16'(v);
    @(posedge clk); #0.1 rego_ld_we = 0;
  endtask

  task automatic run_cycle();
    int n = 0;
    start = 1;
    @(posedge clk); #0.1 start = 0;
    n = 1;
    while (!done) begin @(posedge clk); #0.1; n++; end
    chk(n == ADC_CH + 6, $sformatf("GE cycle took %0d clocks", n));
  endtask

  task automatic rd(int i, output int v, output bit a);
    rego_rd_addr = 4'(i);
    #0.01;
    v = int'(rego_rd_data);
    a = rego_rd_act;
  endtask

  initial begin
    // ---------------------------------------------------------- PageRank
    int wq [4][4];
    real wr_ [4][4] = '{'{0, 4.0/15, 4.0/15, 4.0/15}, '{2.0/5, 0, 0, 2.0/5},
                        '{0, 0, 4.0/5, 0}, '{0, 2.0/5, 2.0/5, 0}};
    real pr1 [4] = '{9.0/60, 13.0/60, 25.0/60, 13.0/60};
    int e0q, xq;
    int sw [4][4] = '{'{M,1,5,M}, '{M,M,3,1}, '{M,M,M,M}, '{M,M,1,M}};
    int dsrc [4] = '{4,3,1,2};
    int ddst [4] = '{7,6,M,M};
    int after1 [4] = '{7,5,9,M};
    int final_ [4] = '{7,5,3,4};
    #2.2 rst_n = 1;
    e0q = int'(65536.0 / 20 + 0.5);
    xq = 16384;
    fill(0, e0q);
    for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) begin
      wq[i][j] = int'(wr_[i][j] * 65536 + 0.5);
      if (wq[i][j] != 0) prog(i, j, wq[i][j]);
    end
    for (int i = 0; i < 4; i++) set_regi(i, xq, 1);
    for (int j = 0; j < 4; j++) set_rego(j, 0);
    mode = MODE_MAC; op = OP_ADD; shift = 5'd16; bias_in = IN_ONE_Q;
    run_cycle();
    for (int j = 0; j < 4; j++) begin
      longint s;
      int got; bit a;
      s = longint'(e0q) * 65536;
      rd(j, got, a);
      for (int i = 0; i < 4; i++) s += longint'(xq) * wq[i][j];
      chk(got == int'(s >> 16), $sformatf("PR j%0d got %0d exp %0d", j, got, s >> 16));
      chk((real'(got) / 65536.0 - pr1[j]) < 1e-3 && (pr1[j] - real'(got) / 65536.0) < 1e-3,
          $sformatf("PR j%0d = %f, paper %f", j, real'(got) / 65536.0, pr1[j]));
    end
    // -------------------------------------------------------------- SSSP
    fill(M, 1);
    for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++)
      if (sw[i][j] != M) prog(i, j, sw[i][j]);
    for (int i = 0; i < 4; i++) set_regi(i, dsrc[i], 1);
    for (int j = 0; j < 4; j++) set_rego(j, ddst[j]);
    chk(regi_act_q == 4'hF, "RegI active bits");
    mode = MODE_ADDOP; op = OP_MIN; shift = 5'd0; bias_in = '0;
    for (int t = 0; t < 4; t++) begin
      sel_row = 2'(t);
      run_cycle();
      if (t == 0)
        for (int j = 0; j < 4; j++) begin
          int v; bit a;
          rd(j, v, a);
          chk(v == after1[j], $sformatf("SSSP t=1 j%0d got %0d exp %0d", j, v, after1[j]));
        end
    end
    for (int j = 0; j < 4; j++) begin
      int v; bit a;
      rd(j, v, a);
      chk(v == final_[j], $sformatf("SSSP j%0d got %0d exp %0d", j, v, final_[j]));
      chk(a == (j != 0), $sformatf("SSSP active j%0d = %0d", j, a));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
