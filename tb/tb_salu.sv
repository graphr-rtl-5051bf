// tb_salu: self-checking test of the sALU.
// Uses the paper's add and min examples (new 3,2,4,5 added to old 1,7,2,3
// gives 4,9,6,8; min of 2,3,9,4 and 7,5,6,4 gives 2,3,6,4) and random
// operands for add (saturating), min (with update flag) and bypass.
module tb_salu;
  timeunit 1ns; timeprecision 1ps;
  import graphr_pkg::*;
  salu_op_e op;
  logic [15:0] a, b, y;
  logic updated;
  int checks = 0, failures = 0;

  salu #(.W(16)) dut (.*);

  task automatic chk(salu_op_e o, int av, int bv, int ey, bit eu);
    op = o; a = av[15:0]; b = bv[15:0];
    #1;
    checks++;
    if (int'(y) != ey || updated != eu) begin
      failures++;
      $display("FAIL op %0d a %0d b %0d: y %0d upd %0d exp %0d %0d", o, av, bv, y, updated, ey, eu);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_add [4] = '{3,2,4,5};
    int o_add [4] = '{1,7,2,3};
    int r_add [4] = '{4,9,6,8};
    int n_min [4] = '{2,3,9,4};
    int o_min [4] = '{7,5,6,4};
    int r_min [4] = '{2,3,6,4};
    for (int i = 0; i < 4; i++) chk(OP_ADD, n_add[i], o_add[i], r_add[i], 0);
    for (int i = 0; i < 4; i++) chk(OP_MIN, n_min[i], o_min[i], r_min[i], n_min[i] < o_min[i]);
    for (int i = 0; i < 300; i++) begin
      int av = $urandom_range(65535), bv = $urandom_range(65535);
      int s = av + bv;
      chk(OP_ADD, av, bv, (s > 65535) ? 65535 : s, 0);
      chk(OP_MIN, av, bv, (av < bv) ? av : bv, av < bv);
      chk(OP_BYPASS, av, bv, av, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
