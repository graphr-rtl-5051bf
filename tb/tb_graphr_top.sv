// tb_graphr_top: end-to-end test of a GraphR node at reduced size.
//
// The testbench plays the host: it holds a random weighted directed graph
// of V = 2*B vertices, cuts it into 2 x 2 blocks, sorts every block's edges
// into the streaming order (subgraph strip, subgraph row, then column-major
// inside the subgraph, as the preprocessing step prescribes), and for every
// iteration loads the blocks one after the other, column-major, through the
// host bus, starts the node and reads the destination chunk back.
//
//   SSSP    (parallel add-op, sALU min) iterated until no vertex is active;
//           the distances must equal a Bellman-Ford reference exactly and the
//           node's active count must reach zero in the same iteration.
//   BFS     the same with unit weights.
//   PageRank (parallel MAC, sALU add, bias row e0 on the first block of each
//           column), three iterations; values must equal a reference that
//           uses the same Q0.16 arithmetic, and the not-converged count of
//           the last block of each column must match.
//   SpMV    one MAC pass without bias.
//
// The mechanisms of the design are counted and each must occur: driver-busy
// stalls, skipped empty subgraphs, skipped inactive source rows, several
// strips per block, the bias subgraph forced when empty, MAC <-> add-op
// mode switches, saturation to M (an unreachable vertex), convergence.
// The GE-cycle count reported by the node is checked against the subgraph
// count: one GE cycle per subgraph in MAC mode, one per active source row
// in add-op mode.
module tb_graphr_top;
  timeunit 1ns; timeprecision 1ps;
  import graphr_pkg::*;
  localparam int C = 4, N = 8, G = 2, B = 32, EDGE_DEPTH = 512, ADC_CH = 16;
  localparam int V = 2 * B, NB = V / B;
  localparam int STRIP_W = C * N / SLICES * G, ROWS = B / C;
  localparam int M = 65535;
  localparam int NEDGE = 180;

  logic clk = 0, rst_n = 0, hwe = 0, done;
  logic [31:0] haddr = '0, hrdata;
  logic [EDGE_W-1:0] hwdata = '0;

  graphr_top #(.C(C), .N(N), .G(G), .B(B), .EDGE_DEPTH(EDGE_DEPTH), .ADC_CH(ADC_CH)) dut (.*);
  always #0.5 clk = ~clk;

  int checks = 0, failures = 0;
  int es [NEDGE], ed [NEDGE], ew [NEDGE];
  int n_stall = 0, n_skip = 0, n_inact = 0, n_strips = 0, n_bias_forced = 0;
  int n_mode_switch = 0, n_saturate = 0, n_converged = 0;
  mode_e last_mode = MODE_MAC;
  bit mode_seen = 0;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic hw(int region, int idx, logic [EDGE_W-1:0] d);
    hwe = 1; haddr = {4'(region), 28'(idx)}; hwdata = d;
    @(posedge clk); #0.1 hwe = 0;
  endtask

  task automatic hr(int region, int idx, output int v);
    haddr = {4'(region), 28'(idx)}; #0.1;
    v = int'(hrdata);
  endtask

  // streaming-order key of an edge inside its block
  function automatic longint key(int i, int j);
    int ip = i % B, jp = j % B;
    int strip = jp / STRIP_W, row = ip / C;
    return (longint'(strip) * ROWS + row) * (C * STRIP_W) + (jp % STRIP_W) * C + ip % C;
  endfunction

  // run one block; vals/acts are whole-graph arrays; acc is the running
  // destination value, dold the previous-iteration value
  task automatic run_block(int bi, int bj, mode_e mode, ref int wts [NEDGE], input bit bias, input int e0,
                           input int thresh, ref int src_v [V], ref bit src_a [V],
                           ref int acc [V], ref bit act_out [V], ref int dold [V],
                           output int conv, output int ge_cyc, output int sgp, output int inact);
    int idx [$];
    int n = 0, v, st, nact;
    for (int k = 0; k < NEDGE; k++)
      if (es[k] / B == bi && ed[k] / B == bj) idx.push_back(k);
    idx.sort(k) with (key(es[k], ed[k]));
    foreach (idx[q]) begin
      int k = idx[q];
      hw(0, q, {32'(es[k]), 32'(ed[k]), 16'(wts[k])});
      n++;
    end
    for (int k = 0; k < B; k++) begin
      hw(1, k, {src_a[bi*B+k], 16'(src_v[bi*B+k])});
      hw(2, k, 80'(acc[bj*B+k]));
      hw(3, k, 80'(dold[bj*B+k]));
    end
    hw(4, 0, 80'(mode)); hw(4, 1, 80'((mode == MODE_MAC) ? OP_ADD : OP_MIN));
    hw(4, 2, 80'(n)); hw(4, 3, 80'(bi * B)); hw(4, 4, 80'(bj * B));
    hw(4, 5, 80'(bias)); hw(4, 6, 80'(e0)); hw(4, 7, 80'(thresh));
    hw(4, 8, 80'(1));
    if (mode_seen && mode != last_mode) n_mode_switch++;
    mode_seen = 1; last_mode = mode;
    // bias subgraph forced although row 0 of a strip holds no edge
    if (mode == MODE_MAC && bias)
      for (int s = 0; s < B / STRIP_W; s++) begin
        bit empty;
        empty = 1;
        foreach (idx[q]) if ((es[idx[q]] % B) / C == 0 && (ed[idx[q]] % B) / STRIP_W == s) empty = 0;
        if (empty) n_bias_forced++;
      end
    do begin @(posedge clk); #0.1; hr(5, 0, st); end while (st[1] == 1'b0);
    nact = 0;
    for (int k = 0; k < B; k++) begin
      hr(2, k, v);
      acc[bj*B+k] = v & 16'hFFFF;
      act_out[bj*B+k] |= v[16];
      nact += v[16];
    end
    hr(5, 1, conv);
    if (mode == MODE_ADDOP) chk(conv == nact, $sformatf("active count %0d vs %0d", conv, nact)); hr(5, 2, sgp); hr(5, 4, v); n_stall += v;
    hr(5, 3, v); n_skip += v; hr(5, 5, inact); n_inact += inact;
    hr(5, 6, ge_cyc);
    n_strips += B / STRIP_W;
    if (mode == MODE_MAC) chk(ge_cyc == sgp, $sformatf("GE cycles %0d vs subgraphs %0d", ge_cyc, sgp));
    else chk(ge_cyc == sgp * C - inact, $sformatf("GE cycles %0d vs %0d*C-%0d", ge_cyc, sgp, inact));
  endtask

  // -------------------------------------------------------------- SSSP/BFS
  task automatic sssp(int wsel, string name);
    int dv [V], ref_d [V], acc [V], dold [V], wts [NEDGE];
    bit act [V], act_new [V];
    int iter = 0, conv_sum, c, gc, sp, ia, any;
    for (int k = 0; k < NEDGE; k++) wts[k] = (wsel == 0) ? ew[k] : 1;
    for (int v = 0; v < V; v++) begin dv[v] = M; act[v] = 0; end
    dv[0] = 0; act[0] = 1;
    // reference: Bellman-Ford, saturating at M
    ref_d = dv;
    for (int r = 0, ch = 1; r < V && ch; r++) begin
      ch = 0;
      for (int k = 0; k < NEDGE; k++)
        if (ref_d[es[k]] != M && ref_d[es[k]] + wts[k] < ref_d[ed[k]]) begin
          ref_d[ed[k]] = ref_d[es[k]] + wts[k];
          ch = 1;
        end
    end
    do begin
      acc = dv; dold = dv;
      for (int v = 0; v < V; v++) act_new[v] = 0;
      conv_sum = 0;
      for (int bj = 0; bj < NB; bj++)
        for (int bi = 0; bi < NB; bi++) begin
          run_block(bi, bj, MODE_ADDOP, wts, 0, 0, 0, dv, act, acc, act_new, dold, c, gc, sp, ia);
          conv_sum += c;
        end
      any = 0;
      for (int v = 0; v < V; v++) begin
        if (act_new[v]) any++;
        chk(!act_new[v] || acc[v] < dv[v], $sformatf("%s active without update v%0d", name, v));
      end
      chk((conv_sum == 0) == (any == 0), $sformatf("%s convergence %0d vs %0d", name, conv_sum, any));
      dv = acc; act = act_new;
      iter++;
    end while (any != 0 && iter < V + 2);
    if (any == 0) n_converged++;
    for (int v = 0; v < V; v++)
      chk(dv[v] == ref_d[v], $sformatf("%s dv[%0d] = %0d exp %0d", name, v, dv[v], ref_d[v]));
    if (dv[V-1] == M) n_saturate++;
    $display("%s converged after %0d iterations", name, iter);
  endtask

  // ----------------------------------------------------- PageRank / SpMV
  task automatic mac_pass(int iters, bit pagerank, string name);
    int pr [V], acc [V], dold [V], wq [NEDGE], outdeg [V], e0, c, gc, sp, ia;
    bit act [V], act_new [V];
    longint part;
    for (int v = 0; v < V; v++) begin outdeg[v] = 0; pr[v] = 65536 / V; act[v] = 1; end
    for (int k = 0; k < NEDGE; k++) outdeg[es[k]]++;
    for (int k = 0; k < NEDGE; k++)
      wq[k] = pagerank ? int'(0.8 * 65536.0 / outdeg[es[k]]) : 1 + (ew[k] * 997) % 30000;
    e0 = pagerank ? int'(0.2 * 65536.0 / V) : 0;
    for (int it = 0; it < iters; it++) begin
      int ref_v [V], ref_conv [NB];
      // reference in the node's arithmetic: one truncation per subgraph and column
      begin
        longint parts [longint];
        longint tot [V];
        for (int j = 0; j < V; j++) begin
          tot[j] = 0;
          if (pagerank) parts[longint'(j) * NB * ROWS] = longint'(e0) * 65536;
        end
        for (int k = 0; k < NEDGE; k++) begin
          longint pk = (longint'(ed[k]) * NB + es[k] / B) * ROWS + (es[k] % B) / C;
          if (!parts.exists(pk)) parts[pk] = 0;
          parts[pk] += longint'(pr[es[k]]) * wq[k];
        end
        foreach (parts[pk]) begin
          part = parts[pk] >> 16;
          if (part > M) part = M;
          tot[pk / (NB * ROWS)] += part;
          if (tot[pk / (NB * ROWS)] > M) tot[pk / (NB * ROWS)] = M;
        end
        for (int j = 0; j < V; j++) ref_v[j] = int'(tot[j]);
      end
      for (int bj = 0; bj < NB; bj++) begin
        ref_conv[bj] = 0;
        for (int k = 0; k < B; k++)
          if ((ref_v[bj*B+k] > pr[bj*B+k] ? ref_v[bj*B+k] - pr[bj*B+k] : pr[bj*B+k] - ref_v[bj*B+k]) > 8)
            ref_conv[bj]++;
      end
      for (int v = 0; v < V; v++) begin acc[v] = 0; dold[v] = pr[v]; end
      for (int bj = 0; bj < NB; bj++)
        for (int bi = 0; bi < NB; bi++) begin
          run_block(bi, bj, MODE_MAC, wq, pagerank && bi == 0, e0, 8, pr, act, acc, act_new, dold, c, gc, sp, ia);
          if (bi == NB - 1) chk(c == ref_conv[bj], $sformatf("%s not-converged count %0d exp %0d", name, c, ref_conv[bj]));
        end
      for (int v = 0; v < V; v++)
        chk(acc[v] == ref_v[v], $sformatf("%s it %0d v%0d = %0d exp %0d", name, it, v, acc[v], ref_v[v]));
      pr = acc;
    end
  endtask

  initial begin
    // random simple graph (one entry per matrix position): vertex 0 is the
    // source, vertex V-1 has no in-edges; vertices 1..C-1 have no out-edges
    // and vertex 0 only feeds the first strip, so that the bias subgraph of
    // the second strip holds no edge
    for (int k = 0; k < NEDGE; k++) begin
      bit dup;
      do begin
        es[k] = (k < 8) ? 0 : $urandom_range(C, V - 1);
        ed[k] = $urandom_range(V - 2);
        dup = (es[k] == ed[k]) || (es[k] == 0 && (ed[k] % B) >= STRIP_W);
        for (int q = 0; q < k; q++) if (es[q] == es[k] && ed[q] == ed[k]) dup = 1;
      end while (dup);
      ew[k] = $urandom_range(1, 20);
    end
    #2.2 rst_n = 1;
    repeat (3) @(posedge clk); #0.1;
    sssp(0, "SSSP");
    mac_pass(3, 1, "PageRank");
    sssp(1, "BFS");
    mac_pass(1, 0, "SpMV");
    $display("stalls %0d, empty subgraphs skipped %0d, inactive rows skipped %0d, strips %0d",
             n_stall, n_skip, n_inact, n_strips);
    $display("bias subgraph forced %0d, mode switches %0d, saturation %0d, converged %0d",
             n_bias_forced, n_mode_switch, n_saturate, n_converged);
    chk(n_stall > 0, "stall never happened");
    chk(n_skip > 0, "no empty subgraph skipped");
    chk(n_inact > 0, "no inactive row skipped");
    chk(n_strips > 0 && B / STRIP_W > 1, "single strip only");
    chk(n_bias_forced > 0, "bias subgraph never forced");
    chk(n_mode_switch > 0, "no mode switch");
    chk(n_saturate > 0, "no saturation to M");
    chk(n_converged == 2, "SSSP/BFS did not converge");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
