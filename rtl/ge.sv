// ge: graph engine (GE).
//
// A GE holds N crossbars of (C+1) x C 4-bit cells, each with its own driver
// and sample-and-hold, and processes one subgraph of C source rows by
// C*N/SLICES destination columns. Four consecutive crossbars form a column
// group: crossbar g*SLICES+k holds slice k (bits 4k+3..4k) of the 16-bit
// weights of destination columns g*C .. g*C+C-1. RegI holds the C source
// values, RegO the GE's C*N/SLICES destination values.
//
// Conversion is shared: LANES = C*N/ADC_CH analog-to-digital converters,
// each sweeping ADC_CH held bitlines (the four slices of one column in
// consecutive channels), each followed by a shift-and-add unit and an sALU
// that reduces the 16-bit result into RegO.
//
// One GE cycle (start -> done):
//   1. the drivers latch the wordline vector:
//        MODE_MAC:   row r <- RegI[r], extra row <- bias_in
//                    (bitline = sum_r x_r*w_rc, plus e0 when bias_in = 1.0)
//        MODE_ADDOP: row r <- (r == sel_row), extra row <- RegI[sel_row]
//                    (bitline = w(u,c) + dist(u); an empty cell holds M so
//                    the sum saturates to M)
//   2. the S/H stages sample all bitlines;
//   3. every ADC sweeps its ADC_CH channels, one per cycle, and S/A + sALU
//      write each finished column into RegO.
// A cycle takes ADC_CH + 6 clocks (64 conversions = 64 ns at 1 GHz, as in
// the paper, plus a few clocks of pipeline). done pulses for one clock.
//
// Programming: prog_we writes one 16-bit weight into one cell position of a
// column group (the four slice drivers write in parallel); fill_req writes
// every crossbar (body and extra row levels taken from the 16-bit fill
// words). Each takes the drivers' write latency; grp_busy tells the
// controller which groups are still writing.
//
// The mapping of slices onto crossbars, the wordline encodings and the lane
// layout are this design's reading of the paper; the parts (DRV, CB, S/H,
// ADC, S/A, sALU, RegI, RegO) and the two processing patterns follow it.
module ge
  import graphr_pkg::*;
#(
  parameter int C         = 8,
  parameter int N         = 32,
  parameter int ADC_CH    = 64,
  parameter int WRITE_LAT = 51,
  localparam int NGRP     = N / SLICES,
  localparam int DEPTH    = C * NGRP,
  localparam int AW       = $clog2(DEPTH),
  localparam int GW       = (NGRP > 1) ? $clog2(NGRP) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // programming
  input  logic                    prog_we,
  input  logic [GW-1:0]           prog_grp,
  input  logic [$clog2(C+1)-1:0]  prog_row,
  input  logic [$clog2(C)-1:0]    prog_col,
  input  logic [VAL_W-1:0]        prog_w,
  input  logic                    fill_req,
  input  logic [VAL_W-1:0]        fill_body_w,
  input  logic [VAL_W-1:0]        fill_extra_w,
  output logic [NGRP-1:0]         grp_busy,
  // RegI
  input  logic                    regi_we,
  input  logic [$clog2(C)-1:0]    regi_addr,
  input  logic [VAL_W-1:0]        regi_data,
  input  logic                    regi_act,
  output logic [C-1:0]            regi_act_q,
  // RegO
  input  logic                    rego_ld_we,
  input  logic [AW-1:0]           rego_ld_addr,
  input  logic [VAL_W-1:0]        rego_ld_data,
  input  logic [AW-1:0]           rego_rd_addr,
  output logic [VAL_W-1:0]        rego_rd_data,
  output logic                    rego_rd_act,
  // compute
  input  logic                    start,
  input  mode_e                   mode,
  input  logic [$clog2(C)-1:0]    sel_row,
  input  logic [IN_W-1:0]         bias_in,
  input  salu_op_e                op,
  input  logic [4:0]              shift,
  output logic                    busy,
  output logic                    done
);

  localparam int OUT_W = IN_W + CELL_W + $clog2(C + 1);
  localparam int ADC_BITS = OUT_W;
  localparam int LANES = (C * N) / ADC_CH;
  localparam int GPL   = NGRP / LANES;      // column groups per ADC lane
  localparam int CHW   = $clog2(ADC_CH);

  // ---------------------------------------------------------------- RegI
  logic [C-1:0][VAL_W-1:0] ri_val;
  logic [C-1:0]            ri_act;

  reg_i #(.C(C), .W(VAL_W)) u_regi (
    .clk, .rst_n, .we(regi_we), .waddr(regi_addr), .wdata(regi_data),
    .wact(regi_act), .val(ri_val), .act(ri_act));

  assign regi_act_q = ri_act;

  // ------------------------------------------------------- wordline vector
  logic [C:0][IN_W-1:0] in_vec;
  always_comb begin
    for (int r = 0; r < C; r++)
      in_vec[r] = (mode == MODE_MAC) ? IN_W'(ri_val[r])
                                     : IN_W'(r == int'(sel_row));
    in_vec[C] = (mode == MODE_MAC) ? bias_in : IN_W'(ri_val[sel_row]);
  end

  // ------------------------------------------------------------ sequencer
  typedef enum logic [1:0] {S_IDLE, S_DRIVE, S_SAMPLE, S_WAIT} ge_state_e;
  ge_state_e st;
  logic in_load, sample, adc_start;
  logic [LANES-1:0] adc_busy, adc_v, sa_v;

  assign in_load   = (st == S_IDLE) && start;
  assign sample    = (st == S_SAMPLE);
  assign adc_start = (st == S_SAMPLE);
  assign busy      = (st != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st   <= S_IDLE;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE:   if (start) st <= S_DRIVE;
        S_DRIVE:  st <= S_SAMPLE;
        S_SAMPLE: st <= S_WAIT;
        S_WAIT:   if (adc_busy == '0 && adc_v == '0 && sa_v == '0) begin
                    st   <= S_IDLE;
                    done <= 1'b1;
                  end
        default:  st <= S_IDLE;
      endcase
    end
  end

  // --------------------------------------------- crossbars, DRVs and S/H
  logic [N-1:0] drv_busy;
  logic [N-1:0][C-1:0][OUT_W-1:0] held;

  for (genvar b = 0; b < N; b++) begin : g_cb
    localparam int K = b % SLICES;
    localparam int G = b / SLICES;
    logic                    cb_we, cb_fill;
    logic [$clog2(C+1)-1:0]  cb_row;
    logic [$clog2(C)-1:0]    cb_col;
    logic [CELL_W-1:0]       cb_data, cb_fb, cb_fe;
    logic [C:0][IN_W-1:0]    wl;
    logic [C-1:0][OUT_W-1:0] bl;

    drv #(.C(C), .CELL_W(CELL_W), .IN_W(IN_W), .WRITE_LAT(WRITE_LAT)) u_drv (
      .clk, .rst_n,
      .wr_req(prog_we && (int'(prog_grp) == G)),
      .wr_row(prog_row), .wr_col(prog_col),
      .wr_data(prog_w[K*CELL_W +: CELL_W]),
      .fill_req(fill_req),
      .fill_body(fill_body_w[K*CELL_W +: CELL_W]),
      .fill_extra(fill_extra_w[K*CELL_W +: CELL_W]),
      .busy(drv_busy[b]),
      .in_load(in_load), .in_vec(in_vec), .wl(wl),
      .cb_wr_en(cb_we), .cb_fill_en(cb_fill), .cb_row(cb_row), .cb_col(cb_col),
      .cb_data(cb_data), .cb_fill_body(cb_fb), .cb_fill_extra(cb_fe));

    crossbar #(.C(C), .CELL_W(CELL_W), .IN_W(IN_W), .OUT_W(OUT_W)) u_cb (
      .clk, .wr_en(cb_we), .wr_row(cb_row), .wr_col(cb_col), .wr_data(cb_data),
      .fill_en(cb_fill), .fill_body(cb_fb), .fill_extra(cb_fe),
      .wl(wl), .bl(bl));

    sample_hold #(.C(C), .W(OUT_W)) u_sh (
      .clk, .sample(sample), .d(bl), .q(held[b]));
  end

  always_comb
    for (int g = 0; g < NGRP; g++)
      grp_busy[g] = |drv_busy[g*SLICES +: SLICES];

  // ------------------------------------------ ADC -> S/A -> sALU lanes
  logic [LANES-1:0][AW-1:0]    lane_addr;
  logic [LANES-1:0][VAL_W-1:0] lane_rdata, lane_wdata;
  logic [LANES-1:0]            lane_we, lane_wact;

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic [ADC_CH-1:0][OUT_W-1:0] ain;
    logic [CHW-1:0]               ch;
    logic [ADC_BITS-1:0]          dout;
    logic [AW-1:0]                tag;
    logic [VAL_W-1:0]             sa_data;
    logic                         upd;

    // channel = (local group, column, slice), slice fastest
    always_comb
      for (int c = 0; c < ADC_CH; c++)
        ain[c] = held[(l*GPL + c/(C*SLICES))*SLICES + c%SLICES][(c/SLICES)%C];

    adc #(.ADC_CH(ADC_CH), .IN_W(OUT_W), .ADC_BITS(ADC_BITS)) u_adc (
      .clk, .rst_n, .start(adc_start), .ain(ain), .busy(adc_busy[l]),
      .dout_valid(adc_v[l]), .dout_ch(ch), .dout(dout));

    assign tag = AW'((l*GPL + int'(ch)/(C*SLICES))*C + (int'(ch)/SLICES)%C);

    shift_add #(.IN_W(ADC_BITS), .CELL_W(CELL_W), .SLICES(SLICES),
                .VAL_W(VAL_W), .TAG_W(AW)) u_sa (
      .clk, .rst_n, .in_valid(adc_v[l]),
      .in_slice($clog2(SLICES)'(int'(ch) % SLICES)),
      .in_data(dout), .in_tag(tag), .shift(shift),
      .out_valid(sa_v[l]), .out_data(sa_data), .out_tag(lane_addr[l]));

    salu #(.W(VAL_W)) u_salu (
      .op(op), .a(sa_data), .b(lane_rdata[l]), .y(lane_wdata[l]),
      .updated(upd));

    assign lane_we[l]   = sa_v[l];
    assign lane_wact[l] = upd;
  end

  reg_o #(.DEPTH(DEPTH), .W(VAL_W), .LANES(LANES)) u_rego (
    .clk, .rst_n, .ld_we(rego_ld_we), .ld_addr(rego_ld_addr),
    .ld_data(rego_ld_data), .rd_addr(rego_rd_addr), .rd_data(rego_rd_data),
    .rd_act(rego_rd_act), .lane_addr(lane_addr), .lane_rdata(lane_rdata),
    .lane_we(lane_we), .lane_wdata(lane_wdata), .lane_wact(lane_wact));

endmodule
