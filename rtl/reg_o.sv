// reg_o: output register (RegO) of a graph engine.
//
// Holds DEPTH destination-vertex values with their active indicators: the
// slice of the current destination strip owned by this graph engine
// (C*N/4 = 64 vertices by default). Ports:
//   - controller load (ld_*): writes a value and clears its active bit,
//     because a destination starts each strip inactive;
//   - controller read (rd_addr -> rd_data, rd_act), combinational;
//   - LANES sALU lanes: each reads entry lane_addr (combinational) and may
//     write it back; a lane write ORs in its active flag, so an indicator
//     set once stays set, as the paper requires.
// Lanes own disjoint entries; an assertion checks that two lanes never write
// the same entry in one cycle.
module reg_o #(
  parameter int DEPTH = 64,
  parameter int W     = 16,
  parameter int LANES = 4,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       ld_we,
  input  logic [AW-1:0]              ld_addr,
  input  logic [W-1:0]               ld_data,
  input  logic [AW-1:0]              rd_addr,
  output logic [W-1:0]               rd_data,
  output logic                       rd_act,
  input  logic [LANES-1:0][AW-1:0]   lane_addr,
  output logic [LANES-1:0][W-1:0]    lane_rdata,
  input  logic [LANES-1:0]           lane_we,
  input  logic [LANES-1:0][W-1:0]    lane_wdata,
  input  logic [LANES-1:0]           lane_wact
);

  logic [W-1:0]    val [DEPTH];
  logic [DEPTH-1:0] act;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act <= '0;
    end else begin
      for (int l = 0; l < LANES; l++)
        if (lane_we[l]) act[lane_addr[l]] <= act[lane_addr[l]] | lane_wact[l];
      if (ld_we) act[ld_addr] <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    for (int l = 0; l < LANES; l++)
      if (lane_we[l]) val[lane_addr[l]] <= lane_wdata[l];
    if (ld_we) val[ld_addr] <= ld_data;
  end

  assign rd_data = val[rd_addr];
  assign rd_act  = act[rd_addr];
  always_comb
    for (int l = 0; l < LANES; l++) lane_rdata[l] = val[lane_addr[l]];

  for (genvar l = 1; l < LANES; l++) begin : g_chk
    a_lane_disjoint: assert property (@(posedge clk) disable iff (!rst_n)
      (lane_we[l] && lane_we[l-1]) |-> lane_addr[l] != lane_addr[l-1])
      else $error("reg_o: two lanes write one entry");
  end

endmodule
