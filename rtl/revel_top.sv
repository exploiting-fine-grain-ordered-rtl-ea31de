// revel_top: REVEL, eight reconfigurable vector lanes under one control program.
//
// The control core (outside this module) computes stream parameters and issues
// vector-stream commands on cmd_valid/cmd/cmd_ready. Shared_Ld and Shared_St go to
// the shared-scratchpad command queue; every other command is broadcast to the
// lanes named in its lane mask and is taken in one cycle by all of them, so it
// waits until each of those lanes has queue space. The control core implements
// Wait by polling lane_busy (and shared_busy) until the lanes it waits for are idle.
// Lanes exchange fine-grain dependences over their XFER buses through xfer_net,
// and exchange bulk data with the shared scratchpad over the shared bus.
// Status outputs report, per lane, which dataflows fired, partial (masked) vectors,
// reused port values, temporal-tile issues, barrier stalls and operations dropped
// by a busy sqrt/div unit.
module revel_top import revel_pkg::*; #(
  parameter int unsigned LLINES = 128,   // private scratchpad lines (8 KB)
  parameter int unsigned SLINES = 2048   // shared scratchpad lines (128 KB)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        cmd_valid,
  input  cmd_t                        cmd,
  output logic                        cmd_ready,
  output logic [NLANES-1:0]           lane_busy,
  output logic                        shared_busy,
  output logic [NLANES-1:0][NDF-1:0]  stat_fire,
  output logic [NLANES-1:0]           stat_masked,
  output logic [NLANES-1:0]           stat_reuse,
  output logic [NLANES-1:0]           stat_temporal,
  output logic [NLANES-1:0]           stat_barrier,
  output logic [NLANES-1:0]           stat_dropped,
  output logic [NLANES-1:0]           stat_xfer_remote
);
  localparam int unsigned LW = $clog2(LLINES);

  logic is_shared;
  assign is_shared = cmd.op inside {CMD_SHARED_LD, CMD_SHARED_ST};

  logic [NLANES-1:0] l_ready;
  logic              all_ready, sh_ready;
  assign all_ready = &l_ready;
  assign cmd_ready = is_shared ? sh_ready : all_ready;

  xfer_t [NLANES-1:0] xreq, xdst;
  logic  [NLANES-1:0] xgnt, xrdy;
  logic  [NLANES-1:0] sh_we, sh_re, rd_busy, wr_busy;
  logic  [LW-1:0]     sh_waddr, sh_raddr;
  line_t              sh_wdata;
  line_t [NLANES-1:0] sh_rdata;

  for (genvar l = 0; l < NLANES; l++) begin : g_lane
    lane #(.LANE(l), .LINES(LLINES)) u_lane (
      .clk, .rst_n,
      .cmd_valid(cmd_valid && !is_shared && all_ready), .cmd, .cmd_ready(l_ready[l]),
      .xout(xreq[l]), .xout_gnt(xgnt[l]), .xin(xdst[l]), .xin_ready(xrdy[l]),
      .sh_we(sh_we[l]), .sh_waddr, .sh_wdata, .sh_re(sh_re[l]), .sh_raddr,
      .sh_rdata(sh_rdata[l]), .shared_rd_busy(rd_busy[l]), .shared_wr_busy(wr_busy[l]),
      .busy(lane_busy[l]), .stat_fire(stat_fire[l]), .stat_masked(stat_masked[l]),
      .stat_reuse(stat_reuse[l]), .stat_temporal(stat_temporal[l]),
      .stat_barrier(stat_barrier[l]), .stat_dropped(stat_dropped[l])
    );
    assign stat_xfer_remote[l] = xgnt[l] && xreq[l].lane != 3'(l);
  end

  xfer_net u_xnet (.req(xreq), .gnt(xgnt), .dst(xdst), .dst_ready(xrdy));

  shared_spad_ctrl #(.SLINES(SLINES), .LLINES(LLINES)) u_shared (
    .clk, .rst_n, .cmd_valid(cmd_valid && is_shared), .cmd, .cmd_ready(sh_ready),
    .sh_we, .sh_waddr, .sh_wdata, .sh_re, .sh_raddr, .sh_rdata,
    .rd_busy, .wr_busy, .busy(shared_busy)
  );
endmodule
