// lane: one REVEL vector lane.
//
// Commands broadcast by the control core are accepted when the lane's bit is set in
// the command's lane mask; the lane then adds LANE * lane_stride to the command's
// local address (so one command can address a different slice in every lane) and
// turns the relative XFER destination into a lane number. The command queue issues
// memory, Const and Configure streams to the stream control of the private
// scratchpad and XFER streams to the XFER unit.
// Data path: private scratchpad (128 x 512 bit) -> 512-bit bus -> six input vector
// ports (8, 8, 4, 4, 2, 1 words) -> compute fabric -> six output vector ports ->
// store streams back to the scratchpad, or XFER streams onto the lane's XFER bus,
// which reaches the input ports of this or any other lane.
// An input port receives at most one group per cycle: a scratchpad group (which the
// stream control reserved space for) takes precedence, and an incoming XFER group
// is accepted only for a port that has room and is not receiving a scratchpad group
// in that cycle (xin_ready).
// The shared-scratchpad bus writes whole lines into this scratchpad (sh_we) and
// reads lines from it (sh_re, data on sh_rdata one cycle later); while it does, the
// stream control keeps off that scratchpad port.
module lane import revel_pkg::*; #(
  parameter int unsigned LANE  = 0,
  parameter int unsigned LINES = 128
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // vector-stream commands
  input  logic                      cmd_valid,
  input  cmd_t                      cmd,
  output logic                      cmd_ready,
  // XFER bus
  output xfer_t                     xout,
  input  logic                      xout_gnt,
  input  xfer_t                     xin,
  output logic                      xin_ready,
  // shared-scratchpad bus
  input  logic                      sh_we,
  input  logic [$clog2(LINES)-1:0]  sh_waddr,
  input  line_t                     sh_wdata,
  input  logic                      sh_re,
  input  logic [$clog2(LINES)-1:0]  sh_raddr,
  output line_t                     sh_rdata,
  input  logic                      shared_rd_busy,
  input  logic                      shared_wr_busy,
  // status
  output logic                      busy,
  output logic [NDF-1:0]            stat_fire,
  output logic                      stat_masked,
  output logic                      stat_reuse,
  output logic                      stat_temporal,
  output logic                      stat_barrier,
  output logic                      stat_dropped
);
  localparam int unsigned LW = $clog2(LINES);

  // ---------------- command intake ----------------
  cmd_t lcmd;
  logic q_ready;
  always_comb begin
    lcmd       = cmd;
    lcmd.addr  = ADDR_W'($signed(cmd.addr) + $signed(ADDR_W'(LANE)) * cmd.lane_stride);
    lcmd.dlane = 3'(3'(LANE) + cmd.dlane);
  end
  assign cmd_ready = q_ready || !cmd.lanes[LANE];

  logic    sc_v, sc_rdy, sc_done, xu_v, xu_rdy, xu_done;
  cmd_t    sc_cmd, xu_cmd;
  cmd_op_e sc_done_op;
  logic [2:0] sc_done_port, xu_done_port, xu_done_lane, xu_done_dport;
  logic [7:0] sc_active, xu_active;
  logic       cq_busy;
  assign busy = cq_busy || (|sc_active) || (|xu_active);

  cmd_queue #(.LANE(LANE)) u_cq (
    .clk, .rst_n,
    .in_valid(cmd_valid && cmd.lanes[LANE]), .in_cmd(lcmd), .in_ready(q_ready),
    .sc_valid(sc_v), .sc_cmd, .sc_ready(sc_rdy), .sc_done, .sc_done_op, .sc_done_port,
    .xu_valid(xu_v), .xu_cmd, .xu_ready(xu_rdy), .xu_done, .xu_done_port,
    .xu_done_lane, .xu_done_dport,
    .shared_rd_busy, .shared_wr_busy, .busy(cq_busy), .barrier_stall(stat_barrier)
  );

  // ---------------- ports ----------------
  logic [NIPORT-1:0][6:0] ip_free, ip_count;
  logic [NIPORT-1:0][3:0] ip_other;
  logic [NIPORT-1:0]      ip_valid, ip_consume, ip_reuse;
  word_t [NIWORDS-1:0]    ip_data;
  logic  [NIWORDS-1:0]    ip_mask;
  logic [NIPORT-1:0]      ip_partial;
  logic [NOPORT-1:0][6:0] op_free, op_count;
  line_t [NOPORT-1:0]     op_head;
  logic [NOPORT-1:0][3:0] op_pop, op_pop_sc, op_pop_xu;
  logic [NOPORT-1:0]      op_valid;
  line_t [NOPORT-1:0]     op_data;
  logic [NOPORT-1:0][LINE_W-1:0] op_mask;

  logic        sc_push_v;
  logic [2:0]  sc_push_port;
  wgroup_t     sc_push;
  logic        rcfg_v;
  logic [2:0]  rcfg_port;
  logic [CNT_W-1:0] rcfg_nr;
  logic signed [CNT_W-1:0] rcfg_sr;
  logic        xin_acc;

  assign xin_ready = xin.v && xin.lane == 3'(LANE) &&
                     ip_free[xin.port] >= 7'(xin.g.n) && !(sc_push_v && sc_push_port == xin.port);
  assign xin_acc   = xin_ready;
  always_comb
    for (int p = 0; p < NIPORT; p++)
      ip_other[p] = (xin_acc && xin.port == 3'(p)) ? xin.g.n : 4'd0;

  for (genvar p = 0; p < NIPORT; p++) begin : g_ip
    localparam int unsigned W = port_words(p);
    localparam int unsigned B = iword_base(p);
    localparam int unsigned D = 4 * W;
    logic [3:0]  pn;
    line_t       pd;
    logic [LINE_W-1:0] pe;
    logic [$clog2(D):0] fr, ct;
    word_t [W-1:0] vd;
    logic  [W-1:0] vm;
    always_comb begin
      pn = '0; pd = '0; pe = '0;
      if (sc_push_v && sc_push_port == 3'(p)) begin
        pn = sc_push.n; pd = sc_push.data;
        for (int k = 0; k < LINE_W; k++) pe[k] = sc_push.eor && (k == int'(sc_push.n) - 1);
      end else if (xin_acc && xin.port == 3'(p)) begin
        pn = xin.g.n; pd = xin.g.data;
        for (int k = 0; k < LINE_W; k++) pe[k] = xin.g.eor && (k == int'(xin.g.n) - 1);
      end
    end
    in_port #(.W(W)) u_ip (
      .clk, .rst_n, .push_n(pn), .push_data(pd), .push_eor(pe), .free(fr),
      .cfg_valid((rcfg_v && rcfg_port == 3'(p)) || (xin_acc && xin.port == 3'(p) && xin.cfg)),
      .cfg_nr((rcfg_v && rcfg_port == 3'(p)) ? rcfg_nr : xin.nr),
      .cfg_sr((rcfg_v && rcfg_port == 3'(p)) ? rcfg_sr : xin.sr),
      .vec_valid(ip_valid[p]), .vec_data(vd), .vec_mask(vm), .consume(ip_consume[p]),
      .count(ct), .reuse_hit(ip_reuse[p])
    );
    assign ip_free[p]    = 7'(fr);
    assign ip_count[p]   = 7'(ct);
    assign ip_partial[p] = ip_consume[p] && !(&vm);
    for (genvar w = 0; w < W; w++) begin : g_w
      assign ip_data[B + w] = vd[w];
      assign ip_mask[B + w] = vm[w];
    end
  end

  for (genvar p = 0; p < NOPORT; p++) begin : g_op
    localparam int unsigned W = port_words(p);
    localparam int unsigned D = 4 * W;
    logic [$clog2(D):0] fr, ct;
    word_t [W-1:0] vd;
    for (genvar w = 0; w < W; w++) begin : g_w
      assign vd[w] = op_data[p][w];
    end
    out_port #(.W(W)) u_op (
      .clk, .rst_n, .vec_valid(op_valid[p]), .vec_data(vd), .vec_mask(op_mask[p][W-1:0]),
      .free(fr), .head(op_head[p]), .count(ct), .pop_n(op_pop[p])
    );
    assign op_free[p]  = 7'(fr);
    assign op_count[p] = 7'(ct);
    assign op_pop[p]   = op_pop_sc[p] + op_pop_xu[p];
  end

  // ---------------- scratchpad and stream control ----------------
  logic sp_re, sp_we;
  logic [LW-1:0] sp_raddr, sp_waddr;
  logic [LINE_W-1:0] sp_wmask;
  line_t sp_rdata, sp_wdata;
  logic  cfg_v;
  logic [CNT_W-1:0] cfg_addr;
  wgroup_t cfg_group;

  stream_ctrl #(.LINES(LINES)) u_sc (
    .clk, .rst_n,
    .issue_valid(sc_v), .issue_cmd(sc_cmd), .issue_ready(sc_rdy),
    .ip_free, .ip_count, .ip_other, .op_count, .op_free, .op_head, .op_pop(op_pop_sc),
    .ip_push_valid(sc_push_v), .ip_push_port(sc_push_port), .ip_push(sc_push),
    .ip_cfg_valid(rcfg_v), .ip_cfg_port(rcfg_port), .ip_cfg_nr(rcfg_nr), .ip_cfg_sr(rcfg_sr),
    .cfg_valid(cfg_v), .cfg_addr, .cfg_group,
    .rd_block(sh_re), .wr_block(sh_we),
    .sp_re, .sp_raddr, .sp_rdata, .sp_we, .sp_waddr, .sp_wmask, .sp_wdata,
    .done(sc_done), .done_op(sc_done_op), .done_port(sc_done_port), .active(sc_active)
  );

  spad #(.LINES(LINES)) u_spad (
    .clk,
    .re(sp_re || sh_re), .raddr(sh_re ? sh_raddr : sp_raddr), .rdata(sp_rdata),
    .we(sp_we || sh_we), .waddr(sh_we ? sh_waddr : sp_waddr),
    .wmask(sh_we ? '1 : sp_wmask), .wdata(sh_we ? sh_wdata : sp_wdata)
  );
  assign sh_rdata = sp_rdata;

  // ---------------- fabric ----------------
  logic [NDF-1:0] fire;
  compute_fabric u_fab (
    .clk, .rst_n, .cfg_valid(cfg_v), .cfg_addr, .cfg_group,
    .ip_valid, .ip_data, .ip_mask, .ip_consume,
    .op_free, .op_valid, .op_data, .op_mask,
    .fire, .temporal_issue(stat_temporal), .dropped(stat_dropped)
  );

  // ---------------- XFER ----------------
  xfer_unit u_xu (
    .clk, .rst_n, .issue_valid(xu_v), .issue_cmd(xu_cmd), .issue_ready(xu_rdy),
    .op_count, .op_head, .op_pop(op_pop_xu), .req(xout), .gnt(xout_gnt),
    .done(xu_done), .done_port(xu_done_port), .done_lane(xu_done_lane),
    .done_dport(xu_done_dport), .active(xu_active)
  );

  assign stat_fire   = fire;
  assign stat_masked = |ip_partial;
  assign stat_reuse  = |ip_reuse;
endmodule
