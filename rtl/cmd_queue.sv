// cmd_queue: command queue of a lane, its resource manager.
//
// Buffers up to DEPTH (8) vector-stream commands from the control core and issues
// them to the stream control (Local_Ld, Local_St, Const, Configure) or to the XFER
// unit. Commands may issue out of order, but never past an older command that
// names the same port, so every port sees its streams in program order. A
// scoreboard marks ports in use from issue until their stream reports done; a
// command waits while its ports are marked. XFER marks its source output port and,
// when the destination is this lane, its destination input port.
// Barrier_Ld holds every younger command until no read stream (Local_Ld,
// Configure, and Shared_St reads of this scratchpad) is active; Barrier_St does the
// same for write streams (Local_St and Shared_Ld writes). A barrier leaves the queue
// when it is the oldest entry and its condition holds.
// One command issues per cycle. busy is set while any command is queued or any
// stream issued from here is still active.
module cmd_queue import revel_pkg::*; #(
  parameter int unsigned DEPTH = 8,
  parameter int unsigned LANE  = 0
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  cmd_t        in_cmd,
  output logic        in_ready,
  // stream control
  output logic        sc_valid,
  output cmd_t        sc_cmd,
  input  logic        sc_ready,
  input  logic        sc_done,
  input  cmd_op_e     sc_done_op,
  input  logic [2:0]  sc_done_port,
  // XFER unit
  output logic        xu_valid,
  output cmd_t        xu_cmd,
  input  logic        xu_ready,
  input  logic        xu_done,
  input  logic [2:0]  xu_done_port,
  input  logic [2:0]  xu_done_lane,
  input  logic [2:0]  xu_done_dport,
  // shared-scratchpad activity on this lane
  input  logic        shared_rd_busy,
  input  logic        shared_wr_busy,
  output logic        busy,
  output logic        barrier_stall   // a barrier is holding younger commands
);
  cmd_t        q  [DEPTH];
  logic [DEPTH-1:0] qv;
  logic [NIPORT-1:0] ip_busy;
  logic [NOPORT-1:0] op_busy;
  logic [7:0]  rd_act, wr_act, xf_act;

  function automatic logic uses_ip(input cmd_t c, output logic [2:0] p);
    p = c.port;
    if (c.op == CMD_LOCAL_LD || c.op == CMD_CONST) return 1'b1;
    if (c.op == CMD_XFER && c.dlane == 3'(LANE)) begin p = c.port2; return 1'b1; end
    return 1'b0;
  endfunction
  function automatic logic uses_op(input cmd_t c);
    return c.op == CMD_LOCAL_ST || c.op == CMD_XFER;
  endfunction
  function automatic logic is_bar(input cmd_t c);
    return c.op == CMD_BARRIER_LD || c.op == CMD_BARRIER_ST;
  endfunction

  logic [DEPTH-1:0] can;
  logic             iss_v;
  logic [$clog2(DEPTH)-1:0] iss;
  always_comb begin
    logic [NIPORT-1:0] ip_older;
    logic [NOPORT-1:0] op_older;
    logic              bar_older;
    ip_older  = '0;
    op_older  = '0;
    bar_older = 1'b0;
    barrier_stall = 1'b0;
    for (int k = 0; k < DEPTH; k++) begin
      logic [2:0] ipn;
      logic       ui;
      ui  = uses_ip(q[k], ipn);
      can[k] = 1'b0;
      if (qv[k]) begin
        if (is_bar(q[k])) begin
          can[k] = (k == 0) && (q[k].op == CMD_BARRIER_LD ? (rd_act == 0 && !shared_rd_busy)
                                                           : (wr_act == 0 && !shared_wr_busy));
          if (!can[k]) barrier_stall = 1'b1;
        end else if (!bar_older) begin
          can[k] = 1'b1;
          if (ui && (ip_busy[ipn] || ip_older[ipn])) can[k] = 1'b0;
          if (uses_op(q[k]) && (op_busy[q[k].port] || op_older[q[k].port])) can[k] = 1'b0;
          if (q[k].op == CMD_XFER) begin
            if (!xu_ready) can[k] = 1'b0;
          end else if (!sc_ready) can[k] = 1'b0;
        end
        if (is_bar(q[k])) bar_older = 1'b1;
        if (ui) ip_older[ipn] = 1'b1;
        if (uses_op(q[k])) op_older[q[k].port] = 1'b1;
      end
    end
    iss_v = 1'b0;
    iss   = '0;
    for (int k = DEPTH - 1; k >= 0; k--)
      if (can[k]) begin
        iss_v = 1'b1;
        iss   = ($clog2(DEPTH))'(k);
      end
  end

  assign sc_cmd   = q[iss];
  assign xu_cmd   = q[iss];
  assign sc_valid = iss_v && !is_bar(q[iss]) && q[iss].op != CMD_XFER;
  assign xu_valid = iss_v && q[iss].op == CMD_XFER;
  assign in_ready = !qv[DEPTH-1] || iss_v;
  assign busy     = (|qv) || rd_act != 0 || wr_act != 0 || xf_act != 0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      qv      <= '0;
      ip_busy <= '0;
      op_busy <= '0;
      rd_act  <= '0;
      wr_act  <= '0;
      xf_act  <= '0;
    end else begin
      // queue: remove the issued entry (compacting), append the new one
      logic [DEPTH-1:0] nv;
      cmd_t             nq [DEPTH];
      int               t;
      nv = '0;
      t  = 0;
      for (int k = 0; k < DEPTH; k++) nq[k] = q[k];
      for (int k = 0; k < DEPTH; k++)
        if (qv[k] && !(iss_v && k == int'(iss))) begin
          nq[t] = q[k];
          nv[t] = 1'b1;
          t++;
        end
      if (in_valid && in_ready) begin
        nq[t] = in_cmd;
        nv[t] = 1'b1;
      end
      for (int k = 0; k < DEPTH; k++) q[k] <= nq[k];
      qv <= nv;

      // scoreboard and activity counters
      begin
        logic [NIPORT-1:0] ipb;
        logic [NOPORT-1:0] opb;
        logic [7:0] rd, wr, xf;
        logic [2:0] ipn;
        ipb = ip_busy; opb = op_busy; rd = rd_act; wr = wr_act; xf = xf_act;
        if (sc_done) begin
          if (sc_done_op == CMD_LOCAL_LD || sc_done_op == CMD_CONST) ipb[sc_done_port] = 1'b0;
          if (sc_done_op == CMD_LOCAL_ST) opb[sc_done_port] = 1'b0;
          if (sc_done_op == CMD_LOCAL_LD || sc_done_op == CMD_CONFIG) rd = rd - 1'b1;
          if (sc_done_op == CMD_LOCAL_ST) wr = wr - 1'b1;
        end
        if (xu_done) begin
          opb[xu_done_port] = 1'b0;
          if (xu_done_lane == 3'(LANE)) ipb[xu_done_dport] = 1'b0;
          xf = xf - 1'b1;
        end
        if (iss_v && !is_bar(q[iss])) begin
          if (uses_ip(q[iss], ipn)) ipb[ipn] = 1'b1;
          if (uses_op(q[iss])) opb[q[iss].port] = 1'b1;
          if (q[iss].op == CMD_LOCAL_LD || q[iss].op == CMD_CONFIG) rd = rd + 1'b1;
          if (q[iss].op == CMD_LOCAL_ST) wr = wr + 1'b1;
          if (q[iss].op == CMD_XFER) xf = xf + 1'b1;
        end
        ip_busy <= ipb; op_busy <= opb; rd_act <= rd; wr_act <= wr; xf_act <= xf;
      end
    end
  end

  a_no_shared: assert property (@(posedge clk) disable iff (!rst_n)
                 in_valid |-> !(in_cmd.op inside {CMD_SHARED_LD, CMD_SHARED_ST}));
endmodule
