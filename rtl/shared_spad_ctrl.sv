// shared_spad_ctrl: shared scratchpad with its command queue and the shared bus.
//
// Executes Shared_Ld (shared -> private scratchpads) and Shared_St (private ->
// shared) commands, in order, from a DEPTH-entry queue. Transfers move whole
// 512-bit lines over the single shared bus, one line per cycle. The pattern is
// rectangular (RR): n_j rows of n_i lines, the shared word address advancing by
// c_i within a row and c_j between rows; the private address advances by one line
// per line moved. A command with several lanes in its mask is carried out lane by
// lane, in lane order, with the shared address of lane L offset by L * lane_stride.
// Addresses are word addresses; their low three bits are ignored (line aligned).
// Timing: Shared_Ld reads the shared line in one cycle and writes it into the lane
// in the next; Shared_St reads the lane's line in one cycle (sh_re) and writes the
// shared line in the next. rd_busy / wr_busy tell each lane that a queued or running
// command still reads from / writes into its scratchpad (used by its barriers).
module shared_spad_ctrl import revel_pkg::*; #(
  parameter int unsigned SLINES = 2048,
  parameter int unsigned LLINES = 128,
  parameter int unsigned DEPTH  = 8
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              cmd_valid,
  input  cmd_t                              cmd,
  output logic                              cmd_ready,
  // shared bus to the lanes
  output logic [NLANES-1:0]                 sh_we,
  output logic [$clog2(LLINES)-1:0]         sh_waddr,
  output line_t                             sh_wdata,
  output logic [NLANES-1:0]                 sh_re,
  output logic [$clog2(LLINES)-1:0]         sh_raddr,
  input  line_t [NLANES-1:0]                sh_rdata,
  output logic [NLANES-1:0]                 rd_busy,
  output logic [NLANES-1:0]                 wr_busy,
  output logic                              busy
);
  localparam int unsigned SW = $clog2(SLINES);
  localparam int unsigned LW = $clog2(LLINES);

  cmd_t q [DEPTH];
  logic [$clog2(DEPTH):0] cnt;
  logic [$clog2(DEPTH)-1:0] rp, wp;

  // running transfer
  logic                  run;
  cmd_t                  cur;
  logic [2:0]            ln;
  logic [CNT_W-1:0]      i, j;
  logic [ADDR_W-1:0]     srow, lpos;
  logic                  is_ld;
  // one-cycle pipeline between read and write
  logic                  p_v;
  logic [2:0]            p_ln;
  logic [ADDR_W-1:0]     p_saddr;
  logic [ADDR_W-1:0]     p_laddr;

  logic [ADDR_W-1:0] saddr_now;
  logic              step, last_line, last_lane;
  logic [2:0]        next_ln;
  logic              has_next;

  assign is_ld     = cur.op == CMD_SHARED_LD;
  assign saddr_now = ADDR_W'($signed(srow) + $signed(i) * cur.c_i +
                             $signed(ADDR_W'(ln)) * cur.lane_stride);
  assign step      = run;
  assign last_line = (i + 1'b1 >= cur.n_i) && (j + 1'b1 >= cur.n_j);

  always_comb begin
    has_next = 1'b0;
    next_ln  = ln;
    for (int l = NLANES - 1; l >= 0; l--)
      if (cur.lanes[l] && 3'(l) > ln) begin
        has_next = 1'b1;
        next_ln  = 3'(l);
      end
  end
  assign last_lane = !has_next;

  // shared memory
  logic  m_re, m_we;
  logic [SW-1:0] m_raddr, m_waddr;
  line_t m_rdata, m_wdata;
  spad #(.LINES(SLINES)) u_mem (
    .clk, .re(m_re), .raddr(m_raddr), .rdata(m_rdata),
    .we(m_we), .waddr(m_waddr), .wmask('1), .wdata(m_wdata)
  );

  assign m_re     = step && is_ld;
  assign m_raddr  = saddr_now[3 +: SW];
  assign m_we     = p_v && !is_ld;
  assign m_waddr  = p_saddr[3 +: SW];
  assign m_wdata  = sh_rdata[p_ln];
  always_comb begin
    sh_we    = '0;
    sh_re    = '0;
    sh_waddr = p_laddr[3 +: LW];
    sh_wdata = m_rdata;
    sh_raddr = lpos[3 +: LW];
    if (p_v && is_ld) sh_we[p_ln] = 1'b1;
    if (step && !is_ld) sh_re[ln] = 1'b1;
  end

  assign cmd_ready = cnt < ($clog2(DEPTH)+1)'(DEPTH);
  assign busy      = run || p_v || cnt != 0;

  always_comb begin
    cmd_t c;
    c       = '0;
    rd_busy = '0;
    wr_busy = '0;
    for (int k = 0; k < DEPTH; k++)
      if (k < int'(cnt)) begin
        c = q[($clog2(DEPTH))'(rp + ($clog2(DEPTH))'(k))];
        if (c.op == CMD_SHARED_ST) rd_busy |= c.lanes;
        else                       wr_busy |= c.lanes;
      end
    if (run || p_v) begin
      if (is_ld) wr_busy |= cur.lanes;
      else       rd_busy |= cur.lanes;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0; rp <= '0; wp <= '0;
      run <= 1'b0; p_v <= 1'b0;
      cur <= '0;
      ln <= '0; i <= '0; j <= '0; srow <= '0; lpos <= '0;
    end else begin
      logic deq;
      deq = 1'b0;
      // read -> write pipeline
      p_v     <= step;
      p_ln    <= ln;
      p_saddr <= saddr_now;
      p_laddr <= lpos;
      if (run) begin
        lpos <= lpos + ADDR_W'(LINE_W);
        if (i + 1'b1 < cur.n_i) begin
          i <= i + 1'b1;
        end else begin
          i    <= '0;
          j    <= j + 1'b1;
          srow <= ADDR_W'($signed(srow) + cur.c_j);
        end
        if (last_line) begin
          i <= '0; j <= '0;
          srow <= cur.saddr;
          lpos <= cur.addr;
          if (last_lane) run <= 1'b0;
          else           ln  <= next_ln;
        end
      end else if (cnt != 0 && !p_v) begin
        // start the head command with its first lane
        cmd_t c;
        c = q[rp];
        deq = 1'b1;
        rp  <= rp + 1'b1;
        if (c.lanes != 0 && c.n_i != 0 && c.n_j != 0) begin
          run  <= 1'b1;
          cur  <= c;
          i <= '0; j <= '0;
          srow <= c.saddr;
          lpos <= c.addr;
          for (int l = NLANES - 1; l >= 0; l--)
            if (c.lanes[l]) ln <= 3'(l);
        end
      end
      if (cmd_valid && cmd_ready) begin
        q[wp] <= cmd;
        wp <= wp + 1'b1;
      end
      cnt <= cnt + ($clog2(DEPTH)+1)'(cmd_valid && cmd_ready) - ($clog2(DEPTH)+1)'(deq);
    end
  end

  a_shared_only: assert property (@(posedge clk) disable iff (!rst_n)
                   cmd_valid |-> cmd.op inside {CMD_SHARED_LD, CMD_SHARED_ST});
endmodule
