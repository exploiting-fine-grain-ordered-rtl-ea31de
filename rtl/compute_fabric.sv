// compute_fabric: heterogeneous compute fabric of a lane.
//
// A FROWS x FCOLS grid of tiles on a circuit-switched mesh of (FROWS+1) x (FCOLS+1)
// switches with no flow control. Tile (r,c) reads the tile-facing outputs of its
// four corner switches and drives switch (r+1,c+1). The tile mix follows the
// published floor plan of one lane (row by row, + adder, x multiplier, S sqrt/div):
//     + x x x x / x + + + + / x + + + + / x + + x + / x + S S S
// The two lower-right S tiles form the temporal region (triggered-instruction
// tiles, 2x1); all other tiles are dedicated.
//
// Each switch has five registered outputs (north, east, south, west and the
// tile-facing one); each picks, per its configuration word, one of: nothing (0),
// the link from the north (1), east (2), south (3) or west (4) neighbour, the output
// of its upper-left tile (5), or an input-port word (6), selected by bits [20:16]
// from the 27 words of the six input ports. Bits [3o+2:3o] select output o.
// Every hop costs one cycle, so the dataflow compiler must equalise operand delays.
// An input-port word enters the mesh, valid, in the cycle its dataflow fires;
// words of a partial vector that are predicated off enter invalid, so operations on
// them do not fire and their results are not written to the output port.
// Output-port word (p,w) is taken from one switch output: configuration word
// CFG_OSEL+8p+w holds [5:0] switch index, [8:6] output, [9] enable. An output port
// receives a vector whenever one of its enabled words is valid.
// Configuration arrives as groups of up to 8 words (cfg_addr is the first word's
// index) from a Configure stream and is held in NCFG registers (see revel_pkg).
module compute_fabric import revel_pkg::*; (
  input  logic                         clk,
  input  logic                         rst_n,
  // configuration
  input  logic                         cfg_valid,
  input  logic [CNT_W-1:0]             cfg_addr,
  input  wgroup_t                      cfg_group,
  // input ports
  input  logic [NIPORT-1:0]            ip_valid,
  input  word_t [NIWORDS-1:0]          ip_data,
  input  logic  [NIWORDS-1:0]          ip_mask,
  output logic [NIPORT-1:0]            ip_consume,
  // output ports
  input  logic [NOPORT-1:0][6:0]       op_free,
  output logic [NOPORT-1:0]            op_valid,
  output line_t [NOPORT-1:0]           op_data,
  output logic [NOPORT-1:0][LINE_W-1:0] op_mask,
  // status
  output logic [NDF-1:0]               fire,
  output logic                         temporal_issue,
  output logic                         dropped
);
  localparam int unsigned SR = FROWS + 1;
  localparam int unsigned SC = FCOLS + 1;

  function automatic fu_kind_e tile_kind(input int r, input int c);
    if (r == 0) return (c == 0) ? FU_ADD : FU_MUL;
    if (c == 0) return FU_MUL;
    if (r == 3 && c == 3) return FU_MUL;
    if (r == 4 && c >= 2) return FU_SQRT;
    return FU_ADD;
  endfunction
  function automatic int temporal_index(input int r, input int c);
    if (r == FROWS - 1 && c >= FCOLS - NTEMP) return c - (FCOLS - NTEMP);
    return -1;
  endfunction

  // ---------------- configuration registers ----------------
  word_t cfg [NCFG];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NCFG; i++) cfg[i] <= '0;
    end else if (cfg_valid) begin
      for (int k = 0; k < LINE_W; k++)
        if (k < int'(cfg_group.n) && int'(cfg_addr) + k < NCFG)
          cfg[int'(cfg_addr) + k] <= cfg_group.data[k];
    end
  end

  // ---------------- firing ----------------
  df_firing u_fire (
    .clk, .rst_n, .cfg_fire(cfg[CFG_FIRE]), .cfg_lat(cfg[CFG_LAT]),
    .ip_valid, .op_free, .fire, .consume(ip_consume)
  );

  // input-port words entering the mesh this cycle
  link_t inj [NIWORDS];
  always_comb
    for (int p = 0; p < NIPORT; p++)
      for (int w = 0; w < port_words(p); w++)
        inj[iword_base(p) + w] = '{v: ip_consume[p] && ip_mask[iword_base(p) + w],
                                   d: ip_data[iword_base(p) + w]};

  // ---------------- mesh ----------------
  link_t sw [SR][SC][5];       // registered switch outputs: 0 N, 1 E, 2 S, 3 W, 4 tile
  link_t tile_out [FROWS][FCOLS];
  logic  [FROWS*FCOLS-1:0] tile_drop;

  for (genvar r = 0; r < SR; r++) begin : g_sr
    for (genvar c = 0; c < SC; c++) begin : g_sc
      link_t cand [7];
      word_t scfg;
      assign scfg    = cfg[CFG_SW + r*SC + c];
      assign cand[0] = '0;
      assign cand[1] = (r > 0)      ? sw[(r > 0) ? r-1 : 0][c][2] : '0;
      assign cand[2] = (c < SC - 1) ? sw[r][(c < SC-1) ? c+1 : c][3] : '0;
      assign cand[3] = (r < SR - 1) ? sw[(r < SR-1) ? r+1 : r][c][0] : '0;
      assign cand[4] = (c > 0)      ? sw[r][(c > 0) ? c-1 : 0][1] : '0;
      assign cand[5] = (r > 0 && c > 0) ? tile_out[(r > 0) ? r-1 : 0][(c > 0) ? c-1 : 0] : '0;
      assign cand[6] = (int'(scfg[20:16]) < NIWORDS) ? inj[(int'(scfg[20:16]) < NIWORDS) ? scfg[20:16] : 0] : '0;
      for (genvar o = 0; o < 5; o++) begin : g_o
        always_ff @(posedge clk or negedge rst_n)
          if (!rst_n) sw[r][c][o] <= '0;
          else        sw[r][c][o] <= (scfg[3*o +: 3] < 3'd7) ? cand[scfg[3*o +: 3]] : '0;
      end
    end
  end

  // ---------------- tiles ----------------
  link_t tsrc [NTEMP];   // temporal tile outputs, also their private links
  logic [NTEMP-1:0] t_issue;
  for (genvar r = 0; r < FROWS; r++) begin : g_tr
    for (genvar c = 0; c < FCOLS; c++) begin : g_tc
      link_t [3:0] corner;
      assign corner[0] = sw[r][c][4];
      assign corner[1] = sw[r][c+1][4];
      assign corner[2] = sw[r+1][c][4];
      assign corner[3] = sw[r+1][c+1][4];
      if (temporal_index(r, c) >= 0) begin : g_temp
        localparam int TI = temporal_index(r, c);
        link_t [4+NTEMP-1:0] src;
        logic [16:0] insts [TINSTS];
        assign src[3:0] = corner;
        for (genvar k = 0; k < NTEMP; k++) begin : g_ts
          assign src[4+k] = tsrc[k];
        end
        for (genvar n = 0; n < TINSTS; n++) begin : g_in
          assign insts[n] = cfg[CFG_TINST + TI*TINSTS + n][16:0];
        end
        temp_tile #(.KIND(tile_kind(r, c))) u_tile (
          .clk, .rst_n, .insts, .cfg_qsrc(cfg[CFG_TQSRC + TI]), .src,
          .out(tile_out[r][c]), .dropped(tile_drop[r*FCOLS + c])
        );
        assign tsrc[TI]    = tile_out[r][c];
        assign t_issue[TI] = tile_out[r][c].v;
      end else begin : g_ded
        ded_tile #(.KIND(tile_kind(r, c))) u_tile (
          .clk, .rst_n, .cfg(cfg[CFG_TILE + r*FCOLS + c]), .corner,
          .out(tile_out[r][c]), .dropped(tile_drop[r*FCOLS + c])
        );
      end
    end
  end
  assign temporal_issue = |t_issue;
  assign dropped        = |tile_drop;

  // ---------------- output ports ----------------
  always_comb
    for (int p = 0; p < NOPORT; p++) begin
      op_data[p] = '0;
      op_mask[p] = '0;
      for (int w = 0; w < LINE_W; w++)
        if (w < port_words(p)) begin
          word_t s;
          link_t l;
          s = cfg[CFG_OSEL + 8*p + w];
          l = (int'(s[5:0]) < NSW && s[8:6] < 3'd5) ?
              sw[int'(s[5:0]) / SC][int'(s[5:0]) % SC][s[8:6]] : '0;
          op_data[p][w] = l.d;
          op_mask[p][w] = s[9] && l.v;
        end
      op_valid[p] = |op_mask[p];
    end
endmodule
