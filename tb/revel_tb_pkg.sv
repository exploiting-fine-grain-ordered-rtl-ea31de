// revel_tb_pkg: helpers shared by the REVEL testbenches.
//
// Builds vector-stream commands and a fabric configuration image for a small test
// program with three dataflows:
//   df0 (dedicated): y = a + b on four adder tiles (1,1)..(1,4); a from input port 2,
//        b from input port 3, y to output port 2 (latency 3, reserved as 4)
//   df1 (temporal):  z = sqrt(s) on the temporal tile (4,3); s from input port 5,
//        z to output port 5 (latency ~15, reserved as 30)
//   df2 (dedicated): pass-through on adder tile (3,1) from input port 4 word 0 to
//        output port 4 word 0 (latency 3, reserved as 4)
package revel_tb_pkg;
  import revel_pkg::*;

  function automatic cmd_t mk_cmd(cmd_op_e op, logic [7:0] lanes, int addr, int n_i, int n_j,
                                  int c_i = 1, int c_j = 0, int s_ji = 0, int port = 0,
                                  int n_c = 0, int s_c = 0);
    cmd_t c;
    c = '0;
    c.op = op; c.lanes = lanes; c.addr = ADDR_W'(addr);
    c.n_i = CNT_W'(n_i); c.n_j = CNT_W'(n_j); c.c_i = CNT_W'(c_i); c.c_j = CNT_W'(c_j);
    c.s_ji = CNT_W'(s_ji); c.port = 3'(port); c.n_c = CNT_W'(n_c); c.s_c = CNT_W'(s_c);
    return c;
  endfunction

  function automatic word_t sw_sel(int o, int sel);
    return word_t'(sel) << (3 * o);
  endfunction
  function automatic word_t sw_inj(int idx);
    return word_t'(idx) << 16;
  endfunction

  // configuration image of the three-dataflow test program
  function automatic void build_cfg(ref word_t img [NCFG]);
    localparam int SC = FCOLS + 1;
    for (int i = 0; i < NCFG; i++) img[i] = '0;
    // df0: inject a[k-1] at switch (1,k) and b[k-1] at switch (2,k), tile (1,k) adds
    for (int k = 1; k <= 4; k++) begin
      img[CFG_SW + 1*SC + k] |= sw_sel(4, 6) | sw_inj(16 + k - 1);
      img[CFG_SW + 2*SC + k] |= sw_sel(4, 6) | sw_inj(20 + k - 1);
      img[CFG_SW + 2*SC + k + 1] |= sw_sel(2, 5);               // south <- tile (1,k)
      img[CFG_TILE + 1*FCOLS + k] = word_t'(OP_ADD) | (word_t'(0) << 4) | (word_t'(2) << 7);
      img[CFG_OSEL + 8*2 + (k-1)] = word_t'(2*SC + k + 1) | (word_t'(2) << 6) | (word_t'(1) << 9);
    end
    // df1: s enters at switch (4,3) towards temporal tile (4,3); result via switch (5,4)
    img[CFG_SW + 4*SC + 3] |= sw_sel(4, 6) | sw_inj(26);
    img[CFG_SW + 5*SC + 4] |= sw_sel(3, 5);
    img[CFG_TINST + 0] = (word_t'(1) << 16) | word_t'(OP_SQRT);
    img[CFG_TQSRC + 0] = 64'hFFF0;
    img[CFG_TQSRC + 1] = 64'hFFFF;
    img[CFG_OSEL + 8*5 + 0] = word_t'(5*SC + 4) | (word_t'(3) << 6) | (word_t'(1) << 9);
    // df2: port 4 word 0 enters at switch (3,1); tile (3,1) passes it to switch (4,2)
    img[CFG_SW + 3*SC + 1] |= sw_sel(4, 6) | sw_inj(24);
    img[CFG_SW + 4*SC + 2] |= sw_sel(1, 5);
    img[CFG_TILE + 3*FCOLS + 1] = word_t'(OP_PASS);
    img[CFG_OSEL + 8*4 + 0] = word_t'(4*SC + 2) | (word_t'(1) << 6) | (word_t'(1) << 9);
    // firing: in ports 2,3 -> df0, 5 -> df1, 4 -> df2; out ports 2 -> df0, 5 -> df1, 4 -> df2
    img[CFG_FIRE] = (word_t'(4 | 0) << 6) | (word_t'(4 | 0) << 9) | (word_t'(4 | 2) << 12) |
                    (word_t'(4 | 1) << 15) |
                    (word_t'(4 | 0) << (18 + 6)) | (word_t'(4 | 2) << (18 + 12)) |
                    (word_t'(4 | 1) << (18 + 15));
    img[CFG_LAT] = word_t'(4) | (word_t'(30) << 8) | (word_t'(4) << 16);
  endfunction

  // integer square root, reference model
  function automatic longint unsigned ref_sqrt(longint unsigned v);
    longint unsigned r;
    r = 0;
    for (int i = 31; i >= 0; i--)
      if ((r | (64'd1 << i)) * (r | (64'd1 << i)) <= v) r |= 64'd1 << i;
    return r;
  endfunction
endpackage
