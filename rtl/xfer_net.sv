// xfer_net: inter-lane XFER network.
//
// Every lane drives one request (an XFER group for an input port of some lane) on
// its own 512-bit XFER bus. Each destination lane accepts at most one group per
// cycle; when several lanes target the same destination, the lowest-numbered
// source lane wins (fixed priority). A request is granted when it wins its
// destination and the destination port can take it (the destination lane's
// readiness for that request). Everything is combinational: the grant and the
// delivery happen in the same cycle.
module xfer_net import revel_pkg::*; (
  input  xfer_t [NLANES-1:0]  req,
  output logic  [NLANES-1:0]  gnt,
  output xfer_t [NLANES-1:0]  dst,      // group offered to each destination lane
  input  logic  [NLANES-1:0]  dst_ready // destination lane accepts dst[l]
);
  logic [NLANES-1:0][2:0] win;
  logic [NLANES-1:0]      has;
  always_comb begin
    for (int d = 0; d < NLANES; d++) begin
      has[d] = 1'b0;
      win[d] = '0;
      for (int s = NLANES - 1; s >= 0; s--)
        if (req[s].v && req[s].lane == 3'(d)) begin
          has[d] = 1'b1;
          win[d] = 3'(s);
        end
      dst[d] = has[d] ? req[win[d]] : '0;
    end
    for (int s = 0; s < NLANES; s++)
      gnt[s] = req[s].v && has[req[s].lane] && win[req[s].lane] == 3'(s) && dst_ready[req[s].lane];
  end
endmodule
