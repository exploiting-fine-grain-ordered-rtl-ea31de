// df_firing: data-firing logic of the compute fabric.
//
// Up to NDF (4) dataflows fire independently. The configuration maps every input
// and output port to a dataflow: cfg_fire bits [3p+2:3p] = {used, dataflow} for
// input port p, bits [18+3p+2:18+3p] the same for output port p. A dataflow fires
// when every input port mapped to it holds a ready vector and every output port
// mapped to it has room for one more vector beyond those its in-flight instances
// will produce. An instance stays in flight for the dataflow's configured latency
// (cfg_lat bits [8d+7:8d], 1..63 cycles; the compiler sets it at least as long as
// the dataflow's pipeline). Several dataflows may fire in one cycle.
// consume[p] pops (or, with reuse, re-presents) the vector of input port p in the
// cycle its dataflow fires.
module df_firing import revel_pkg::*; (
  input  logic                   clk,
  input  logic                   rst_n,
  input  word_t                  cfg_fire,
  input  word_t                  cfg_lat,
  input  logic [NIPORT-1:0]      ip_valid,
  input  logic [NOPORT-1:0][6:0] op_free,
  output logic [NDF-1:0]         fire,
  output logic [NIPORT-1:0]      consume
);
  logic [63:0] dline   [NDF];
  logic [6:0]  inflight[NDF];
  logic [NDF-1:0] done_inst;

  always_comb begin
    for (int d = 0; d < NDF; d++) begin
      logic has_in, ok;
      has_in = 1'b0;
      ok     = 1'b1;
      for (int p = 0; p < NIPORT; p++)
        if (cfg_fire[3*p+2] && cfg_fire[3*p +: 2] == 2'(d)) begin
          has_in = 1'b1;
          if (!ip_valid[p]) ok = 1'b0;
        end
      for (int p = 0; p < NOPORT; p++)
        if (cfg_fire[18+3*p+2] && cfg_fire[18+3*p +: 2] == 2'(d))
          if (10'(op_free[p]) < (10'(inflight[d]) + 10'd1) * 10'(port_words(p))) ok = 1'b0;
      fire[d] = has_in && ok;
      done_inst[d] = dline[d][cfg_lat[8*d +: 6]];
    end
    for (int p = 0; p < NIPORT; p++)
      consume[p] = cfg_fire[3*p+2] && fire[cfg_fire[3*p +: 2]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int d = 0; d < NDF; d++) begin
        dline[d]    <= '0;
        inflight[d] <= '0;
      end
    end else begin
      for (int d = 0; d < NDF; d++) begin
        dline[d]    <= {dline[d][62:0], fire[d]};
        inflight[d] <= inflight[d] + 7'(fire[d]) - 7'(done_inst[d]);
      end
    end
  end
endmodule
