// in_port: configurable input vector port of a lane.
//
// Holds words arriving from the scratchpad bus (load and Const streams) or from the
// XFER bus, and presents them to the compute fabric as vectors of W words.
// Storage is a FIFO of 4 vectors (4*W words). Words arrive in groups of up to 8 per
// cycle; the last word of a stream row carries an end-of-row tag.
//
// Implicit vector masking: a vector is ready when W words are present, or when fewer
// are present but an end-of-row tag closes them. Such a partial vector is padded
// with zeros and vec_mask marks the unused lanes as predicated off.
//
// Inductive reuse: a stream issued to the port sets the reuse count n_r and its
// stretch s_r (fixed point, FRAC fractional bits). Each vector is presented for
// ceil(n_r) consumptions (at least one) before it is popped, and n_r grows by s_r
// after every pop. Reset sets n_r = 1, s_r = 0 (no reuse).
// Timing: consume is sampled at the clock edge; the next vector (or the same one,
// when reused) is visible in the following cycle.
module in_port import revel_pkg::*; #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 4 * W
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // producer side (scratchpad stream or XFER)
  input  logic [3:0]                 push_n,
  input  line_t                      push_data,
  input  logic [LINE_W-1:0]          push_eor,
  output logic [$clog2(DEPTH):0]     free,
  // reuse configuration
  input  logic                       cfg_valid,
  input  logic [CNT_W-1:0]           cfg_nr,
  input  logic signed [CNT_W-1:0]    cfg_sr,
  // fabric side
  output logic                       vec_valid,
  output word_t [W-1:0]              vec_data,
  output logic [W-1:0]               vec_mask,
  input  logic                       consume,
  output logic [$clog2(DEPTH):0]     count,
  output logic                       reuse_hit   // a consumption that kept the vector
);
  line_t             head;
  logic [LINE_W-1:0] head_tag;
  logic [3:0]        pop_n;
  logic [3:0]        k;          // words in the head vector
  logic signed [CNT_W+FRAC:0] nr;
  logic signed [CNT_W-1:0]    sr;
  logic [CNT_W-1:0]  used;
  logic [CNT_W-1:0]  uses;

  word_fifo #(.DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n, .push_n, .push_data, .push_tag(push_eor), .pop_n,
    .head, .head_tag, .count, .free
  );

  // Size of the head vector: up to W words, cut after the first end-of-row tag.
  always_comb begin
    k = 4'(W);
    for (int i = W - 1; i >= 0; i--)
      if (head_tag[i]) k = 4'(i + 1);
    if (count < ($clog2(DEPTH)+1)'(k)) begin
      vec_valid = 1'b0;
    end else begin
      vec_valid = 1'b1;
    end
    for (int i = 0; i < W; i++) begin
      vec_mask[i] = (4'(i) < k);
      vec_data[i] = vec_mask[i] ? head[i] : '0;
    end
  end

  assign uses  = (fx_ceil(nr) == 0) ? CNT_W'(1) : fx_ceil(nr);
  assign reuse_hit = consume && vec_valid && (used + 1'b1 < uses);
  assign pop_n = (consume && vec_valid && (used + 1'b1 >= uses)) ? k : 4'd0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nr   <= (CNT_W+FRAC+1)'(1 << FRAC);
      sr   <= '0;
      used <= '0;
    end else if (cfg_valid) begin
      nr   <= (CNT_W+FRAC+1)'(cfg_nr);
      sr   <= cfg_sr;
      used <= '0;
    end else if (consume && vec_valid) begin
      if (pop_n != 0) begin
        used <= '0;
        nr   <= nr + (CNT_W+FRAC+1)'(sr);
      end else begin
        used <= used + 1'b1;
      end
    end
  end

  a_consume_valid: assert property (@(posedge clk) disable iff (!rst_n) consume |-> vec_valid);
endmodule
