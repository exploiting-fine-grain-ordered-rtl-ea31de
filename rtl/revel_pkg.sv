// revel_pkg: types and constants shared by the REVEL lane and top-level RTL.
//
// The datapath word is 64 bits, matching the 64-bit point-to-point links between
// the vector ports and the compute fabric. A scratchpad line and every wide bus
// (SPAD-to-port bus, XFER bus, shared-scratchpad bus) is 512 bits, i.e. 8 words.
// Stream commands follow the vector-stream command set of the architecture
// (Local_Ld/St, Const, XFER, Shared_Ld/St, Configure, Barrier, Wait); the field
// widths and encodings below are this implementation's own choice.
// Stretch and reuse parameters are signed fixed-point numbers with FRAC
// fractional bits, so that a reuse rate divided by a vector width (for example
// (n-j-1)/4) can be represented.
package revel_pkg;

  localparam int unsigned WORD      = 64;  // datapath word (Ports-CGRA link width)
  localparam int unsigned LINE_W    = 8;   // words per 512-bit scratchpad line / bus
  localparam int unsigned NLANES    = 8;   // vector lanes
  localparam int unsigned NIPORT    = 6;   // input vector ports per lane
  localparam int unsigned NOPORT    = 6;   // output vector ports per lane
  localparam int unsigned NDF       = 4;   // independently firing dataflows
  localparam int unsigned FRAC      = 8;   // fractional bits of stretch / reuse values
  localparam int unsigned ADDR_W    = 16;  // word address width (local and shared)
  localparam int unsigned CNT_W     = 16;  // trip counts and strides

  typedef logic [WORD-1:0] word_t;
  typedef word_t [LINE_W-1:0] line_t;

  // Width in words of each port: 2x512, 2x256, 1x128, 1x64 bit.
  function automatic int unsigned port_words(input int unsigned p);
    case (p)
      0, 1:    return 8;
      2, 3:    return 4;
      4:       return 2;
      default: return 1;
    endcase
  endfunction

  typedef enum logic [3:0] {
    CMD_LOCAL_LD   = 4'd0,  // local scratchpad -> input port
    CMD_LOCAL_ST   = 4'd1,  // output port -> local scratchpad
    CMD_CONST      = 4'd2,  // val1/val2 pattern -> input port
    CMD_XFER       = 4'd3,  // output port -> input port of this or another lane
    CMD_SHARED_LD  = 4'd4,  // shared scratchpad -> local scratchpad
    CMD_SHARED_ST  = 4'd5,  // local scratchpad -> shared scratchpad
    CMD_CONFIG     = 4'd6,  // local scratchpad -> fabric configuration
    CMD_BARRIER_LD = 4'd7,  // younger commands wait for older loads
    CMD_BARRIER_ST = 4'd8   // younger commands wait for older stores
  } cmd_op_e;

  // A vector-stream command. The lane mask selects the lanes that execute it;
  // every address is offset by lane_index * lane_stride in each lane.
  typedef struct packed {
    cmd_op_e                 op;
    logic [NLANES-1:0]       lanes;
    logic [ADDR_W-1:0]       addr;        // local scratchpad word address
    logic [ADDR_W-1:0]       saddr;       // shared scratchpad word address
    logic signed [ADDR_W-1:0] lane_stride;
    logic signed [CNT_W-1:0] c_i;         // inner address stride
    logic signed [CNT_W-1:0] c_j;         // outer address stride
    logic [CNT_W-1:0]        n_i;         // inner trip count (also n_p for XFER)
    logic [CNT_W-1:0]        n_j;         // outer trip count
    logic signed [CNT_W-1:0] s_ji;        // stretch, fixed point (FRAC bits), also s_p
    logic [CNT_W-1:0]        n_c;         // consumption (reuse) count, integer 0..255 (0 = 1)
    logic signed [CNT_W-1:0] s_c;         // consumption stretch, fixed point
    logic [2:0]              port;        // in_port (ld/const/xfer dst) or out_port (st/xfer src)
    logic [2:0]              port2;       // destination input port of XFER
    logic [2:0]              dlane;       // XFER destination = (lane + dlane) mod NLANES
    word_t                   val1;
    word_t                   val2;
  } cmd_t;

  // One group of words moved on a 512-bit bus in one cycle.
  typedef struct packed {
    logic [3:0]  n;     // number of valid words, 0..8 (word 0 first)
    logic        eor;   // the last word closes a stream row (inner loop)
    line_t       data;
  } wgroup_t;

  // One transfer on the XFER bus: a word group for input port `port` of lane `lane`.
  // The first group of a stream also carries the destination's reuse parameters.
  typedef struct packed {
    logic                    v;
    logic [2:0]              lane;
    logic [2:0]              port;
    logic                    cfg;
    logic [CNT_W-1:0]        nr;    // fixed point
    logic signed [CNT_W-1:0] sr;    // fixed point
    wgroup_t                 g;
  } xfer_t;

  // Number of whole iterations in a fixed-point length (rounded up, at least 0).
  function automatic logic [CNT_W-1:0] fx_ceil(input logic signed [CNT_W+FRAC:0] v);
    logic signed [CNT_W+FRAC:0] r;
    if (v <= 0) return '0;
    r = (v + (1 << FRAC) - 1) >>> FRAC;
    return r[CNT_W-1:0];
  endfunction

  // Functional-unit opcodes of the compute fabric tiles.
  typedef enum logic [3:0] {
    OP_NOP   = 4'd0,
    OP_PASS  = 4'd1,   // out = a
    OP_ADD   = 4'd2,   // 64-bit add
    OP_SUB   = 4'd3,
    OP_MUL   = 4'd4,   // 64-bit multiply, low half
    OP_ADD4  = 4'd5,   // 4-way 16-bit subword add
    OP_SUB4  = 4'd6,
    OP_MUL4  = 4'd7,   // 4-way Q8.8 fixed-point multiply
    OP_ACC   = 4'd8,   // accumulate a; emit and clear when b[0] is set
    OP_DIV   = 4'd9,   // unsigned divide (sqrt/div unit only)
    OP_SQRT  = 4'd10   // integer square root (sqrt/div unit only)
  } fu_op_e;

  // One 64-bit fabric link with its valid bit (the mesh has no flow control).
  typedef struct packed {
    logic  v;
    word_t d;
  } link_t;

  // Compute fabric geometry and configuration-word map (one 64-bit word each).
  localparam int unsigned FROWS   = 5;
  localparam int unsigned FCOLS   = 5;
  localparam int unsigned NSW     = (FROWS + 1) * (FCOLS + 1);  // switches
  localparam int unsigned NTEMP   = 2;                          // temporal tiles
  localparam int unsigned TINSTS  = 32;                         // instructions per temporal tile
  localparam int unsigned NIWORDS = 27;                         // input-port words (8+8+4+4+2+1)
  localparam int unsigned CFG_SW    = 0;                        // NSW switch words
  localparam int unsigned CFG_TILE  = CFG_SW + NSW;             // FROWS*FCOLS tile words
  localparam int unsigned CFG_OSEL  = CFG_TILE + FROWS * FCOLS; // NOPORT*8 output-word selects
  localparam int unsigned CFG_FIRE  = CFG_OSEL + NOPORT * 8;    // port -> dataflow map
  localparam int unsigned CFG_LAT   = CFG_FIRE + 1;             // dataflow latencies
  localparam int unsigned CFG_TINST = CFG_LAT + 1;              // NTEMP*TINSTS instructions
  localparam int unsigned CFG_TQSRC = CFG_TINST + NTEMP * TINSTS; // queue sources per temporal tile
  localparam int unsigned NCFG      = CFG_TQSRC + NTEMP;

  // First word of input port p in the flattened list of input-port words.
  function automatic int unsigned iword_base(input int unsigned p);
    int unsigned b;
    b = 0;
    for (int unsigned q = 0; q < p; q++) b += port_words(q);
    return b;
  endfunction

  typedef enum logic [1:0] {FU_ADD = 2'd0, FU_MUL = 2'd1, FU_SQRT = 2'd2} fu_kind_e;

endpackage
