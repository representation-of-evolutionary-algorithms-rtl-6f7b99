// nde_pkg: types and constants shared by the distributed NDE evolutionary
// algorithm platform.
//
// A tree in Node-Depth Encoding (NDE) is a list of (node, depth) pairs in
// depth-first order; one pair is an nde_entry_t of 32 bits. Two entries are
// packed into one 64-bit word of the system bus (entry 2i in bits [31:0],
// entry 2i+1 in bits [63:32]). The 64-bit bus width follows the paper; the
// 16-bit field widths, the word formats and the address map are this
// design's own choices.
//
// Address map of the 16-bit word address used on the memory-mapped links:
//   [15:14] region: 0 = "from" tree words, 1 = "to" tree words, 2 = control,
//           3 = command (Central -> Satellite) or end of trees (Satellite ->
//           Central)
//   [13:0]  word index inside the region
package nde_pkg;

  localparam int unsigned BUS_W   = 64;   // system bus width (paper: 64 bits)
  localparam int unsigned ADDR_W  = 16;   // word address on the MM links
  localparam int unsigned NODE_W  = 16;   // node id field
  localparam int unsigned DEPTH_W = 16;   // depth field
  localparam int unsigned LEN_W   = 16;   // tree length field
  localparam int unsigned WGT_W   = 16;   // edge weight
  localparam int unsigned DELTA_W = 24;   // signed weight change

  // Weight value returned by the graph memory for a pair with no edge.
  localparam logic [WGT_W-1:0] NO_EDGE = '1;

  typedef logic [NODE_W-1:0]  node_t;
  typedef logic [DEPTH_W-1:0] depth_t;
  typedef logic [LEN_W-1:0]   len_t;
  typedef logic [WGT_W-1:0]   wgt_t;
  typedef logic signed [DELTA_W-1:0] delta_t;
  typedef logic [BUS_W-1:0]   word_t;
  typedef logic [ADDR_W-1:0]  addr_t;

  typedef struct packed {
    node_t  node;
    depth_t depth;
  } nde_entry_t;

  typedef enum logic [1:0] {
    REG_FROM = 2'd0,
    REG_TO   = 2'd1,
    REG_CTRL = 2'd2,
    REG_CMD  = 2'd3
  } region_e;

  // Command word, Central -> Satellite, region 3, after an accepted result:
  // bit 0 = 1 asks the Satellite to send its trees, 0 makes it drop them.
  localparam logic [63:0] CMD_FETCH   = 64'd1;
  localparam logic [63:0] CMD_DISCARD = 64'd0;

  // Job control word, Central -> Satellite, written last to REG_CTRL.
  typedef struct packed {
    logic [31:0] seed;
    len_t        len_to;
    len_t        len_from;
  } job_word_t;

  // Result status word, Satellite -> Central, written last to REG_CTRL.
  typedef struct packed {
    logic        accepted;
    logic [6:0]  worker;
    delta_t      delta;
    len_t        len_to;
    len_t        len_from;
  } result_word_t;

  function automatic addr_t make_addr(region_e r, logic [13:0] idx);
    return {r, idx};
  endfunction

  // Multiply-high range reduction: maps a 16-bit random value onto [0, n).
  function automatic len_t scale_rand(logic [15:0] r, len_t n);
    logic [31:0] p;
    p = 32'(r) * 32'(n);
    return p[31:16];
  endfunction

  // xorshift32 step used as the random source of every unit.
  function automatic logic [31:0] xorshift32(logic [31:0] x);
    logic [31:0] y;
    y = x ^ (x << 13);
    y = y ^ (y >> 17);
    y = y ^ (y << 5);
    return y;
  endfunction

endpackage
