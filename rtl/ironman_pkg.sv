// ironman_pkg: types and constants shared by the Ironman near-memory OT
// extension accelerator.
//
// The accelerator sits on the buffer chip of a DDR4 DIMM.  A DIMM-side module
// runs SPCOT (4-ary GGM tree expansion with a ChaCha8 PRG) and two rank-side
// modules run LPN encoding (sparse XOR sums over a vector held in DRAM).
// Everything is a 128-bit block; a ChaCha8 call yields four of them.
//
// Fixed field widths (TREE_W, LEVEL_W, IDX_W, ROW_W) bound the largest trees
// and row windows the parameters may describe; they are this design's choice.
// The instruction format (nmp_inst_t) and the DDR command encoding are also
// this design's own: the paper names NMP instructions and DDR C/A but gives
// no encoding.
package ironman_pkg;

  localparam int unsigned BLOCK_W  = 128;     // lambda = 128 (security parameter)
  localparam int unsigned M_ARY    = 4;       // 4-ary GGM expansion
  localparam int unsigned TREE_W   = 4;       // tree-slot field width
  localparam int unsigned LEVEL_W  = 4;       // tree level field width
  localparam int unsigned IDX_W    = 24;      // node index within a level
  localparam int unsigned ROW_W    = 32;      // LPN row / COT index
  localparam int unsigned LADDR_W  = 32;      // DRAM address in 64-byte lines
  localparam int unsigned LINE_W   = 512;     // 64-byte cache line = DRAM burst
  localparam int unsigned BEAT_W   = 128;     // one DQ beat as modelled here
  localparam int unsigned BEATS    = LINE_W / BEAT_W;  // = tBL = 4

  typedef logic [BLOCK_W-1:0] block_t;
  typedef logic [LINE_W-1:0]  line_t;

  typedef enum logic {ROLE_SENDER = 1'b0, ROLE_RECEIVER = 1'b1} role_e;

  // NMP instruction opcodes.  SPCOT opcodes go to the DIMM module, LPN and
  // cache opcodes are forwarded to the rank selected by rank_id.
  typedef enum logic [3:0] {
    OP_NOP       = 4'd0,
    OP_SET_TAG   = 4'd1,   // data = 128-bit ChaCha tag (key half)
    OP_SET_DELTA = 4'd2,   // data = Delta (sender)
    OP_SEED      = 4'd3,   // tree, data = root seed (sender)
    OP_ALPHA     = 4'd4,   // tree, data = alpha, the punctured leaf (receiver)
    OP_KEY       = 4'd5,   // tree, level, pos, data = received key (receiver);
                           // level 0 carries the leaf XOR sum xor Delta
    OP_RUN       = 4'd6,   // role: expand all TREES trees of the batch
    OP_LPN       = 4'd8,   // rank job: addr = Colidx/Rowidx base line,
                           // len = non-zeros, aux = vector base line,
                           // data[31:0] = row base
    OP_CACHE_INV = 4'd9    // rank: invalidate the memory-side cache
  } nmp_op_e;

  typedef struct packed {
    nmp_op_e              op;
    logic                 rank_id;
    role_e                role;
    logic [TREE_W-1:0]    tree;
    logic [LEVEL_W-1:0]   level;
    logic [1:0]           pos;
    logic [LADDR_W-1:0]   addr;
    logic [31:0]          len;
    logic [LADDR_W-1:0]   aux;
    block_t               data;
  } nmp_inst_t;

  function automatic logic is_rank_op(nmp_op_e op);
    return (op == OP_LPN) || (op == OP_CACHE_INV);
  endfunction

  // One GGM node waiting for expansion or being expanded.
  typedef struct packed {
    logic [TREE_W-1:0]  tree;
    logic [LEVEL_W-1:0] level;
    logic [IDX_W-1:0]   idx;
    block_t             seed;
  } node_t;

  // A LPN job for one rank, as produced by the instruction decoder.
  typedef struct packed {
    logic [LADDR_W-1:0] idx_base;   // first line of the packed (row, col) pairs
    logic [31:0]        nnz;        // number of pairs
    logic [LADDR_W-1:0] vec_base;   // first line of the 128-bit vector
    logic [ROW_W-1:0]   row_base;   // added to the local row number
  } lpn_job_t;

  // DDR4 command/address as driven on the rank's C/A pins.
  typedef enum logic [2:0] {
    DDR_NOP = 3'd0, DDR_ACT = 3'd1, DDR_RD = 3'd2, DDR_PRE = 3'd3
  } ddr_cmd_e;

  typedef struct packed {
    ddr_cmd_e    cmd;
    logic [3:0]  bank;   // bank group and bank, 16 banks
    logic [15:0] row;
    logic [9:0]  col;
  } ddr_ca_t;

  // Line address split used by the memory interface unit:
  // [6:0] line within the 8 KB page, [10:7] bank, [26:11] row.
  localparam int unsigned COL_LINE_W = 7;
  localparam int unsigned BANK_W     = 4;
  localparam int unsigned DROW_W     = 16;

  // Packed index pair as stored in DRAM: two pairs per 128-bit beat, eight
  // per line.  Bits [31:0] column (vector element), [63:32] local row.
  localparam int unsigned PAIR_W         = 64;
  localparam int unsigned PAIRS_PER_LINE = LINE_W / PAIR_W;

endpackage
