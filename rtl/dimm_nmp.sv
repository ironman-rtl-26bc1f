// dimm_nmp: the DIMM-level module of one Ironman processing unit.
//
// It runs SPCOT (GGM tree expansion) and joins its leaves with the LPN
// partial sums arriving from the two rank modules.
//   * Inst Queue: a FIFO of NMP instructions from the host.  The head is
//     dispatched by opcode: OP_LPN / OP_CACHE_INV go to the rank named by
//     rank_id (Rank.NMP.Inst), OP_SET_TAG loads the ChaCha tag register,
//     OP_NOP is dropped, and all SPCOT ops go to the unified unit.
//   * Unified unit (node stack, hybrid schedule, key generation / message
//     decoding) feeding the ChaCha8 GGM expansion unit.
//   * DIMM XorSum buffer: COT row r = SPCOT leaf r xor Rank.XorSum r, where
//     leaf row = tree * 4^DEPTH + leaf index.  It is cleared by OP_RUN, so
//     a batch's LPN instructions must be queued after its OP_RUN (then no
//     rank sum of the batch can arrive before the clear).
//   * Outputs: DIMM.COT (four 128-bit lanes per cycle) and the sender's
//     GGM keys (Sender.key), which the host sends to the receiver.
// Timing: one instruction per cycle is dispatched when its target is ready;
// SPCOT instructions wait until the XorSum buffer's reset sweep is over.
//
// The unit list follows the paper's DIMM-module figure.  The tag register
// and the row numbering of leaves are this design's choices.
module dimm_nmp
  import ironman_pkg::*;
#(
  parameter int unsigned TREES         = 4,
  parameter int unsigned DEPTH         = 6,
  parameter int unsigned STACK_ENTRIES = 192,
  parameter int unsigned IQ_DEPTH      = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // NMP instructions from the host memory controller
  input  logic                 inst_valid,
  output logic                 inst_ready,
  input  nmp_inst_t            inst,
  // Rank.NMP.Inst to rank 0 / rank 1
  output logic [1:0]           rank_inst_valid,
  input  logic [1:0]           rank_inst_ready,
  output nmp_inst_t            rank_inst,
  // Rank.XorSum from rank 0 / rank 1
  input  logic [1:0]           rs_valid,
  output logic [1:0]           rs_ready,
  input  logic [1:0][ROW_W-1:0] rs_row,
  input  block_t [1:0]         rs_data,
  // DIMM.COT
  output logic [3:0]           cot_valid,
  output logic [3:0][ROW_W-1:0] cot_row,
  output block_t [3:0]         cot_data,
  // Sender.key
  output logic                 key_valid,
  output logic [TREE_W-1:0]    key_tree,
  output logic [LEVEL_W-1:0]   key_level,
  output logic [1:0]           key_pos,
  output block_t               key_data,
  // status
  output logic                 spcot_busy,
  output logic                 spcot_done,
  output role_e                role
);
  localparam int unsigned LEAVES = 4 ** DEPTH;
  localparam int unsigned ROWS   = TREES * LEAVES;

  // ------------------------------------------------ Inst Queue and dispatch
  logic      q_valid, q_ready;
  nmp_inst_t q_inst;

  sync_fifo #(.W($bits(nmp_inst_t)), .DEPTH(IQ_DEPTH)) u_inst_queue (
    .clk, .rst_n,
    .in_valid(inst_valid), .in_ready(inst_ready), .in_data(inst),
    .out_valid(q_valid), .out_ready(q_ready), .out_data(q_inst),
    .level()
  );

  logic   to_rank, to_tag, to_spcot;
  logic   cfg_ready;
  logic   xs_ready;     // XorSum buffer has finished its reset sweep
  block_t tag;

  assign to_rank  = is_rank_op(q_inst.op);
  assign to_tag   = (q_inst.op == OP_SET_TAG);
  assign to_spcot = !to_rank && !to_tag && (q_inst.op != OP_NOP);

  assign rank_inst          = q_inst;
  assign rank_inst_valid[0] = q_valid && to_rank && !q_inst.rank_id;
  assign rank_inst_valid[1] = q_valid && to_rank &&  q_inst.rank_id;

  always_comb begin
    if (to_rank)        q_ready = rank_inst_ready[q_inst.rank_id];
    else if (to_spcot)  q_ready = cfg_ready && xs_ready;
    else                q_ready = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                             tag <= '0;
    else if (q_valid && to_tag)             tag <= q_inst.data;
  end

  // ------------------------------------------------ SPCOT
  logic                 exp_valid, res_valid;
  node_t                exp_node, res_node;
  block_t [3:0]         res_children;
  logic                 leaf_valid;
  logic [TREE_W-1:0]    leaf_tree;
  logic [IDX_W-1:0]     leaf_group;
  logic [3:0]           leaf_mask;
  block_t [3:0]         leaf_data;
  logic                 run_start;

  unified_unit #(.TREES(TREES), .DEPTH(DEPTH), .STACK_ENTRIES(STACK_ENTRIES)) u_unified (
    .clk, .rst_n,
    .cfg_valid(q_valid && to_spcot && xs_ready), .cfg_ready, .cfg_inst(q_inst),
    .busy(spcot_busy), .done(spcot_done), .role,
    .exp_valid, .exp_node, .res_valid, .res_node, .res_children,
    .leaf_valid, .leaf_tree, .leaf_group, .leaf_mask, .leaf_data,
    .key_valid, .key_tree, .key_level, .key_pos, .key_data
  );

  ggm_expansion_unit u_expand (
    .clk, .rst_n,
    .in_valid(exp_valid), .in_node(exp_node), .tag,
    .out_valid(res_valid), .out_node(res_node), .out_children(res_children)
  );

  // ------------------------------------------------ DIMM XorSum buffer
  logic [ROW_W-1:0] leaf_group4;
  assign leaf_group4 = ROW_W'(leaf_tree) * ROW_W'(LEAVES / 4) + ROW_W'(leaf_group);
  assign run_start   = q_valid && to_spcot && xs_ready && cfg_ready && (q_inst.op == OP_RUN);

  dimm_xorsum_buffer #(.ROWS(ROWS)) u_xorsum (
    .clk, .rst_n, .clear(run_start), .ready(xs_ready),
    .leaf_valid, .leaf_group4, .leaf_mask, .leaf_data,
    .rs_valid, .rs_ready, .rs_row, .rs_data,
    .cot_valid, .cot_row, .cot_data
  );

endmodule
