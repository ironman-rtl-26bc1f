// ggm_expansion_unit: one 4-ary GGM expansion step per cycle.
//
// A parent node (128-bit seed plus its tree slot, level and index) enters;
// 8 cycles later its four 128-bit children leave, all from a single ChaCha8
// call (the paper's PRG-customized 4-ary expansion: one ChaCha8 call replaces
// four AES calls).  Three parts, named after the paper's block diagram:
//   * Padd Counter - the 32-bit counter word of the ChaCha state.  It is the
//     level of the parent, so both parties derive the same children for the
//     same node whatever order they expand nodes in.
//   * Concat Unit  - builds the 16-word ChaCha input: the four ChaCha
//     constants, the seed (words 4-7), the tag from the NMP instruction
//     (words 8-11), the counter (word 12) and zeros (words 13-15).
//   * ChaCha8 Core - the 8-stage pipeline (chacha8_core).
// Child j is keystream words 4j..4j+3.
//
// Timing: in_valid at edge N gives out_valid at edge N+8; one input per cycle.
// out_node carries only the parent's slot, level and index down the pipeline;
// its seed field is tied to zero because the parent seed is not needed after
// expansion, and carrying it would add 128 flops per stage.
// The block names and the "seed, tag" inputs follow the paper's figure; the
// layout of the ChaCha state and the counter's meaning are this design's.
module ggm_expansion_unit
  import ironman_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  node_t         in_node,
  input  block_t        tag,
  output logic          out_valid,
  output node_t         out_node,       // parent descriptor, seed field zero
  output block_t [3:0]  out_children
);

  localparam int unsigned DESC_W = TREE_W + LEVEL_W + IDX_W;
  localparam logic [127:0] CHACHA_CONST =
    {32'h6b206574, 32'h79622d32, 32'h3320646e, 32'h61707865};

  // Padd Counter
  logic [31:0] padd_ctr;
  assign padd_ctr = 32'(in_node.level);

  // Concat Unit
  logic [511:0] state;
  assign state = {96'd0, padd_ctr, tag, in_node.seed, CHACHA_CONST};

  logic [DESC_W-1:0] desc_in, desc_out;
  logic [511:0]      blk;
  assign desc_in = {in_node.tree, in_node.level, in_node.idx};

  chacha8_core #(.TAG_W(DESC_W)) u_core (
    .clk, .rst_n,
    .in_valid (in_valid),
    .in_state (state),
    .in_tag   (desc_in),
    .out_valid(out_valid),
    .out_block(blk),
    .out_tag  (desc_out)
  );

  always_comb begin
    out_node      = '0;
    {out_node.tree, out_node.level, out_node.idx} = desc_out;
    for (int j = 0; j < 4; j++) out_children[j] = blk[128*j +: 128];
  end

endmodule
