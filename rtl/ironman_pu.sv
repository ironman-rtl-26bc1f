// ironman_pu: one Ironman processing unit, i.e. one DIMM with its DIMM-level
// module and the rank-level modules of its two ranks.
//
// The host writes NMP instructions (inst_*).  SPCOT runs in the DIMM module;
// each rank module computes LPN partial sums from its own rank's DRAM
// (DDR4 C/A on ddr_ca[r], read data on dq_*[r]) and returns them to the
// DIMM module, which emits the final correlated-OT blocks on cot_* and the
// sender's GGM keys on key_*.
//
// Per the paper, a PU is one DIMM-NMP plus its Rank-NMPs and Ironman scales
// by adding PUs (DIMMs); the two ranks per DIMM follow the evaluated system.
// The DRAM devices themselves are outside this module.
module ironman_pu
  import ironman_pkg::*;
#(
  parameter int unsigned TREES         = 4,
  parameter int unsigned DEPTH         = 6,
  parameter int unsigned STACK_ENTRIES = 192,
  parameter int unsigned CACHE_BYTES   = 262144,
  parameter int unsigned BLOCK_ROWS    = 1024,
  parameter int unsigned WEIGHT        = 10
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // NMP instructions from the host
  input  logic                   inst_valid,
  output logic                   inst_ready,
  input  nmp_inst_t              inst,
  // DIMM.COT
  output logic [3:0]             cot_valid,
  output logic [3:0][ROW_W-1:0]  cot_row,
  output block_t [3:0]           cot_data,
  // Sender.key
  output logic                   key_valid,
  output logic [TREE_W-1:0]      key_tree,
  output logic [LEVEL_W-1:0]     key_level,
  output logic [1:0]             key_pos,
  output block_t                 key_data,
  // DDR4 ranks
  output ddr_ca_t [1:0]          ddr_ca,
  input  logic [1:0]             dq_valid,
  input  logic [1:0][BEAT_W-1:0] dq_data,
  // status
  output logic                   spcot_busy,
  output logic                   spcot_done,
  output logic [1:0]             rank_busy
);
  logic [1:0]             ri_valid, ri_ready;
  nmp_inst_t              ri_inst;
  logic [1:0]             rs_valid, rs_ready;
  logic [1:0][ROW_W-1:0]  rs_row;
  block_t [1:0]           rs_data;

  dimm_nmp #(.TREES(TREES), .DEPTH(DEPTH), .STACK_ENTRIES(STACK_ENTRIES)) u_dimm (
    .clk, .rst_n,
    .inst_valid, .inst_ready, .inst,
    .rank_inst_valid(ri_valid), .rank_inst_ready(ri_ready), .rank_inst(ri_inst),
    .rs_valid, .rs_ready, .rs_row, .rs_data,
    .cot_valid, .cot_row, .cot_data,
    .key_valid, .key_tree, .key_level, .key_pos, .key_data,
    .spcot_busy, .spcot_done, .role()
  );

  for (genvar r = 0; r < 2; r++) begin : g_rank
    rank_nmp #(.CACHE_BYTES(CACHE_BYTES), .BLOCK_ROWS(BLOCK_ROWS), .WEIGHT(WEIGHT)) u_rank (
      .clk, .rst_n,
      .inst_valid(ri_valid[r]), .inst_ready(ri_ready[r]), .inst(ri_inst),
      .rsum_valid(rs_valid[r]), .rsum_ready(rs_ready[r]),
      .rsum_row(rs_row[r]), .rsum_data(rs_data[r]),
      .ddr_ca(ddr_ca[r]), .dq_valid(dq_valid[r]), .dq_data(dq_data[r]),
      .busy(rank_busy[r]),
      .cache_hit_pulse(), .cache_miss_pulse(), .row_hit_pulse(), .row_miss_pulse()
    );
  end

endmodule
