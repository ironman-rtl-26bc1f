// rank_nmp: the near-memory LPN engine of one DRAM rank.
//
// It computes, for each row of its share of the LPN matrix, the XOR of the
// vector elements the row selects (10 per row), reading everything from its
// own rank so that all ranks work in parallel.  Data path:
//   instruction buffer -> instruction decoder -> index address generator
//   (streams the sorted Colidx/Rowidx pairs from DRAM and forms addresses)
//   -> memory-side cache lookup -> on a miss, memory interface unit (DDR4
//   commands on ddr_ca, data on dq) and cache fill -> 128-bit lane select
//   -> XorSum buffer -> Rank.XorSum (rsum_*) to the DIMM module.
// The memory interface unit is shared by index-line fetches (id 0) and
// vector-line misses (id 1, which win when both ask).
//
// Elements are processed one at a time: a hit costs 3 cycles (take pair,
// cache lookup, accumulate), a miss adds a DRAM read.  Jobs run in
// instruction order; busy is high while one is running.
//
// The set of units and their connections follow the paper's rank-module
// figure.  The sequential (non-overlapped) element loop is this design's
// simplification: the paper does not describe the rank's pipelining.
module rank_nmp
  import ironman_pkg::*;
#(
  parameter int unsigned CACHE_BYTES = 262144,
  parameter int unsigned BLOCK_ROWS  = 1024,
  parameter int unsigned WEIGHT      = 10,
  parameter int unsigned IBUF_DEPTH  = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  // Rank.NMP.Inst from the DIMM module
  input  logic               inst_valid,
  output logic               inst_ready,
  input  nmp_inst_t          inst,
  // Rank.XorSum to the DIMM module
  output logic               rsum_valid,
  input  logic               rsum_ready,
  output logic [ROW_W-1:0]   rsum_row,
  output block_t             rsum_data,
  // DDR pins
  output ddr_ca_t            ddr_ca,
  input  logic               dq_valid,
  input  logic [BEAT_W-1:0]  dq_data,
  // status and event pulses
  output logic               busy,
  output logic               cache_hit_pulse,
  output logic               cache_miss_pulse,
  output logic               row_hit_pulse,
  output logic               row_miss_pulse
);
  localparam int unsigned RW = $clog2(BLOCK_ROWS);

  // ------------------------------------------------ instruction path
  logic      ib_valid, ib_ready;
  nmp_inst_t ib_inst;
  logic      lpn_start, cache_inv, bad_op;
  lpn_job_t  job;
  logic      iag_busy, iag_done;

  sync_fifo #(.W($bits(nmp_inst_t)), .DEPTH(IBUF_DEPTH)) u_inst_buffer (
    .clk, .rst_n,
    .in_valid(inst_valid), .in_ready(inst_ready), .in_data(inst),
    .out_valid(ib_valid), .out_ready(ib_ready), .out_data(ib_inst),
    .level()
  );

  typedef enum logic [2:0] {S_IDLE, S_LOOK, S_MISS_REQ, S_MISS_WAIT, S_ACC} state_e;
  state_e state;

  inst_decoder u_dec (
    .clk, .rst_n,
    .in_valid(ib_valid), .in_ready(ib_ready), .in_inst(ib_inst),
    .rank_busy(busy),
    .lpn_start, .lpn_job(job), .cache_inv, .bad_op
  );

  assign busy = iag_busy || (state != S_IDLE);

  // ------------------------------------------------ index address generator
  logic               ireq_valid, ireq_ready;
  logic [LADDR_W-1:0] ireq_addr;
  logic               iline_valid;
  logic               pair_valid, pair_ready;
  logic [LADDR_W-1:0] pair_vaddr;
  logic [1:0]         pair_lane;
  logic [31:0]        pair_row;

  line_t miu_line;
  logic  miu_resp_valid, miu_resp_id;

  index_address_generator u_iag (
    .clk, .rst_n,
    .start(lpn_start), .job, .busy(iag_busy), .done(iag_done),
    .idx_req_valid(ireq_valid), .idx_req_ready(ireq_ready), .idx_req_addr(ireq_addr),
    .idx_line_valid(iline_valid), .idx_line(miu_line),
    .pair_valid, .pair_ready, .pair_vaddr, .pair_lane, .pair_row
  );
  assign iline_valid = miu_resp_valid && !miu_resp_id;

  // ------------------------------------------------ cache and DRAM
  logic               look_valid;
  logic               c_resp_valid, c_hit;
  line_t              c_line;
  logic               fill_valid;
  logic [LADDR_W-1:0] cur_addr;
  logic [1:0]         cur_lane;
  logic [RW-1:0]      cur_row;
  block_t             elem;

  memory_side_cache #(.CACHE_BYTES(CACHE_BYTES)) u_cache (
    .clk, .rst_n,
    .invalidate(cache_inv),
    .lookup_valid(look_valid), .lookup_addr(pair_vaddr),
    .resp_valid(c_resp_valid), .resp_hit(c_hit), .resp_line(c_line),
    .fill_valid, .fill_addr(cur_addr), .fill_line(miu_line)
  );

  logic               m_req_valid, m_req_ready, m_req_id;
  logic [LADDR_W-1:0] m_req_addr;
  logic               vmiss_req;
  assign vmiss_req   = (state == S_MISS_REQ);
  assign m_req_valid = vmiss_req || ireq_valid;
  assign m_req_addr  = vmiss_req ? cur_addr : ireq_addr;
  assign m_req_id    = vmiss_req;
  assign ireq_ready  = m_req_ready && !vmiss_req;

  memory_interface_unit u_miu (
    .clk, .rst_n,
    .req_valid(m_req_valid), .req_ready(m_req_ready), .req_addr(m_req_addr), .req_id(m_req_id),
    .resp_valid(miu_resp_valid), .resp_line(miu_line), .resp_id(miu_resp_id),
    .ddr_ca, .dq_valid, .dq_data,
    .row_hit_pulse, .row_miss_pulse
  );

  // ------------------------------------------------ XorSum buffer
  logic              xs_valid, xs_ready;
  logic [ROW_W-1:0]  row_base;

  rank_xorsum_buffer #(.BLOCK_ROWS(BLOCK_ROWS), .WEIGHT(WEIGHT)) u_xorsum (
    .clk, .rst_n, .clear(lpn_start), .row_base,
    .in_valid(xs_valid), .in_ready(xs_ready), .in_row(cur_row), .in_data(elem),
    .out_valid(rsum_valid), .out_ready(rsum_ready), .out_row(rsum_row), .out_data(rsum_data)
  );

  // ------------------------------------------------ element loop
  assign look_valid = (state == S_IDLE) && pair_valid;
  assign pair_ready = look_valid;
  assign fill_valid = (state == S_MISS_WAIT) && miu_resp_valid && miu_resp_id;
  assign xs_valid   = (state == S_ACC);
  assign cache_hit_pulse  = (state == S_LOOK) && c_resp_valid && c_hit;
  assign cache_miss_pulse = (state == S_LOOK) && c_resp_valid && !c_hit;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; cur_addr <= '0; cur_lane <= '0; cur_row <= '0;
      elem <= '0; row_base <= '0;
    end else begin
      if (lpn_start) row_base <= job.row_base;
      unique case (state)
        S_IDLE: if (pair_valid) begin
          cur_addr <= pair_vaddr;
          cur_lane <= pair_lane;
          cur_row  <= RW'(pair_row);
          state    <= S_LOOK;
        end
        S_LOOK: if (c_hit) begin
          elem  <= c_line[BLOCK_W*cur_lane +: BLOCK_W];
          state <= S_ACC;
        end else begin
          state <= S_MISS_REQ;
        end
        S_MISS_REQ:  if (m_req_ready) state <= S_MISS_WAIT;
        S_MISS_WAIT: if (miu_resp_valid && miu_resp_id) begin
          elem  <= miu_line[BLOCK_W*cur_lane +: BLOCK_W];
          state <= S_ACC;
        end
        S_ACC: if (xs_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !bad_op);
  assert property (@(posedge clk) disable iff (!rst_n) pair_valid |-> 32'(pair_row) < BLOCK_ROWS);

endmodule
