// index_address_generator: streams the sorted LPN indices and produces the
// DRAM addresses of the vector elements they select.
//
// An LPN job (from the instruction decoder) names a run of nnz (row, col)
// pairs stored sequentially in DRAM, eight 64-bit pairs per 64-byte line
// (col in bits [31:0], local row in [63:32]), and the base line of the
// 128-bit vector.  The Index Counter walks the pair array line by line and
// requests each line from the memory interface unit (idx_req_*), at most as
// many as the Index Buffer (a FIFO of lines) can still take, so requests
// never overrun it.  Pairs are then taken from the head line one per cycle
// and turned into
//   vaddr = vec_base + col / 4   (line holding element col)
//   lane  = col mod 4            (128-bit lane in that line)
//   row   = local row
// on the pair_* valid/ready output.  done pulses when the last pair leaves.
//
// The paper names the index buffer and index counter and says the indices
// are streamed from DRAM and turned into addresses locally; the pair packing,
// buffer size and handshakes are this design's.
module index_address_generator
  import ironman_pkg::*;
#(
  parameter int unsigned BUF_LINES = 4
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  lpn_job_t           job,
  output logic               busy,
  output logic               done,
  // index line fetch
  output logic               idx_req_valid,
  input  logic               idx_req_ready,
  output logic [LADDR_W-1:0] idx_req_addr,
  input  logic               idx_line_valid,
  input  line_t              idx_line,
  // element addresses
  output logic               pair_valid,
  input  logic               pair_ready,
  output logic [LADDR_W-1:0] pair_vaddr,
  output logic [1:0]         pair_lane,
  output logic [31:0]        pair_row
);
  localparam int unsigned LW = $clog2(BUF_LINES + 1);

  lpn_job_t     j;
  logic [31:0]  lines_total, lines_req, pairs_left;
  logic [LW-1:0] outstanding;
  logic [2:0]   pos;

  logic          fifo_out_valid, fifo_in_ready;
  line_t         head;
  logic [LW-1:0] fifo_level;
  logic          pop_line;

  sync_fifo #(.W(LINE_W), .DEPTH(BUF_LINES)) u_index_buffer (
    .clk, .rst_n,
    .in_valid (idx_line_valid), .in_ready(fifo_in_ready), .in_data(idx_line),
    .out_valid(fifo_out_valid), .out_ready(pop_line), .out_data(head),
    .level    (fifo_level)
  );

  // Index Counter: request while lines remain and the buffer has room
  assign idx_req_valid = busy && lines_req != lines_total &&
                         (32'(fifo_level) + 32'(outstanding)) < BUF_LINES;
  assign idx_req_addr  = j.idx_base + lines_req;

  logic [PAIR_W-1:0] pr;
  assign pr         = head[PAIR_W*pos +: PAIR_W];
  assign pair_valid = busy && fifo_out_valid && pairs_left != '0;
  assign pair_vaddr = j.vec_base + (pr[31:0] >> 2);
  assign pair_lane  = pr[1:0];
  assign pair_row   = pr[63:32];

  logic take;
  assign take     = pair_valid && pair_ready;
  assign pop_line = take && (pos == 3'd7 || pairs_left == 32'd1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; j <= '0;
      lines_total <= '0; lines_req <= '0; pairs_left <= '0;
      outstanding <= '0; pos <= '0;
    end else begin
      done <= 1'b0;
      outstanding <= outstanding + LW'(idx_req_valid && idx_req_ready)
                                 - LW'(idx_line_valid);
      if (start && !busy) begin
        j           <= job;
        busy        <= (job.nnz != '0);
        done        <= (job.nnz == '0);
        lines_total <= (job.nnz + 32'd7) >> 3;
        lines_req   <= '0;
        pairs_left  <= job.nnz;
        pos         <= '0;
      end else begin
        if (idx_req_valid && idx_req_ready) lines_req <= lines_req + 1;
        if (take) begin
          pos        <= pop_line ? 3'd0 : pos + 1'b1;
          pairs_left <= pairs_left - 1;
          if (pairs_left == 32'd1) begin busy <= 1'b0; done <= 1'b1; end
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) idx_line_valid |-> fifo_in_ready);
endmodule
