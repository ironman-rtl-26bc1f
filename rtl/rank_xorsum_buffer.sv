// rank_xorsum_buffer: per-row XOR accumulation of LPN non-zeros in a rank.
//
// Because the sorted index stream interleaves rows (row look-ahead), several
// rows are open at once.  The buffer keeps a 128-bit partial sum and a count
// per local row of the current job (BLOCK_ROWS rows).  Each accepted element
// is XORed into its row; the WEIGHT-th element (10 non-zeros per row of the
// LPN matrix) completes the row, which leaves as Rank.XorSum with global row
// number row_base + local row, and the entry is freed.  The output is a
// register with valid/ready; while it is full and not taken, in_ready is low.
// State lives in plain memories (no reset): after reset a sweep zeroes one
// count per cycle (BLOCK_ROWS cycles, in_ready low meanwhile); each count
// carries the epoch of the job that wrote it and clear only advances the
// epoch, so a new job sees every row empty.
// The row weight 10 and the per-row XOR are the paper's; the block size and
// the count-based completion are this design's.
module rank_xorsum_buffer
  import ironman_pkg::*;
#(
  parameter int unsigned BLOCK_ROWS = 1024,
  parameter int unsigned WEIGHT     = 10
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clear,
  input  logic [ROW_W-1:0]              row_base,
  input  logic                          in_valid,
  output logic                          in_ready,
  input  logic [$clog2(BLOCK_ROWS)-1:0] in_row,
  input  block_t                        in_data,
  output logic                          out_valid,
  input  logic                          out_ready,
  output logic [ROW_W-1:0]              out_row,
  output block_t                        out_data
);
  localparam int unsigned CW = $clog2(WEIGHT + 1);
  localparam int unsigned EW = 4;
  localparam int unsigned RW = $clog2(BLOCK_ROWS);

  block_t           acc [BLOCK_ROWS];
  logic [EW+CW-1:0] cnt [BLOCK_ROWS];   // {epoch, count}

  logic [EW-1:0]    epoch;
  logic             init;
  logic [RW-1:0]    init_addr;
  logic [EW+CW-1:0] cnt_rd;
  logic [CW-1:0]    cur;
  logic             take, complete;
  block_t           sum;

  assign cnt_rd   = cnt[in_row];
  assign cur      = (cnt_rd[EW+CW-1:CW] == epoch) ? cnt_rd[CW-1:0] : '0;
  assign in_ready = !init && (!out_valid || out_ready);
  assign take     = in_valid && in_ready;
  assign sum      = (cur == '0) ? in_data : (acc[in_row] ^ in_data);
  assign complete = (32'(cur) == WEIGHT - 1);

  always_ff @(posedge clk) begin
    if (take) acc[in_row] <= sum;
    if (init)      cnt[init_addr] <= '0;
    else if (take) cnt[in_row]    <= {epoch, complete ? CW'(0) : cur + 1'b1};
    if (take && complete) begin
      out_row  <= row_base + ROW_W'(in_row);
      out_data <= sum;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      epoch     <= '0;
      init      <= 1'b1;
      init_addr <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (take && complete)       out_valid <= 1'b1;
      if (clear)                  epoch <= epoch + 1'b1;
      if (init) begin
        init_addr <= init_addr + 1'b1;
        if (32'(init_addr) == BLOCK_ROWS - 1) init <= 1'b0;
      end
    end
  end
endmodule
