// memory_side_cache: direct-mapped cache of 64-byte vector lines in a rank.
//
// LPN reads vector elements through this cache.  A lookup presents a line
// address; one cycle later resp_valid comes with resp_hit and, on a hit,
// the line.  On a miss the rank fetches the line through the memory
// interface unit and writes it back with fill_*.  invalidate (decoded from a
// cache instruction) clears every valid bit, which is needed whenever the
// vector in DRAM is replaced for a new OT extension round.
//
// Size: CACHE_BYTES / 64 lines (256 KB default, one of the two sizes the
// paper evaluates; 1 MB is the other).  Line size 64 bytes is the paper's.
// Direct mapping (index = low line-address bits, tag = the rest) is this
// design's choice; the paper does not give the organisation.
module memory_side_cache
  import ironman_pkg::*;
#(
  parameter int unsigned CACHE_BYTES = 262144,
  parameter int unsigned LINE_BYTES  = 64
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               invalidate,
  input  logic               lookup_valid,
  input  logic [LADDR_W-1:0] lookup_addr,
  output logic               resp_valid,
  output logic               resp_hit,
  output line_t              resp_line,
  input  logic               fill_valid,
  input  logic [LADDR_W-1:0] fill_addr,
  input  line_t              fill_line
);
  localparam int unsigned LINES = CACHE_BYTES / LINE_BYTES;
  localparam int unsigned IW    = $clog2(LINES);
  localparam int unsigned TW    = LADDR_W - IW;

  line_t          data  [LINES];
  logic [TW-1:0]  tags  [LINES];
  logic [LINES-1:0] valid;

  logic [IW-1:0] l_idx, f_idx;
  logic [TW-1:0] l_tag, f_tag;
  assign l_idx = lookup_addr[IW-1:0];
  assign l_tag = lookup_addr[LADDR_W-1:IW];
  assign f_idx = fill_addr[IW-1:0];
  assign f_tag = fill_addr[LADDR_W-1:IW];

  always_ff @(posedge clk) begin
    resp_line <= data[l_idx];
    if (fill_valid) begin
      data[f_idx] <= fill_line;
      tags[f_idx] <= f_tag;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid      <= '0;
      resp_valid <= 1'b0;
      resp_hit   <= 1'b0;
    end else begin
      resp_valid <= lookup_valid;
      resp_hit   <= lookup_valid && valid[l_idx] && tags[l_idx] == l_tag;
      if (invalidate)      valid <= '0;
      else if (fill_valid) valid[f_idx] <= 1'b1;
    end
  end
endmodule
