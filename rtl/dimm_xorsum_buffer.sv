// dimm_xorsum_buffer: joins LPN row sums with SPCOT leaves into COTs.
//
// The final COT of row r is  (XOR of the LPN non-zeros of row r, computed by
// the rank that owns r)  xor  (SPCOT leaf r).  The two halves arrive in
// unrelated orders: leaves in the GGM schedule's order, row sums in the
// sorted-index order of each rank.  This buffer keeps one 128-bit entry and a
// pending bit per row of the current batch (ROWS = TREES * leaves per tree).
// The first half to arrive is stored; when the second arrives the entry is
// XORed with it, emitted as DIMM.COT and freed.
//
// The array is split into four banks by row mod 4, so the four sibling
// leaves of a ChaCha8 call (rows 4g..4g+3) are absorbed in one cycle.  Each
// bank serves one request per cycle; leaves have priority (they cannot be
// stalled), then rank 0, then rank 1 (rs_ready tells a rank it was served).
// Outputs are registered: cot_valid[b] one cycle after the completing write.
//
// State lives in plain memories (no reset).  After reset a sweep writes one
// entry per bank per cycle (ROWS/4 cycles); ready is low until it ends and
// no leaf may arrive before.  Each entry holds a pending bit and the batch
// epoch that wrote it; clear (start of a batch) only advances the epoch, so
// entries of an unfinished earlier batch read as empty.  A batch in which
// every row completes leaves all pending bits at zero.
//
// The paper shows a XorSum buffer and an XOR producing DIMM.COT from the
// rank sums and the SPCOT nodes; the any-order join, banking and sizes are
// this design's.
module dimm_xorsum_buffer
  import ironman_pkg::*;
#(
  parameter int unsigned ROWS = 16384
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clear,
  output logic                ready,
  // SPCOT leaves: four siblings, rows 4*leaf_group4 + lane
  input  logic                leaf_valid,
  input  logic [ROW_W-1:0]    leaf_group4,
  input  logic [3:0]          leaf_mask,
  input  block_t [3:0]        leaf_data,
  // Rank.XorSum from rank 0 and rank 1
  input  logic [1:0]          rs_valid,
  output logic [1:0]          rs_ready,
  input  logic [1:0][ROW_W-1:0] rs_row,
  input  block_t [1:0]        rs_data,
  // DIMM.COT, one lane per bank
  output logic [3:0]          cot_valid,
  output logic [3:0][ROW_W-1:0] cot_row,
  output block_t [3:0]        cot_data
);
  localparam int unsigned BROWS = ROWS / 4;
  localparam int unsigned AW    = $clog2(BROWS);
  localparam int unsigned EW    = 4;

  logic [EW-1:0] epoch;
  logic          init;
  logic [AW-1:0] init_addr;

  logic [3:0]          req;
  logic [3:0][AW-1:0]  addr;
  block_t [3:0]        din;
  logic [3:0][ROW_W-1:0] rowid;
  logic [3:0]          hit;

  assign ready = !init;

  always_comb begin
    req = '0; addr = '0; din = '0; rowid = '0; rs_ready = '0;
    for (int b = 0; b < 4; b++) begin
      if (leaf_valid && leaf_mask[b]) begin
        req[b] = 1'b1; addr[b] = AW'(leaf_group4); din[b] = leaf_data[b];
        rowid[b] = {leaf_group4[ROW_W-3:0], 2'(b)};
      end else if (!init) begin
        for (int r = 1; r >= 0; r--) begin
          if (rs_valid[r] && rs_row[r][1:0] == 2'(b)) begin
            req[b] = 1'b1; addr[b] = AW'(rs_row[r] >> 2); din[b] = rs_data[r];
            rowid[b] = rs_row[r];
          end
        end
        // rank 0 wins a bank both ranks want
        if (rs_valid[0] && rs_row[0][1:0] == 2'(b)) rs_ready[0] = 1'b1;
        else if (rs_valid[1] && rs_row[1][1:0] == 2'(b)) rs_ready[1] = 1'b1;
      end
    end
  end

  for (genvar b = 0; b < 4; b++) begin : g_bank
    block_t      val [BROWS];
    logic [EW:0] tag [BROWS];     // {pending, epoch}
    logic [EW:0] tag_rd;

    assign tag_rd = tag[addr[b]];
    assign hit[b] = tag_rd[EW] && (tag_rd[EW-1:0] == epoch);

    always_ff @(posedge clk) begin
      if (init)        tag[init_addr] <= '0;
      else if (req[b]) tag[addr[b]]   <= {!hit[b], epoch};
      if (req[b] && !hit[b]) val[addr[b]] <= din[b];
      cot_row[b]  <= rowid[b];
      cot_data[b] <= val[addr[b]] ^ din[b];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cot_valid <= '0;
      epoch     <= '0;
      init      <= 1'b1;
      init_addr <= '0;
    end else begin
      cot_valid <= req & hit;
      if (clear) epoch <= epoch + 1'b1;
      if (init) begin
        init_addr <= init_addr + 1'b1;
        if (32'(init_addr) == BROWS - 1) init <= 1'b0;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(init && leaf_valid));

endmodule
