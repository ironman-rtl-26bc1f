// sync_fifo: single-clock FIFO with a valid/ready handshake on both sides.
//
// Used for the DIMM module's instruction queue, each rank's instruction
// buffer and the index buffer of the index address generator.  Storage is a
// DEPTH-entry circular array; a write and a read may happen in the same cycle.
// out_data is the head entry and is valid while out_valid is high (first-word
// fall-through, zero-cycle read latency).  in_ready is low when full.
// The paper names these buffers; depth and handshake are this design's.
module sync_fifo #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data,
  output logic [$clog2(DEPTH+1)-1:0] level
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned LW = $clog2(DEPTH+1);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rd, wr;
  logic [LW-1:0] cnt;
  logic          do_wr, do_rd;

  assign in_ready  = (cnt != LW'(DEPTH));
  assign out_valid = (cnt != '0);
  assign out_data  = mem[rd];
  assign level     = cnt;
  assign do_wr     = in_valid && in_ready;
  assign do_rd     = out_valid && out_ready;

  function automatic logic [AW-1:0] inc(logic [AW-1:0] p);
    return (32'(p) == DEPTH - 1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) if (do_wr) mem[wr] <= in_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd <= '0; wr <= '0; cnt <= '0;
    end else begin
      if (do_wr) wr <= inc(wr);
      if (do_rd) rd <= inc(rd);
      cnt <= cnt + LW'(do_wr) - LW'(do_rd);
    end
  end
endmodule
