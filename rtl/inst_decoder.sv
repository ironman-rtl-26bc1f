// inst_decoder: decodes the rank NMP instructions held in the rank's
// instruction buffer.
//
// OP_LPN becomes an LPN job for the index address generator (Inst.addr:
// index array base, non-zero count, vector base, row base) and OP_CACHE_INV
// an invalidate of the memory-side cache (Inst.op).  An instruction is taken
// (in_ready) only while the rank is not busy with a job, so jobs run one
// after another in program order.  Outputs are registered one-cycle pulses.
// Any other opcode is dropped and flagged on bad_op.
// The paper names the decoder and its Inst.addr / Inst.op outputs; the
// encoding is this design's.
module inst_decoder
  import ironman_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  output logic      in_ready,
  input  nmp_inst_t in_inst,
  input  logic      rank_busy,
  output logic      lpn_start,
  output lpn_job_t  lpn_job,
  output logic      cache_inv,
  output logic      bad_op
);
  assign in_ready = !rank_busy && !lpn_start;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lpn_start <= 1'b0; cache_inv <= 1'b0; bad_op <= 1'b0; lpn_job <= '0;
    end else begin
      lpn_start <= 1'b0; cache_inv <= 1'b0; bad_op <= 1'b0;
      if (in_valid && in_ready) begin
        unique case (in_inst.op)
          OP_LPN: begin
            lpn_start        <= 1'b1;
            lpn_job.idx_base <= in_inst.addr;
            lpn_job.nnz      <= in_inst.len;
            lpn_job.vec_base <= in_inst.aux;
            lpn_job.row_base <= in_inst.data[ROW_W-1:0];
          end
          OP_CACHE_INV: cache_inv <= 1'b1;
          default:      bad_op    <= 1'b1;
        endcase
      end
    end
  end
endmodule
