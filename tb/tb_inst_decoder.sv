// tb_inst_decoder: random instruction stream with random rank_busy.  An
// instruction may only be taken while the rank is idle and no job start is
// in flight; OP_LPN must produce one lpn_start pulse one cycle later with
// the job fields copied from the instruction (addr, len, aux, data),
// OP_CACHE_INV one cache_inv pulse, and anything else one bad_op pulse.
module tb_inst_decoder;
  import ironman_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, in_ready, rank_busy = 0;
  nmp_inst_t in_inst = '0;
  logic lpn_start, cache_inv, bad_op;
  lpn_job_t lpn_job;

  inst_decoder dut (.*);

  nmp_inst_t last;
  bit        took = 0;
  int n_lpn = 0, n_inv = 0, n_bad = 0;

  always @(posedge clk) if (rst_n) begin
    // outputs of the instruction taken at the previous edge
    checks++;
    if (took) begin
      if (last.op == OP_LPN) begin
        n_lpn++;
        if (!lpn_start || cache_inv || bad_op || lpn_job.idx_base !== last.addr ||
            lpn_job.nnz !== last.len || lpn_job.vec_base !== last.aux ||
            lpn_job.row_base !== last.data[ROW_W-1:0]) failures++;
      end else if (last.op == OP_CACHE_INV) begin
        n_inv++;
        if (lpn_start || !cache_inv || bad_op) failures++;
      end else begin
        n_bad++;
        if (lpn_start || cache_inv || !bad_op) failures++;
      end
    end else if (lpn_start || cache_inv || bad_op) failures++;
    if (in_valid && in_ready && (rank_busy || lpn_start)) failures++;
    took = in_valid && in_ready;
    last = in_inst;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5000) begin
      @(negedge clk);
      rank_busy = ($urandom_range(0, 3) == 0);
      in_valid  = ($urandom_range(0, 1) == 0);
      in_inst   = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      case ($urandom_range(0, 3))
        0, 1: in_inst.op = OP_LPN;
        2:    in_inst.op = OP_CACHE_INV;
        default: in_inst.op = OP_RUN;
      endcase
    end
    @(negedge clk); in_valid = 0;
    repeat (3) @(posedge clk);
    checks++; if (n_lpn == 0 || n_inv == 0 || n_bad == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
