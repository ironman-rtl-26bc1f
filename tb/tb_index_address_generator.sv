// tb_index_address_generator: a memory model answers index-line requests in
// order after a random 5..40 cycle delay, holding random (row, col) pairs.
// Jobs of random size (including 0, 1 and counts that do not fill the last
// line) run back to back with random pair_ready.  The pair stream must be
// the stored pairs in order, as vaddr = vec_base + col/4, lane = col mod 4,
// row = stored row; each index line must be requested once, in order, with
// never more requested-but-unconsumed lines than the index buffer holds;
// done must pulse once per job.
module tb_index_address_generator;
  import ironman_pkg::*;
  localparam int BUF_LINES = 4;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle++;

  logic start = 0, busy, done;
  lpn_job_t job = '0;
  logic idx_req_valid, idx_req_ready = 1, idx_line_valid = 0;
  logic [LADDR_W-1:0] idx_req_addr;
  line_t idx_line = '0;
  logic pair_valid, pair_ready = 0;
  logic [LADDR_W-1:0] pair_vaddr;
  logic [1:0] pair_lane;
  logic [31:0] pair_row;

  index_address_generator #(.BUF_LINES(BUF_LINES)) dut (.*);

  line_t  mem [int];
  longint due [$];
  int unsigned raddr [$];
  int unsigned next_line;
  int n_done = 0;
  int exp_col [$], exp_rowq [$];

  // memory: in-order responses after a random delay
  always @(posedge clk) if (rst_n) begin
    idx_line_valid <= 0;
    if (idx_req_valid && idx_req_ready) begin
      checks++;
      if (idx_req_addr != next_line) begin failures++; $display("line %h requested, %h expected", idx_req_addr, next_line); end
      next_line++;
      raddr.push_back(idx_req_addr);
      due.push_back(cycle + $urandom_range(5, 40));
    end
    if (due.size() > 0 && cycle >= due[0]) begin
      idx_line_valid <= 1;
      idx_line <= mem[raddr[0]];
      void'(due.pop_front()); void'(raddr.pop_front());
    end
    pair_ready <= ($urandom_range(0, 3) != 0);
    if (done) n_done++;
    if (pair_valid && pair_ready) begin
      automatic int c = exp_col.pop_front();
      automatic int r = exp_rowq.pop_front();
      checks++;
      if (pair_vaddr !== job.vec_base + 32'(c / 4) || pair_lane !== 2'(c % 4) || pair_row !== 32'(r)) begin
        failures++; if (failures < 10) $display("pair col %0d row %0d wrong", c, r);
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int j = 0; j < 40; j++) begin
      int nnz;
      int unsigned base;
      nnz  = (j == 0) ? 0 : (j == 1) ? 1 : $urandom_range(2, 200);
      base = 32'h1000 * (j + 1);
      for (int l = 0; l < (nnz + 7) / 8; l++) begin
        line_t d = '0;
        for (int k = 0; k < 8 && 8 * l + k < nnz; k++) begin
          int c, r;
          c = $urandom_range(0, 100000); r = $urandom_range(0, 1023);
          d[64*k +: 64] = {32'(r), 32'(c)};
          exp_col.push_back(c); exp_rowq.push_back(r);
        end
        mem[base + 32'(l)] = d;
      end
      next_line = base;
      @(negedge clk);
      job.idx_base = base; job.nnz = nnz; job.vec_base = $urandom_range(0, 1 << 20); job.row_base = '0;
      start = 1;
      @(negedge clk); start = 0;
      while (busy) @(negedge clk);
      repeat (2) @(negedge clk);
      checks++;
      if (exp_col.size() != 0 || n_done != j + 1) begin
        failures++; $display("job %0d: %0d pairs left, %0d done pulses", j, exp_col.size(), n_done);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
