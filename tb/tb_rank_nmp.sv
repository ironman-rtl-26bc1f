// tb_rank_nmp: end-to-end LPN check of one rank module against a DDR4 rank
// model.
//
// A 128-bit vector of VEC elements sits in DRAM.  Three jobs each compute
// ROWS_J rows of weight WEIGHT with random distinct columns; their (row,col)
// pairs are sorted by column and packed eight per line.  Job 1 runs with a
// cold cache, job 2 reuses the vector (the cache holds all of it, so only
// lines job 1 never touched miss), then OP_CACHE_INV is sent and job 3
// misses once on every line it touches.  Every
// Rank.XorSum must equal the XOR of its row's elements and appear once; the
// DRAM model must see no timing violation.  The all-hit job must take at
// most 4 cycles per non-zero (one element per 3 cycles plus index fetch).
// The vector element of column c is line VEC_BASE + c/4, lane c mod 4.
// Rank.XorSum is back-pressured at random.
module tb_rank_nmp;
  import ironman_pkg::*;
  import ironman_tb_pkg::*;
  localparam int ROWS_J = 128, WEIGHT = 10, VEC = 1024, NNZ = ROWS_J * WEIGHT;
  localparam int unsigned VEC_BASE = 32'h0001_0000;
  localparam int SALT = 7;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle++;

  logic inst_valid = 0, inst_ready;
  nmp_inst_t inst = '0;
  logic rsum_valid, rsum_ready = 0;
  logic [ROW_W-1:0] rsum_row;
  block_t rsum_data;
  ddr_ca_t ddr_ca;
  logic dq_valid;
  logic [BEAT_W-1:0] dq_data;
  logic busy, cache_hit_pulse, cache_miss_pulse, row_hit_pulse, row_miss_pulse;

  rank_nmp #(.CACHE_BYTES(32768), .BLOCK_ROWS(ROWS_J), .WEIGHT(WEIGHT)) dut (.*);
  dram_model mem (.clk, .ca(ddr_ca), .dq_valid, .dq_data);

  int hits = 0, misses = 0, rhits = 0, rmisses = 0;
  always @(posedge clk) if (rst_n) begin
    hits += int'(cache_hit_pulse); misses += int'(cache_miss_pulse);
    rhits += int'(row_hit_pulse);  rmisses += int'(row_miss_pulse);
    rsum_ready <= ($urandom_range(0, 3) != 0);
  end

  typedef struct { int col; int row; } pr_t;
  bit touched [int];          // vector lines already in the cache
  int new_lines, job_lines;  // of the last job built
  block_t exp_sum [int];   // global row -> expected
  int     seen [int];
  always @(posedge clk) if (rst_n && rsum_valid && rsum_ready) begin
    automatic int r = int'(rsum_row);
    checks++;
    if (!exp_sum.exists(r) || rsum_data !== exp_sum[r]) begin
      failures++; if (failures < 10) $display("row %0d wrong sum", r);
    end
    seen[r] = seen.exists(r) ? seen[r] + 1 : 1;
  end

  task automatic send(nmp_inst_t i);
    @(negedge clk); inst_valid = 1; inst = i;
    @(posedge clk); while (!inst_ready) @(posedge clk);
    #1 inst_valid = 0;
  endtask

  // build job j in DRAM and the expected sums; returns the instruction
  function automatic nmp_inst_t make_job(int j);
    pr_t prs [$];
    nmp_inst_t i = '0;
    int unsigned idx_base = 32'h0002_0000 + 32'(j) * 32'h400;
    int row_base = 1000 * (j + 1);
    for (int r = 0; r < ROWS_J; r++) begin
      int cols [$];
      block_t s = '0;
      while (cols.size() < WEIGHT) begin
        automatic int c = $urandom_range(0, VEC - 1);
        if (!(c inside {cols})) cols.push_back(c);
      end
      foreach (cols[k]) begin
        prs.push_back('{cols[k], r});
        s ^= vec_elem(SALT, cols[k]);
      end
      exp_sum[row_base + r] = s;
    end
    prs.sort(x) with (x.col);
    begin
      bit here [int];
      new_lines = 0;
      foreach (prs[k]) begin
        if (!touched.exists(prs[k].col / 4)) new_lines++;
        touched[prs[k].col / 4] = 1;
        here[prs[k].col / 4] = 1;
      end
      job_lines = here.size();
    end
    for (int l = 0; l < (NNZ + 7) / 8; l++) begin
      line_t d = '0;
      for (int k = 0; k < 8 && 8 * l + k < NNZ; k++)
        d[64*k +: 64] = {32'(prs[8*l+k].row), 32'(prs[8*l+k].col)};
      mem.put_line(idx_base + 32'(l), d);
    end
    i.op = OP_LPN; i.addr = idx_base; i.len = NNZ; i.aux = VEC_BASE;
    i.data = 128'(row_base);
    return i;
  endfunction

  task automatic run_job(int j, output longint cyc);
    nmp_inst_t i = make_job(j);
    longint t0;
    send(i);
    t0 = cycle;
    while (!busy) @(posedge clk);
    while (busy) @(posedge clk);
    cyc = cycle - t0;
    repeat (20) @(posedge clk);
  endtask

  initial begin
    longint c1, c2, c3;
    int h1, m1, h2, m2, n1, n2, n3;
    nmp_inst_t inv = '0;
    for (int l = 0; l < VEC / 4; l++) begin
      line_t d;
      for (int k = 0; k < 4; k++) d[128*k +: 128] = vec_elem(SALT, 4 * l + k);
      mem.put_line(VEC_BASE + 32'(l), d);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_job(0, c1); h1 = hits; m1 = misses; n1 = job_lines;
    run_job(1, c2); h2 = hits - h1; m2 = misses - m1; n2 = new_lines;
    inv.op = OP_CACHE_INV; send(inv);
    run_job(2, c3); n3 = job_lines;
    $display("job cycles %0d %0d %0d; cache hits %0d misses %0d; row hits %0d misses %0d",
             c1, c2, c3, hits, misses, rhits, rmisses);
    $display("job1 h%0d m%0d job2 h%0d m%0d", h1, m1, h2, m2);
    // a miss happens exactly once per vector line a job first touches
    checks++; if (m1 != n1) begin failures++; $display("job 1: %0d misses, %0d lines", m1, n1); end
    checks++; if (m2 != n2 || h2 != NNZ - n2) begin failures++; $display("job 2: %0d misses, %0d new lines", m2, n2); end
    checks++; if (misses - m1 - m2 != n3) begin failures++; $display("after invalidate: %0d misses, %0d lines", misses - m1 - m2, n3); end
    checks++; if (c2 > 4 * NNZ) begin failures++; $display("all-hit job too slow: %0d", c2); end
    checks++; if (rhits == 0 || rmisses == 0) begin failures++; $display("row hit/miss not both seen"); end
    checks++; if (mem.violations != 0) begin failures++; $display("DRAM violations %0d", mem.violations); end
    checks++; if (exp_sum.size() != 3 * ROWS_J) failures++;
    foreach (exp_sum[r]) begin
      checks++;
      if (!seen.exists(r) || seen[r] != 1) begin
        failures++; if (failures < 10) $display("row %0d seen %0d times", r, seen.exists(r) ? seen[r] : 0);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
