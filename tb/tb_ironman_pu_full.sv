// tb_ironman_pu_full: end-to-end test of one Ironman processing unit at the default parameters (4 trees of 6
// levels, 16384 rows, 1024-row jobs, 256 KB caches).
//
// Two ranks are modelled by dram_model instances holding, per role, a
// 128-bit LPN input vector (VEC elements) and the sorted (row, col) index
// arrays of that rank's LPN jobs (BLOCK_ROWS rows of weight WEIGHT each).
// Batch 1 runs the sender: tag, Delta, one root seed per tree, OP_RUN, then
// the LPN jobs of both ranks.  The sender's GGM keys are collected from
// Sender.key.  Batch 2 switches the same unit to the receiver role: the
// host rewrites the vectors, invalidates both memory-side caches, sends
// alpha and the keys (the digit on alpha's path replaced by junk, as the
// receiver never learns it), OP_RUN and the LPN jobs again.
// In both batches every one of the TREES*4^DEPTH rows must leave DIMM.COT
// exactly once with value  GGM leaf xor LPN row sum,  where the leaves come
// from a software ChaCha8/GGM model (receiver: leaf alpha = sender leaf xor
// Delta) and the row sums from a software XOR of the selected elements.
// Mechanisms counted (each must occur): memory-side cache hits and misses,
// DRAM row hits and misses, cache invalidates, Rank.XorSum from both ranks,
// both roles, receiver node recovery, issue stalls behind recovery, the
// alpha leaf.  The DRAM models must record no timing violation, and the
// sender's SPCOT phase must keep the ChaCha8 pipeline at least 75% busy
// (two 8-cycle pipeline fills per tree level are allowed on top).
module tb_ironman_pu_full;
  import ironman_pkg::*;
  import ironman_tb_pkg::*;
  localparam int TREES = 4, DEPTH = 6, BLOCK_ROWS = 1024, WEIGHT = 10;
  localparam int LEAVES = 4 ** DEPTH, ROWS = TREES * LEAVES;
  localparam int JPR = ROWS / (2 * BLOCK_ROWS);       // jobs per rank
  localparam int VEC = 16384;
  localparam int NNZ = BLOCK_ROWS * WEIGHT;
  localparam int unsigned VEC_BASE = 32'h0001_0000;
  localparam int unsigned IDX_BASE = 32'h0010_0000;
  localparam longint WATCHDOG = 4000000;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle++;

  logic inst_valid = 0, inst_ready;
  nmp_inst_t inst = '0;
  logic [3:0] cot_valid;
  logic [3:0][ROW_W-1:0] cot_row;
  block_t [3:0] cot_data;
  logic key_valid;
  logic [TREE_W-1:0] key_tree;
  logic [LEVEL_W-1:0] key_level;
  logic [1:0] key_pos;
  block_t key_data;
  ddr_ca_t [1:0] ddr_ca;
  logic [1:0] dq_valid;
  logic [1:0][BEAT_W-1:0] dq_data;
  logic spcot_busy, spcot_done;
  logic [1:0] rank_busy;

  ironman_pu dut (.*);
  dram_model mem0 (.clk, .ca(ddr_ca[0]), .dq_valid(dq_valid[0]), .dq_data(dq_data[0]));
  dram_model mem1 (.clk, .ca(ddr_ca[1]), .dq_valid(dq_valid[1]), .dq_data(dq_data[1]));

  // ---------------------------------------------------------- mechanisms
  int n_chit = 0, n_cmiss = 0, n_rhit = 0, n_rmiss = 0, n_inv = 0;
  int n_rs [2] = '{0, 0};
  longint t_last_issue = 0, t_run = 0, calls0 = 0;
  int n_rec = 0, n_stall = 0, n_alpha = 0, n_calls = 0, n_sender = 0, n_receiver = 0;
  always @(posedge clk) if (rst_n) begin
    n_chit  += int'(dut.g_rank[0].u_rank.cache_hit_pulse)  + int'(dut.g_rank[1].u_rank.cache_hit_pulse);
    n_cmiss += int'(dut.g_rank[0].u_rank.cache_miss_pulse) + int'(dut.g_rank[1].u_rank.cache_miss_pulse);
    n_rhit  += int'(dut.g_rank[0].u_rank.row_hit_pulse)    + int'(dut.g_rank[1].u_rank.row_hit_pulse);
    n_rmiss += int'(dut.g_rank[0].u_rank.row_miss_pulse)   + int'(dut.g_rank[1].u_rank.row_miss_pulse);
    n_inv   += int'(dut.g_rank[0].u_rank.cache_inv)        + int'(dut.g_rank[1].u_rank.cache_inv);
    for (int r = 0; r < 2; r++) n_rs[r] += int'(dut.rs_valid[r] && dut.rs_ready[r]);
    n_rec   += int'(dut.u_dimm.u_unified.do_rec);
    n_alpha += int'(dut.u_dimm.u_unified.do_alf);
    n_stall += int'(dut.u_dimm.u_unified.side_pending && dut.u_dimm.u_unified.exp_valid == 1'b0);
    n_calls += int'(dut.u_dimm.u_unified.exp_valid);
    if (dut.u_dimm.u_unified.exp_valid) t_last_issue = cycle;
    if (dut.u_dimm.run_start) begin t_run = cycle; calls0 = n_calls; end
  end

  // ---------------------------------------------------------- reference
  block_t tag, delta;
  block_t seeds [TREES];
  int     alpha [TREES];
  block_t leaf_ref [ROWS];
  block_t rsum_ref [ROWS];
  block_t skey [TREES][DEPTH+1][4];
  int     nkeys = 0;
  int     got [ROWS];

  always @(posedge clk) if (rst_n && key_valid) begin
    skey[key_tree][key_level][key_pos] = key_data;
    nkeys++;
  end

  always @(posedge clk) if (rst_n)
    for (int b = 0; b < 4; b++) if (cot_valid[b]) begin
      automatic int r = int'(cot_row[b]);
      checks++;
      if (r >= ROWS || cot_data[b] !== (leaf_ref[r] ^ rsum_ref[r])) begin
        failures++; if (failures < 10) $display("COT row %0d wrong", r);
      end
      if (r < ROWS) got[r]++;
    end

  function automatic block_t rb();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  task automatic send(nmp_inst_t i);
    @(negedge clk); inst_valid = 1; inst = i;
    @(posedge clk); while (!inst_ready) @(posedge clk);
    #1 inst_valid = 0;
  endtask

  typedef struct { int col; int row; } pr_t;

  // write rank r's vector (salt) and its jobs' index arrays; fill rsum_ref
  task automatic load_rank(int r, int unsigned salt);
    for (int l = 0; l < VEC / 4; l++) begin
      line_t d;
      for (int k = 0; k < 4; k++) d[128*k +: 128] = vec_elem(salt, 4 * l + k);
      if (r == 0) mem0.put_line(VEC_BASE + 32'(l), d); else mem1.put_line(VEC_BASE + 32'(l), d);
    end
    for (int j = 0; j < JPR; j++) begin
      pr_t prs [$];
      int row_base = (r * JPR + j) * BLOCK_ROWS;
      int unsigned ib = IDX_BASE + 32'(j) * 32'h800;
      for (int lr = 0; lr < BLOCK_ROWS; lr++) begin
        int cols [$];
        block_t s = '0;
        while (cols.size() < WEIGHT) begin
          automatic int c = $urandom_range(0, VEC - 1);
          if (!(c inside {cols})) cols.push_back(c);
        end
        foreach (cols[k]) begin prs.push_back('{cols[k], lr}); s ^= vec_elem(salt, cols[k]); end
        rsum_ref[row_base + lr] = s;
      end
      prs.sort(x) with (x.col);
      for (int l = 0; l < (NNZ + 7) / 8; l++) begin
        line_t d = '0;
        for (int k = 0; k < 8 && 8 * l + k < NNZ; k++)
          d[64*k +: 64] = {32'(prs[8*l+k].row), 32'(prs[8*l+k].col)};
        if (r == 0) mem0.put_line(ib + 32'(l), d); else mem1.put_line(ib + 32'(l), d);
      end
    end
  endtask

  task automatic send_lpn();
    nmp_inst_t i;
    for (int j = 0; j < JPR; j++)
      for (int r = 0; r < 2; r++) begin
        i = '0; i.op = OP_LPN; i.rank_id = 1'(r);
        i.addr = IDX_BASE + 32'(j) * 32'h800; i.len = NNZ; i.aux = VEC_BASE;
        i.data = 128'((r * JPR + j) * BLOCK_ROWS);
        send(i);
      end
  endtask

  task automatic wait_batch(string name);
    int missing = 0;
    longint t0 = cycle;
    forever begin
      missing = 0;
      foreach (got[r]) if (got[r] == 0) missing++;
      if (missing == 0 || cycle - t0 > WATCHDOG) break;
      repeat (64) @(posedge clk);
    end
    repeat (20) @(posedge clk);
    foreach (got[r]) begin
      checks++;
      if (got[r] != 1) begin
        failures++; if (failures < 10) $display("%s: row %0d seen %0d times", name, r, got[r]);
      end
    end
    $display("%s batch done at cycle %0d", name, cycle);
  endtask

  initial begin
    nmp_inst_t i;
    block_t tl [];
    tag = rb(); delta = rb();
    for (int t = 0; t < TREES; t++) begin
      seeds[t] = rb();
      ggm_leaves(seeds[t], tag, DEPTH, tl);
      for (int k = 0; k < LEAVES; k++) leaf_ref[t * LEAVES + k] = tl[k];
    end
    load_rank(0, 1); load_rank(1, 2);
    foreach (got[r]) got[r] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---------------- batch 1: sender
    i = '0; i.op = OP_SET_TAG; i.data = tag; send(i);
    i = '0; i.op = OP_SET_DELTA; i.data = delta; send(i);
    for (int t = 0; t < TREES; t++) begin
      i = '0; i.op = OP_SEED; i.tree = TREE_W'(t); i.data = seeds[t]; send(i);
    end
    i = '0; i.op = OP_RUN; i.role = ROLE_SENDER; send(i);
    send_lpn();
    @(posedge spcot_done);
    begin
      // ChaCha8 calls of the whole batch: (4^DEPTH - 1) / 3 per tree
      longint span, calls;
      span  = t_last_issue - t_run + 1;
      calls = n_calls - calls0;
      checks++;
      // at least 75% of the issue cycles busy, plus two pipeline fills per level
      if (calls != TREES * (LEAVES - 1) / 3 || 3 * span > 4 * calls + 3 * 16 * DEPTH) begin
        failures++; $display("sender SPCOT: %0d calls in %0d cycles", calls, span);
      end
      $display("sender SPCOT: %0d ChaCha8 calls issued over %0d cycles", calls, span);
    end
    n_sender++;
    wait_batch("sender");
    checks++;
    if (nkeys != TREES * (4 * DEPTH + 1)) begin failures++; $display("%0d keys", nkeys); end

    // ---------------- batch 2: receiver
    foreach (got[r]) got[r] = 0;
    load_rank(0, 3); load_rank(1, 4);
    for (int t = 0; t < TREES; t++) begin
      alpha[t] = $urandom_range(0, LEAVES - 1);
      leaf_ref[t * LEAVES + alpha[t]] ^= delta;
    end
    for (int r = 0; r < 2; r++) begin
      i = '0; i.op = OP_CACHE_INV; i.rank_id = 1'(r); send(i);
    end
    i = '0; i.op = OP_SET_TAG; i.data = tag; send(i);
    for (int t = 0; t < TREES; t++) begin
      i = '0; i.op = OP_ALPHA; i.tree = TREE_W'(t); i.data = block_t'(alpha[t]); send(i);
      for (int l = 1; l <= DEPTH; l++)
        for (int p = 0; p < 4; p++) begin
          automatic int digit = (alpha[t] >> (2 * (DEPTH - l))) & 3;
          i = '0; i.op = OP_KEY; i.tree = TREE_W'(t); i.level = LEVEL_W'(l); i.pos = 2'(p);
          i.data = (p == digit) ? rb() : skey[t][l][p];
          send(i);
        end
      i = '0; i.op = OP_KEY; i.tree = TREE_W'(t); i.level = '0; i.pos = '0; i.data = skey[t][0][0];
      send(i);
    end
    i = '0; i.op = OP_RUN; i.role = ROLE_RECEIVER; send(i);
    send_lpn();
    n_receiver++;
    wait_batch("receiver");

    // ---------------- mechanisms
    $display("cache hit %0d miss %0d inv %0d | row hit %0d miss %0d | rank sums %0d %0d",
             n_chit, n_cmiss, n_inv, n_rhit, n_rmiss, n_rs[0], n_rs[1]);
    $display("recoveries %0d, recovery stalls %0d, alpha leaves %0d, roles %0d/%0d",
             n_rec, n_stall, n_alpha, n_sender, n_receiver);
    checks++; if (n_chit == 0)  begin failures++; $display("no cache hit"); end
    checks++; if (n_cmiss == 0) begin failures++; $display("no cache miss"); end
    checks++; if (n_inv != 2)   begin failures++; $display("invalidates %0d", n_inv); end
    checks++; if (n_rhit == 0 || n_rmiss == 0) begin failures++; $display("row hit/miss missing"); end
    checks++; if (n_rs[0] != ROWS || n_rs[1] != ROWS) begin failures++; $display("rank sums %0d %0d", n_rs[0], n_rs[1]); end
    checks++; if (n_rec != TREES * DEPTH) begin failures++; $display("recoveries %0d", n_rec); end
    checks++; if (n_stall == 0) begin failures++; $display("no recovery stall"); end
    checks++; if (n_alpha != TREES) begin failures++; $display("alpha leaves %0d", n_alpha); end
    checks++; if (n_sender != 1 || n_receiver != 1) failures++;
    checks++; if (mem0.violations != 0 || mem1.violations != 0) begin failures++; $display("DRAM timing violations"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3 * WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
