// tb_unified_unit: runs one SPCOT batch as sender and then, on the same
// hardware after a role switch, as receiver.
//
// Sender: random seeds and Delta; every leaf must equal the software GGM
// tree, appear exactly once, and the streamed keys must equal the per-level,
// per-position XOR sums and the leaf sum xor Delta computed in software.
// The number of ChaCha8 calls must be TREES*(4^DEPTH-1)/3 and the
// expansion unit must be kept busy (pipeline utilization is reported and
// checked against a floor).
// Receiver: random alpha per tree, keys taken from the sender except the
// alpha digit of every level (replaced by garbage).  Every leaf k != alpha
// must equal the sender's, leaf alpha must equal sender leaf xor Delta.
module tb_unified_unit;
  import ironman_pkg::*;
  import ironman_tb_pkg::*;
  localparam int TREES = 4, DEPTH = 6, LEAVES = 1 << (2 * DEPTH);

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cfg_valid = 0, cfg_ready, busy, done;
  nmp_inst_t cfg_inst = '0;
  role_e role;
  logic exp_valid, res_valid;
  node_t exp_node, res_node;
  block_t [3:0] res_children;
  logic leaf_valid; logic [TREE_W-1:0] leaf_tree; logic [IDX_W-1:0] leaf_group;
  logic [3:0] leaf_mask; block_t [3:0] leaf_data;
  logic key_valid; logic [TREE_W-1:0] key_tree; logic [LEVEL_W-1:0] key_level;
  logic [1:0] key_pos; block_t key_data;
  block_t tag;

  ggm_expansion_unit u_exp (.clk, .rst_n, .in_valid(exp_valid), .in_node(exp_node), .tag,
                            .out_valid(res_valid), .out_node(res_node), .out_children(res_children));
  unified_unit #(.TREES(TREES), .DEPTH(DEPTH)) dut (.*);

  block_t seeds [TREES];
  block_t delta;
  block_t ref_leaves [TREES][];
  block_t sleaf [TREES][LEAVES];
  block_t rleaf [TREES][LEAVES];
  int     scount [TREES][LEAVES];
  int     rcount [TREES][LEAVES];
  block_t skey [TREES][DEPTH+1][4];
  int     nkeys = 0;
  int     alpha [TREES];
  int     issues = 0, first_issue = -1, last_issue = 0, edge_n = 0;
  logic   recv = 0;

  always @(posedge clk) begin
    edge_n <= edge_n + 1;
    if (rst_n && exp_valid) begin
      issues++;
      if (first_issue < 0) first_issue = edge_n;
      last_issue = edge_n;
    end
    if (rst_n && leaf_valid)
      for (int j = 0; j < 4; j++) if (leaf_mask[j]) begin
        automatic int k = 4 * int'(leaf_group) + j;
        if (!recv) begin sleaf[leaf_tree][k] = leaf_data[j]; scount[leaf_tree][k]++; end
        else       begin rleaf[leaf_tree][k] = leaf_data[j]; rcount[leaf_tree][k]++; end
      end
    if (rst_n && key_valid) begin
      skey[key_tree][key_level][key_pos] = key_data;
      nkeys++;
    end
  end

  task automatic send(nmp_inst_t i);
    @(negedge clk);
    while (!cfg_ready) @(negedge clk);
    cfg_valid = 1; cfg_inst = i;
    @(negedge clk);
    cfg_valid = 0;
  endtask

  function automatic block_t rb();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  initial begin
    nmp_inst_t i;
    block_t refk [DEPTH+1][4];
    tag = rb();
    delta = rb();
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (scount[t, k]) begin scount[t][k] = 0; rcount[t][k] = 0; end
    // ------------------------------------------------ sender
    i = '0; i.op = OP_SET_DELTA; i.data = delta; send(i);
    for (int t = 0; t < TREES; t++) begin
      seeds[t] = rb();
      ggm_leaves(seeds[t], tag, DEPTH, ref_leaves[t]);
      i = '0; i.op = OP_SEED; i.tree = TREE_W'(t); i.data = seeds[t]; send(i);
    end
    i = '0; i.op = OP_RUN; i.role = ROLE_SENDER; send(i);
    @(posedge done);
    @(negedge clk);
    checks++;
    if (issues != TREES * (LEAVES - 1) / 3) begin
      failures++; $display("ChaCha calls %0d", issues);
    end
    $display("sender: %0d calls in %0d cycles (utilization %0d%%)", issues,
             last_issue - first_issue + 1, 100 * issues / (last_issue - first_issue + 1));
    checks++;
    if (100 * issues / (last_issue - first_issue + 1) < 75) failures++;
    for (int t = 0; t < TREES; t++) begin
      block_t ls;
      ls = '0;
      for (int k = 0; k < LEAVES; k++) begin
        checks++;
        if (scount[t][k] != 1 || sleaf[t][k] !== ref_leaves[t][k]) begin
          failures++;
          if (failures < 10) $display("sender leaf t%0d k%0d cnt %0d", t, k, scount[t][k]);
        end
        ls ^= ref_leaves[t][k];
      end
      // reference keys: level l node n is a prefix of the leaf index
      foreach (refk[l, p]) refk[l][p] = '0;
      for (int l = 1; l <= DEPTH; l++) begin
        block_t lvl [];
        ggm_leaves(seeds[t], tag, l, lvl);
        foreach (lvl[n]) refk[l][n % 4] ^= lvl[n];
      end
      refk[0][0] = ls ^ delta;
      for (int l = 1; l <= DEPTH; l++) for (int p = 0; p < 4; p++) begin
        checks++;
        if (skey[t][l][p] !== refk[l][p]) begin failures++; $display("key t%0d l%0d p%0d", t, l, p); end
      end
      checks++;
      if (skey[t][0][0] !== refk[0][0]) begin failures++; $display("leaf key t%0d", t); end
    end
    checks++;
    if (nkeys != TREES * (4 * DEPTH + 1)) failures++;
    // ------------------------------------------------ receiver
    recv = 1;
    for (int t = 0; t < TREES; t++) begin
      alpha[t] = $urandom_range(0, LEAVES - 1);
      i = '0; i.op = OP_ALPHA; i.tree = TREE_W'(t); i.data = block_t'(alpha[t]); send(i);
      for (int l = 1; l <= DEPTH; l++) for (int p = 0; p < 4; p++) begin
        automatic int digit = (alpha[t] >> (2 * (DEPTH - l))) & 3;
        i = '0; i.op = OP_KEY; i.tree = TREE_W'(t); i.level = LEVEL_W'(l); i.pos = 2'(p);
        i.data = (p == digit) ? rb() : skey[t][l][p];
        send(i);
      end
      i = '0; i.op = OP_KEY; i.tree = TREE_W'(t); i.level = '0; i.pos = '0; i.data = skey[t][0][0];
      send(i);
    end
    i = '0; i.op = OP_RUN; i.role = ROLE_RECEIVER; send(i);
    @(posedge done);
    @(negedge clk);
    checks++;
    if (role != ROLE_RECEIVER) failures++;
    for (int t = 0; t < TREES; t++) for (int k = 0; k < LEAVES; k++) begin
      checks++;
      if (rcount[t][k] != 1 ||
          rleaf[t][k] !== (k == alpha[t] ? sleaf[t][k] ^ delta : sleaf[t][k])) begin
        failures++;
        if (failures < 20) $display("receiver leaf t%0d k%0d (alpha %0d) cnt %0d", t, k, alpha[t], rcount[t][k]);
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
