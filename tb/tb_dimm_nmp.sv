// tb_dimm_nmp: the DIMM module with its two ranks replaced by testbench
// models.  The instruction stream mixes SPCOT set-up, OP_NOP, OP_SET_TAG
// and rank instructions (OP_LPN / OP_CACHE_INV with rank_id 0 or 1; the rank
// models take them with random ready): each rank instruction must reach
// exactly the rank it names, unchanged and in order, and nothing else may.
// Once OP_RUN has started the batch the rank models return one random Rank.XorSum per row (rank 0
// the lower half of the rows, rank 1 the upper half, random order and gaps).
// A sender batch and then a receiver batch (keys taken from Sender.key, the
// alpha digit replaced by junk) must each put every row on DIMM.COT once
// with value GGM leaf xor row sum, leaves from the software model.
module tb_dimm_nmp;
  import ironman_pkg::*;
  import ironman_tb_pkg::*;
  localparam int TREES = 4, DEPTH = 2, LEAVES = 4 ** DEPTH, ROWS = TREES * LEAVES;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic inst_valid = 0, inst_ready;
  nmp_inst_t inst = '0;
  logic [1:0] rank_inst_valid, rank_inst_ready = '0;
  nmp_inst_t rank_inst;
  logic [1:0] rs_valid = '0, rs_ready;
  logic [1:0][ROW_W-1:0] rs_row = '0;
  block_t [1:0] rs_data = '0;
  logic [3:0] cot_valid;
  logic [3:0][ROW_W-1:0] cot_row;
  block_t [3:0] cot_data;
  logic key_valid;
  logic [TREE_W-1:0] key_tree;
  logic [LEVEL_W-1:0] key_level;
  logic [1:0] key_pos;
  block_t key_data;
  logic spcot_busy, spcot_done;
  role_e role;

  dimm_nmp #(.TREES(TREES), .DEPTH(DEPTH)) dut (.*);

  block_t tag, delta, seeds [TREES];
  int     alpha [TREES];
  block_t leaf_ref [ROWS], rs_ref [ROWS];
  block_t skey [TREES][DEPTH+1][4];
  int     got [ROWS];
  nmp_inst_t rank_exp [2][$];

  always @(posedge clk) if (rst_n) begin
    rank_inst_ready <= 2'($urandom_range(0, 3));
    for (int r = 0; r < 2; r++) if (rank_inst_valid[r] && rank_inst_ready[r]) begin
      checks++;
      if (rank_exp[r].size() == 0 || rank_inst !== rank_exp[r][0]) begin
        failures++; $display("rank %0d got an unexpected instruction", r);
      end else void'(rank_exp[r].pop_front());
    end
    if (key_valid) skey[key_tree][key_level][key_pos] = key_data;
    for (int b = 0; b < 4; b++) if (cot_valid[b]) begin
      automatic int rr = int'(cot_row[b]);
      checks++;
      if (rr >= ROWS || cot_data[b] !== (leaf_ref[rr] ^ rs_ref[rr])) begin
        failures++; if (failures < 10) $display("COT row %0d wrong", rr);
      end
      if (rr < ROWS) got[rr]++;
    end
  end

  function automatic block_t rb();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  task automatic send(nmp_inst_t i);
    @(negedge clk); inst_valid = 1; inst = i;
    @(posedge clk); while (!inst_ready) @(posedge clk);
    #1 inst_valid = 0;
  endtask

  // some rank instructions and NOPs
  task automatic send_rank_ops();
    nmp_inst_t i;
    repeat (6) begin
      i = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      case ($urandom_range(0, 2))
        0: i.op = OP_LPN;
        1: i.op = OP_CACHE_INV;
        default: i.op = OP_NOP;
      endcase
      if (i.op != OP_NOP) rank_exp[i.rank_id].push_back(i);
      send(i);
    end
  endtask

  task automatic rank_feed(int rr);
    int order [$];
    for (int k = rr * ROWS / 2; k < (rr + 1) * ROWS / 2; k++) order.push_back(k);
    order.shuffle();
    foreach (order[k]) begin
      @(negedge clk);
      while ($urandom_range(0, 2) == 0) @(negedge clk);
      rs_valid[rr] = 1; rs_row[rr] = ROW_W'(order[k]); rs_data[rr] = rs_ref[order[k]];
      @(posedge clk); while (!rs_ready[rr]) @(posedge clk);
      #1 rs_valid[rr] = 0;
    end
  endtask

  // like the real ranks, which start on LPN instructions queued behind
  // OP_RUN, the models only answer once the batch has started
  task automatic rank_sums();
    while (!spcot_busy) @(posedge clk);
    fork
      rank_feed(0);
      rank_feed(1);
    join
  endtask

  task automatic finish_batch(string name);
    repeat (200) @(posedge clk);
    foreach (got[r]) begin
      checks++;
      if (got[r] != 1) begin failures++; if (failures < 10) $display("%s row %0d seen %0d", name, r, got[r]); end
    end
    foreach (got[r]) got[r] = 0;
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
    foreach (rs_ref[r]) begin rs_ref[r] = rb(); got[r] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // sender
    i = '0; i.op = OP_SET_TAG; i.data = tag; send(i);
    send_rank_ops();
    i = '0; i.op = OP_SET_DELTA; i.data = delta; send(i);
    for (int t = 0; t < TREES; t++) begin
      i = '0; i.op = OP_SEED; i.tree = TREE_W'(t); i.data = seeds[t]; send(i);
    end
    i = '0; i.op = OP_RUN; i.role = ROLE_SENDER; send(i);
    send_rank_ops();
    rank_sums();
    finish_batch("sender");

    // receiver
    foreach (rs_ref[r]) rs_ref[r] = rb();
    for (int t = 0; t < TREES; t++) begin
      alpha[t] = $urandom_range(0, LEAVES - 1);
      leaf_ref[t * LEAVES + alpha[t]] ^= delta;
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
    send_rank_ops();
    rank_sums();
    finish_batch("receiver");
    checks++;
    if (rank_exp[0].size() != 0 || rank_exp[1].size() != 0) begin failures++; $display("rank instructions lost"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
