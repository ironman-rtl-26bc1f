// unified_unit: SPCOT control for both OT roles (Key Generator or Message
// Decoder) around one GGM expansion unit.
//
// SPCOT builds TREES 4-ary GGM trees of DEPTH levels (4^DEPTH leaves each).
// The unit keeps the nodes that still have to be expanded in a node buffer
// (a stack), issues one node per cycle to the 8-stage expansion unit and
// takes its four children back 8 cycles later.  For every tree t, level i
// and child position j it accumulates K[t][i][j], the XOR of all level-i
// nodes whose last base-4 digit is j (two-input XOR trees: new child and
// stored partial sum).
//
//  * Sender (Key Generator): the roots are the seeds loaded with OP_SEED.
//    After all leaves are out it streams the keys K[t][i][j] (i = 1..DEPTH,
//    j = 0..3) and the leaf XOR sum xor Delta (level 0) on key_*, which the
//    host feeds to the (3-out-of-4) base OTs.
//  * Receiver (Message Decoder): the host loads alpha and the keys it got
//    from the OTs (all K[t][i][j] with j != alpha digit i, plus the leaf key).
//    Level i's three missing siblings of the path node are
//    K[t][i][j] xor (own partial sum), available once every known level i-1
//    node is expanded; they go back into the node buffer (or out as leaves).
//    Finally leaf alpha = leaf key xor XOR of all other leaves.
//
// Schedule: a stack alone gives depth-first order; sharing one stack between
// TREES trees and issuing whenever a node is ready gives the hybrid
// schedule: the TREES roots fill the pipeline together (inter-tree
// parallelism) and the four siblings produced by one call are issued back to
// back (breadth-first within a level).  Issue stalls when the stack might
// overflow, and while a receiver recovery or the alpha leaf waits, since
// those use the push and leaf ports that a returning result would need.
//
// Leaves leave as groups of four siblings: leaf_group is the parent index,
// so leaf k of tree t is row t*4^DEPTH + 4*leaf_group + lane, and leaf_mask
// marks which lanes carry data (receiver recoveries leave the alpha lane out
// and the alpha leaf comes alone).  key_* and leaf_* have no back-pressure.
//
// From the paper: 4-ary ChaCha expansion, key generation / message decoding
// with one XOR datapath, node buffer holding nodes and keys, the
// hybrid depth-first / breadth-first / inter-tree schedule and the
// (m-1)-out-of-m OT from a GGM tree.  The stack formulation of the schedule,
// the instruction set, the issue throttle and the key output order are this
// design's own.
module unified_unit
  import ironman_pkg::*;
#(
  parameter int unsigned TREES         = 4,
  parameter int unsigned DEPTH         = 6,
  parameter int unsigned STACK_ENTRIES = 192
) (
  input  logic             clk,
  input  logic             rst_n,
  // SPCOT instructions (OP_SET_DELTA, OP_SEED, OP_ALPHA, OP_KEY, OP_RUN)
  input  logic             cfg_valid,
  output logic             cfg_ready,
  input  nmp_inst_t        cfg_inst,
  output logic             busy,
  output logic             done,          // one-cycle pulse at batch end
  output role_e            role,
  // to / from the GGM expansion unit
  output logic             exp_valid,
  output node_t            exp_node,
  input  logic             res_valid,
  input  node_t            res_node,
  input  block_t [3:0]     res_children,
  // leaves (SPCOT output)
  output logic             leaf_valid,
  output logic [TREE_W-1:0] leaf_tree,
  output logic [IDX_W-1:0] leaf_group,
  output logic [3:0]       leaf_mask,
  output block_t [3:0]     leaf_data,
  // sender keys
  output logic             key_valid,
  output logic [TREE_W-1:0] key_tree,
  output logic [LEVEL_W-1:0] key_level,
  output logic [1:0]       key_pos,
  output block_t           key_data
);

  localparam int unsigned LEAVES = 1 << (2 * DEPTH);
  localparam int unsigned CNT_W  = 2 * DEPTH + 1;
  localparam int unsigned SCW    = $clog2(STACK_ENTRIES + 1);
  localparam int unsigned TW     = (TREES > 1) ? $clog2(TREES) : 1;
  localparam int unsigned LW     = $clog2(DEPTH + 1);     // per-level array index

  typedef enum logic [1:0] {S_IDLE, S_ROOTS, S_EXPAND, S_KEYS} state_e;
  state_e state;

  // ---------------------------------------------------------------- storage
  block_t              delta;
  block_t              seed    [TREES];
  logic [IDX_W-1:0]    alpha   [TREES];
  block_t              rkey    [TREES][DEPTH+1][4];  // received keys
  block_t              acc     [TREES][DEPTH+1][4];  // own partial sums
  block_t              leafsum [TREES];
  logic [CNT_W-1:0]    exp_cnt [TREES][DEPTH];        // finished expansions per parent level
  logic [CNT_W-1:0]    leaves_out [TREES];
  logic [DEPTH:0]      rec_done   [TREES];
  logic [TREES-1:0]    tree_done;
  logic [3:0]          inflight;       // expansions in the pipeline
  logic [3:0]          inflight_push;  // of which will push children
  logic [TW-1:0]       root_t;
  logic [TW-1:0]       k_t;
  logic [LEVEL_W-1:0]  k_l;
  logic [1:0]          k_p;

  // ------------------------------------------------------------ node buffer
  logic [3:0]   push_valid;
  node_t [3:0]  push_node;
  logic         pop;
  node_t        top;
  logic         st_empty;
  logic [SCW-1:0] st_count;

  node_buffer #(.ENTRIES(STACK_ENTRIES)) u_nodes (
    .clk, .rst_n, .push_valid, .push_node, .pop,
    .top, .empty(st_empty), .count(st_count)
  );

  // ------------------------------------------------- XOR trees (2x inputs)
  block_t [3:0] acc_new;
  block_t       leaf_xor;
  block_t [3:0] acc_cur;
  always_comb begin
    for (int j = 0; j < 4; j++)
      acc_cur[j] = acc[res_node.tree[TW-1:0]][LW'(res_node.level + 1'b1)][j];
  end
  for (genvar j = 0; j < 4; j++) begin : g_acc
    xor_tree #(.N(2), .W(BLOCK_W)) u_x (
      .in_blocks({res_children[j], acc_cur[j]}), .sum(acc_new[j]));
  end

  // --------------------------------------------------------- helpers
  function automatic logic [1:0] alpha_digit(logic [IDX_W-1:0] a, int unsigned lvl);
    return 2'(a >> (2 * (DEPTH - lvl)));
  endfunction
  function automatic logic [IDX_W-1:0] alpha_prefix(logic [IDX_W-1:0] a, int unsigned lvl);
    return a >> (2 * (DEPTH - lvl));   // index of the path node at level lvl
  endfunction

  // ------------------------------------------- receiver side events
  logic             rec_go;
  logic [TW-1:0]    rec_t;
  logic [LEVEL_W-1:0] rec_l;
  logic             alf_go;
  logic [TW-1:0]    alf_t;

  always_comb begin
    rec_go = 1'b0; rec_t = '0; rec_l = '0;
    alf_go = 1'b0; alf_t = '0;
    if (state == S_EXPAND && role == ROLE_RECEIVER) begin
      for (int t = TREES - 1; t >= 0; t--) begin
        for (int i = DEPTH; i >= 1; i--) begin
          if (!rec_done[t][i] &&
              (i == 1 || 32'(exp_cnt[t][i-1]) == (1 << (2 * (i - 1))) - 1)) begin
            rec_go = 1'b1; rec_t = TW'(t); rec_l = LEVEL_W'(i);
          end
        end
        if (!tree_done[t] && 32'(leaves_out[t]) == LEAVES - 1) begin
          alf_go = 1'b1; alf_t = TW'(t);
        end
      end
    end
  end

  // Recovered nodes of (rec_t, rec_l)
  block_t [3:0]      rec_val;
  logic [3:0]        rec_mask;
  logic [IDX_W-1:0]  rec_parent;
  always_comb begin
    automatic logic [1:0] a = alpha_digit(alpha[rec_t], 32'(rec_l));
    rec_parent = alpha_prefix(alpha[rec_t], 32'(rec_l) - 1);
    for (int j = 0; j < 4; j++) begin
      rec_val[j]  = rkey[rec_t][LW'(rec_l)][j] ^ acc[rec_t][LW'(rec_l)][j];
      rec_mask[j] = (2'(j) != a);
    end
  end

  // ------------------------------------------------------------ issue
  // A node of level DEPTH-1 yields leaves and pushes nothing, so it may
  // always issue; any other node needs room for its 4 children on top of
  // those still in flight, plus 3 slots kept for a receiver recovery.
  logic side_pending, room, issue, top_pushes;
  assign side_pending = rec_go || alf_go;
  assign top_pushes   = (32'(top.level) != DEPTH - 1);
  assign room = !top_pushes ||
                (32'(st_count) + 6 + 4 * 32'(inflight_push) <= STACK_ENTRIES);
  assign issue = (state == S_EXPAND) && !st_empty && room && !side_pending;
  assign pop       = issue;
  assign exp_valid = issue;
  assign exp_node  = top;

  // a cycle without a returning result may be used by a recovery
  logic do_rec, do_alf;
  assign do_rec = rec_go && !res_valid;
  assign do_alf = alf_go && !res_valid && !rec_go;

  // ------------------------------------------------------- push / leaves
  logic res_leaf;
  assign res_leaf = res_valid && (32'(res_node.level) == DEPTH - 1);

  always_comb begin
    push_valid = '0;
    push_node  = '0;
    leaf_valid = 1'b0;
    leaf_tree  = '0;
    leaf_group = '0;
    leaf_mask  = '0;
    leaf_data  = '0;
    if (state == S_ROOTS) begin
      push_valid[0]       = 1'b1;
      push_node[0].tree   = TREE_W'(root_t);
      push_node[0].level  = '0;
      push_node[0].idx    = '0;
      push_node[0].seed   = seed[root_t];
    end else if (res_valid) begin
      for (int j = 0; j < 4; j++) begin
        push_node[j].tree  = res_node.tree;
        push_node[j].level = res_node.level + 1'b1;
        push_node[j].idx   = {res_node.idx[IDX_W-3:0], 2'(j)};
        push_node[j].seed  = res_children[j];
      end
      if (res_leaf) begin
        leaf_valid = 1'b1;
        leaf_tree  = res_node.tree;
        leaf_group = res_node.idx;
        leaf_mask  = 4'hF;
        leaf_data  = res_children;
      end else begin
        push_valid = 4'hF;
      end
    end else if (do_rec) begin
      for (int j = 0; j < 4; j++) begin
        push_node[j].tree  = TREE_W'(rec_t);
        push_node[j].level = rec_l;
        push_node[j].idx   = {rec_parent[IDX_W-3:0], 2'(j)};
        push_node[j].seed  = rec_val[j];
      end
      if (32'(rec_l) == DEPTH) begin
        leaf_valid = 1'b1;
        leaf_tree  = TREE_W'(rec_t);
        leaf_group = rec_parent;
        leaf_mask  = rec_mask;
        for (int j = 0; j < 4; j++) leaf_data[j] = rec_mask[j] ? rec_val[j] : '0;
      end else begin
        push_valid = rec_mask;
      end
    end else if (do_alf) begin
      automatic logic [1:0] a = 2'(alpha[alf_t]);
      leaf_valid = 1'b1;
      leaf_tree  = TREE_W'(alf_t);
      leaf_group = alpha[alf_t] >> 2;
      leaf_mask  = 4'b0001 << a;
      leaf_data[a] = rkey[alf_t][0][0] ^ leafsum[alf_t];
    end
  end

  // XOR of the leaves going out this cycle, for the per-tree leaf sum
  xor_tree #(.N(5), .W(BLOCK_W)) u_leafsum (
    .in_blocks({leaf_data, leafsum[leaf_tree[TW-1:0]]}), .sum(leaf_xor));

  logic [2:0] leaf_cnt;
  always_comb begin
    leaf_cnt = '0;
    for (int j = 0; j < 4; j++) leaf_cnt += 3'(leaf_mask[j]);
  end

  // ------------------------------------------------------------ sequencing
  assign cfg_ready = (state == S_IDLE);
  assign busy      = (state != S_IDLE);

  logic all_done;
  assign all_done = &tree_done;

  assign key_valid = (state == S_KEYS);
  assign key_tree  = TREE_W'(k_t);
  assign key_level = k_l;
  assign key_pos   = k_p;
  assign key_data  = (k_l == '0) ? (leafsum[k_t] ^ delta) : acc[k_t][LW'(k_l)][k_p];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      role      <= ROLE_SENDER;
      done      <= 1'b0;
      inflight  <= '0;
      inflight_push <= '0;
      tree_done <= '0;
      root_t    <= '0;
      k_t <= '0; k_l <= '0; k_p <= '0;
    end else begin
      done     <= 1'b0;
      inflight <= inflight + 4'(issue) - 4'(res_valid);
      inflight_push <= inflight_push + 4'(issue && top_pushes)
                                     - 4'(res_valid && !res_leaf);
      case (state)
        S_IDLE: begin
          if (cfg_valid && cfg_inst.op == OP_RUN) begin
            role      <= cfg_inst.role;
            tree_done <= '0;
            root_t    <= TW'(TREES - 1);
            state     <= (cfg_inst.role == ROLE_SENDER) ? S_ROOTS : S_EXPAND;
          end
        end
        S_ROOTS: begin
          root_t <= root_t - 1'b1;
          if (root_t == '0) state <= S_EXPAND;
        end
        S_EXPAND: begin
          // tree completion
          for (int t = 0; t < TREES; t++) begin
            if (role == ROLE_SENDER && 32'(leaves_out[t]) == LEAVES) tree_done[t] <= 1'b1;
          end
          if (do_alf) tree_done[alf_t] <= 1'b1;
          if (all_done && inflight == '0) begin
            if (role == ROLE_SENDER) begin
              state <= S_KEYS;
              k_t <= '0; k_l <= LEVEL_W'(1); k_p <= '0;
            end else begin
              state <= S_IDLE;
              done  <= 1'b1;
            end
          end
        end
        S_KEYS: begin
          // per tree: levels 1..DEPTH x positions 0..3, then level 0 (leaf key)
          if (k_l == '0) begin
            if (32'(k_t) == TREES - 1) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              k_t <= k_t + 1'b1; k_l <= LEVEL_W'(1); k_p <= '0;
            end
          end else if (k_p == 2'd3) begin
            k_p <= '0;
            k_l <= (32'(k_l) == DEPTH) ? '0 : k_l + 1'b1;
          end else begin
            k_p <= k_p + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Per-tree accumulators, counters and loaded configuration
  always_ff @(posedge clk) begin
    if (state == S_IDLE && cfg_valid) begin
      unique case (cfg_inst.op)
        OP_SET_DELTA: delta <= cfg_inst.data;
        OP_SEED:      seed[cfg_inst.tree[TW-1:0]]  <= cfg_inst.data;
        OP_ALPHA:     alpha[cfg_inst.tree[TW-1:0]] <= cfg_inst.data[IDX_W-1:0];
        OP_KEY:       rkey[cfg_inst.tree[TW-1:0]][LW'(cfg_inst.level)][cfg_inst.pos] <= cfg_inst.data;
        OP_RUN: begin
          for (int t = 0; t < TREES; t++) begin
            leafsum[t]    <= '0;
            leaves_out[t] <= '0;
            rec_done[t]   <= '0;
            for (int i = 0; i < DEPTH; i++) exp_cnt[t][i] <= '0;
            for (int i = 0; i <= DEPTH; i++)
              for (int j = 0; j < 4; j++) acc[t][i][j] <= '0;
          end
        end
        default: ;
      endcase
    end else begin
      if (res_valid) begin
        exp_cnt[res_node.tree[TW-1:0]][LW'(res_node.level)] <=
          exp_cnt[res_node.tree[TW-1:0]][LW'(res_node.level)] + 1'b1;
        for (int j = 0; j < 4; j++)
          acc[res_node.tree[TW-1:0]][LW'(res_node.level + 1'b1)][j] <= acc_new[j];
      end
      if (do_rec) rec_done[rec_t][LW'(rec_l)] <= 1'b1;
      if (leaf_valid) begin
        leafsum[leaf_tree[TW-1:0]]    <= leaf_xor;
        leaves_out[leaf_tree[TW-1:0]] <= leaves_out[leaf_tree[TW-1:0]] + CNT_W'(leaf_cnt);
      end
    end
  end

  // A result and a recovery never share the ports; levels stay in range.
  assert property (@(posedge clk) disable iff (!rst_n) !(do_rec && res_valid));
  assert property (@(posedge clk) disable iff (!rst_n)
                   res_valid |-> (32'(res_node.level) < DEPTH));

endmodule
