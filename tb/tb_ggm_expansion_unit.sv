// tb_ggm_expansion_unit: feeds random parent nodes, one per cycle, and
// checks each returned child set against the reference ChaCha8-based
// expansion (constants | seed | tag | level | zeros), the carried node
// descriptor, and the 8-cycle latency.
module tb_ggm_expansion_unit;
  import ironman_pkg::*;
  import ironman_tb_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0;
  node_t in_node = '0;
  block_t tag;
  logic out_valid;
  node_t out_node;
  block_t [3:0] out_children;

  ggm_expansion_unit dut (.clk, .rst_n, .in_valid, .in_node, .tag,
                          .out_valid, .out_node, .out_children);

  localparam int N = 100;
  node_t nodes [N];
  int issue_edge [N];
  int edge_n = 0, got = 0;
  always @(posedge clk) edge_n <= edge_n + 1;

  always @(posedge clk) if (rst_n && out_valid) begin
    automatic int k = int'(out_node.idx);
    automatic logic [511:0] ref_c = ggm_children(nodes[k].seed, tag, int'(nodes[k].level));
    for (int j = 0; j < 4; j++) begin
      checks++;
      if (out_children[j] !== ref_c[128*j +: 128]) begin
        failures++; $display("child %0d of node %0d wrong", j, k);
      end
    end
    checks++;
    if (out_node.tree !== nodes[k].tree || out_node.level !== nodes[k].level) failures++;
    checks++;
    if (edge_n + 1 - issue_edge[k] != 8) failures++;
    got++;
  end

  initial begin
    tag = {$urandom, $urandom, $urandom, $urandom};
    for (int i = 0; i < N; i++) begin
      nodes[i].tree  = TREE_W'($urandom);
      nodes[i].level = LEVEL_W'($urandom_range(0, 7));
      nodes[i].idx   = IDX_W'(i);
      nodes[i].seed  = {$urandom, $urandom, $urandom, $urandom};
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < N; i++) begin
      in_valid = 1; in_node = nodes[i]; issue_edge[i] = edge_n + 1;
      @(negedge clk);
    end
    in_valid = 0;
    repeat (20) @(negedge clk);
    checks++;
    if (got != N) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
