// tb_node_buffer: drives random mixes of 0-4 pushes and pops against a
// queue-based stack model and checks top, count and empty every cycle,
// including cycles that pop and push together.
module tb_node_buffer;
  import ironman_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [3:0] push_valid = '0;
  node_t [3:0] push_node;
  logic pop = 0;
  node_t top;
  logic empty;
  logic [6:0] count;
  node_t model [$];

  node_buffer #(.ENTRIES(64)) dut (.clk, .rst_n, .push_valid, .push_node, .pop, .top, .empty, .count);

  function automatic node_t rnode();
    node_t n;
    n.tree = TREE_W'($urandom); n.level = LEVEL_W'($urandom); n.idx = IDX_W'($urandom);
    n.seed = {$urandom, $urandom, $urandom, $urandom};
    return n;
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      checks++;
      if (int'(count) != model.size() || empty != (model.size() == 0)) begin
        failures++; $display("count %0d model %0d", count, model.size());
      end
      if (model.size() > 0) begin
        checks++;
        if (top !== model[$]) failures++;
      end
      pop = (model.size() > 0) && ($urandom_range(0, 1) == 1);
      for (int j = 0; j < 4; j++) begin
        push_valid[j] = ($urandom_range(0, 2) == 0);
        push_node[j] = rnode();
      end
      // keep within capacity and drain when high
      if (model.size() > 50) push_valid = '0;
      if (pop) void'(model.pop_back());
      for (int j = 3; j >= 0; j--) if (push_valid[j]) model.push_back(push_node[j]);
    end
    @(negedge clk);
    push_valid = '0; pop = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
