// tb_rank_xorsum_buffer: checks the reset sweep length, then runs jobs in
// which every row of the block receives WEIGHT random elements in a random
// interleaved order (random gaps, random out_ready).  Each row must leave
// exactly once as row_base + row with the XOR of its elements.  Between
// jobs a few rows are left half filled and clear is pulsed: the next job
// must not see their partial sums.
module tb_rank_xorsum_buffer;
  import ironman_pkg::*;
  localparam int BR = 64, WEIGHT = 10, RW = $clog2(BR);
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clear = 0, in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [ROW_W-1:0] row_base = '0, out_row;
  logic [RW-1:0] in_row = '0;
  block_t in_data = '0, out_data;

  rank_xorsum_buffer #(.BLOCK_ROWS(BR), .WEIGHT(WEIGHT)) dut (.*);

  block_t exp_sum [BR];
  int     got [BR];

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      automatic int r = int'(out_row - row_base);
      checks++;
      if (r < 0 || r >= BR || out_data !== exp_sum[r]) begin
        failures++; if (failures < 10) $display("row %0d wrong", r);
      end else got[r]++;
    end
    out_ready <= ($urandom_range(0, 2) != 0);
  end

  function automatic block_t rb();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  task automatic put(int r, block_t d);
    @(negedge clk);
    while ($urandom_range(0, 3) == 0) begin in_valid = 0; @(negedge clk); end
    in_valid = 1; in_row = RW'(r); in_data = d;
    @(posedge clk); while (!in_ready) @(posedge clk);
    #1 in_valid = 0;
  endtask

  task automatic run_job(int base);
    int order [$];
    @(negedge clk); row_base = ROW_W'(base);
    foreach (got[r]) begin
      got[r] = 0; exp_sum[r] = '0;
      repeat (WEIGHT) order.push_back(r);
    end
    order.shuffle();
    foreach (order[k]) begin
      automatic block_t d = rb();
      exp_sum[order[k]] ^= d;
      put(order[k], d);
    end
    repeat (10) @(posedge clk);
    foreach (got[r]) begin
      checks++;
      if (got[r] != 1) begin failures++; if (failures < 10) $display("row %0d seen %0d", r, got[r]); end
    end
  endtask

  initial begin
    int n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (!in_ready) begin @(posedge clk); n++; end
    checks++; if (n < BR || n > BR + 1) begin failures++; $display("sweep %0d cycles", n); end
    for (int j = 0; j < 4; j++) begin
      run_job(5000 * j + 17);
      // abandon a few half-filled rows, then start the next job
      for (int k = 0; k < 5; k++) put($urandom_range(0, BR - 1), rb());
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    end
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
