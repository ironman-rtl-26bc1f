// tb_dimm_xorsum_buffer: each of ROWS rows gets one leaf (sent as groups of
// four siblings, groups in random order) and one row sum from a randomly
// chosen rank (each rank's rows in random order, random gaps, honouring
// rs_ready).  Every row must come out exactly once on DIMM.COT carrying
// leaf xor row sum.  The reset sweep length is checked; a group left pending
// before clear must not pair with the second batch (epoch check).
module tb_dimm_xorsum_buffer;
  import ironman_pkg::*;
  localparam int ROWS = 1024;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clear = 0, leaf_valid = 0;
  logic [ROW_W-1:0] leaf_group4 = '0;
  logic [3:0] leaf_mask = '0;
  block_t [3:0] leaf_data = '0;
  logic ready;
  logic [1:0] rs_valid = '0, rs_ready;
  logic [1:0][ROW_W-1:0] rs_row = '0;
  block_t [1:0] rs_data = '0;
  logic [3:0] cot_valid;
  logic [3:0][ROW_W-1:0] cot_row;
  block_t [3:0] cot_data;

  dimm_xorsum_buffer #(.ROWS(ROWS)) dut (.*);

  block_t leafv [ROWS], rsv [ROWS];
  int got [ROWS];
  int owner [ROWS];
  int rq [2][$];

  always @(posedge clk) if (rst_n)
    for (int b = 0; b < 4; b++) if (cot_valid[b]) begin
      automatic int r = int'(cot_row[b]);
      checks++;
      if (r >= ROWS || cot_data[b] !== (leafv[r] ^ rsv[r])) begin
        failures++; if (failures < 10) $display("row %0d wrong", r);
      end
      if (r < ROWS) got[r]++;
    end

  function automatic block_t rb();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  task automatic run_batch();
    int order [$];
    foreach (got[r]) begin
      got[r] = 0; leafv[r] = rb(); rsv[r] = rb(); owner[r] = $urandom_range(0, 1);
      rq[owner[r]].push_back(r);
    end
    rq[0].shuffle(); rq[1].shuffle();
    for (int g = 0; g < ROWS / 4; g++) order.push_back(g);
    order.shuffle();
    fork
      begin
        foreach (order[i]) begin
          @(negedge clk);
          while ($urandom_range(0, 2) == 0) begin leaf_valid = 0; @(negedge clk); end
          leaf_valid = 1; leaf_group4 = ROW_W'(order[i]); leaf_mask = 4'hF;
          for (int j = 0; j < 4; j++) leaf_data[j] = leafv[4 * order[i] + j];
        end
        @(negedge clk); leaf_valid = 0;
      end
      for (int k = 0; k < 2; k++) begin
        automatic int kk = k;
        fork
          while (rq[kk].size() > 0) begin
            @(negedge clk);
            rs_valid[kk] = 1; rs_row[kk] = ROW_W'(rq[kk][0]); rs_data[kk] = rsv[rq[kk][0]];
            @(posedge clk);
            if (rs_ready[kk]) void'(rq[kk].pop_front());
            #1 rs_valid[kk] = 0;
          end
        join_none
      end
    join
    wait (rq[0].size() == 0 && rq[1].size() == 0);
    repeat (5) @(negedge clk);
    foreach (got[r]) begin
      checks++;
      if (got[r] != 1) begin failures++; if (failures < 10) $display("row %0d seen %0d", r, got[r]); end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // reset sweep: one entry per bank per cycle
    begin
      int n = 0;
      while (!ready) begin @(posedge clk); n++; end
      checks++;
      if (n < ROWS / 4 || n > ROWS / 4 + 1) begin
        failures++; $display("reset sweep took %0d cycles", n);
      end
    end
    run_batch();
    // leave one group of leaves pending, then start a new batch: the stale
    // entries must not pair with the new batch's row sums
    @(negedge clk); leaf_valid = 1; leaf_group4 = '0; leaf_mask = 4'hF;
    for (int j = 0; j < 4; j++) leaf_data[j] = rb();
    @(negedge clk); leaf_valid = 0; clear = 1; @(negedge clk); clear = 0;
    run_batch();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
