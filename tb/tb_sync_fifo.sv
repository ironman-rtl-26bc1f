// tb_sync_fifo: random writes and reads with random back-pressure against a
// queue model; checks order, full/empty flags and the level output.
module tb_sync_fifo;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [15:0] in_data = '0, out_data;
  logic [3:0] level;
  logic [15:0] model [$];
  sync_fifo #(.W(16), .DEPTH(8)) dut (.*);
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 4000; it++) begin
      @(negedge clk);
      checks++;
      if (int'(level) != model.size() || in_ready != (model.size() < 8) ||
          out_valid != (model.size() > 0)) failures++;
      if (model.size() > 0) begin checks++; if (out_data !== model[0]) failures++; end
      in_valid  = ($urandom_range(0, 2) != 0);
      in_data   = 16'($urandom);
      out_ready = ($urandom_range(0, 2) != 0);
      if (out_ready && model.size() > 0) void'(model.pop_front());
      if (in_valid && in_ready) model.push_back(in_data);
    end
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
