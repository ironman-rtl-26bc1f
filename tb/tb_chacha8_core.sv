// tb_chacha8_core: checks the pipelined ChaCha8 core against a software
// ChaCha8 model.  Random states are fed back to back, one per cycle, and
// every output must equal the model and appear exactly 8 cycles after its
// input (full throughput, 8-stage latency).
module tb_chacha8_core;
  import ironman_tb_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0;
  logic [511:0] in_state = '0;
  logic [15:0] in_tag = '0;
  logic out_valid;
  logic [511:0] out_block;
  logic [15:0] out_tag;

  chacha8_core #(.TAG_W(16)) dut (.clk, .rst_n, .in_valid, .in_state, .in_tag,
                                  .out_valid, .out_block, .out_tag);

  localparam int N = 200;
  logic [511:0] states [N];
  int issue_cycle [N];
  int cycle = 0;
  int got = 0;
  always @(posedge clk) cycle <= cycle + 1;

  always @(posedge clk) if (rst_n && out_valid) begin
    automatic int k = int'(out_tag);
    checks++;
    if (out_block !== chacha8_ref(states[k])) begin
      failures++; $display("mismatch at %0d", k);
    end
    checks++;
    if (cycle + 1 - issue_cycle[k] != 8) begin
      failures++; $display("latency %0d for %0d", cycle + 1 - issue_cycle[k], k);
    end
    got++;
  end

  initial begin
    // RFC 8439-style state with all-zero key/nonce; content is arbitrary here
    for (int i = 0; i < N; i++)
      for (int w = 0; w < 16; w++) states[i][32*w +: 32] = $urandom;
    states[0] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < N; i++) begin
      in_valid = 1; in_state = states[i]; in_tag = 16'(i);
      issue_cycle[i] = cycle + 1;
      @(negedge clk);
    end
    in_valid = 0;
    repeat (20) @(negedge clk);
    checks++;
    if (got != N) begin failures++; $display("got %0d of %0d", got, N); end
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
