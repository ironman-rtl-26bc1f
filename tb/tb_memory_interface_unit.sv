// tb_memory_interface_unit: random line reads (a mix of row hits, row
// conflicts and closed banks) against the DRAM model.  Checks the returned
// data and id, that the DRAM model saw no timing or protocol violation, the
// row-hit/miss classification, and the latency of a row hit:
// tCL + tBL + HIT_OVERHEAD cycles from request acceptance to response.
module tb_memory_interface_unit;
  import ironman_pkg::*;
  localparam int HIT_OVERHEAD = 3;  // RD issue, DRAM sample, last beat collect
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic req_valid = 0, req_ready, req_id = 0;
  logic [LADDR_W-1:0] req_addr = '0;
  logic resp_valid, resp_id;
  line_t resp_line;
  ddr_ca_t ddr_ca;
  logic dq_valid;
  logic [BEAT_W-1:0] dq_data;
  logic row_hit_pulse, row_miss_pulse;

  memory_interface_unit dut (.*);
  dram_model u_dram (.clk, .ca(ddr_ca), .dq_valid, .dq_data);

  int edge_n = 0;
  always @(posedge clk) edge_n <= edge_n + 1;
  int hits = 0, misses = 0;
  always @(posedge clk) begin
    if (row_hit_pulse) hits++;
    if (row_miss_pulse) misses++;
  end

  function automatic line_t rl();
    line_t l;
    for (int i = 0; i < 16; i++) l[32*i +: 32] = $urandom;
    return l;
  endfunction

  initial begin
    int unsigned la, prev;
    int exp_hits = 0;
    logic [15:0] orow [16];
    logic [15:0] isopen;
    isopen = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    prev = 0;
    for (int it = 0; it < 300; it++) begin
      int t0;
      bit ishit;
      case ($urandom_range(0, 2))
        0: la = prev ^ 32'($urandom_range(0, 127));           // same page
        1: la = prev ^ (32'($urandom_range(1, 7)) << 11);     // same bank, other row
        default: la = $urandom & 32'h07FF_FFFF;
      endcase
      la &= 32'h07FF_FFFF;
      prev = la;
      u_dram.put_line(la, rl());
      ishit = isopen[la[10:7]] && orow[la[10:7]] == la[26:11];
      isopen[la[10:7]] = 1; orow[la[10:7]] = la[26:11];
      if (ishit) exp_hits++;
      @(negedge clk);
      req_valid = 1; req_addr = la; req_id = 1'(it);
      @(posedge clk); t0 = edge_n;
      #1 req_valid = 0;
      @(posedge clk iff resp_valid);
      checks++;
      if (resp_line !== u_dram.mem[la] || resp_id !== 1'(it)) begin
        failures++; $display("read %0d wrong", it);
      end
      if (ishit) begin
        checks++;
        if (edge_n - t0 != 16 + 4 + HIT_OVERHEAD) begin
          failures++; $display("hit latency %0d", edge_n - t0);
        end
      end
    end
    repeat (3) @(negedge clk);
    checks++;
    if (u_dram.violations != 0) begin failures++; $display("violations %0d", u_dram.violations); end
    checks++;
    if (hits != exp_hits || hits + misses != 300) begin
      failures++; $display("hits %0d exp %0d misses %0d", hits, exp_hits, misses);
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
