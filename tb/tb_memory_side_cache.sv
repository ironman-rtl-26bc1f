// tb_memory_side_cache: random lookups against a software direct-mapped
// cache model.  Addresses come from a pool about twice the cache size so
// hits, cold misses and conflict misses all occur; every miss is filled the
// cycle after its response with fresh random data.  Each response must come
// exactly one cycle after its lookup with the model's hit flag, and a hit
// must return the line last filled at that address.  invalidate is pulsed
// now and then and must turn every following lookup into a miss until the
// line is filled again.
module tb_memory_side_cache;
  import ironman_pkg::*;
  localparam int CACHE_BYTES = 4096, LINES = CACHE_BYTES / 64;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic invalidate = 0, lookup_valid = 0, fill_valid = 0;
  logic [LADDR_W-1:0] lookup_addr = '0, fill_addr = '0;
  logic resp_valid, resp_hit;
  line_t resp_line, fill_line = '0;

  memory_side_cache #(.CACHE_BYTES(CACHE_BYTES)) dut (.*);

  bit            m_valid [LINES];
  int unsigned   m_tag   [LINES];
  line_t         m_data  [LINES];
  int hits = 0, misses = 0;

  function automatic line_t rl();
    line_t d;
    for (int k = 0; k < 16; k++) d[32*k +: 32] = $urandom;
    return d;
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 20000; n++) begin
      int unsigned a, ix;
      bit exp_hit;
      a  = 32'h4000 + $urandom_range(0, 2 * LINES - 1) * (($urandom_range(0, 1) == 0) ? 1 : 3);
      ix = a % LINES;
      @(negedge clk);
      fill_valid = 0; invalidate = 0;
      if ($urandom_range(0, 999) == 0) begin
        invalidate = 1;
        foreach (m_valid[i]) m_valid[i] = 0;
        @(negedge clk); invalidate = 0;
      end
      lookup_valid = 1; lookup_addr = a;
      exp_hit = m_valid[ix] && m_tag[ix] == a / LINES;
      @(negedge clk);
      lookup_valid = 0;
      checks++;
      if (!resp_valid || resp_hit !== exp_hit || (exp_hit && resp_line !== m_data[ix])) begin
        failures++;
        if (failures < 10) $display("addr %h: valid %b hit %b exp %b", a, resp_valid, resp_hit, exp_hit);
      end
      if (exp_hit) hits++;
      else begin
        misses++;
        fill_valid = 1; fill_addr = a; fill_line = rl();
        m_valid[ix] = 1; m_tag[ix] = a / LINES; m_data[ix] = fill_line;
      end
    end
    @(negedge clk); fill_valid = 0;
    checks++; if (hits < 1000 || misses < 1000) begin failures++; $display("hits %0d misses %0d", hits, misses); end
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
