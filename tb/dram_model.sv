// dram_model: behavioural model of the DDR4 devices of one rank, for
// testbenches only (not synthesizable).
//
// It follows ACT/RD/PRE on the C/A pins, keeps the open row per bank and
// counts protocol and timing violations (RD to a closed bank or wrong row,
// ACT to an open bank, RD earlier than tRCD after ACT, ACT earlier than tRP
// after PRE or tRC after the previous ACT).  A RD returns the 64-byte line
// as four 128-bit beats starting tCL cycles later.  Line contents come from
// an associative array the testbench fills with put_line(); unwritten lines
// read as zero.
module dram_model
  import ironman_pkg::*;
#(
  parameter int T_RCD = 16,
  parameter int T_CL  = 16,
  parameter int T_RP  = 16,
  parameter int T_RC  = 55
) (
  input  logic              clk,
  input  ddr_ca_t           ca,
  output logic              dq_valid,
  output logic [BEAT_W-1:0] dq_data
);
  line_t mem [int unsigned];
  int    open_row [16];
  longint last_act [16];
  longint last_pre [16];
  longint cyc = 0;
  int    violations = 0;
  int    reads = 0;

  typedef struct { longint t; line_t d; } pend_t;
  pend_t q [$];

  function automatic void put_line(int unsigned la, line_t d);
    mem[la] = d;
  endfunction

  initial begin
    dq_valid = 0; dq_data = '0;
    for (int b = 0; b < 16; b++) begin open_row[b] = -1; last_act[b] = -1000; last_pre[b] = -1000; end
  end

  int beat = 0;
  always @(posedge clk) begin
    cyc++;
    case (ca.cmd)
      DDR_ACT: begin
        if (open_row[ca.bank] >= 0 || cyc - last_pre[ca.bank] < T_RP || cyc - last_act[ca.bank] < T_RC)
          violations++;
        open_row[ca.bank] = int'(ca.row);
        last_act[ca.bank] = cyc;
      end
      DDR_PRE: begin
        open_row[ca.bank] = -1;
        last_pre[ca.bank] = cyc;
      end
      DDR_RD: begin
        automatic int unsigned la = {ca.row, ca.bank, ca.col[9:3]};
        automatic pend_t p;
        if (open_row[ca.bank] != int'(ca.row) || cyc - last_act[ca.bank] < T_RCD) violations++;
        p.t = cyc + T_CL;
        p.d = mem.exists(la) ? mem[la] : '0;
        q.push_back(p);
        reads++;
      end
      default: ;
    endcase
    dq_valid <= 1'b0;
    if (q.size() > 0 && q[0].t <= cyc) begin
      dq_valid <= 1'b1;
      dq_data  <= q[0].d[BEAT_W*beat +: BEAT_W];
      beat++;
      if (beat == BEATS) begin beat = 0; void'(q.pop_front()); end
    end
  end
endmodule
