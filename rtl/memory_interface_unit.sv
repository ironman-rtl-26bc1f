// memory_interface_unit: turns 64-byte line reads into DDR4 commands.
//
// One read is handled at a time.  The line address is split into column
// (line within the 8 KB page), bank (16 banks) and row.  The unit keeps the
// open row of every bank (open-page policy):
//   row hit      -> RD
//   row conflict -> PRE, ACT, RD
//   bank closed  -> ACT, RD
// and waits for the DDR4 timing of the paper's configuration table before
// each command: tRCD (ACT to RD), tRP (PRE to ACT), tRC (ACT to ACT, and
// tRC - tRP as the ACT to PRE minimum).  After RD the DRAM returns the line
// as tBL = 4 beats of 128 bits on DQ; the unit gathers them and answers with
// resp_valid/resp_line for one cycle, carrying the request's id back.
// Because only one read is outstanding and a read takes at least
// tCL + tBL cycles, tRRD, tFAW and tCCD are met without extra checks.
//
// Timing and burst length follow the paper; the address map, the open-page
// policy, the one-at-a-time reads and the 128-bit beat (a 64-bit DDR bus
// seen once per clock) are this design's.
module memory_interface_unit
  import ironman_pkg::*;
#(
  parameter int unsigned T_RCD = 16,
  parameter int unsigned T_CL  = 16,
  parameter int unsigned T_RP  = 16,
  parameter int unsigned T_RC  = 55,
  parameter int unsigned T_BL  = 4
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               req_valid,
  output logic               req_ready,
  input  logic [LADDR_W-1:0] req_addr,
  input  logic               req_id,
  output logic               resp_valid,
  output line_t              resp_line,
  output logic               resp_id,
  // DDR pins of the rank
  output ddr_ca_t            ddr_ca,
  input  logic               dq_valid,
  input  logic [BEAT_W-1:0]  dq_data,
  // statistics
  output logic               row_hit_pulse,
  output logic               row_miss_pulse
);

  typedef enum logic [1:0] {S_IDLE, S_CMD, S_DATA} state_e;
  state_e state;

  logic [31:0]             now;
  logic [31:0]             last_act [16];
  logic [31:0]             last_pre [16];
  logic [15:0]             open_row [16];
  logic [15:0]             is_open;
  logic [LADDR_W-1:0]      addr;
  logic                    id;
  logic                    first;
  logic [$clog2(T_BL+1)-1:0] beats;

  logic [COL_LINE_W-1:0] col;
  logic [BANK_W-1:0]     bank;
  logic [DROW_W-1:0]     row;
  assign col  = addr[COL_LINE_W-1:0];
  assign bank = addr[COL_LINE_W +: BANK_W];
  assign row  = addr[COL_LINE_W + BANK_W +: DROW_W];

  logic hit, can_rd, can_pre, can_act;
  assign hit     = is_open[bank] && open_row[bank] == row;
  assign can_rd  = (now - last_act[bank]) >= T_RCD;
  assign can_pre = (now - last_act[bank]) >= T_RC - T_RP;
  assign can_act = (now - last_pre[bank]) >= T_RP && (now - last_act[bank]) >= T_RC;

  assign req_ready = (state == S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      now        <= 32'd64;          // all banks idle long enough at reset
      is_open    <= '0;
      ddr_ca     <= '0;
      resp_valid <= 1'b0;
      resp_id    <= 1'b0;
      beats      <= '0;
      first      <= 1'b0;
      addr       <= '0;
      id         <= 1'b0;
      row_hit_pulse  <= 1'b0;
      row_miss_pulse <= 1'b0;
      for (int b = 0; b < 16; b++) begin
        last_act[b] <= '0; last_pre[b] <= '0; open_row[b] <= '0;
      end
    end else begin
      now            <= now + 1;
      ddr_ca         <= '0;
      resp_valid     <= 1'b0;
      row_hit_pulse  <= 1'b0;
      row_miss_pulse <= 1'b0;
      unique case (state)
        S_IDLE: if (req_valid) begin
          addr  <= req_addr;
          id    <= req_id;
          first <= 1'b1;
          state <= S_CMD;
        end
        S_CMD: begin
          first <= 1'b0;
          if (first) begin
            if (hit) row_hit_pulse <= 1'b1;
            else     row_miss_pulse <= 1'b1;
          end
          if (hit) begin
            if (can_rd) begin
              ddr_ca <= '{cmd: DDR_RD, bank: bank, row: row, col: {col, 3'b000}};
              beats  <= '0;
              state  <= S_DATA;
            end
          end else if (is_open[bank]) begin
            if (can_pre) begin
              ddr_ca         <= '{cmd: DDR_PRE, bank: bank, row: open_row[bank], col: '0};
              is_open[bank]  <= 1'b0;
              last_pre[bank] <= now;
            end
          end else if (can_act) begin
            ddr_ca         <= '{cmd: DDR_ACT, bank: bank, row: row, col: '0};
            is_open[bank]  <= 1'b1;
            open_row[bank] <= row;
            last_act[bank] <= now;
          end
        end
        S_DATA: if (dq_valid) begin
          resp_line[BEAT_W*beats +: BEAT_W] <= dq_data;
          beats <= beats + 1'b1;
          if (32'(beats) == T_BL - 1) begin
            resp_valid <= 1'b1;
            resp_id    <= id;
            state      <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
