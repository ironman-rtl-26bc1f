// node_buffer: LIFO of GGM nodes waiting to be expanded.
//
// The node buffer of the Unified Unit.  Because it is a stack, the node most
// recently produced is expanded next, which makes the expansion depth-first
// and keeps the storage at O(log l) nodes per tree instead of the O(l) of a
// breadth-first schedule.  Per cycle it accepts up to four pushes (the four
// children of one ChaCha8 call, or recovered nodes) and one pop.  Valid push
// lanes are packed; lane 0 of a push lands on top, so child 0 is expanded
// first.  A pop and pushes in the same cycle are allowed: the pushes
// overwrite the popped slot.
//
// Interface: top/empty/count describe the current contents combinationally;
// pop removes top at the clock edge.  The user must not push more than
// ENTRIES-count(+pop) nodes (assertion below); the Unified Unit throttles its
// issue so that this holds.  Capacity is this design's choice: the paper only
// states that the buffer grows with the tree height log4(l).
module node_buffer
  import ironman_pkg::*;
#(
  parameter int unsigned ENTRIES = 192
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [3:0]                 push_valid,
  input  node_t [3:0]                push_node,
  input  logic                       pop,
  output node_t                      top,
  output logic                       empty,
  output logic [$clog2(ENTRIES+1)-1:0] count
);

  localparam int unsigned CW = $clog2(ENTRIES+1);

  node_t         mem [ENTRIES];
  logic [CW-1:0] sp;
  logic [CW-1:0] base;
  logic [2:0]    npush;

  assign empty = (sp == '0);
  assign count = sp;
  assign top   = empty ? '0 : mem[sp - 1'b1];
  assign base  = sp - CW'(pop);

  always_comb begin
    npush = '0;
    for (int j = 0; j < 4; j++) npush += 3'(push_valid[j]);
  end

  always_ff @(posedge clk) begin
    for (int j = 0; j < 4; j++) begin
      if (push_valid[j]) begin
        automatic logic [2:0] above = '0;
        for (int k = j + 1; k < 4; k++) above += 3'(push_valid[k]);
        mem[base + CW'(above)] <= push_node[j];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sp <= '0;
    else        sp <= base + CW'(npush);
  end

  // A pop needs an entry; pushes must fit.
  assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);
  assert property (@(posedge clk) disable iff (!rst_n)
                   (32'(base) + 32'(npush)) <= ENTRIES);

endmodule
