// xor_tree: combinational binary XOR-reduction tree.
//
// Reduces N blocks of W bits to their XOR in ceil(log2 N) levels of 2-input
// XORs; the result is combinational (no register).  The tree is stored heap
// style: node k has children 2k and 2k+1, the inputs (padded with zeros to a
// power of two P) are nodes P..P+N-1 and the root is node 1.  In the Unified
// Unit the tree takes 2x inputs for x ChaCha cores: with the single core of this
// design that is the newly expanded node and the stored partial sum of its
// level and position.  The tree shape follows the paper's figure of the
// Unified Unit; N and W are parameters.
module xor_tree #(
  parameter int unsigned N = 2,
  parameter int unsigned W = 128
) (
  input  logic [N-1:0][W-1:0] in_blocks,
  output logic [W-1:0]        sum
);
  localparam int unsigned P = (N > 1) ? (1 << $clog2(N)) : 1;

  logic [W-1:0] node [1:2*P-1];

  for (genvar i = 0; i < P; i++) begin : g_in
    if (i < N) begin : g_used
      assign node[P+i] = in_blocks[i];
    end else begin : g_pad
      assign node[P+i] = '0;
    end
  end
  for (genvar k = 1; k < P; k++) begin : g_node
    assign node[k] = node[2*k] ^ node[2*k+1];
  end
  assign sum = node[1];
endmodule
