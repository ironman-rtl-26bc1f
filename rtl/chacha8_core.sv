// chacha8_core: fully pipelined ChaCha8 block function.
//
// Each of the 8 pipeline stages performs one ChaCha round: even stages a
// column round, odd stages a diagonal round, so the 8 stages give the 8
// rounds of ChaCha8.  The input state travels down the pipeline next to the
// working state and is added word-wise at the output (the ChaCha
// feed-forward).  A new 512-bit state can enter every cycle; its 512-bit
// keystream block leaves exactly STAGES (= 8) cycles later, i.e. four 128-bit
// GGM children per cycle at full rate.
//
// Interface: in_valid/in_state/in_tag are sampled on each rising clock edge;
// out_valid/out_block/out_tag are registered and valid 8 cycles later.  There
// is no stall: the pipeline always advances.  in_tag is an opaque sideband
// (the node descriptor) carried along with the state.
//
// From the paper: ChaCha8, 512-bit output per cycle, an 8-stage fully
// pipelined core.  The round arithmetic is the standard ChaCha definition;
// the one-round-per-stage split is this design's reading of "8-stage".
// State word i is in_state[32*i +: 32].
module chacha8_core #(
  parameter int unsigned TAG_W  = 8,
  parameter int unsigned STAGES = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [511:0]     in_state,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output logic [511:0]     out_block,
  output logic [TAG_W-1:0] out_tag
);

  typedef logic [31:0] word_t;
  typedef word_t [15:0] state_t;

  function automatic word_t rotl(word_t x, int unsigned n);
    return (x << n) | (x >> (32 - n));
  endfunction

  function automatic state_t qr(state_t s, int unsigned a, int unsigned b,
                                int unsigned c, int unsigned d);
    state_t t = s;
    t[a] = t[a] + t[b]; t[d] = rotl(t[d] ^ t[a], 16);
    t[c] = t[c] + t[d]; t[b] = rotl(t[b] ^ t[c], 12);
    t[a] = t[a] + t[b]; t[d] = rotl(t[d] ^ t[a], 8);
    t[c] = t[c] + t[d]; t[b] = rotl(t[b] ^ t[c], 7);
    return t;
  endfunction

  function automatic state_t chacha_round(state_t s, logic diagonal);
    state_t t = s;
    if (!diagonal) begin
      t = qr(t, 0, 4,  8, 12);
      t = qr(t, 1, 5,  9, 13);
      t = qr(t, 2, 6, 10, 14);
      t = qr(t, 3, 7, 11, 15);
    end else begin
      t = qr(t, 0, 5, 10, 15);
      t = qr(t, 1, 6, 11, 12);
      t = qr(t, 2, 7,  8, 13);
      t = qr(t, 3, 4,  9, 14);
    end
    return t;
  endfunction

  state_t             work [STAGES];
  state_t             orig [STAGES];
  logic [TAG_W-1:0]   tagp [STAGES];
  logic [STAGES-1:0]  vld;

  always_ff @(posedge clk) begin
    work[0] <= chacha_round(state_t'(in_state), 1'b0);
    orig[0] <= state_t'(in_state);
    tagp[0] <= in_tag;
    for (int unsigned k = 1; k < STAGES; k++) begin
      work[k] <= chacha_round(work[k-1], k[0]);
      orig[k] <= orig[k-1];
      tagp[k] <= tagp[k-1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[STAGES-2:0], in_valid};
  end

  always_comb begin
    state_t o;
    for (int unsigned i = 0; i < 16; i++) o[i] = work[STAGES-1][i] + orig[STAGES-1][i];
    out_block = 512'(o);
  end
  assign out_valid = vld[STAGES-1];
  assign out_tag   = tagp[STAGES-1];

endmodule
