// ironman_tb_pkg: reference models used by the testbenches.
//
// chacha8_ref is a plain software ChaCha8 block function (8 rounds, with
// the usual column/diagonal double rounds and the final feed-forward),
// written independently of the pipelined RTL.  ggm_children computes the
// four children of a GGM node the way the expansion unit is specified to
// (constants | seed | tag | level | zeros).  vec_elem and the pair helpers
// give the testbench DRAM contents as formulas, so no data files are needed.
package ironman_tb_pkg;

  function automatic logic [31:0] rl(logic [31:0] x, int n);
    return (x << n) | (x >> (32 - n));
  endfunction

  function automatic logic [511:0] chacha8_ref(logic [511:0] in);
    logic [31:0] x [16];
    logic [31:0] s [16];
    logic [511:0] o;
    int q [8][4] = '{'{0,4,8,12}, '{1,5,9,13}, '{2,6,10,14}, '{3,7,11,15},
                     '{0,5,10,15}, '{1,6,11,12}, '{2,7,8,13}, '{3,4,9,14}};
    for (int i = 0; i < 16; i++) begin s[i] = in[32*i +: 32]; x[i] = s[i]; end
    for (int dr = 0; dr < 4; dr++) begin
      for (int k = 0; k < 8; k++) begin
        int a = q[k][0], b = q[k][1], c = q[k][2], d = q[k][3];
        x[a] += x[b]; x[d] ^= x[a]; x[d] = rl(x[d], 16);
        x[c] += x[d]; x[b] ^= x[c]; x[b] = rl(x[b], 12);
        x[a] += x[b]; x[d] ^= x[a]; x[d] = rl(x[d], 8);
        x[c] += x[d]; x[b] ^= x[c]; x[b] = rl(x[b], 7);
      end
    end
    for (int i = 0; i < 16; i++) o[32*i +: 32] = x[i] + s[i];
    return o;
  endfunction

  function automatic logic [511:0] ggm_children(logic [127:0] seed, logic [127:0] tag, int level);
    logic [511:0] st;
    st = {96'd0, 32'(level), tag, seed,
          32'h6b206574, 32'h79622d32, 32'h3320646e, 32'h61707865};
    return chacha8_ref(st);
  endfunction

  // All 4^depth leaves of one tree, leaf k in leaves[k].
  function automatic void ggm_leaves(logic [127:0] root, logic [127:0] tag, int depth,
                                     ref logic [127:0] leaves []);
    logic [127:0] cur [];
    logic [127:0] nxt [];
    cur = new [1];
    cur[0] = root;
    for (int l = 0; l < depth; l++) begin
      nxt = new [cur.size() * 4];
      foreach (cur[i]) begin
        logic [511:0] c = ggm_children(cur[i], tag, l);
        for (int j = 0; j < 4; j++) nxt[4*i + j] = c[128*j +: 128];
      end
      cur = nxt;
    end
    leaves = cur;
  endfunction

  // 128-bit pseudo-random vector element number i of vector "salt".
  function automatic logic [127:0] vec_elem(int unsigned salt, int unsigned i);
    logic [31:0] h;
    logic [127:0] r;
    h = i * 32'h9E3779B1 + salt * 32'h85EBCA77;
    for (int w = 0; w < 4; w++) begin
      h ^= h >> 15; h *= 32'h2C1B3C6D; h ^= h >> 12; h += 32'h297A2D39 + w;
      r[32*w +: 32] = h;
    end
    return r;
  endfunction

endpackage
