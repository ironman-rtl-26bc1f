// tb_xor_tree: compares the XOR tree with a loop-computed XOR for several
// input counts (2, 5 and 8 inputs) on random data.
module tb_xor_tree;
  int checks = 0, failures = 0;
  logic [1:0][127:0] a2;  logic [127:0] s2;
  logic [4:0][127:0] a5;  logic [127:0] s5;
  logic [7:0][127:0] a8;  logic [127:0] s8;
  xor_tree #(.N(2)) u2 (.in_blocks(a2), .sum(s2));
  xor_tree #(.N(5)) u5 (.in_blocks(a5), .sum(s5));
  xor_tree #(.N(8)) u8 (.in_blocks(a8), .sum(s8));

  function automatic logic [127:0] rnd();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  initial begin
    for (int it = 0; it < 200; it++) begin
      logic [127:0] e2, e5, e8;
      e2 = '0; e5 = '0; e8 = '0;
      for (int i = 0; i < 2; i++) begin a2[i] = rnd(); e2 ^= a2[i]; end
      for (int i = 0; i < 5; i++) begin a5[i] = rnd(); e5 ^= a5[i]; end
      for (int i = 0; i < 8; i++) begin a8[i] = rnd(); e8 ^= a8[i]; end
      #1;
      checks += 3;
      if (s2 !== e2) failures++;
      if (s5 !== e5) failures++;
      if (s8 !== e8) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
