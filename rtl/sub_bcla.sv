// sub_bcla: M-bit block carry lookahead adder (sub-BCLA).
//
// The carry out of the block comes from propagate-generate logic and an
// M-bit block carry lookahead generator, so it reaches the next block after
// one AND-OR gate. The sum bits are made separately by a small ripple chain:
// full adders at bits 0..M-2 carry cin upwards and a three-input XOR forms
// the top sum bit from a, b and the rippled carry. Purely combinational.
//
// The paper's text counts the chain as M-3 full adders and one XOR; its
// block schematic draws full adders up to bit M-2, which is what M sum bits
// need, and this design follows the schematic (M-1 full adders).
module sub_bcla #(
  parameter int M = 4
) (
  input  logic [M-1:0] a,
  input  logic [M-1:0] b,
  input  logic         cin,
  output logic [M-1:0] sum,
  output logic         cout
);

  logic [M-1:0] p, g;
  logic [M-1:0] c;  // c[i] is the rippled carry into bit i

  assign p = a ^ b;
  assign g = a & b;

  bclg #(.M(M)) u_bclg (.p(p), .g(g), .c0(cin), .cm(cout));

  assign c[0] = cin;

  for (genvar i = 0; i < M - 1; i++) begin : g_fa
    full_adder u_fa (.a(a[i]), .b(b[i]), .cin(c[i]), .sum(sum[i]), .cout(c[i+1]));
  end

  assign sum[M-1] = a[M-1] ^ b[M-1] ^ c[M-1];

endmodule
