// sub_rcla: M-bit recursive carry lookahead adder (sub-RCLA).
//
// Three parts, as in the paper's block schematic: propagate-generate logic
// (p = a xor b, g = a and b per bit), an M-bit recursive carry lookahead
// generator that forms all M carries from p, g and cin, and sum logic
// (sum[i] = p[i] xor carry into bit i). cout is the lookahead carry out of
// the most significant bit. Purely combinational.
module sub_rcla #(
  parameter int M = 4
) (
  input  logic [M-1:0] a,
  input  logic [M-1:0] b,
  input  logic         cin,
  output logic [M-1:0] sum,
  output logic         cout
);

  logic [M-1:0] p, g;
  logic [M:0]   c;

  assign p = a ^ b;
  assign g = a & b;

  rclg #(.M(M)) u_rclg (.p(p), .g(g), .c0(cin), .c(c));

  assign sum  = p ^ c[M-1:0];
  assign cout = c[M];

endmodule
