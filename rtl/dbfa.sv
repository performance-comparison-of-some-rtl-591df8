// dbfa: dual-bit full adder.
//
// Adds two augend bits and two addend bits with a carry input, giving two sum
// bits and a carry out. The function is the paper's; its gates are not given,
// so this design forms per-bit propagate (a xor b) and generate (a and b)
// signals, ripples the carry internally for the upper sum bit, and produces
// the carry out with a two-bit lookahead term, g1 | p1 g0 | p1 p0 cin, so that
// an incoming carry passes one AND-OR level per two bits. Purely
// combinational.
module dbfa (
  input  logic [1:0] a,
  input  logic [1:0] b,
  input  logic       cin,
  output logic [1:0] sum,
  output logic       cout
);

  logic [1:0] p, g;
  logic       c1;

  always_comb begin
    p      = a ^ b;
    g      = a & b;
    c1     = g[0] | (p[0] & cin);
    sum[0] = p[0] ^ cin;
    sum[1] = p[1] ^ c1;
    cout   = g[1] | (p[1] & g[0]) | (p[1] & p[0] & cin);
  end

endmodule
