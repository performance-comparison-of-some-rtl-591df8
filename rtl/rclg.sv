// rclg: M-bit recursive carry lookahead generator.
//
// From the propagate (p) and generate (g) bits of M bit positions and the
// lookahead carry input c0 it produces every carry c[1]..c[M] in parallel:
//   c[i] = G(i-1:0) | P(i-1:0) & c0,
// where G(i-1:0) = OR over j<i of g[j] & p[i-1] & ... & p[j+1] and
// P(i-1:0) = p[i-1] & ... & p[0]. The group terms depend only on p and g, so
// the late-arriving c0 of an intermediate stage passes through just one
// AND-OR (AO21) per carry, as the paper points out for its 4-bit example.
// c[0] echoes c0 for the sum logic. Purely combinational.
module rclg #(
  parameter int M = 4
) (
  input  logic [M-1:0] p,
  input  logic [M-1:0] g,
  input  logic         c0,
  output logic [M:0]   c
);

  logic [M:0] grp_g, grp_p;  // group generate / propagate of bits i-1..0

  always_comb begin
    grp_g = '0;
    grp_p = '0;
    c[0]  = c0;
    for (int i = 1; i <= M; i++) begin
      grp_p[i] = 1'b1;
      for (int k = 0; k < i; k++) grp_p[i] &= p[k];
      for (int j = 0; j < i; j++) begin
        logic term;
        term = g[j];
        for (int k = j + 1; k < i; k++) term &= p[k];
        grp_g[i] |= term;
      end
      c[i] = grp_g[i] | (grp_p[i] & c0);  // AO21 on the carry input
    end
  end

endmodule
