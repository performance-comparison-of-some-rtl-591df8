// bclg: M-bit block carry lookahead generator.
//
// Produces only the block's lookahead carry out,
//   cm = G(M-1:0) | P(M-1:0) & c0,
// with G and P the group generate and propagate of the M bit positions (see
// rclg for the terms). The group terms do not depend on c0, so in an
// intermediate stage the carry passes one AND-OR (AO21) gate. Unlike the
// recursive generator it forms no carries inside the block. Purely
// combinational.
module bclg #(
  parameter int M = 4
) (
  input  logic [M-1:0] p,
  input  logic [M-1:0] g,
  input  logic         c0,
  output logic         cm
);

  logic grp_g, grp_p;

  always_comb begin
    grp_p = &p;
    grp_g = 1'b0;
    for (int j = 0; j < M; j++) begin
      logic term;
      term = g[j];
      for (int k = j + 1; k < M; k++) term &= p[k];
      grp_g |= term;
    end
    cm = grp_g | (grp_p & c0);  // AO21 on the carry input
  end

endmodule
