// bec: N-bit binary to excess-1 code converter (an incrementer).
//
// dout = din + 1, modulo 2^N. Bit 0 is inverted; every higher bit i is
// toggled when all bits below it are 1, found by an AND chain that is shared
// from bit to bit, as in the paper's gate-level 5-bit example. Purely
// combinational. In the carry select adder it turns the cin=0 result of a
// partition (sum bits plus carry) into the cin=1 result without a second RCA.
module bec #(
  parameter int N = 5
) (
  input  logic [N-1:0] din,
  output logic [N-1:0] dout
);

  logic [N-2:0] all_ones;  // all_ones[i] = din[i] & ... & din[0]

  assign all_ones[0] = din[0];

  for (genvar i = 1; i < N - 1; i++) begin : g_chain
    assign all_ones[i] = all_ones[i-1] & din[i];
  end

  assign dout = din ^ {all_ones, 1'b1};

endmodule
