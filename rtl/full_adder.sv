// full_adder: single-bit full adder.
//
// Adds an augend bit, an addend bit and a carry input. The sum is the
// three-input XOR and the carry out is the majority of the three inputs
// (the same function as a triple-modular-redundancy voter). Purely
// combinational. The function is the paper's; the paper maps it onto a
// library full adder cell, whose gates are not given, so this is written at
// the Boolean level.
module full_adder (
  input  logic a,
  input  logic b,
  input  logic cin,
  output logic sum,
  output logic cout
);

  always_comb begin
    sum  = a ^ b ^ cin;
    cout = (a & b) | (a & cin) | (b & cin);
  end

endmodule
