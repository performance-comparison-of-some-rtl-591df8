// rca: WIDTH-bit ripple carry adder.
//
// A cascade of WIDTH single-bit full adders; bit i's carry out is bit i+1's
// carry in, so the carry ripples from the least significant to the most
// significant bit and the delay grows linearly with WIDTH. Purely
// combinational: sum and cout settle after WIDTH full-adder delays. This is
// the paper's 32-bit RCA; it is also used, at 2 to 8 bits, inside the carry
// select and hybrid adders.
module rca #(
  parameter int WIDTH = 32
) (
  input  logic [WIDTH-1:0] a,
  input  logic [WIDTH-1:0] b,
  input  logic             cin,
  output logic [WIDTH-1:0] sum,
  output logic             cout
);

  logic [WIDTH:0] c;

  assign c[0] = cin;

  for (genvar i = 0; i < WIDTH; i++) begin : g_fa
    full_adder u_fa (
      .a   (a[i]),
      .b   (b[i]),
      .cin (c[i]),
      .sum (sum[i]),
      .cout(c[i+1])
    );
  end

  assign cout = c[WIDTH];

endmodule
