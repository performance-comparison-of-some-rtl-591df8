// rca_dbfa: WIDTH-bit ripple carry adder built from dual-bit full adders.
//
// WIDTH/2 dual-bit full adders in a chain, each handling bits 2k+1:2k and
// passing its carry to the next pair, so the carry ripples two bits per
// stage. Purely combinational. WIDTH must be even; 32 bits take 16 DBFAs as
// in the paper.
module rca_dbfa #(
  parameter int WIDTH = 32
) (
  input  logic [WIDTH-1:0] a,
  input  logic [WIDTH-1:0] b,
  input  logic             cin,
  output logic [WIDTH-1:0] sum,
  output logic             cout
);

  localparam int NPAIR = WIDTH / 2;

  logic [NPAIR:0] c;

  assign c[0] = cin;

  for (genvar k = 0; k < NPAIR; k++) begin : g_dbfa
    dbfa u_dbfa (
      .a   (a[2*k +: 2]),
      .b   (b[2*k +: 2]),
      .cin (c[k]),
      .sum (sum[2*k +: 2]),
      .cout(c[k+1])
    );
  end

  assign cout = c[NPAIR];

  initial begin
    assert (WIDTH % 2 == 0) else $fatal(1, "rca_dbfa: WIDTH must be even");
  end

endmodule
