// sub_csla: W-bit carry select stage (dual RCA type).
//
// Two W-bit ripple carry adders add the slice at the same time, one with its
// carry input fixed at 0 and one with it fixed at 1. When the carry from the
// preceding partition (cin) arrives, 2:1 multiplexers pick the matching sum
// bits and carry out, so the stage adds only one multiplexer delay to the
// carry path. Purely combinational. Structure as in the paper's 4-bit
// example; W is a parameter so the same stage serves every partition size.
module sub_csla #(
  parameter int W = 4
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic         cin,
  output logic [W-1:0] sum,
  output logic         cout
);

  logic [W-1:0] sum0, sum1;
  logic         cy0, cy1;

  rca #(.WIDTH(W)) u_rca0 (.a(a), .b(b), .cin(1'b0), .sum(sum0), .cout(cy0));
  rca #(.WIDTH(W)) u_rca1 (.a(a), .b(b), .cin(1'b1), .sum(sum1), .cout(cy1));

  // 2:1 multiplexers, selected by the carry of the preceding partition
  always_comb begin
    sum  = cin ? sum1 : sum0;
    cout = cin ? cy1  : cy0;
  end

endmodule
