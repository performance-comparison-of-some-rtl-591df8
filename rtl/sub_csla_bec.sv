// sub_csla_bec: W-bit carry select stage (BEC type).
//
// One W-bit ripple carry adder adds the slice with carry input 0. A (W+1)-bit
// binary to excess-1 converter adds 1 to its result (W sum bits and the carry
// out), which is the result the slice would have had with carry input 1.
// 2:1 multiplexers, selected by the carry of the preceding partition, choose
// between the two. Purely combinational. Structure as in the paper's 4-bit
// example with its 5-bit BEC; W is a parameter.
module sub_csla_bec #(
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

  bec #(.N(W + 1)) u_bec (.din({cy0, sum0}), .dout({cy1, sum1}));

  always_comb begin
    sum  = cin ? sum1 : sum0;
    cout = cin ? cy1  : cy0;
  end

endmodule
