// adder_suite: the eight 32-bit adder architectures side by side, registered.
//
// One operand pair (a, b) and carry input are captured in input registers and
// applied to all eight adders at once: ripple carry adders of single-bit and
// of dual-bit full adders, the homogeneous and hybrid recursive carry
// lookahead adders, the homogeneous and hybrid block carry lookahead adders,
// and the carry select adders with dual RCAs and with BEC converters. Each
// adder's sum and carry out are captured in its own output register. The
// result of the operands presented at clock edge n appears at the outputs
// after edge n+1 (two-cycle latency, one new operand pair per cycle), so each
// adder's combinational delay must fit in one clock period; the paper's
// evaluation applied operands every 5 ns (200 MHz).
//
// sum[i] and cout[i] are indexed by adder_pkg::arch_e. All eight results are
// equal for a correct design; keeping them apart lets each architecture be
// observed, synthesized and timed on its own. The registers and the
// synchronous active-low reset are this design's choice: the paper compares
// the combinational adders and does not describe the surrounding registers.
module adder_suite
  import adder_pkg::*;
#(
  parameter int WIDTH = ADDER_W
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic [WIDTH-1:0]                a,
  input  logic [WIDTH-1:0]                b,
  input  logic                            cin,
  output logic [NUM_ARCH-1:0][WIDTH-1:0]  sum,
  output logic [NUM_ARCH-1:0]             cout
);

  logic [WIDTH-1:0]               a_q, b_q;
  logic                           cin_q;
  logic [NUM_ARCH-1:0][WIDTH-1:0] sum_d;
  logic [NUM_ARCH-1:0]            cout_d;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      a_q   <= '0;
      b_q   <= '0;
      cin_q <= 1'b0;
      sum   <= '0;
      cout  <= '0;
    end else begin
      a_q   <= a;
      b_q   <= b;
      cin_q <= cin;
      sum   <= sum_d;
      cout  <= cout_d;
    end
  end

  rca #(.WIDTH(WIDTH)) u_rca (
    .a(a_q), .b(b_q), .cin(cin_q), .sum(sum_d[ARCH_RCA]), .cout(cout_d[ARCH_RCA])
  );

  rca_dbfa #(.WIDTH(WIDTH)) u_rca_dbfa (
    .a(a_q), .b(b_q), .cin(cin_q), .sum(sum_d[ARCH_RCA_DBFA]), .cout(cout_d[ARCH_RCA_DBFA])
  );

  rcla #(.WIDTH(WIDTH)) u_rcla (
    .a(a_q), .b(b_q), .cin(cin_q), .sum(sum_d[ARCH_RCLA]), .cout(cout_d[ARCH_RCLA])
  );

  rcla_rca #(.WIDTH(WIDTH)) u_rcla_rca (
    .a(a_q), .b(b_q), .cin(cin_q), .sum(sum_d[ARCH_RCLA_RCA]), .cout(cout_d[ARCH_RCLA_RCA])
  );

  bcla #(.WIDTH(WIDTH)) u_bcla (
    .a(a_q), .b(b_q), .cin(cin_q), .sum(sum_d[ARCH_BCLA]), .cout(cout_d[ARCH_BCLA])
  );

  bcla_rca #(.WIDTH(WIDTH)) u_bcla_rca (
    .a(a_q), .b(b_q), .cin(cin_q), .sum(sum_d[ARCH_BCLA_RCA]), .cout(cout_d[ARCH_BCLA_RCA])
  );

  csla #(.WIDTH(WIDTH)) u_csla (
    .a(a_q), .b(b_q), .cin(cin_q), .sum(sum_d[ARCH_CSLA]), .cout(cout_d[ARCH_CSLA])
  );

  csla_bec #(.WIDTH(WIDTH)) u_csla_bec (
    .a(a_q), .b(b_q), .cin(cin_q), .sum(sum_d[ARCH_CSLA_BEC]), .cout(cout_d[ARCH_CSLA_BEC])
  );

endmodule
