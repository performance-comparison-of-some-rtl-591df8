// rcla_rca: WIDTH-bit hybrid recursive carry lookahead / ripple carry adder.
//
// From the least significant bit upwards: an RCA_W-bit ripple carry adder,
// one FIRST_M-bit sub-RCLA, then M-bit sub-RCLAs up to the top bit, all
// chained by their carries. The defaults (2-bit RCA, 2-bit RCLA, seven 4-bit
// RCLAs) are the paper's delay-optimized 32-bit hybrid: the short RCA at the
// bottom produces its carry at about the time the lookahead blocks above have
// formed their group terms. Purely combinational.
// WIDTH - RCA_W - FIRST_M must be a multiple of M.
module rcla_rca #(
  parameter int WIDTH   = 32,
  parameter int RCA_W   = 2,
  parameter int FIRST_M = 2,
  parameter int M       = 4
) (
  input  logic [WIDTH-1:0] a,
  input  logic [WIDTH-1:0] b,
  input  logic             cin,
  output logic [WIDTH-1:0] sum,
  output logic             cout
);

  localparam int BASE = RCA_W + FIRST_M;     // lsb of the first M-bit block
  localparam int NBLK = (WIDTH - BASE) / M;

  logic c_rca, c_first;
  logic [NBLK:0] c;

  rca #(.WIDTH(RCA_W)) u_rca (
    .a(a[0 +: RCA_W]), .b(b[0 +: RCA_W]), .cin(cin), .sum(sum[0 +: RCA_W]), .cout(c_rca)
  );

  sub_rcla #(.M(FIRST_M)) u_first (
    .a(a[RCA_W +: FIRST_M]), .b(b[RCA_W +: FIRST_M]), .cin(c_rca),
    .sum(sum[RCA_W +: FIRST_M]), .cout(c_first)
  );

  assign c[0] = c_first;

  for (genvar k = 0; k < NBLK; k++) begin : g_blk
    sub_rcla #(.M(M)) u_blk (
      .a(a[BASE + k*M +: M]), .b(b[BASE + k*M +: M]), .cin(c[k]),
      .sum(sum[BASE + k*M +: M]), .cout(c[k+1])
    );
  end

  assign cout = c[NBLK];

  initial begin
    assert ((WIDTH - BASE) % M == 0)
      else $fatal(1, "rcla_rca: WIDTH - RCA_W - FIRST_M must be a multiple of M");
  end

endmodule
