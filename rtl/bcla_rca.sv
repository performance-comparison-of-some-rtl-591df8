// bcla_rca: WIDTH-bit hybrid block carry lookahead / ripple carry adder.
//
// From the least significant bit upwards: a LO_RCA_W-bit ripple carry adder,
// a LO_M-bit sub-BCLA, M-bit sub-BCLAs, a HI_M-bit sub-BCLA and a
// HI_RCA_W-bit ripple carry adder at the top, all chained by their carries.
// The defaults (2-bit RCA, 2-bit BCLA, six 4-bit BCLAs, 2-bit BCLA, 2-bit
// RCA) are the block sizes of the paper's delay-optimized 32-bit hybrid.
// Purely combinational.
// WIDTH - LO_RCA_W - LO_M - HI_M - HI_RCA_W must be a multiple of M.
module bcla_rca #(
  parameter int WIDTH    = 32,
  parameter int LO_RCA_W = 2,
  parameter int LO_M     = 2,
  parameter int M        = 4,
  parameter int HI_M     = 2,
  parameter int HI_RCA_W = 2
) (
  input  logic [WIDTH-1:0] a,
  input  logic [WIDTH-1:0] b,
  input  logic             cin,
  output logic [WIDTH-1:0] sum,
  output logic             cout
);

  localparam int BASE   = LO_RCA_W + LO_M;                      // lsb of the M-bit blocks
  localparam int NBLK   = (WIDTH - BASE - HI_M - HI_RCA_W) / M;
  localparam int HI_LSB = BASE + NBLK * M;                      // lsb of the HI_M block
  localparam int TOP    = HI_LSB + HI_M;                        // lsb of the top RCA

  logic c_lo_rca, c_hi_bcla;
  logic [NBLK:0] c;

  rca #(.WIDTH(LO_RCA_W)) u_lo_rca (
    .a(a[0 +: LO_RCA_W]), .b(b[0 +: LO_RCA_W]), .cin(cin), .sum(sum[0 +: LO_RCA_W]),
    .cout(c_lo_rca)
  );

  sub_bcla #(.M(LO_M)) u_lo_bcla (
    .a(a[LO_RCA_W +: LO_M]), .b(b[LO_RCA_W +: LO_M]), .cin(c_lo_rca),
    .sum(sum[LO_RCA_W +: LO_M]), .cout(c[0])
  );

  for (genvar k = 0; k < NBLK; k++) begin : g_blk
    sub_bcla #(.M(M)) u_blk (
      .a(a[BASE + k*M +: M]), .b(b[BASE + k*M +: M]), .cin(c[k]),
      .sum(sum[BASE + k*M +: M]), .cout(c[k+1])
    );
  end

  sub_bcla #(.M(HI_M)) u_hi_bcla (
    .a(a[HI_LSB +: HI_M]), .b(b[HI_LSB +: HI_M]), .cin(c[NBLK]),
    .sum(sum[HI_LSB +: HI_M]), .cout(c_hi_bcla)
  );

  rca #(.WIDTH(HI_RCA_W)) u_hi_rca (
    .a(a[TOP +: HI_RCA_W]), .b(b[TOP +: HI_RCA_W]), .cin(c_hi_bcla),
    .sum(sum[TOP +: HI_RCA_W]), .cout(cout)
  );

  initial begin
    assert ((WIDTH - BASE - HI_M - HI_RCA_W) % M == 0)
      else $fatal(1, "bcla_rca: the middle section must be a multiple of M bits");
  end

endmodule
