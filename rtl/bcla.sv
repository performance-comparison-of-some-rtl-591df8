// bcla: WIDTH-bit homogeneous block carry lookahead adder.
//
// WIDTH/M M-bit sub_bcla blocks in a chain, each passing its lookahead carry
// out to the next. With M = 4 and WIDTH = 32 this is the paper's eight-block
// 32-bit BCLA. Within an intermediate block the carry input passes a single
// AND-OR gate on its way to the block's carry out. Purely combinational.
// WIDTH must be a multiple of M.
module bcla #(
  parameter int WIDTH = 32,
  parameter int M     = 4
) (
  input  logic [WIDTH-1:0] a,
  input  logic [WIDTH-1:0] b,
  input  logic             cin,
  output logic [WIDTH-1:0] sum,
  output logic             cout
);

  localparam int NBLK = WIDTH / M;

  logic [NBLK:0] c;  // c[k] is the lookahead carry into block k

  assign c[0] = cin;

  for (genvar k = 0; k < NBLK; k++) begin : g_blk
    sub_bcla #(.M(M)) u_blk (
      .a(a[k*M +: M]), .b(b[k*M +: M]), .cin(c[k]), .sum(sum[k*M +: M]), .cout(c[k+1])
    );
  end

  assign cout = c[NBLK];

  initial begin
    assert (WIDTH % M == 0) else $fatal(1, "bcla: WIDTH must be a multiple of M");
  end

endmodule
