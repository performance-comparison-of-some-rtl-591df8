// csla: WIDTH-bit non-uniform carry select adder.
//
// The operands are cut into NPART partitions of PART[k] bits, listed from the
// least significant upwards. The lowest partition is a plain ripple carry
// adder fed by cin; every other partition is one of the dual-RCA carry select stages (one RCA with carry input 0 and one with 1 per partition). Each
// partition's result is selected by the carry out of the partition below, so
// once the lowest RCA has finished the carry passes one multiplexer per
// partition. Purely combinational.
//
// The default partition 2,2,3,4,6,7,8 (bits 0-1 up to bits 24-31) uses the
// partition sizes of the paper's evaluated CSLA, 8-7-6-4-3-2-2; reading that
// list most significant first is this design's choice. WIDTH must equal the
// sum of PART.
module csla
  import adder_pkg::*;
#(
  parameter int NPART = CSLA_NPART,
  parameter int PART [NPART] = CSLA_PART,
  parameter int WIDTH = ADDER_W
) (
  input  logic [WIDTH-1:0] a,
  input  logic [WIDTH-1:0] b,
  input  logic             cin,
  output logic [WIDTH-1:0] sum,
  output logic             cout
);

  // bit position of the least significant bit of partition k
  function automatic int part_lsb(int k);
    int s = 0;
    for (int i = 0; i < k; i++) s += PART[i];
    return s;
  endfunction

  logic [NPART:0] c;  // c[k] is the carry into partition k

  assign c[0] = cin;

  for (genvar k = 0; k < NPART; k++) begin : g_part
    localparam int LSB = part_lsb(k);
    localparam int W   = PART[k];
    if (k == 0) begin : g_rca
      rca #(.WIDTH(W)) u_rca (
        .a(a[LSB +: W]), .b(b[LSB +: W]), .cin(c[k]), .sum(sum[LSB +: W]), .cout(c[k+1])
      );
    end else begin : g_sel
      sub_csla #(.W(W)) u_sub (
        .a(a[LSB +: W]), .b(b[LSB +: W]), .cin(c[k]), .sum(sum[LSB +: W]), .cout(c[k+1])
      );
    end
  end

  assign cout = c[NPART];

  initial begin
    assert (part_lsb(NPART) == WIDTH) else $fatal(1, "csla: PART must add up to WIDTH");
  end

endmodule
