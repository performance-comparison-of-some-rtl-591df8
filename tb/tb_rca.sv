// tb_rca: self-checking testbench for the 32-bit adder rca.
//
// Applies directed operand pairs (zeros, all ones, full carry-propagate
// chains with a=~b, a carry entering every bit position, alternating bit
// patterns) and 3000 random pairs, each with carry input 0 and 1, one pair
// per 5 ns clock period (200 MHz). The adder is combinational; its sum and
// carry out are compared one period later with {1'b0,a} + {1'b0,b} + cin
// computed here. A watchdog ends the run as a failure if it overstays.
module tb_rca;

  timeunit 1ns;
  timeprecision 1ps;

  localparam int W = 32;

  logic         clk;
  logic [W-1:0] a, b, sum;
  logic         cin, cout;
  int           checks = 0, failures = 0;

  initial clk = 1'b0;
  always #2.5 clk = ~clk;

  rca dut (.a(a), .b(b), .cin(cin), .sum(sum), .cout(cout));

  task automatic apply(input logic [W-1:0] ta, input logic [W-1:0] tb, input logic tc);
    logic [W:0] exp;
    a   = ta;
    b   = tb;
    cin = tc;
    @(posedge clk);
    exp = {1'b0, ta} + {1'b0, tb} + {{W{1'b0}}, tc};
    checks++;
    if ({cout, sum} !== exp) begin
      failures++;
      if (failures <= 10)
        $display("MISMATCH a=%h b=%h cin=%b got %b_%h expected %b_%h",
                 ta, tb, tc, cout, sum, exp[W], exp[W-1:0]);
    end
    @(negedge clk);
  endtask

  initial begin
    a = '0; b = '0; cin = 1'b0;
    @(negedge clk);
    for (int c = 0; c < 2; c++) begin
      apply('0, '0, c[0]);
      apply('1, '1, c[0]);
      apply('1, '0, c[0]);
      apply(32'h5555_5555, 32'haaaa_aaaa, c[0]);
      apply(32'haaaa_aaaa, 32'haaaa_aaaa, c[0]);
      apply(32'h8000_0000, 32'h8000_0000, c[0]);
      for (int i = 0; i < W; i++) begin
        apply(32'(1) << i, '1 << i, c[0]);              // carry born at bit i, runs to the top
        apply(~(32'(1) << i), 32'(1), c[0]);            // propagate chain broken at bit i
        apply(32'(1) << i, 32'(1) << i, c[0]);          // isolated generate at bit i
      end
    end
    for (int n = 0; n < 3000; n++) apply($urandom, $urandom, 1'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
