// tb_full_adder: exhaustive self-checking testbench for full_adder.
//
// Applies all eight input combinations, one per clock period, and compares
// sum and carry out with the two-bit count of ones among a, b and cin
// computed here. A watchdog ends the run as a failure if it overstays.
module tb_full_adder;

  timeunit 1ns;
  timeprecision 1ps;

  logic clk;
  logic a, b, cin, sum, cout;
  int   checks = 0, failures = 0;

  initial clk = 1'b0;
  always #2.5 clk = ~clk;

  full_adder dut (.a(a), .b(b), .cin(cin), .sum(sum), .cout(cout));

  initial begin
    {a, b, cin} = 3'b000;
    @(negedge clk);
    for (int rep = 0; rep < 2; rep++) begin
      for (int n = 0; n < 8; n++) begin
        logic [1:0] ones;
        {a, b, cin} = 3'(n);
        ones = 2'(a) + 2'(b) + 2'(cin);
        @(posedge clk);
        checks++;
        if ({cout, sum} !== ones) begin
          failures++;
          $display("MISMATCH a=%b b=%b cin=%b got cout=%b sum=%b", a, b, cin, cout, sum);
        end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
