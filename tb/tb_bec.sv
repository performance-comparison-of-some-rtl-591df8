// tb_bec: exhaustive self-checking testbench for the binary to excess-1
// converter.
//
// Checks the default 5-bit converter and a 9-bit one over every input value,
// one per clock period: the output must be the input plus one, wrapping to
// zero after all ones. A watchdog ends the run as a failure if it overstays.
module tb_bec;

  timeunit 1ns;
  timeprecision 1ps;

  logic       clk;
  logic [4:0] d5, q5;
  logic [8:0] d9, q9;
  int         checks = 0, failures = 0;

  initial clk = 1'b0;
  always #2.5 clk = ~clk;

  bec          dut5 (.din(d5), .dout(q5));
  bec #(.N(9)) dut9 (.din(d9), .dout(q9));

  initial begin
    d5 = '0; d9 = '0;
    @(negedge clk);
    for (int n = 0; n < 512; n++) begin
      d5 = 5'(n);
      d9 = 9'(n);
      @(posedge clk);
      checks += 2;
      if (int'(q5) != (n + 1) % 32) begin
        failures++;
        $display("MISMATCH N=5 din=%0d dout=%0d", d5, q5);
      end
      if (int'(q9) != (n + 1) % 512) begin
        failures++;
        $display("MISMATCH N=9 din=%0d dout=%0d", d9, q9);
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
