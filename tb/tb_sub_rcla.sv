// tb_sub_rcla: exhaustive self-checking testbench for sub_rcla.
//
// Instantiates the block at its default width (4) and at width 2 and applies every combination of a, b and the
// carry input, one per clock period. Sum and carry out are compared with
// {1'b0,a} + {1'b0,b} + cin computed here. A watchdog ends the run as a
// failure if it overstays.
module tb_sub_rcla;

  timeunit 1ns;
  timeprecision 1ps;

  localparam int W1 = 4;
  localparam int W2 = 2;

  logic          clk;
  logic [W1-1:0] a1, b1, sum1;
  logic [W2-1:0] a2, b2, sum2;
  logic          cin1, cout1, cin2, cout2;
  int            checks = 0, failures = 0;

  initial clk = 1'b0;
  always #2.5 clk = ~clk;

  sub_rcla dut1 (.a(a1), .b(b1), .cin(cin1), .sum(sum1), .cout(cout1));
  sub_rcla #(.M(W2)) dut2 (.a(a2), .b(b2), .cin(cin2), .sum(sum2), .cout(cout2));

  initial begin
    a1 = '0; b1 = '0; cin1 = 1'b0;
    a2 = '0; b2 = '0; cin2 = 1'b0;
    @(negedge clk);
    for (int n = 0; n < (1 << (2*W1 + 1)); n++) begin
      logic [W1:0] e1;
      logic [W2:0] e2;
      {a1, b1, cin1} = (2*W1 + 1)'(n);
      {a2, b2, cin2} = (2*W2 + 1)'(n * 7 + 3);
      @(posedge clk);
      e1 = {1'b0, a1} + {1'b0, b1} + {{W1{1'b0}}, cin1};
      e2 = {1'b0, a2} + {1'b0, b2} + {{W2{1'b0}}, cin2};
      checks += 2;
      if ({cout1, sum1} !== e1) begin
        failures++;
        if (failures <= 10) $display("MISMATCH dut1 a=%h b=%h cin=%b got %h expected %h", a1, b1, cin1, {cout1, sum1}, e1);
      end
      if ({cout2, sum2} !== e2) begin
        failures++;
        if (failures <= 10) $display("MISMATCH dut2 a=%h b=%h cin=%b got %h expected %h", a2, b2, cin2, {cout2, sum2}, e2);
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
