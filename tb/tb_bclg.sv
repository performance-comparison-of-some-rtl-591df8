// tb_bclg: exhaustive self-checking testbench for the bclg carry generator.
//
// Applies every combination of the four propagate bits, four generate bits
// and the carry input, one per clock period, including combinations with p
// and g both set. The reference for the block carry out is the
// bit-serial recurrence c[i+1] = g[i] | p[i] & c[i], which the
// generator must match although it computes the carries in parallel. A
// watchdog ends the run as a failure if it overstays.
module tb_bclg;

  timeunit 1ns;
  timeprecision 1ps;

  localparam int M = 4;

  logic         clk;
  logic [M-1:0] p, g;
  logic         c0;
  logic         cm;
  int           checks = 0, failures = 0;

  initial clk = 1'b0;
  always #2.5 clk = ~clk;

  bclg #(.M(M)) dut (.p(p), .g(g), .c0(c0), .cm(cm));

  initial begin
    p = '0; g = '0; c0 = 1'b0;
    @(negedge clk);
    for (int n = 0; n < (1 << (2*M + 1)); n++) begin
      logic [M:0] ref_c;
      {p, g, c0} = (2*M + 1)'(n);
      ref_c[0] = c0;
      for (int i = 0; i < M; i++) ref_c[i+1] = g[i] | (p[i] & ref_c[i]);
      @(posedge clk);
      checks++;
      if (cm !== ref_c[M]) begin
        failures++;
        if (failures <= 10) $display("MISMATCH p=%b g=%b c0=%b got %b expected %b", p, g, c0, cm, ref_c);
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
