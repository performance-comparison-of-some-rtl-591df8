// tb_adder_suite: end-to-end testbench of the registered adder suite.
//
// Runs the top at its default parameters (32 bits, all eight architectures)
// with a 5 ns clock (200 MHz). After a synchronous reset, whose effect on the
// outputs is checked, it streams one operand pair per cycle: directed pairs
// (zeros, all ones, full carry-propagate chains, a carry entering at every
// bit) followed by 1000 random pairs with random carry input, the size of the
// paper's evaluation run. Operands presented before clock edge n must appear
// at all eight outputs after edge n+1 and not earlier; every architecture's
// sum and carry out is compared with {1'b0,a} + {1'b0,b} + cin.
//
// It also counts how often the mechanisms of the adders were exercised: the
// carry into each carry-select partition being 0 and being 1 (so every
// multiplexer, every cin=1 RCA and every BEC path has been selected), a carry
// out of 1, a carry input of 1, and a carry propagating through all 32 bits.
// A mechanism that never happened counts as a failure. A watchdog ends the
// run as a failure if it overstays.
module tb_adder_suite;

  import adder_pkg::*;

  timeunit 1ns;
  timeprecision 1ps;

  localparam int W      = ADDER_W;
  localparam int NRAND  = 1000;
  localparam int NDIR   = 4 + 3 * W;
  localparam int NVEC   = NDIR + NRAND;

  logic                        clk, rst_n;
  logic [W-1:0]                a, b;
  logic                        cin;
  logic [NUM_ARCH-1:0][W-1:0]  sum;
  logic [NUM_ARCH-1:0]         cout;

  logic [W-1:0] va   [NVEC];
  logic [W-1:0] vb   [NVEC];
  logic         vc   [NVEC];

  int checks = 0, failures = 0;
  int sel0 [CSLA_NPART];   // carry into partition k was 0
  int sel1 [CSLA_NPART];   // carry into partition k was 1
  int n_cout1 = 0, n_cin1 = 0, n_fullprop = 0;

  initial clk = 1'b0;
  always #2.5 clk = ~clk;

  adder_suite dut (.clk(clk), .rst_n(rst_n), .a(a), .b(b), .cin(cin), .sum(sum), .cout(cout));

  function automatic int part_lsb(int k);
    int s = 0;
    for (int i = 0; i < k; i++) s += CSLA_PART[i];
    return s;
  endfunction

  // reference carry into bit position pos
  function automatic logic carry_into(logic [W-1:0] x, logic [W-1:0] y, logic c, int pos);
    logic [W:0] s;
    logic [W:0] mask;
    mask = ({{W{1'b0}}, 1'b1} << pos) - 1;
    s = ({1'b0, x} & mask) + ({1'b0, y} & mask) + {{W{1'b0}}, c};
    return s[pos];
  endfunction

  task automatic check_result(int n);
    logic [W:0] exp;
    exp = {1'b0, va[n]} + {1'b0, vb[n]} + {{W{1'b0}}, vc[n]};
    for (int k = 0; k < NUM_ARCH; k++) begin
      checks++;
      if ({cout[k], sum[k]} !== exp) begin
        failures++;
        if (failures <= 10)
          $display("MISMATCH vector %0d %s: a=%h b=%h cin=%b got %b_%h expected %b_%h", n,
                   arch_e'(k), va[n], vb[n], vc[n], cout[k], sum[k], exp[W], exp[W-1:0]);
      end
    end
    if (exp[W]) n_cout1++;
    if (vc[n]) n_cin1++;
    if (((va[n] ^ vb[n]) == '1) && vc[n]) n_fullprop++;
    for (int k = 0; k < CSLA_NPART; k++) begin
      if (carry_into(va[n], vb[n], vc[n], part_lsb(k))) sel1[k]++;
      else sel0[k]++;
    end
  endtask

  initial begin
    automatic int idx = 0;
    // directed vectors
    va[idx] = '0;           vb[idx] = '0;           vc[idx] = 1'b0; idx++;
    va[idx] = '1;           vb[idx] = '1;           vc[idx] = 1'b1; idx++;
    va[idx] = 32'h5555_5555; vb[idx] = 32'haaaa_aaaa; vc[idx] = 1'b1; idx++;
    va[idx] = '1;           vb[idx] = '0;           vc[idx] = 1'b1; idx++;
    for (int i = 0; i < W; i++) begin
      va[idx] = 32'(1) << i;    vb[idx] = '1 << i;       vc[idx] = 1'b0; idx++;
      va[idx] = ~(32'(1) << i); vb[idx] = 32'(1);        vc[idx] = 1'b0; idx++;
      va[idx] = 32'(1) << i;    vb[idx] = 32'(1) << i;   vc[idx] = 1'(i); idx++;
    end
    for (int n = 0; n < NRAND; n++) begin
      va[idx] = $urandom; vb[idx] = $urandom; vc[idx] = 1'($urandom); idx++;
    end
    foreach (sel0[k]) begin sel0[k] = 0; sel1[k] = 0; end

    // reset: operands held non-zero, outputs must stay zero
    rst_n = 1'b0; a = '1; b = '1; cin = 1'b1;
    repeat (3) @(posedge clk);
    @(negedge clk);
    checks++;
    if (sum !== '0 || cout !== '0) begin
      failures++;
      $display("MISMATCH outputs not cleared by reset");
    end
    rst_n = 1'b1;

    // stream one vector per cycle; vector n is captured at edge n and its
    // result must be visible after edge n+1
    for (int m = 0; m <= NVEC; m++) begin
      if (m < NVEC) begin
        a = va[m]; b = vb[m]; cin = vc[m];
      end
      @(posedge clk);
      @(negedge clk);
      if (m >= 1) check_result(m - 1);
    end

    // the mechanisms that must have been exercised
    for (int k = 0; k < CSLA_NPART; k++) begin
      $display("partition %0d (bit %0d): carry in 0 x%0d, carry in 1 x%0d", k, part_lsb(k), sel0[k], sel1[k]);
      checks++;
      if (sel0[k] == 0 || sel1[k] == 0) begin
        failures++;
        $display("MISSING carry select case in partition %0d", k);
      end
    end
    $display("carry out 1 x%0d, carry in 1 x%0d, 32-bit propagate x%0d", n_cout1, n_cin1, n_fullprop);
    checks++;
    if (n_cout1 == 0 || n_cin1 == 0 || n_fullprop == 0) begin
      failures++;
      $display("MISSING carry case");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NVEC + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
