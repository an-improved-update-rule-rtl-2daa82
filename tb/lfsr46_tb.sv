// lfsr46_tb: checks the 46-bit LFSR against an independent bit-serial model
// of x^46 + x^45 + x^26 + x^25 + 1: seed load, enable, 5000 steps of the
// sequence, and the share of ones.
`timescale 1ns/1ps
module lfsr46_tb;
  localparam logic [45:0] SEED = 46'h2A5F_0C3B_91D7;
  logic clk = 1'b0;
  logic rst, en;
  logic [45:0] q;
  logic [45:0] model;
  int checks = 0, failures = 0;

  lfsr46 #(.SEED(SEED)) dut (.clk(clk), .rst(rst), .en(en), .q(q));

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Model: stage n (1-based) holds the bit entered n-1 steps ago; the new
  // bit is the XOR of stages 46, 45, 26 and 25.
  function automatic logic [45:0] step(logic [45:0] s);
    logic nb;
    int taps [4] = '{46, 45, 26, 25};
    nb = 1'b0;
    foreach (taps[t]) nb ^= s[taps[t] - 1];
    return {s[44:0], nb};
  endfunction

  initial begin
    int ones;
    rst = 1; en = 0;
    @(posedge clk); #1;
    rst = 0;
    checks++;
    if (q !== SEED) begin failures++; $display("FAIL seed load"); end
    @(posedge clk); #1;
    checks++;
    if (q !== SEED) begin failures++; $display("FAIL hold with en low"); end
    en = 1;
    model = SEED;
    ones = 0;
    for (int n = 0; n < 5000; n++) begin
      @(posedge clk); #1;
      model = step(model);
      checks++;
      if (q !== model) begin
        failures++;
        if (failures < 5) $display("FAIL step %0d: %h vs %h", n, q, model);
      end
      ones += int'(q[0]);
    end
    checks++;
    if (ones < 2300 || ones > 2700) begin failures++; $display("FAIL ones %0d", ones); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
