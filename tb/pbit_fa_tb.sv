// pbit_fa_tb: the probabilistic full adder alone, pins A, B, Cin, S, Cout
// on five phase-shifted clocks and a sixth phase for readout, R = 5.
// Reverse mode with S = 0, Cout = 1: the three solutions 110, 101, 011 of
// {A,B,Cin} must each get about a third of 60000 samples, all other states
// together under 10 % and 000 at most once (it is left at once and cannot
// be re-entered). Forward mode: for each input the clamped-input gate must
// show the right {S,Cout} in most samples.
`timescale 1ns/1ps
module pbit_fa_tb;
  localparam int unsigned NS = 60000;
  logic [5:0] ph;
  logic [4:0] cen, cval;
  logic init;
  import pbit_pkg::*;
  localparam int unsigned NRB = 5 * gate_need(1'b1, 0, 1'b0, 5);
  logic [NRB-1:0] rb;
  logic [4:0] s;
  int checks = 0, failures = 0;
  int hist [8];

  phase_clk_gen #(.NPH(6), .PER_PS(6000)) u_clk (.clk(ph));

  pbit_fa #(.R(5), .HAS_COPY(1'b0)) dut (
    .clk_pin(ph[4:0]), .copy_in(5'b00000), .clamp_en(cen), .clamp_val(cval),
    .init(init), .rbits(rb), .s(s));

  initial begin
    #2000000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic sweep();
    @(posedge ph[5]);
    #0.1;
  endtask

  initial begin
    int lo, hi;
    checks++;
    if (NRB != 25) begin
      failures++;
      $display("FAIL random-bit budget %0d", NRB);
    end
    rb = 0; init = 0;
    // Reverse mode from {A,B,Cin} = 000.
    cen = 5'b11111; cval = 5'b10000;
    sweep();
    cen = 5'b11000;
    foreach (hist[i]) hist[i] = 0;
    for (int n = 0; n < NS; n++) begin
      sweep();
      hist[{s[0], s[1], s[2]}]++;
    end
    $display("reverse S=0 Cout=1: 000 %0d 001 %0d 010 %0d 011 %0d 100 %0d 101 %0d 110 %0d 111 %0d",
             hist[0], hist[1], hist[2], hist[3], hist[4], hist[5], hist[6], hist[7]);
    lo = NS * 25 / 100;
    hi = NS * 42 / 100;
    foreach (hist[i]) begin
      if (i == 3 || i == 5 || i == 6) begin
        checks++;
        if (hist[i] < lo || hist[i] > hi) begin failures++; $display("FAIL solution %0d: %0d", i, hist[i]); end
      end
    end
    checks++;
    if (hist[0] + hist[1] + hist[2] + hist[4] + hist[7] > NS / 10) begin
      failures++; $display("FAIL too many non-solutions");
    end
    checks++;
    if (hist[0] > 1) begin failures++; $display("FAIL 000 revisited %0d", hist[0]); end
    // Forward mode.
    for (int v = 0; v < 8; v++) begin
      int good;
      good = 0;
      cen = 5'b00111; cval = {2'b00, 3'(v)};
      sweep(); sweep();
      for (int n = 0; n < 200; n++) begin
        sweep();
        if (s[3] == ^3'(v) && s[4] == ((v[0] + v[1] + v[2]) >= 2)) good++;
      end
      checks++;
      if (good < 160) begin failures++; $display("FAIL forward %0d: %0d/200", v, good); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Random bits change after every readout edge.
  always @(posedge ph[5]) rb <= {$urandom, $urandom};
endmodule
