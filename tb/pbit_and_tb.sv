// pbit_and_tb: the probabilistic AND gate alone, pins A, B, C on three
// phase-shifted clocks and a fourth phase for readout.
// Forward mode: with A and B clamped, C must equal A&B after every update.
// Reverse mode, C clamped to 0: the three inputs consistent with it (00, 01,
// 10) must each appear in about a third of 30000 samples and 11 never;
// with C clamped to 1 the gate must sit in A = B = 1.
`timescale 1ns/1ps
module pbit_and_tb;
  localparam int unsigned NS = 30000;
  logic [3:0] ph;
  logic [2:0] cen, cval;
  logic init;
  logic [2:0] rb;
  logic [2:0] s;
  int checks = 0, failures = 0;
  int hist [4];

  phase_clk_gen #(.NPH(4), .PER_PS(4000)) u_clk (.clk(ph));

  pbit_and #(.R(3), .HAS_COPY(1'b0)) dut (
    .clk_pin(ph[2:0]), .copy_in(3'b000), .clamp_en(cen), .clamp_val(cval),
    .init(init), .rbits(rb), .s(s));

  // Fresh random bits after every readout edge.
  always @(posedge ph[3]) rb <= 3'($urandom);

  initial begin
    #1000000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic sweep();
    @(posedge ph[3]);
    #0.1;
  endtask

  initial begin
    rb = 0; init = 1; cen = 3'b000; cval = 0;
    sweep();
    init = 0;
    // Forward mode.
    for (int v = 0; v < 4; v++) begin
      cen = 3'b011; cval = {1'b0, 2'(v)};
      sweep(); sweep();
      for (int n = 0; n < 20; n++) begin
        sweep();
        checks++;
        if (s[2] !== (v == 3)) begin failures++; $display("FAIL forward %0d: C=%b", v, s[2]); end
      end
    end
    // Reverse mode, C = 1.
    cen = 3'b100; cval = 3'b100;
    sweep(); sweep();
    for (int n = 0; n < 50; n++) begin
      sweep();
      checks++;
      if (s[1:0] !== 2'b11) begin failures++; $display("FAIL reverse C=1: AB=%b", s[1:0]); end
    end
    // Reverse mode, C = 0, start from A = B = 0 as in the experiment.
    cen = 3'b111; cval = 3'b000;
    sweep();
    cen = 3'b100;
    foreach (hist[i]) hist[i] = 0;
    for (int n = 0; n < NS; n++) begin
      sweep();
      hist[{s[0], s[1]}]++;
    end
    $display("reverse C=0: AB=00 %0d  01 %0d  10 %0d  11 %0d", hist[0], hist[1], hist[2], hist[3]);
    for (int i = 0; i < 3; i++) begin
      checks++;
      if (hist[i] < NS * 30 / 100 || hist[i] > NS * 37 / 100) begin
        failures++;
        $display("FAIL state %0d visited %0d times", i, hist[i]);
      end
    end
    checks++;
    if (hist[3] != 0) begin failures++; $display("FAIL forbidden state visited"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
