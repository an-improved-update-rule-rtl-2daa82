// phase_clk_gen: behavioural model of the clock manager that feeds the
// P-bit network. It produces NPH copies of one clock of period PERIOD,
// copy g delayed by g*PERIOD/NPH, with 50 % duty cycle: for the multiplier,
// NPH = 6 gives the five colour clocks and the readout clock, 60 degrees
// apart. Not synthesizable; simulation only.
`timescale 1ns/1ps
module phase_clk_gen #(
  parameter int unsigned NPH    = 6,
  parameter int unsigned PER_PS = 6000
) (
  output logic [NPH-1:0] clk
);
  for (genvar g = 0; g < NPH; g++) begin : g_ph
    initial begin
      clk[g] = 1'b0;
      #(real'(g * PER_PS / NPH) / 1000.0 + 0.5);
      forever begin
        clk[g] = 1'b1;
        #(real'(PER_PS) / 2000.0);
        clk[g] = 1'b0;
        #(real'(PER_PS) / 2000.0);
      end
    end
  end
endmodule
