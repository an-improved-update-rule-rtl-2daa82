// pfactor_top: general-purpose semiprime factorizer built from P-bits.
//
// A sparse K x K multiplier network (pmult_net) runs in reverse: its 2K
// product P-bits are clamped to the semiprime held in `product` and its
// factor P-bits settle, through the simplified stochastic update rule, to
// two numbers whose product it is. factor_oracle checks every full update,
// reports the number of updates each search took and restarts the search
// from a random state, so a run yields a stream of independent
// times-to-solution. Any product of up to 2K bits can be loaded; smaller
// problems use the same network with leading zeros.
//
// Clocking: clk_col[c] clocks colour c of the network and clk_rd, the last
// of NCOL+1 equally phase-shifted copies of one clock (six 60-degree phases
// of 110 MHz in the original FPGA build, produced by a clock manager
// outside this design), clocks readout, the product register and the
// oracle. One full network update and one readout take one clock period.
//
// Interface: rst (on clk_rd, synchronous, hold for at least two clk_rd
// cycles) reloads the LFSR seeds and restarts; product_we with product_in
// loads a new semiprime and restarts the search. solved pulses for one
// clk_rd cycle with sweeps, sol_a and sol_b valid until the next pulse;
// n_solved counts solutions since the last restart. state_a / state_b are
// the factor P-bits sampled at every readout edge (the live state an
// on-chip logic analyzer would record).
module pfactor_top
  import pbit_pkg::*;
#(
  parameter int unsigned K    = 16,
  parameter int unsigned R    = 4,
  parameter int unsigned CW   = 40,
  parameter logic [63:0] SALT = 64'h0
) (
  input  logic [NCOL-1:0] clk_col,
  input  logic            clk_rd,
  input  logic            rst,
  input  logic            product_we,
  input  logic [2*K-1:0]  product_in,
  output logic            solved,
  output logic [CW-1:0]   sweeps,
  output logic [K-1:0]    sol_a,
  output logic [K-1:0]    sol_b,
  output logic [31:0]     n_solved,
  output logic [K-1:0]    state_a,
  output logic [K-1:0]    state_b
);
  logic [2*K-1:0] product;
  logic [K-1:0]   fac_a;
  logic [K-1:0]   fac_b;
  logic           init;
  logic           restart;

  always_ff @(posedge clk_rd) begin
    if (rst)             product <= '0;
    else if (product_we) product <= product_in;
  end

  assign restart = rst | product_we;

  always_ff @(posedge clk_rd) begin
    state_a <= fac_a;
    state_b <= fac_b;
  end

  pmult_net #(.K(K), .R(R), .SALT(SALT)) u_net (
    .clk_col(clk_col), .clk_rd(clk_rd), .rst(rst), .init(init),
    .product(product), .fac_a(fac_a), .fac_b(fac_b)
  );

  factor_oracle #(.K(K), .CW(CW)) u_oracle (
    .clk_rd(clk_rd), .restart(restart), .fac_a(fac_a), .fac_b(fac_b),
    .product(product), .init(init), .solved(solved), .sweeps(sweeps),
    .sol_a(sol_a), .sol_b(sol_b), .n_solved(n_solved)
  );
endmodule
