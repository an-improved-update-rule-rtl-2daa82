// factor_oracle: solution check and restart control of the factorizer.
//
// Once the correct factors are reached the network does not stay there
// (the biased RNG keeps making occasional energy-raising flips), so every
// full network update is checked: at each rising edge of clk_rd (the
// readout phase, after all colours have updated) the oracle multiplies the
// two factor read-outs and compares the result with the clamped product.
// On a match it pulses `solved` for one clk_rd cycle, reports in `sweeps`
// how many full updates this search took, latches the factors, counts the
// solution and raises `init` for one period, which re-randomises every
// unclamped P-bit; the next search then starts. The comparison and the
// restart follow the design; the counter width, the saturation and the
// handshake (a one-cycle pulse with held data) are this design's choices.
//
// Timing: init is high during the sweep that re-randomises; the sweep
// counter restarts at the edge that ends it, so `sweeps` = 1 means the
// first regular update after a restart already solved the problem. A
// restart request (rst, or a new product) raises init the same way.
module factor_oracle #(
  parameter int unsigned K  = 16,
  parameter int unsigned CW = 40
) (
  input  logic           clk_rd,
  input  logic           restart,
  input  logic [K-1:0]   fac_a,
  input  logic [K-1:0]   fac_b,
  input  logic [2*K-1:0] product,
  output logic           init,
  output logic           solved,
  output logic [CW-1:0]  sweeps,
  output logic [K-1:0]   sol_a,
  output logic [K-1:0]   sol_b,
  output logic [31:0]    n_solved
);
  logic [CW-1:0]  cnt;
  logic [2*K-1:0] prod_now;
  logic           hit;

  assign prod_now = (2*K)'(fac_a) * (2*K)'(fac_b);
  assign hit      = (prod_now == product);

  always_ff @(posedge clk_rd) begin
    solved <= 1'b0;
    if (restart) begin
      init     <= 1'b1;
      cnt      <= '0;
      sweeps   <= '0;
      sol_a    <= '0;
      sol_b    <= '0;
      n_solved <= '0;
    end else if (init) begin
      init <= 1'b0;
      cnt  <= '0;
    end else if (hit) begin
      solved   <= 1'b1;
      sweeps   <= cnt + 1'b1;
      sol_a    <= fac_a;
      sol_b    <= fac_b;
      n_solved <= n_solved + 1'b1;
      init     <= 1'b1;
    end else if (cnt != '1) begin
      cnt <= cnt + 1'b1;
    end
  end

  // A reported solution always satisfies the product it was checked on.
  property p_solution_ok;
    @(posedge clk_rd) disable iff (restart) solved |-> ((2*K)'(sol_a) * (2*K)'(sol_b) == product);
  endproperty
  a_solution_ok : assert property (p_solution_ok);
endmodule
