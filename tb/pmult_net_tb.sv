// pmult_net_tb: the 3 x 3 sparse multiplier network in reverse mode with
// the product clamped to 10 and R = 5. Each of NRUN runs re-randomises the
// network, lets it make 1000 full updates and samples the factor bits as
// {A, B} (A in the upper three bits). The two factorizations 2 x 5 (21) and
// 5 x 2 (42) must be the two most frequent samples and together at least
// 20 % of them. Also checks the network size: 63 P-bits for K = 3.
`timescale 1ns/1ps
module pmult_net_tb;
  import pbit_pkg::*;
  localparam int unsigned K = 3;
  localparam int unsigned NRUN = 300;
  logic [5:0] ph;
  logic rst, init;
  logic [2*K-1:0] product;
  logic [K-1:0] fa, fb;
  int checks = 0, failures = 0;
  int hist [64];

  phase_clk_gen #(.NPH(6), .PER_PS(6000)) u_clk (.clk(ph));

  pmult_net #(.K(K), .R(5), .SALT(64'h5)) dut (
    .clk_col(ph[4:0]), .clk_rd(ph[5]), .rst(rst), .init(init),
    .product(product), .fac_a(fa), .fac_b(fb));

  initial begin
    #4000000000;
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
    int best, second;
    int unsigned npb;
    // P-bit count: 3 per AND, 5 per FA, tree nodes.
    npb = 3 * K * K + 5 * K * (K - 1) + 2 * K * tree_layer_size(K, 1);
    checks++;
    if (npb != 63) begin failures++; $display("FAIL P-bit count %0d", npb); end
    product = 6'd10;
    rst = 1; init = 1;
    repeat (2) sweep();
    rst = 0;
    foreach (hist[i]) hist[i] = 0;
    for (int run = 0; run < NRUN; run++) begin
      init = 1;
      sweep();
      init = 0;
      repeat (1000) sweep();
      hist[{fa, fb}]++;
    end
    best = 0; second = 1;
    if (hist[second] > hist[best]) begin best = 1; second = 0; end
    for (int i = 2; i < 64; i++) begin
      if (hist[i] > hist[best]) begin second = best; best = i; end
      else if (hist[i] > hist[second]) second = i;
    end
    $display("samples: 21 -> %0d, 42 -> %0d, most frequent %0d (%0d) and %0d (%0d)",
             hist[21], hist[42], best, hist[best], second, hist[second]);
    checks++;
    if (!((best == 21 && second == 42) || (best == 42 && second == 21))) begin
      failures++; $display("FAIL solutions are not the two most frequent states");
    end
    checks++;
    if (hist[21] + hist[42] < NRUN / 5) begin failures++; $display("FAIL too few solutions"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
