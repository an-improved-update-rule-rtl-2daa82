// factor_oracle_tb: drives the oracle with scripted factor read-outs.
// After a restart it must hold init for one cycle, then count full updates;
// when the read-out factors multiply to the product it must pulse solved
// once with sweeps = updates since the restart, latch the factors, count
// the solution and raise init again. A reference counter kept here gives
// the expected sweep counts.
`timescale 1ns/1ps
module factor_oracle_tb;
  localparam int unsigned K = 8;
  logic clk = 1'b0;
  logic restart;
  logic [K-1:0] fa, fb;
  logic [2*K-1:0] product;
  logic init, solved;
  logic [39:0] sweeps;
  logic [K-1:0] sa, sb;
  logic [31:0] nsol;
  int checks = 0, failures = 0;

  factor_oracle #(.K(K), .CW(40)) dut (
    .clk_rd(clk), .restart(restart), .fac_a(fa), .fac_b(fb), .product(product),
    .init(init), .solved(solved), .sweeps(sweeps), .sol_a(sa), .sol_b(sb), .n_solved(nsol));

  always #5 clk = ~clk;

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    int wait_n [4] = '{5, 1, 17, 3};
    product = 16'd143;   // 11 x 13
    fa = 8'd3; fb = 8'd7;
    restart = 1;
    @(posedge clk); #1;
    @(posedge clk); #1;
    restart = 0;
    chk(init == 1'b1 && nsol == 0, "init after restart");
    @(posedge clk); #1;       // the re-randomising sweep ends
    chk(init == 1'b0, "init lasts one cycle");
    for (int t = 0; t < 4; t++) begin
      // wait_n[t]-1 non-solutions, then a solution.
      for (int n = 0; n < wait_n[t] - 1; n++) begin
        fa = 8'(3 + n); fb = 8'd7;
        @(posedge clk); #1;
        chk(!solved && !init, "no solution yet");
      end
      fa = (t % 2) ? 8'd13 : 8'd11;
      fb = (t % 2) ? 8'd11 : 8'd13;
      @(posedge clk); #1;
      chk(solved && init, "solution pulse and restart");
      chk(sweeps == 40'(wait_n[t]), $sformatf("sweeps %0d expected %0d", sweeps, wait_n[t]));
      chk(sa == fa && sb == fb, "factors latched");
      chk(nsol == 32'(t + 1), "solution count");
      fa = 8'd1; fb = 8'd1;
      @(posedge clk); #1;
      chk(!solved && !init, "single pulse");
      chk(sa == ((t % 2) ? 8'd13 : 8'd11), "factors held");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
