// pfactor_top_tb: end-to-end run of the factorizer at K = 4, R = 3.
// Six phase clocks drive it as in the FPGA build. The testbench loads the
// semiprime 143 (11 x 13), collects NSOL solutions, then loads 35 (5 x 7)
// and collects NSOL more. Every reported solution must multiply to the
// loaded product and be a non-trivial factorization (neither factor 1),
// and its sweep count must equal the number of readout edges counted here
// since the preceding restart. Mechanisms counted, each of which must
// occur: oracle restarts, product reloads, energy-raising updates of an AND
// pin at |I| = 1 (biased RNG) and random updates of an FA pin at I = 0.
`timescale 1ns/1ps
module pfactor_top_tb;
  localparam int unsigned K = 4;
  localparam int unsigned NSOL = 8;
  logic [5:0] ph;
  logic rst, we;
  logic [2*K-1:0] pin;
  logic solved;
  logic [39:0] sweeps;
  logic [K-1:0] sa, sb, sta, stb;
  logic [31:0] nsol;
  int checks = 0, failures = 0;
  int edge_n = 0, last_init = 0;
  int n_restart = 0, n_reload = 0, n_weak_up = 0, n_zero = 0;
  longint total_sweeps = 0;

  phase_clk_gen #(.NPH(6), .PER_PS(6000)) u_clk (.clk(ph));

  pfactor_top #(.K(K), .R(3), .CW(40), .SALT(64'h77)) dut (
    .clk_col(ph[4:0]), .clk_rd(ph[5]), .rst(rst), .product_we(we), .product_in(pin),
    .solved(solved), .sweeps(sweeps), .sol_a(sa), .sol_b(sb), .n_solved(nsol),
    .state_a(sta), .state_b(stb));

  initial begin
    #100000000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Probes: AND(1,1) pin A and FA(1,1) pin A.
  always @(posedge ph[0]) begin
    automatic pbit_pkg::upd_e c_and = dut.u_net.g_and_a[1].g_and_b[1].u_and.g_pin[0].u_pbit.cls;
    automatic pbit_pkg::upd_e c_fa  = dut.u_net.g_fa_j[1].g_fa_i[1].u_fa.g_pin[0].u_pbit.cls;
    automatic logic init_now = dut.init;
    #0.1;
    if (!init_now) begin
      if ((c_and == pbit_pkg::UPD_W1 && !dut.u_net.g_and_a[1].g_and_b[1].u_and.s[0]) ||
          (c_and == pbit_pkg::UPD_W0 && dut.u_net.g_and_a[1].g_and_b[1].u_and.s[0])) n_weak_up++;
      if (c_fa == pbit_pkg::UPD_RND) n_zero++;
    end
  end

  task automatic sweep();
    @(posedge ph[5]);
    #0.1;
    edge_n++;
  endtask

  task automatic run_product(logic [2*K-1:0] p);
    int got;
    pin = p; we = 1;
    sweep();
    we = 0;
    n_reload++;
    got = 0;
    while (got < NSOL) begin
      if (solved) begin
        got++;
        n_restart++;
        total_sweeps += sweeps;
        checks++;
        if ((2*K)'(sa) * (2*K)'(sb) != p || sa == 1 || sb == 1) begin
          failures++; $display("FAIL solution %0d x %0d for %0d", sa, sb, p);
        end
        checks++;
        if (sweeps != 40'(edge_n - last_init - 1)) begin
          failures++; $display("FAIL sweeps %0d, counted %0d", sweeps, edge_n - last_init - 1);
        end
        checks++;
        if (nsol != 32'(got)) begin failures++; $display("FAIL n_solved %0d", nsol); end
        $display("product %0d: %0d x %0d after %0d updates", p, sa, sb, sweeps);
      end
      if (dut.init) last_init = edge_n;
      sweep();
    end
  endtask

  initial begin
    rst = 1; we = 0; pin = '0;
    repeat (3) sweep();
    rst = 0;
    run_product(8'd143);
    run_product(8'd35);
    $display("restarts %0d reloads %0d weak flips %0d zero-directivity updates %0d mean updates %0d",
             n_restart, n_reload, n_weak_up, n_zero, total_sweeps / n_restart);
    checks++;
    if (n_restart != 2 * NSOL) begin failures++; $display("FAIL restarts"); end
    checks++;
    if (n_reload != 2) begin failures++; $display("FAIL reloads"); end
    checks++;
    if (n_weak_up == 0) begin failures++; $display("FAIL no energy-raising |I|=1 update seen"); end
    checks++;
    if (n_zero == 0) begin failures++; $display("FAIL no I=0 update seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
