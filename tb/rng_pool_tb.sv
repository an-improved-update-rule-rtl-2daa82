// rng_pool_tb: checks that a colour's random-bit pool has the right number
// of LFSRs and hands every output a distinct LFSR bit (drawing without
// replacement). Reference LFSRs with the pool's seeds are stepped here;
// over 128 steps the history of each output must equal the history of
// exactly one reference bit, and no reference bit may feed two outputs.
`timescale 1ns/1ps
module rng_pool_tb;
  import pbit_pkg::*;
  localparam int unsigned NB = 100;
  localparam int unsigned NL = 3;            // ceil(100 / 46)
  localparam int unsigned NS = 128;
  localparam logic [63:0] SALT = 64'h1234;
  logic clk = 1'b0;
  logic rst, en;
  logic [NB-1:0] bits;
  logic [NL-1:0][45:0] refq;
  logic [NS-1:0] hist_out [NB];
  logic [NS-1:0] hist_ref [NL*46];
  int checks = 0, failures = 0;

  rng_pool #(.NBITS(NB), .COLOR(2), .SALT(SALT)) dut (.clk(clk), .rst(rst), .en(en), .bits(bits));

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int used [NL*46];
    checks++;
    if (n_lfsr(NB) != NL) begin failures++; $display("FAIL LFSR count"); end
    rst = 1; en = 1;
    @(posedge clk); #1;
    rst = 0;
    for (int l = 0; l < NL; l++) refq[l] = lfsr_seed(2, l, SALT);
    for (int n = 0; n < NS; n++) begin
      for (int p = 0; p < NB; p++) hist_out[p][n] = bits[p];
      for (int f = 0; f < NL*46; f++) hist_ref[f][n] = refq[f / 46][f % 46];
      @(posedge clk); #1;
      for (int l = 0; l < NL; l++)
        refq[l] = {refq[l][44:0], refq[l][45] ^ refq[l][44] ^ refq[l][25] ^ refq[l][24]};
    end
    foreach (used[f]) used[f] = 0;
    for (int p = 0; p < NB; p++) begin
      int hits;
      hits = 0;
      for (int f = 0; f < NL*46; f++)
        if (hist_out[p] == hist_ref[f]) begin
          hits++;
          used[f]++;
        end
      checks++;
      if (hits != 1) begin failures++; $display("FAIL output %0d matches %0d LFSR bits", p, hits); end
    end
    foreach (used[f]) begin
      checks++;
      if (used[f] > 1) begin failures++; $display("FAIL LFSR bit %0d used %0d times", f, used[f]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
