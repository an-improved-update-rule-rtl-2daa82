// pbit_tb: exhaustive check of the P-bit update rule.
// Instance u_mix has weights chosen so that every case of the rule occurs
// (I < -1, -1, 0, +1, > 1); u_det has the AND-output weights, where only
// the deterministic cases occur. For every neighbour pattern and every
// random-bit pattern the next state is compared with a reference computed
// here from the weights; clamp and init are checked as well.
`timescale 1ns/1ps
module pbit_tb;
  import pbit_pkg::*;
  localparam int unsigned R = 3;
  // u_mix: J = (1, -2, 4), H = -1 -> I in {-1,0,-3,-2,3,4,1,2}.
  localparam wvec_t JM = {8'd0, 8'd0, 8'd4, 8'hFE, 8'd1};
  localparam wvec_t JD = {8'd0, 8'd0, 8'd0, 8'd4, 8'd4};

  logic clk = 1'b0;
  logic [2:0] nb_m;
  logic [1:0] nb_d;
  logic cen, cval, init;
  logic [R:0] rb_m;
  logic [0:0] rb_d;
  logic s_m, s_d;
  int checks = 0, failures = 0;

  pbit #(.NIN(3), .J(JM), .H(-1), .R(R)) u_mix (
    .clk(clk), .nbr(nb_m), .clamp_en(cen), .clamp_val(cval), .init(init), .rbits(rb_m), .s(s_m));
  pbit #(.NIN(2), .J(JD), .H(-6), .R(R)) u_det (
    .clk(clk), .nbr(nb_d), .clamp_en(cen), .clamp_val(cval), .init(init), .rbits(rb_d), .s(s_d));

  function automatic logic ref_next(int I, logic [R-1:0] wk, logic zb);
    if (I > 1) return 1'b1;
    if (I < -1) return 1'b0;
    if (I == 1) return !(wk == '1);
    if (I == -1) return (wk == '1);
    return zb;
  endfunction

  task automatic tick();
    #1 clk = 1'b1;
    #1 clk = 1'b0;
  endtask

  task automatic check(logic got, logic exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %b expected %b", what, got, exp);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int im [8] = '{-1, 0, -3, -2, 3, 4, 1, 2};
    int id [4] = '{-6, -2, -2, 2};
    cen = 0; cval = 0; init = 0; nb_m = 0; nb_d = 0; rb_m = 0; rb_d = 0;
    // Elaborated budget: u_mix needs R + 1 bits, u_det 1.
    checks++;
    if ($bits(rb_m) != rand_need(JM, -1, 3, R) || rand_need(JD, -6, 2, R) != 1) begin
      failures++;
      $display("FAIL random-bit budget");
    end
    for (int st = 0; st < 8; st++) begin
      for (int rv = 0; rv < 16; rv++) begin
        nb_m = 3'(st);
        nb_d = 2'(st);
        rb_m = 4'(rv);
        rb_d = 1'(rv);
        tick();
        check(s_m, ref_next(im[st], 3'(rv), rv[3]), $sformatf("mix st=%0d r=%0d", st, rv));
        check(s_d, (id[st % 4] > 0), $sformatf("det st=%0d", st));
      end
    end
    // Clamp overrides everything.
    for (int v = 0; v < 2; v++) begin
      cen = 1; cval = 1'(v); init = 1; nb_m = 3'd5; rb_m = 4'hF;
      tick();
      check(s_m, 1'(v), "clamp mix");
      check(s_d, 1'(v), "clamp det");
    end
    cen = 0;
    // init loads rbits[0].
    for (int v = 0; v < 2; v++) begin
      init = 1; rb_m = 4'(v) | 4'b0110; rb_d = 1'(v); nb_m = 3'd5; nb_d = 2'd3;
      tick();
      check(s_m, 1'(v), "init mix");
      check(s_d, 1'(v), "init det");
    end
    init = 0;
    // Flip statistics at I = +1 with random bits: about 1/2^R zeros.
    begin
      int zeros;
      zeros = 0;
      nb_m = 3'd6;  // I = -2 + 4 - 1 = 1
      for (int n = 0; n < 4000; n++) begin
        rb_m = 4'($urandom);
        tick();
        if (!s_m) zeros++;
      end
      checks++;
      if (zeros < 350 || zeros > 650) begin
        failures++;
        $display("FAIL flip rate %0d / 4000", zeros);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
