// copy_tree_tb: the fan-out tree of one factor bit, K = 16 (4 + 1 nodes).
// Checks the layer sizes of the layer formula (K = 16 adds 5 P-bits, K = 3
// one, K = 8 three), then drives the 16 AND-side leaves: all ones / all
// zeros must propagate to the top node and back to every leaf_up; groups of
// four leaves at one value fix their layer-1 node whatever its parent; three
// groups of ones against one of zeros must carry the top node to one.
`timescale 1ns/1ps
module copy_tree_tb;
  import pbit_pkg::*;
  localparam int unsigned K = 16;
  localparam int unsigned R = 4;
  localparam int unsigned WO = (tree_bits(K, 3, R) == 0) ? 1 : tree_bits(K, 3, R);
  localparam int unsigned WE = (tree_bits(K, 4, R) == 0) ? 1 : tree_bits(K, 4, R);
  logic [2:0] ph;
  logic init;
  logic [K-1:0] leaf, up;
  logic [WO-1:0] ro;
  logic [WE-1:0] re;
  logic top;
  int checks = 0, failures = 0;

  phase_clk_gen #(.NPH(3), .PER_PS(3000)) u_clk (.clk(ph));

  copy_tree #(.K(K), .R(R)) dut (
    .clk_odd(ph[0]), .clk_even(ph[1]), .init(init), .leaf_s(leaf), .leaf_up(up),
    .rbits_odd(ro), .rbits_even(re), .top_s(top));

  always @(posedge ph[2]) begin
    ro <= WO'({$urandom, $urandom});
    re <= WE'($urandom);
  end

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic sweep();
    @(posedge ph[2]);
    #0.1;
  endtask

  function automatic int unsigned added(int unsigned k);
    int unsigned t;
    t = 0;
    for (int unsigned r = 1; r <= tree_top(k); r++) t += tree_layer_size(k, r);
    return t;
  endfunction

  task automatic expect_state(logic [K-1:0] lv, logic [K-1:0] up_exp, logic top_exp, bit chk_top, string what);
    leaf = lv;
    repeat (3) sweep();
    for (int n = 0; n < 20; n++) begin
      sweep();
      checks++;
      if (up !== up_exp || (chk_top && top !== top_exp)) begin
        failures++;
        $display("FAIL %s: up=%h top=%b", what, up, top);
      end
    end
  endtask

  initial begin
    checks++;
    if (added(16) != 5 || added(3) != 1 || added(8) != 3 || tree_layer_size(16, 1) != 4) begin
      failures++; $display("FAIL layer sizes");
    end
    checks++;
    if (tree_deg(16, 1, 0) != 5 || tree_deg(16, 2, 0) != 4) begin failures++; $display("FAIL degrees"); end
    ro = '0; re = '0; leaf = '0; init = 1;
    sweep();
    init = 0;
    expect_state('1, '1, 1'b1, 1'b1, "all ones");
    expect_state('0, '0, 1'b0, 1'b1, "all zeros");
    expect_state(16'h0F0F, 16'h0F0F, 1'b0, 1'b0, "groups 0,2");
    expect_state(16'hF0F0, 16'hF0F0, 1'b0, 1'b0, "groups 1,3");
    expect_state(16'hFF0F, 16'hFF0F, 1'b1, 1'b1, "three groups");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
