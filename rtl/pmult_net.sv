// pmult_net: sparse K x K array-multiplier P-bit network, run in reverse.
//
// The network is a conventional long-multiplication array built from
// probabilistic gates: K*K AND gates make the partial products A_a*B_b and
// K*(K-1) full adders sum them, row j = 1..K-1 adding A*B_j to the running
// sum (half adders are full adders with Cin clamped to 0, K of them). Every
// gate owns its P-bits; neighbouring gates are joined by COPY gates instead
// of sharing a P-bit, and each factor bit reaches its K AND gates through a
// copy_tree, so no P-bit has more than five neighbours. Wiring of cell
// (row j, column i): A <- AND(i, j); B <- AND(i+1, 0) in row 1, else the S
// of cell (j-1, i+1), or the Cout of (j-1, K-1) for i = K-1; Cin <- Cout of
// (j, i-1). Product bit P_0 is the C pin of AND(0,0), P_j the S of (j, 0),
// P_{K-1+i} the S of (K-1, i) and P_{2K-1} the Cout of (K-1, K-1); all of
// them are clamped to `product`, which makes the circuit run in reverse.
// The factors are read from the top nodes of the 2K trees.
//
// Colouring and timing: five colours, FA pin p -> colour p, AND pins
// A, B, C -> 0, 1, 2, tree layers odd -> 3, even -> 4 (a fixed colouring
// that is proper for this graph; the original work used a greedy colouring).
// All P-bits of colour c update together on the rising edge of clk_col[c];
// the clocks are phase-shifted copies of one clock, so a whole network
// update takes one period. Colour c draws its random bits from its own
// rng_pool, stepped on the previous colour's edge (colour 0's pool on
// clk_rd, the readout phase). init re-randomises every unclamped P-bit on
// its next edge; rst reloads the LFSR seeds.
module pmult_net
  import pbit_pkg::*;
#(
  parameter int unsigned K    = 16,
  parameter int unsigned R    = 4,
  parameter logic [63:0] SALT = 64'h0
) (
  input  logic [NCOL-1:0] clk_col,
  input  logic            clk_rd,
  input  logic            rst,
  input  logic            init,
  input  logic [2*K-1:0]  product,
  output logic [K-1:0]    fac_a,
  output logic [K-1:0]    fac_b
);
  // ---- random bit budget of each colour ----
  localparam int unsigned NFA [5] = '{gate_need(1'b1, 0, 1'b1, R), gate_need(1'b1, 1, 1'b1, R),
                                      gate_need(1'b1, 2, 1'b1, R), gate_need(1'b1, 3, 1'b1, R),
                                      gate_need(1'b1, 4, 1'b1, R)};
  localparam int unsigned NAND [3] = '{gate_need(1'b0, 0, 1'b1, R), gate_need(1'b0, 1, 1'b1, R),
                                       gate_need(1'b0, 2, 1'b1, R)};
  localparam int unsigned PB [5] = '{pool_bits(K, 0, R), pool_bits(K, 1, R), pool_bits(K, 2, R),
                                     pool_bits(K, 3, R), pool_bits(K, 4, R)};
  localparam int unsigned NBO = tree_bits(K, 3, R);
  localparam int unsigned NBE = tree_bits(K, 4, R);
  localparam int unsigned WO  = (NBO == 0) ? 1 : NBO;
  localparam int unsigned WE  = (NBE == 0) ? 1 : NBE;
  localparam int unsigned FA_NRB  = NFA[0] + NFA[1] + NFA[2] + NFA[3] + NFA[4];
  localparam int unsigned AND_NRB = NAND[0] + NAND[1] + NAND[2];

  logic [PB[0]-1:0] rb0;
  logic [PB[1]-1:0] rb1;
  logic [PB[2]-1:0] rb2;
  logic [PB[3]-1:0] rb3;
  logic [PB[4]-1:0] rb4;

  rng_pool #(.NBITS(PB[0]), .COLOR(0), .SALT(SALT)) u_pool0 (.clk(clk_rd),     .rst(rst), .en(1'b1), .bits(rb0));
  rng_pool #(.NBITS(PB[1]), .COLOR(1), .SALT(SALT)) u_pool1 (.clk(clk_col[0]), .rst(rst), .en(1'b1), .bits(rb1));
  rng_pool #(.NBITS(PB[2]), .COLOR(2), .SALT(SALT)) u_pool2 (.clk(clk_col[1]), .rst(rst), .en(1'b1), .bits(rb2));
  rng_pool #(.NBITS(PB[3]), .COLOR(3), .SALT(SALT)) u_pool3 (.clk(clk_col[2]), .rst(rst), .en(1'b1), .bits(rb3));
  rng_pool #(.NBITS(PB[4]), .COLOR(4), .SALT(SALT)) u_pool4 (.clk(clk_col[3]), .rst(rst), .en(1'b1), .bits(rb4));

  // ---- gate states ----
  logic [2:0] and_s  [K][K];   // [a][b] pins A, B, C
  logic [2:0] and_cp [K][K];   // COPY partners of the AND pins
  logic [4:0] fa_s   [K][K];   // [j][i], rows 1..K-1 used
  logic [K-1:0] ta_leaf [K];   // tree A_a: leaf b = AND(a, b).A
  logic [K-1:0] ta_up   [K];
  logic [K-1:0] tb_leaf [K];   // tree B_b: leaf a = AND(a, b).B
  logic [K-1:0] tb_up   [K];

  // ---- AND gates ----
  for (genvar a = 0; a < K; a++) begin : g_and_a
    for (genvar b = 0; b < K; b++) begin : g_and_b
      localparam int unsigned G = a * K + b;
      logic [AND_NRB-1:0] rb;
      logic               p0;
      assign rb = {rb2[PB_AND_OFF(2) + G * NAND[2] +: NAND[2]],
                   rb1[PB_AND_OFF(1) + G * NAND[1] +: NAND[1]],
                   rb0[PB_AND_OFF(0) + G * NAND[0] +: NAND[0]]};
      assign p0 = (a == 0 && b == 0);
      assign ta_leaf[a][b] = and_s[a][b][0];
      assign tb_leaf[b][a] = and_s[a][b][1];
      assign and_cp[a][b][0] = ta_up[a][b];
      assign and_cp[a][b][1] = tb_up[b][a];
      if (b >= 1) begin : g_c_fa_a
        assign and_cp[a][b][2] = fa_s[b][a][FA_A];
      end else if (a >= 1) begin : g_c_fa_b
        assign and_cp[a][b][2] = fa_s[1][a-1][FA_B];
      end else begin : g_c_out
        assign and_cp[a][b][2] = 1'b0;
      end
      pbit_and #(.R(R), .HAS_COPY(1'b1)) u_and (
        .clk_pin  (clk_col[2:0]),
        .copy_in  (and_cp[a][b]),
        .clamp_en ({p0, 2'b00}),
        .clamp_val({product[0], 2'b00}),
        .init     (init),
        .rbits    (rb),
        .s        (and_s[a][b])
      );
    end
  end

  function automatic int unsigned PB_AND_OFF(int unsigned c);
    return fa_region(K, c, R);
  endfunction

  // ---- full adders ----
  for (genvar j = 1; j < K; j++) begin : g_fa_j
    for (genvar i = 0; i < K; i++) begin : g_fa_i
      localparam int unsigned G = (j - 1) * K + i;
      logic [FA_NRB-1:0] rb;
      logic [4:0] cp;
      logic [4:0] cen;
      logic [4:0] cval;
      assign rb = {rb4[G * NFA[4] +: NFA[4]], rb3[G * NFA[3] +: NFA[3]],
                   rb2[G * NFA[2] +: NFA[2]], rb1[G * NFA[1] +: NFA[1]],
                   rb0[G * NFA[0] +: NFA[0]]};
      // A: partial product A_i * B_j.
      assign cp[FA_A] = and_s[i][j][AND_C];
      // B: from the row above (or the B_0 partial products in row 1).
      if (j == 1 && i < K - 1) begin : g_b_and
        assign cp[FA_B] = and_s[i+1][0][AND_C];
      end else if (j == 1) begin : g_b_zero
        assign cp[FA_B] = 1'b0;
      end else if (i < K - 1) begin : g_b_s
        assign cp[FA_B] = fa_s[j-1][i+1][FA_S];
      end else begin : g_b_co
        assign cp[FA_B] = fa_s[j-1][K-1][FA_CO];
      end
      // Cin: carry from the right neighbour, or 0 in column 0.
      if (i >= 1) begin : g_ci
        assign cp[FA_CI] = fa_s[j][i-1][FA_CO];
      end else begin : g_ci_zero
        assign cp[FA_CI] = 1'b0;
      end
      // S: read by the B pin of the row below, or a product bit.
      if (j < K - 1 && i >= 1) begin : g_s
        assign cp[FA_S] = fa_s[j+1][i-1][FA_B];
      end else begin : g_s_out
        assign cp[FA_S] = 1'b0;
      end
      // Cout: carry to the left neighbour, the row below, or P_{2K-1}.
      if (i < K - 1) begin : g_co
        assign cp[FA_CO] = fa_s[j][i+1][FA_CI];
      end else if (j < K - 1) begin : g_co_dn
        assign cp[FA_CO] = fa_s[j+1][K-1][FA_B];
      end else begin : g_co_out
        assign cp[FA_CO] = 1'b0;
      end
      // Clamps.
      assign cen[FA_A]  = 1'b0;
      assign cval[FA_A] = 1'b0;
      assign cen[FA_B]  = (j == 1 && i == K - 1);
      assign cval[FA_B] = 1'b0;
      assign cen[FA_CI]  = (i == 0);
      assign cval[FA_CI] = 1'b0;
      if (i == 0) begin : g_s_pj
        assign cen[FA_S]  = 1'b1;
        assign cval[FA_S] = product[j];
      end else if (j == K - 1) begin : g_s_pk
        assign cen[FA_S]  = 1'b1;
        assign cval[FA_S] = product[K - 1 + i];
      end else begin : g_s_free
        assign cen[FA_S]  = 1'b0;
        assign cval[FA_S] = 1'b0;
      end
      assign cen[FA_CO]  = (j == K - 1 && i == K - 1);
      assign cval[FA_CO] = (j == K - 1 && i == K - 1) ? product[2*K-1] : 1'b0;

      pbit_fa #(.R(R), .HAS_COPY(1'b1)) u_fa (
        .clk_pin(clk_col), .copy_in(cp), .clamp_en(cen), .clamp_val(cval),
        .init(init), .rbits(rb), .s(fa_s[j][i])
      );
    end
  end
  // Row 0 of fa_s is not used.
  for (genvar i = 0; i < K; i++) begin : g_fa_row0
    assign fa_s[0][i] = '0;
  end

  // ---- factor fan-out trees ----
  localparam int unsigned TB3 = fa_region(K, 3, R) + and_region(K, 3, R);
  localparam int unsigned TB4 = fa_region(K, 4, R) + and_region(K, 4, R);
  for (genvar t = 0; t < 2 * K; t++) begin : g_tree
    logic [WO-1:0] ro;
    logic [WE-1:0] re;
    logic [K-1:0]  leaf;
    logic [K-1:0]  up;
    logic          top;
    if (NBO > 0) begin : g_ro
      assign ro = rb3[TB3 + t * NBO +: NBO];
    end else begin : g_ro0
      assign ro = '0;
    end
    if (NBE > 0) begin : g_re
      assign re = rb4[TB4 + t * NBE +: NBE];
    end else begin : g_re0
      assign re = '0;
    end
    if (t < K) begin : g_ta
      assign leaf = ta_leaf[t];
      assign ta_up[t] = up;
      assign fac_a[t] = top;
    end else begin : g_tb
      assign leaf = tb_leaf[t-K];
      assign tb_up[t-K] = up;
      assign fac_b[t-K] = top;
    end
    copy_tree #(.K(K), .R(R)) u_tree (
      .clk_odd(clk_col[3]), .clk_even(clk_col[4]), .init(init),
      .leaf_s(leaf), .leaf_up(up), .rbits_odd(ro), .rbits_even(re), .top_s(top)
    );
  end

  // Elaboration checks of the pool layout.
  initial begin
    assert (K >= 2) else $error("pmult_net: K must be at least 2");
    for (int c = 0; c < 5; c++)
      assert (PB[c] >= K * (K - 1) * NFA[c]) else $error("pmult_net: pool %0d too small", c);
  end
endmodule
