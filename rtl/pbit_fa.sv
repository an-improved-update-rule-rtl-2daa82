// pbit_fa: probabilistic full adder made of five P-bits A, B, Cin, S, Cout.
//
// The binary weights (order A, B, Cin, S, Cout) are
//   J_AB = J_ACin = J_BCin = -2, J_{A,B,Cin}S = 2, J_{A,B,Cin}Cout = 4,
//   J_SCout = -4, biases -1, -1, -1, -1, -4,
// so the eight rows of the full-adder truth table are the energy minima
// (all at zero energy). In reverse mode S and Cout are clamped and the three
// inputs move between the degenerate minima only through energy-raising
// updates at |I| = 1, which the biased RNG provides with probability 1/2^R.
// Each pin has its own clock clk_pin[p] (a stand-alone gate updates its
// pins on phase-shifted edges; in the multiplier pin p has colour p).
//
// With HAS_COPY set, each pin also has one COPY partner whose state arrives
// on copy_in[p]; this is how the gate sits in the sparse multiplier, where
// unused partners are tied low and their pins clamped. rbits carries the
// random bits of the pins in order A, B, Cin, S, Cout, each pin_need bits.
module pbit_fa
  import pbit_pkg::*;
#(
  parameter int unsigned R        = 3,
  parameter bit          HAS_COPY = 1'b1,
  localparam int unsigned N0  = gate_need(1'b1, 0, HAS_COPY, R),
  localparam int unsigned N1  = gate_need(1'b1, 1, HAS_COPY, R),
  localparam int unsigned N2  = gate_need(1'b1, 2, HAS_COPY, R),
  localparam int unsigned N3  = gate_need(1'b1, 3, HAS_COPY, R),
  localparam int unsigned N4  = gate_need(1'b1, 4, HAS_COPY, R),
  localparam int unsigned NRB = N0 + N1 + N2 + N3 + N4
) (
  input  logic [4:0]     clk_pin,
  input  logic [4:0]     copy_in,
  input  logic [4:0]     clamp_en,
  input  logic [4:0]     clamp_val,
  input  logic           init,
  input  logic [NRB-1:0] rbits,
  output logic [4:0]     s
);
  localparam int unsigned NIN = gate_nin(1'b1, HAS_COPY);
  localparam int unsigned OFS [5]  = '{0, N0, N0 + N1, N0 + N1 + N2, N0 + N1 + N2 + N3};
  localparam int unsigned NEED [5] = '{N0, N1, N2, N3, N4};

  for (genvar p = 0; p < 5; p++) begin : g_pin
    logic [NIN-1:0] nb;
    // The other four pins in ascending order, then the COPY partner.
    for (genvar q = 0; q < 4; q++) begin : g_nb
      assign nb[q] = s[(q < p) ? q : q + 1];
    end
    if (HAS_COPY) begin : g_cp
      assign nb[4] = copy_in[p];
    end
    pbit #(
      .NIN(NIN), .J(gate_w(1'b1, p, HAS_COPY)), .H(gate_h(1'b1, p, HAS_COPY)), .R(R)
    ) u_pbit (
      .clk(clk_pin[p]), .nbr(nb), .clamp_en(clamp_en[p]), .clamp_val(clamp_val[p]),
      .init(init), .rbits(rbits[OFS[p] +: NEED[p]]), .s(s[p])
    );
  end
endmodule
