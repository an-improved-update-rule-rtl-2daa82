// pbit_and: probabilistic AND gate made of three P-bits A, B and C.
//
// The binary weights are J_AC = J_BC = 4, J_AB = -2 and biases h_A = h_B = 0,
// h_C = -6, so the four rows of the AND truth table are the energy minima.
// In forward mode A and B are clamped and C settles to A&B deterministically
// (|I_C| >= 2 on every row); in reverse mode C is clamped and A, B wander
// among the inputs consistent with it (with C = 0, I_A = 0 when B = 0, so A
// becomes an unbiased random bit). Each pin has its own clock clk_pin[p],
// which lets a stand-alone gate update A and B on phase-shifted edges and
// lets a larger network give the pins different colours.
//
// With HAS_COPY set, every pin also has one COPY partner outside the gate,
// its state on copy_in[p] (binary weight 2, bias -1 added): this is how the
// gate is embedded in the sparse multiplier. rbits carries the random bits
// of pin A, then B, then C, each pin taking pin_need(p) bits (see pbit).
module pbit_and
  import pbit_pkg::*;
#(
  parameter int unsigned R        = 3,
  parameter bit          HAS_COPY = 1'b1,
  localparam int unsigned NA   = gate_need(1'b0, 0, HAS_COPY, R),
  localparam int unsigned NB   = gate_need(1'b0, 1, HAS_COPY, R),
  localparam int unsigned NC   = gate_need(1'b0, 2, HAS_COPY, R),
  localparam int unsigned NRB  = NA + NB + NC
) (
  input  logic [2:0]     clk_pin,
  input  logic [2:0]     copy_in,
  input  logic [2:0]     clamp_en,
  input  logic [2:0]     clamp_val,
  input  logic           init,
  input  logic [NRB-1:0] rbits,
  output logic [2:0]     s
);
  localparam int unsigned NIN = gate_nin(1'b0, HAS_COPY);
  localparam int unsigned OFS [3] = '{0, NA, NA + NB};
  localparam int unsigned NEED [3] = '{NA, NB, NC};

  for (genvar p = 0; p < 3; p++) begin : g_pin
    logic [NIN-1:0] nb;
    // Other pins in ascending order, then the COPY partner.
    if (p == 0) begin : g_a
      assign nb[1:0] = {s[2], s[1]};
    end else if (p == 1) begin : g_b
      assign nb[1:0] = {s[2], s[0]};
    end else begin : g_c
      assign nb[1:0] = {s[1], s[0]};
    end
    if (HAS_COPY) begin : g_cp
      assign nb[2] = copy_in[p];
    end
    pbit #(
      .NIN(NIN), .J(gate_w(1'b0, p, HAS_COPY)), .H(gate_h(1'b0, p, HAS_COPY)), .R(R)
    ) u_pbit (
      .clk(clk_pin[p]), .nbr(nb), .clamp_en(clamp_en[p]), .clamp_val(clamp_val[p]),
      .init(init), .rbits(rbits[OFS[p] +: NEED[p]]), .s(s[p])
    );
  end
endmodule
