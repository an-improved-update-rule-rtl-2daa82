// pbit: one probabilistic bit with the simplified, look-up-table update rule.
//
// On every rising edge of its colour clock the P-bit takes the value
//   1           if I > 1          0           if I < -1
//   rbits[Z]    if I = 0 (an unbiased random bit)
//   ~flip       if I = +1         flip        if I = -1
// where I = H + sum_k J[k]*nbr[k] is its integer directivity and
// flip = AND of R independent random bits, so that an energy-raising update
// at |I| = 1 happens with probability 1/2^R. The weights are parameters, so
// the directivity and the case split are evaluated at elaboration into a
// LUT of 2^NIN entries (one update class per neighbour pattern), indexed
// by the neighbour states; there is no multiplier, no tanh table and no
// wide comparator. This rule (sign from a LUT, randomness only at I = 0 and
// |I| = 1) is the design's central idea; the bit layout of rbits is this
// implementation's: bits [R-1:0] feed the AND when |I| = 1 can occur, the
// next bit is the unbiased bit when I = 0 can occur. Which cases can occur
// is found at elaboration by enumerating all 2^NIN neighbour patterns, and
// NRB (the width of rbits) follows from that.
//
// clamp_en forces the state to clamp_val (outputs of a reverse-mode
// circuit, zero carry inputs). init loads the random bit rbits[0] instead
// of updating, which is how the network is re-randomised. Both are sampled
// on clk like the update itself, so a change takes effect one edge later.
module pbit
  import pbit_pkg::*;
#(
  parameter int unsigned NIN = 5,        // number of neighbours, <= M
  parameter wvec_t       J   = '0,       // binary weights to the neighbours
  parameter int          H   = 0,        // binary bias
  parameter int unsigned R   = 3,        // inputs of the biased-RNG AND
  localparam int unsigned NRB = rand_need(J, H, NIN, R)
) (
  input  logic           clk,
  input  logic [NIN-1:0] nbr,
  input  logic           clamp_en,
  input  logic           clamp_val,
  input  logic           init,
  input  logic [NRB-1:0] rbits,
  output logic           s
);
  localparam bit WEAK = can_weak(J, H, NIN);
  localparam bit ZERO = can_zero(J, H, NIN);
  localparam int unsigned ZBIT = WEAK ? R : 0;

  initial begin
    assert (NIN >= 1 && NIN <= M) else $error("pbit: NIN out of range");
    assert (R >= 1) else $error("pbit: R must be at least 1");
  end

  // The update rule as a table over the neighbour states, fixed at
  // elaboration; this is the only logic between neighbours and register.
  localparam lut_t LUT = build_lut(J, H, NIN);

  upd_e cls;
  logic flip;
  logic nxt;

  assign cls = upd_e'(LUT[nbr]);

  if (WEAK) begin : g_weak
    assign flip = &rbits[R-1:0];
  end else begin : g_noweak
    assign flip = 1'b0;
  end

  always_comb begin
    unique case (cls)
      UPD_HI:  nxt = 1'b1;
      UPD_LO:  nxt = 1'b0;
      UPD_W1:  nxt = ~flip;
      UPD_W0:  nxt = flip;
      default: nxt = ZERO ? rbits[ZBIT] : 1'b0;
    endcase
  end

  always_ff @(posedge clk) begin
    if (clamp_en)  s <= clamp_val;
    else if (init) s <= rbits[0];
    else           s <= nxt;
  end
endmodule
