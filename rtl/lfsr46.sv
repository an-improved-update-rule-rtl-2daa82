// lfsr46: 46-bit Fibonacci linear feedback shift register.
//
// The design draws all its randomness from 46-bit LFSRs (period 2^46 - 1,
// far longer than any run). The feedback polynomial is not given; this
// implementation uses taps 46, 45, 26, 25 (x^46 + x^45 + x^26 + x^25 + 1),
// a maximal-length choice. Each edge of clk with en high shifts the register
// one place left and enters the XOR of the taps at bit 0; all 46 state bits
// are offered as random bits. rst (synchronous) loads SEED, which must be
// non-zero: the all-zero state is a lock-up state.
module lfsr46 #(
  parameter logic [45:0] SEED = 46'h1
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        en,
  output logic [45:0] q
);
  initial assert (SEED != '0) else $error("lfsr46: zero seed locks up");

  logic fb;
  assign fb = q[45] ^ q[44] ^ q[25] ^ q[24];

  always_ff @(posedge clk) begin
    if (rst)     q <= SEED;
    else if (en) q <= {q[44:0], fb};
  end
endmodule
