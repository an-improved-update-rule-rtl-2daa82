// rng_pool: the random-bit source of one colour.
//
// A colour that needs NBITS random bits per update gets ceil(NBITS/46)
// 46-bit LFSRs (lfsr46), all stepped together on clk, which is the clock of
// the previous colour so that fresh bits are settled before this colour
// updates. The NL*46 LFSR bits form one list; output bit p is list entry
// (p*STRIDE + OFF) mod (NL*46), with STRIDE coprime to the list length.
// That fixed scramble is this design's way of drawing the bits "at random
// without replacement": no LFSR bit is given to two consumers, and the bits
// a P-bit ANDs together come from scattered LFSRs and positions. Seeds are
// distinct, derived from COLOR, the LFSR index and SALT. rst loads them.
module rng_pool
  import pbit_pkg::*;
#(
  parameter int unsigned NBITS = 46,
  parameter int unsigned COLOR = 0,
  parameter logic [63:0] SALT  = 64'h0
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             en,
  output logic [NBITS-1:0] bits
);
  localparam int unsigned NL     = n_lfsr(NBITS);
  localparam int unsigned NALL   = NL * LFSR_W;
  localparam int unsigned STRIDE = perm_stride(NALL);
  localparam int unsigned OFF    = NALL / 3;

  logic [NL-1:0][LFSR_W-1:0] q;

  for (genvar g = 0; g < NL; g++) begin : g_lfsr
    lfsr46 #(.SEED(lfsr_seed(COLOR, g, SALT))) u_lfsr (
      .clk(clk), .rst(rst), .en(en), .q(q[g])
    );
  end

  logic [NALL-1:0] flat;
  assign flat = q;

  for (genvar p = 0; p < NBITS; p++) begin : g_pick
    localparam int unsigned SRC = int'((64'(p) * 64'(STRIDE) + 64'(OFF)) % 64'(NALL));
    assign bits[p] = flat[SRC];
  end
endmodule
