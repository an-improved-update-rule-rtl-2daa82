// pbit_pkg: constants, types and elaboration-time functions shared by the
// P-bit factorizer.
//
// All interaction weights are held in the binary (0/1 state) convention, in
// which the directivity of P-bit i is I_i = h_i + sum_j J_ij * s_j and equals
// the bipolar directivity exactly. The AND and full-adder weights are the
// ones printed in the gate diagrams of the design (AND: J_AC = J_BC = 4,
// J_AB = -2, h = 0, 0, -6; FA: see fa_jm below). The COPY gate strength is
// not given and is this design's choice: a bipolar coupling of COPY_JB = 1,
// which in binary form is J = 2 and adds -1 to the bias of both ends.
//
// The functions here run only at elaboration. They size each colour's pool
// of random bits (R bits for a P-bit that can see |I| = 1, one bit for a
// P-bit that can see I = 0, at least one bit for every P-bit so that it can
// be re-randomised), lay the pool out in closed form, shape the COPY fan-out
// trees of the factor bits (l_r = ceil(l_{r-1} / (M-1))) and give the fixed
// five-colour assignment used by the sparse multiplier.
package pbit_pkg;

  // Maximum number of neighbours of one P-bit (M <= 5 in the design).
  localparam int unsigned M = 5;
  // Colours of the sparse multiplier; one phase clock each, plus readout.
  localparam int unsigned NCOL = 5;
  // Width of one linear feedback shift register.
  localparam int unsigned LFSR_W = 46;
  // Bipolar COPY coupling strength (assumed; binary J = 2*COPY_JB).
  localparam int COPY_JB = 1;

  // Weight vector of one P-bit: M signed 8-bit weights, packed.
  typedef logic [M-1:0][7:0] wvec_t;

  // Pin order of the gates.
  typedef enum logic [2:0] {FA_A = 3'd0, FA_B = 3'd1, FA_CI = 3'd2, FA_S = 3'd3, FA_CO = 3'd4} fa_pin_e;
  typedef enum logic [1:0] {AND_A = 2'd0, AND_B = 2'd1, AND_C = 2'd2} and_pin_e;

  // Full-adder binary weights, rows/cols in order A, B, Cin, S, Cout.
  function automatic int fa_jm(int unsigned i, int unsigned j);
    int t [5][5];
    t = '{'{ 0, -2, -2,  2,  4},
          '{-2,  0, -2,  2,  4},
          '{-2, -2,  0,  2,  4},
          '{ 2,  2,  2,  0, -4},
          '{ 4,  4,  4, -4,  0}};
    return t[i][j];
  endfunction

  function automatic int fa_h(int unsigned i);
    int t [5];
    t = '{-1, -1, -1, -1, -4};
    return t[i];
  endfunction

  // AND binary weights, order A, B, C.
  function automatic int and_jm(int unsigned i, int unsigned j);
    int t [3][3];
    t = '{'{ 0, -2,  4},
          '{-2,  0,  4},
          '{ 4,  4,  0}};
    return t[i][j];
  endfunction

  function automatic int and_h(int unsigned i);
    int t [3];
    t = '{0, 0, -6};
    return t[i];
  endfunction

  // Weights seen by gate pin p of an n-pin gate: the other pins in
  // ascending order, then (if with_copy) the COPY partner last.
  function automatic wvec_t gate_w(bit is_fa, int unsigned p, bit with_copy);
    wvec_t w;
    int unsigned k;
    int unsigned n;
    w = '0;
    k = 0;
    n = is_fa ? 5 : 3;
    for (int unsigned q = 0; q < n; q++) begin
      if (q != p) begin
        w[k] = 8'(is_fa ? fa_jm(p, q) : and_jm(p, q));
        k++;
      end
    end
    if (with_copy) w[k] = 8'(2 * COPY_JB);
    return w;
  endfunction

  function automatic int gate_h(bit is_fa, int unsigned p, bit with_copy);
    return (is_fa ? fa_h(p) : and_h(p)) - (with_copy ? COPY_JB : 0);
  endfunction

  function automatic int unsigned gate_nin(bit is_fa, bit with_copy);
    return (is_fa ? 4 : 2) + (with_copy ? 1 : 0);
  endfunction

  // Directivity for neighbour pattern st.
  function automatic int dir_of(wvec_t w, int h, int unsigned nin, int unsigned st);
    int s;
    s = h;
    for (int unsigned k = 0; k < nin; k++)
      if (st[k]) s += int'($signed(w[k]));
    return s;
  endfunction

  function automatic bit can_weak(wvec_t w, int h, int unsigned nin);
    bit r;
    r = 1'b0;
    for (int unsigned st = 0; st < (1 << nin); st++) begin
      int d;
      d = dir_of(w, h, nin, st);
      if (d == 1 || d == -1) r = 1'b1;
    end
    return r;
  endfunction

  function automatic bit can_zero(wvec_t w, int h, int unsigned nin);
    bit r;
    r = 1'b0;
    for (int unsigned st = 0; st < (1 << nin); st++)
      if (dir_of(w, h, nin, st) == 0) r = 1'b1;
    return r;
  endfunction

  // Update class of one LUT entry: what the P-bit does for that neighbour
  // pattern. UPD_LO / UPD_HI: I < -1 / I > 1, deterministic. UPD_W0 / UPD_W1:
  // I = -1 / +1, the sign value unless the biased RNG flips it. UPD_RND: I = 0.
  typedef enum logic [2:0] {UPD_LO = 3'd0, UPD_HI = 3'd1, UPD_W0 = 3'd2, UPD_W1 = 3'd3,
                            UPD_RND = 3'd4} upd_e;

  typedef logic [(1 << M)-1:0][2:0] lut_t;

  // The update LUT of a P-bit, one entry per neighbour pattern.
  function automatic lut_t build_lut(wvec_t w, int h, int unsigned nin);
    lut_t l;
    l = '0;
    for (int unsigned st = 0; st < (1 << nin); st++) begin
      int d;
      d = dir_of(w, h, nin, st);
      if (d > 1)       l[st] = UPD_HI;
      else if (d < -1) l[st] = UPD_LO;
      else if (d == 1) l[st] = UPD_W1;
      else if (d == -1) l[st] = UPD_W0;
      else             l[st] = UPD_RND;
    end
    return l;
  endfunction

  // Random bits a P-bit draws per update: R for the biased AND if |I| = 1
  // can occur, one unbiased bit if I = 0 can occur, never fewer than one.
  function automatic int unsigned rand_need(wvec_t w, int h, int unsigned nin, int unsigned r);
    int unsigned n;
    n = (can_weak(w, h, nin) ? r : 0) + (can_zero(w, h, nin) ? 1 : 0);
    return (n == 0) ? 1 : n;
  endfunction

  function automatic int unsigned gate_need(bit is_fa, int unsigned p, bit with_copy, int unsigned r);
    return rand_need(gate_w(is_fa, p, with_copy), gate_h(is_fa, p, with_copy),
                     gate_nin(is_fa, with_copy), r);
  endfunction

  // ---------------- COPY fan-out tree of one factor bit ----------------
  // Layer 0 is the k AND-gate pins; l_r = ceil(l_{r-1}/(M-1)) up to l = 1.
  function automatic int unsigned tree_layer_size(int unsigned k, int unsigned r);
    int unsigned l;
    l = k;
    for (int unsigned q = 0; q < r; q++) l = (l + M - 2) / (M - 1);
    return l;
  endfunction

  // Index of the top layer (the measured factor bit).
  function automatic int unsigned tree_top(int unsigned k);
    int unsigned r;
    int unsigned l;
    r = 1;
    l = (k + M - 2) / (M - 1);
    while (l > 1) begin
      l = (l + M - 2) / (M - 1);
      r++;
    end
    return r;
  endfunction

  function automatic int unsigned tree_children(int unsigned k, int unsigned r, int unsigned n);
    int unsigned below;
    int unsigned c;
    below = tree_layer_size(k, r - 1);
    c = below - (M - 1) * n;
    return (c > M - 1) ? M - 1 : c;
  endfunction

  function automatic int unsigned tree_deg(int unsigned k, int unsigned r, int unsigned n);
    return tree_children(k, r, n) + ((r < tree_top(k)) ? 1 : 0);
  endfunction

  // Tree node weights: every neighbour is a COPY partner.
  function automatic wvec_t tree_w(int unsigned deg);
    wvec_t w;
    w = '0;
    for (int unsigned q = 0; q < deg; q++) w[q] = 8'(2 * COPY_JB);
    return w;
  endfunction

  function automatic int tree_h(int unsigned deg);
    return -COPY_JB * int'(deg);
  endfunction

  function automatic int unsigned tree_need(int unsigned k, int unsigned r, int unsigned n, int unsigned rr);
    int unsigned d;
    d = tree_deg(k, r, n);
    return rand_need(tree_w(d), tree_h(d), d, rr);
  endfunction

  // ---------------- colouring ----------------
  // FA pin p has colour p; AND pins A, B, C have colours 0, 1, 2; tree
  // layers 1, 3, ... colour 3 and layers 2, 4, ... colour 4. Every COPY
  // link then joins two different colours (checked in pmult_net).
  function automatic int unsigned tree_color(int unsigned r);
    return (r % 2 == 1) ? 3 : 4;
  endfunction

  // Random bits one tree uses in colour c.
  function automatic int unsigned tree_bits(int unsigned k, int unsigned c, int unsigned rr);
    int unsigned b;
    b = 0;
    for (int unsigned r = 1; r <= tree_top(k); r++)
      if (tree_color(r) == c)
        for (int unsigned n = 0; n < tree_layer_size(k, r); n++) b += tree_need(k, r, n, rr);
    return b;
  endfunction

  // Offset of tree node (r, n) inside its tree's share of its colour.
  function automatic int unsigned tree_node_off(int unsigned k, int unsigned r, int unsigned n, int unsigned rr);
    int unsigned b;
    b = 0;
    for (int unsigned q = 1; q < r; q++)
      if (tree_color(q) == tree_color(r))
        for (int unsigned m = 0; m < tree_layer_size(k, q); m++) b += tree_need(k, q, m, rr);
    for (int unsigned m = 0; m < n; m++) b += tree_need(k, r, m, rr);
    return b;
  endfunction

  // Pool layout of colour c: [FA gates][AND gates][2k trees].
  function automatic int unsigned fa_region(int unsigned k, int unsigned c, int unsigned rr);
    return k * (k - 1) * gate_need(1'b1, c, 1'b1, rr);
  endfunction

  function automatic int unsigned and_region(int unsigned k, int unsigned c, int unsigned rr);
    return (c < 3) ? k * k * gate_need(1'b0, c, 1'b1, rr) : 0;
  endfunction

  function automatic int unsigned pool_bits(int unsigned k, int unsigned c, int unsigned rr);
    return fa_region(k, c, rr) + and_region(k, c, rr) + 2 * k * tree_bits(k, c, rr);
  endfunction

  function automatic int unsigned n_lfsr(int unsigned nbits);
    return (nbits + LFSR_W - 1) / LFSR_W;
  endfunction

  // ---------------- random draw without replacement ----------------
  function automatic int unsigned gcd(int unsigned a, int unsigned b);
    int unsigned t;
    while (b != 0) begin
      t = a % b;
      a = b;
      b = t;
    end
    return a;
  endfunction

  // Stride of the permutation p -> (p*stride + off) mod n that assigns pool
  // slot p to LFSR bit; coprime with n so every bit is used at most once.
  function automatic int unsigned perm_stride(int unsigned n);
    int unsigned s;
    s = (n * 618) / 1000 + 1;
    while (gcd(s, n) != 1) s++;
    return s;
  endfunction

  // Distinct non-zero 46-bit seed for LFSR number idx of colour c.
  function automatic logic [LFSR_W-1:0] lfsr_seed(int unsigned c, int unsigned idx, logic [63:0] salt);
    logic [63:0] z;
    z = salt + 64'h9E3779B97F4A7C15 * (64'(c) * 64'd1000 + 64'(idx) + 64'd1);
    z = (z ^ (z >> 30)) * 64'hBF58476D1CE4E5B9;
    z = (z ^ (z >> 27)) * 64'h94D049BB133111EB;
    z = z ^ (z >> 31);
    return (z[LFSR_W-1:0] == '0) ? {{(LFSR_W-1){1'b0}}, 1'b1} : z[LFSR_W-1:0];
  endfunction

endpackage
