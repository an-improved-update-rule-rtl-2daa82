// copy_tree: COPY-gate hierarchy that fans one factor bit out to K AND gates.
//
// In the sparse multiplier every AND gate has its own P-bit for each factor
// input. These K P-bits are layer 0 of a tree; layer r has
// l_r = ceil(l_{r-1}/(M-1)) nodes, up to a single top node, which is the
// factor bit read out. Node n of layer r is joined by COPY gates to nodes
// (M-1)n .. (M-1)n+M-2 of layer r-1 and to node n/(M-1) of layer r+1, so no
// P-bit has more than M = 5 neighbours. Each COPY link has binary weight 2
// and adds -1 to both biases, so a node's directivity is
// 2*(neighbours at 1) - degree: it follows the majority of its neighbours,
// at random on a tie, and with the biased RNG when the margin is one.
// (The layer formula and the top-node readout follow the design; the exact
// child grouping is this implementation's.)
//
// Odd layers are clocked by clk_odd, even layers by clk_even (two colours of
// the multiplier). leaf_s are the AND-pin states; leaf_up[i] is the state of
// the layer-1 node leaf i is copied from, which the AND pin uses as its COPY
// partner. rbits_odd / rbits_even carry the random bits of odd / even layer
// nodes in node order.
module copy_tree
  import pbit_pkg::*;
#(
  parameter int unsigned K = 16,
  parameter int unsigned R = 4,
  localparam int unsigned NBO = tree_bits(K, 3, R),
  localparam int unsigned NBE = tree_bits(K, 4, R),
  localparam int unsigned WO  = (NBO == 0) ? 1 : NBO,
  localparam int unsigned WE  = (NBE == 0) ? 1 : NBE
) (
  input  logic          clk_odd,
  input  logic          clk_even,
  input  logic          init,
  input  logic [K-1:0]  leaf_s,
  output logic [K-1:0]  leaf_up,
  input  logic [WO-1:0] rbits_odd,
  input  logic [WE-1:0] rbits_even,
  output logic          top_s
);
  localparam int unsigned TOP = tree_top(K);

  function automatic int unsigned base_of(int unsigned r);
    int unsigned b;
    b = 0;
    for (int unsigned q = 1; q < r; q++) b += tree_layer_size(K, q);
    return b;
  endfunction

  localparam int unsigned NT = base_of(TOP + 1);

  logic [NT-1:0] node;

  for (genvar r = 1; r <= TOP; r++) begin : g_layer
    for (genvar n = 0; n < tree_layer_size(K, r); n++) begin : g_node
      localparam int unsigned NCH = tree_children(K, r, n);
      localparam int unsigned DEG = tree_deg(K, r, n);
      localparam int unsigned NED = tree_need(K, r, n, R);
      localparam int unsigned OFF = tree_node_off(K, r, n, R);
      logic [DEG-1:0] nb;
      logic [NED-1:0] rb;
      for (genvar c = 0; c < NCH; c++) begin : g_ch
        if (r == 1) begin : g_leaf
          assign nb[c] = leaf_s[(M-1)*n + c];
          assign leaf_up[(M-1)*n + c] = node[base_of(r) + n];
        end else begin : g_inner
          assign nb[c] = node[base_of(r-1) + (M-1)*n + c];
        end
      end
      if (r < TOP) begin : g_par
        assign nb[DEG-1] = node[base_of(r+1) + n/(M-1)];
      end
      if (r % 2 == 1) begin : g_ro
        assign rb = rbits_odd[OFF +: NED];
      end else begin : g_re
        assign rb = rbits_even[OFF +: NED];
      end
      pbit #(.NIN(DEG), .J(tree_w(DEG)), .H(tree_h(DEG)), .R(R)) u_pbit (
        .clk((r % 2 == 1) ? clk_odd : clk_even), .nbr(nb), .clamp_en(1'b0), .clamp_val(1'b0),
        .init(init), .rbits(rb), .s(node[base_of(r) + n])
      );
    end
  end

  assign top_s = node[NT-1];
endmodule
