// axon_adder -- WIDTH-bit hybrid parallel-prefix/Ling adder, sum = a + b.
//
// Three stages, all combinational:
//   axon_bit_pregen      bit generate g, XOR-propagate p, OR-propagate t
//   axon_prefix_network  minimum-depth prefix tree whose critical path uses
//                        Ling nodes (pseudo-carries H) and whose other nodes
//                        are standard (G), with a demand-driven propagate
//                        network and alternating-polarity inverting cells
//   axon_sum_stage       carries (G, or t & H for Ling columns) and S = p ^ c
// The adder has no carry input (c0 = 0) and returns the carry out separately.
// LEVELS sets the depth of the carry tree counting the bit level: the default
// minimum gives a Sklansky tree (6 levels for 32 bits: 5 of prefix nodes);
// each extra level trades one more gate delay for fewer nodes and less
// fan-out. The 16/23/31/32-bit adders at 5 to 7 levels are all expressible.
// XOR_P selects whether the tree carries both propagate kinds, as the
// architecture describes (the default), or only the OR kind. INV_FLIP
// chooses where the polarity inverters go; the sum stage is told which
// columns arrive inverted.
module axon_adder
  import axon_pkg::*;
#(
  parameter int unsigned WIDTH  = 32,
  // logic levels counting the bit level; default: the minimum, which is 6
  // for 32 bits
  parameter int unsigned LEVELS = base_depth(WIDTH) + 1,
  // 1: plain standard nodes use XOR-propagate spans and Ling-related nodes
  // OR-propagate spans (two propagate networks); 0: one OR network for all
  parameter bit          XOR_P  = 1'b1,
  // inverter placement in the tree: bit (l-1)*MAXW + i inverts the polarity
  // of node (l,i); all zeros (default) is the plain alternating-level rule
  parameter node_map_t   INV_FLIP = '0
) (
  input  logic [WIDTH-1:0] a_i,
  input  logic [WIDTH-1:0] b_i,
  output logic [WIDTH-1:0] sum_o,
  output logic             cout_o
);

  localparam int X = int'(LEVELS) - 1 - base_depth(WIDTH);   // levels beyond the minimum

  logic [WIDTH-1:0] g, p, t, grp;

  axon_bit_pregen #(.WIDTH(WIDTH)) u_pregen (
    .a_i (a_i),
    .b_i (b_i),
    .g_o (g),
    .p_o (p),
    .t_o (t)
  );

  axon_prefix_network #(.WIDTH(WIDTH), .LEVELS(LEVELS), .XOR_P(XOR_P), .INV_FLIP(INV_FLIP)) u_tree (
    .g_i   (g),
    .p_i   (p),
    .t_i   (t),
    .grp_o (grp)
  );

  axon_sum_stage #(
    .WIDTH    (WIDTH),
    .LEVELS   (LEVELS),
    .GRP_LING (final_ling_mask(WIDTH, X)),
    .GRP_NEG  (final_neg_mask(WIDTH, X, INV_FLIP))
  ) u_sum (
    .p_i    (p),
    .t_i    (t),
    .grp_i  (grp),
    .sum_o  (sum_o),
    .cout_o (cout_o)
  );

endmodule
