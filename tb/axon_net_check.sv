// axon_net_check -- testbench helper: one prefix network of WIDTH bits and
// LEVELS logic levels, fed from the low bits of shared 64-bit operands, with
// a count of the output columns that differ from the reference group signals
// (H[i:0] for Ling columns, G[i:0] otherwise, inverted where the tree leaves
// them inverted). XOR_P and INV_FLIP are passed through to the tree.
module axon_net_check
  import axon_pkg::*;
  import axon_ref_pkg::*;
#(
  parameter int unsigned WIDTH  = 8,
  parameter int unsigned LEVELS = base_depth(WIDTH) + 1,
  parameter bit          XOR_P  = 1'b1,
  parameter node_map_t   INV_FLIP = '0
) (
  input  vec_t a,
  input  vec_t b,
  output int   mism
);
  localparam int X = int'(LEVELS) - 1 - base_depth(WIDTH);
  localparam col_map_t LM = final_ling_mask(WIDTH, X);
  localparam col_map_t NM = final_neg_mask(WIDTH, X, INV_FLIP);

  logic [WIDTH-1:0] grp;

  axon_prefix_network #(.WIDTH(WIDTH), .LEVELS(LEVELS), .XOR_P(XOR_P), .INV_FLIP(INV_FLIP)) dut (
    .g_i   (a[WIDTH-1:0] & b[WIDTH-1:0]),
    .p_i   (a[WIDTH-1:0] ^ b[WIDTH-1:0]),
    .t_i   (a[WIDTH-1:0] | b[WIDTH-1:0]),
    .grp_o (grp)
  );

  always_comb begin
    mism = 0;
    for (int i = 0; i < WIDTH; i++)
      if (grp[i] !== ((LM[i] ? ref_grp_h(a, b, i, 0) : ref_grp_g(a, b, i, 0)) ^ NM[i])) mism++;
  end

  initial $display("tree %0d bits, %0d levels, XOR_P %0d, %s placement: %0d prefix nodes, %0d Ling, %0d conversion, %0d P nodes (OR) + %0d (XOR), %0d inverters",
                   WIDTH, LEVELS, XOR_P, (INV_FLIP == '0) ? "level-rule" : "flipped", count_nodes(WIDTH, X), count_ling(WIDTH, X), count_conv(WIDTH, X),
                   count_pnodes(WIDTH, X, XOR_P, 1'b0), count_pnodes(WIDTH, X, XOR_P, 1'b1), count_inv(WIDTH, X, INV_FLIP));
endmodule
