// axon_bit_pregen -- bit-level pre-processing of the hybrid prefix/Ling adder.
//
// For every bit position i it forms the three signals the rest of the adder
// is built from:
//   g_o[i] = a_i & b_i   generate, shared by standard and Ling nodes
//   p_o[i] = a_i ^ b_i   half-sum propagate, used by the sum bits
//   t_o[i] = a_i | b_i   OR ("transmit") propagate, used by the Ling recursion
//                        and by every group-propagate in the tree
// Generating both propagate kinds is the small area price of the Ling nodes.
// These are the "level 1" signals of the tree and are produced in positive
// polarity. Purely combinational, no clock.
module axon_bit_pregen #(
  parameter int unsigned WIDTH = 32
) (
  input  logic [WIDTH-1:0] a_i,
  input  logic [WIDTH-1:0] b_i,
  output logic [WIDTH-1:0] g_o,
  output logic [WIDTH-1:0] p_o,
  output logic [WIDTH-1:0] t_o
);

  always_comb begin
    g_o = a_i & b_i;
    p_o = a_i ^ b_i;
    t_o = a_i | b_i;
  end

endmodule
