// axon_p_node -- one node of the demand-driven group-propagate network.
//
// It forms P[a:b] = P[a:c] & P[c-1:b] from the propagates of two adjacent
// spans. Like the carry nodes it is an inverting cell: a NAND2 when its
// inputs are positive (IN_NEG = 0, output negative) and a NOR2 of inverted
// inputs when they are negative (IN_NEG = 1, output positive).
// Combinational.
module axon_p_node #(
  parameter bit IN_NEG = 1'b0
) (
  input  logic hi_i,
  input  logic lo_i,
  output logic y_o
);

  if (!IN_NEG) begin : g_nand
    assign y_o = ~(hi_i & lo_i);
  end else begin : g_nor
    assign y_o = ~(hi_i | lo_i);
  end

endmodule
