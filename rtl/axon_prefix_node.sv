// axon_prefix_node -- one carry-merging node of the hybrid prefix/Ling tree,
// written as the single inverting standard cell it maps to.
//
// A node merges an upper span [i:k] (input hi_i) with a lower span [k-1:j]
// (input lo_i) through the group propagate pg_i that its kind calls for:
//   standard node        G[i:j] = G[i:k] | P[i:k]   & G[k-1:j]
//   Ling node            H[i:j] = H[i:k] | P[i-1:k-1]& H[k-1:j]
//   Ling -> standard     G[i:j] = G[i:k] | P[i:k-1]  & H[k-1:j]
//   standard -> Ling     H[i:j] = H[i:k] | P[i-1:k]  & G[k-1:j]
// so the gate is an AND-OR in every case; the node kind only decides which
// propagate span the enclosing network wires to pg_i. When a standard node
// takes a Ling value from above, it first recovers G[i:k] = t_i & H[i:k],
// which turns the AND-OR into an AND-OR-AND-OR (ti_i is used only then).
//
// Polarity: with IN_NEG = 0 the inputs are positive and the cell is an
// AOI21/AOI22 giving a negative output; with IN_NEG = 1 all inputs are
// negative and the cell is an OAI21/OAI22 giving a positive output.
// Combinational.
module axon_prefix_node #(
  parameter bit OUT_LING = 1'b0,  // output is a Ling pseudo-carry H
  parameter bit HI_LING  = 1'b0,  // upper input is a Ling pseudo-carry H
  parameter bit IN_NEG   = 1'b0   // inputs arrive inverted (output is then positive)
) (
  input  logic hi_i,   // G or H of the upper span
  input  logic lo_i,   // G or H of the lower span
  input  logic pg_i,   // group propagate chosen for this node kind
  input  logic ti_i,   // bit OR-propagate t_i (only for an H -> G upper input)
  output logic y_o     // merged G or H, polarity opposite to the inputs
);

  localparam bit CONV_HI = !OUT_LING && HI_LING;

  // A Ling node can only extend a Ling (or single-bit) upper span: H cannot be
  // rebuilt from G.
  if (OUT_LING && !HI_LING) begin : g_bad_kind
    $error("axon_prefix_node: a Ling node needs a Ling upper input");
  end

  if (!IN_NEG && CONV_HI) begin : g_aoi22
    assign y_o = ~((ti_i & hi_i) | (pg_i & lo_i));
  end else if (!IN_NEG) begin : g_aoi21
    assign y_o = ~(hi_i | (pg_i & lo_i));
  end else if (CONV_HI) begin : g_oai22
    assign y_o = ~((ti_i | hi_i) & (pg_i | lo_i));
  end else begin : g_oai21
    assign y_o = ~(hi_i & (pg_i | lo_i));
  end

endmodule
