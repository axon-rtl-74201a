// axon_sum_stage -- carries and sum bits from the prefix tree's outputs.
//
// Column i of the tree delivers the prefix of bits [i:0], either as a group
// generate G[i:0] (a standard node or the bare bit) or as a Ling pseudo-carry
// H[i:0] (a Ling node), and in either polarity. The carry into bit i+1 is
//   c[i+1] = G[i:0]            for a standard column
//   c[i+1] = t_i & H[i:0]      for a Ling column (G = t & H)
// and the sums are S_i = p_i ^ c_i with c_0 = 0; the carry out is c[WIDTH].
// Which columns are Ling and which are inverted is given by GRP_LING and
// GRP_NEG; their defaults are computed for WIDTH and LEVELS the same way the
// prefix network computes them (LEVELS serves only that). Combinational.
module axon_sum_stage
  import axon_pkg::*;
#(
  parameter int unsigned WIDTH    = 32,
  parameter int unsigned LEVELS   = base_depth(WIDTH) + 1,
  parameter col_map_t    GRP_LING = final_ling_mask(WIDTH, int'(LEVELS) - 1 - base_depth(WIDTH)),
  parameter col_map_t    GRP_NEG  = final_neg_mask(WIDTH, int'(LEVELS) - 1 - base_depth(WIDTH))
) (
  input  logic [WIDTH-1:0] p_i,    // bit XOR-propagates
  input  logic [WIDTH-1:0] t_i,    // bit OR-propagates
  input  logic [WIDTH-1:0] grp_i,  // prefix [i:0] of every column, G or H
  output logic [WIDTH-1:0] sum_o,
  output logic             cout_o
);

  logic [WIDTH:0] c;   // c[i]: carry into bit i

  assign c[0] = 1'b0;

  for (genvar i = 0; i < WIDTH; i++) begin : g_col
    logic pos;   // the column's prefix in positive polarity
    assign pos = GRP_NEG[i] ? ~grp_i[i] : grp_i[i];
    if (GRP_LING[i]) begin : g_ling
      assign c[i+1] = t_i[i] & pos;
    end else begin : g_std
      assign c[i+1] = pos;
    end
  end

  assign sum_o  = p_i ^ c[WIDTH-1:0];
  assign cout_o = c[WIDTH];

endmodule
