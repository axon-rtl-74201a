// axon_prefix_network -- the hybrid parallel-prefix/Ling carry tree with its
// demand-driven propagate network and level-polarity inverter insertion.
//
// Inputs are the positive bit generates g_i, XOR-propagates p_i and
// OR-propagates t_i. Output
// column i, grp_o[i], holds the prefix of bits [i:0]: a group generate G[i:0]
// or, where the column ends in a Ling node, the pseudo-carry H[i:0]; it is
// inverted where the producing level is odd (axon_pkg::final_ling_mask and
// final_neg_mask say which). The sum stage turns these into carries.
//
// LEVELS is the depth in logic levels counting the bit level, so the tree
// has LEVELS-1 levels of prefix nodes; the default is the minimum,
// ceil(log2 WIDTH) + 1 (6 for 32 bits), which gives a Sklansky tree. Deeper
// settings wrap the Sklansky core in Brent-Kung up- and down-sweep levels and
// need fewer nodes. The topology is this design's choice; the Ling-node
// placement, the node equations, the demand-driven propagate network and the
// level-polarity rule follow the AXON architecture.
//
// Structure (all decided at elaboration by axon_pkg):
//   * col[l][i] is column i's value after level l; col[0] = g_i. A column with
//     no node at level l passes its value on unchanged, so grp_o[0] is g_0
//     itself: the prefix of a one-bit range needs no gate.
//   * node (l,i) merges col[l-1][i] (upper span [i:k]) with col[l-1][k-1]
//     (lower span [k-1:j]) in an axon_prefix_node; its kind (standard or
//     Ling) comes from the coarse critical-path analysis, and its
//     group-propagate input is the span that kind needs (see axon_pkg).
//   * the propagate networks g_pk[K].pn[a][b] = t[a] & ... & t[b] (K = 0) and
//     p[a] & ... & p[b] (K = 1) exist only for the spans some node requests,
//     and for the sub-spans those are built from. With XOR_P = 1 plain
//     standard nodes (G out, G below) use the p network, as in the AXON
//     architecture's two propagate kinds; all other nodes use the t network,
//     which they need. With XOR_P = 0 the p network is empty.
//   * by default a gate at level l gives the polarity of level l and wants
//     inputs of the polarity of level l-1; any input of the other polarity
//     passes through an inverter at the gate. INV_FLIP inverts chosen nodes
//     against this rule, which moves inverters from some edges to others:
//     it is how one candidate of the inverter-placement search is written
//     down. The search itself is not part of the RTL. A bare bit above a
//     standard node counts as G (g_i = G[i:i]), above a Ling node as H.
// There is no clock: the whole tree is one combinational path.
module axon_prefix_network
  import axon_pkg::*;
#(
  parameter int unsigned WIDTH  = 32,
  // logic levels counting the bit level (the "L" of a w-bit, L-level adder);
  // the default is the minimum, ceil(log2 WIDTH) + 1
  parameter int unsigned LEVELS = base_depth(WIDTH) + 1,
  // 1: plain standard nodes take XOR-propagate spans, so the tree carries
  // both propagate kinds; 0: every node uses OR-propagate spans
  parameter bit          XOR_P  = 1'b1,
  // inverter placement: bit (l-1)*MAXW + i set inverts node (l,i) against
  // its level's polarity; all zeros is the plain level rule
  parameter node_map_t   INV_FLIP = '0
) (
  input  logic [WIDTH-1:0] g_i,
  input  logic [WIDTH-1:0] p_i,
  input  logic [WIDTH-1:0] t_i,
  output logic [WIDTH-1:0] grp_o
);

  localparam int        X     = int'(LEVELS) - 1 - base_depth(WIDTH);  // levels beyond the minimum
  localparam int        D     = depth(WIDTH, X);
  localparam node_map_t LING  = ling_map(WIDTH, X);
  localparam span_map_t PNEED_OR  = pneed_map(WIDTH, X, LING, XOR_P, 1'b0);
  localparam span_map_t PNEED_XOR = pneed_map(WIDTH, X, LING, XOR_P, 1'b1);
  localparam span_lvl_t PLVL  = plvl_map(WIDTH);

  if (!topo_ok(WIDTH, X)) begin : g_bad_size
    $error("axon_prefix_network: no tree for WIDTH %0d with %0d levels (WIDTH 2..%0d, LEVELS %0d..%0d)",
           WIDTH, LEVELS, MAXW, base_depth(WIDTH) + 1, MAXD + 1);
  end

  // ------------------------------------------------ group-propagate network
  // g_pk[K].pn[a][b] is P[a:b] in the polarity of its own level, built from
  // the OR-propagates t (K = 0) or the XOR-propagates p (K = 1); spans nobody
  // asks for are tied low and left unused.
  for (genvar K = 0; K < 2; K++) begin : g_pk
    localparam span_map_t NEED = (K == 1) ? PNEED_XOR : PNEED_OR;
    logic [WIDTH-1:0] pn [WIDTH];
    for (genvar a = 0; a < WIDTH; a++) begin : g_pa
      for (genvar b = 0; b < WIDTH; b++) begin : g_pb
        if (a == b) begin : g_bit
          assign pn[a][b] = (K == 1) ? p_i[a] : t_i[a];
        end else if (a > b && NEED[a*MAXW+b]) begin : g_pnode
          localparam int C   = psplit(a, b);
          localparam int LV  = int'(PLVL[(a*MAXW+b)*4 +: 4]);
          localparam int LH  = int'(PLVL[(a*MAXW+C)*4 +: 4]);
          localparam int LL  = int'(PLVL[((C-1)*MAXW+b)*4 +: 4]);
          localparam bit NEG = lvl_neg(LV - 1);
          logic hi, lo;
          assign hi = (lvl_neg(LH) != NEG) ? ~pn[a][C]   : pn[a][C];
          assign lo = (lvl_neg(LL) != NEG) ? ~pn[C-1][b] : pn[C-1][b];
          axon_p_node #(.IN_NEG(NEG)) u_pnode (.hi_i(hi), .lo_i(lo), .y_o(pn[a][b]));
        end else begin : g_unused
          assign pn[a][b] = 1'b0;
        end
      end
    end
  end

  // ------------------------------------------------------------ carry tree
  logic [WIDTH-1:0] col [D+1];

  assign col[0] = g_i;

  for (genvar l = 1; l <= D; l++) begin : g_lvl
    for (genvar i = 0; i < WIDTH; i++) begin : g_col
      if (has_node(WIDTH, X, l, i)) begin : g_node
        localparam int M    = lo_col(WIDTH, X, l, i);
        localparam int HS   = src_lvl(WIDTH, X, l - 1, i);  // level of the upper input
        localparam bit OUTL = LING[(l-1)*MAXW+i];
        localparam bit HIL  = is_ling(WIDTH, X, LING, l - 1, i);
        localparam int PA   = pspan_a(LING, l, i);
        localparam int PB   = pspan_b(WIDTH, X, LING, l, i);
        localparam int PK   = (XOR_P && pspan_xor(WIDTH, X, LING, l, i)) ? 1 : 0;
        localparam bit NEG  = !node_neg(INV_FLIP, l, i);  // polarity the gate wants
        localparam bit HN   = col_neg(WIDTH, X, INV_FLIP, l - 1, i);
        localparam bit LN   = col_neg(WIDTH, X, INV_FLIP, l - 1, M);
        logic hi, lo, pg, ti;
        assign hi = (HN != NEG) ? ~col[l-1][i] : col[l-1][i];
        assign lo = (LN != NEG) ? ~col[l-1][M] : col[l-1][M];
        assign ti = NEG ? ~t_i[i] : t_i[i];
        if (PA < PB) begin : g_pg_one
          assign pg = ~NEG;   // empty span: constant 1 in the wanted polarity
        end else begin : g_pg_net
          localparam int PL = int'(PLVL[(PA*MAXW+PB)*4 +: 4]);
          assign pg = (lvl_neg(PL) != NEG) ? ~g_pk[PK].pn[PA][PB] : g_pk[PK].pn[PA][PB];
        end
        axon_prefix_node #(
          .OUT_LING (OUTL),
          .HI_LING  (HIL || (OUTL && HS == 0)),
          .IN_NEG   (NEG)
        ) u_node (
          .hi_i (hi),
          .lo_i (lo),
          .pg_i (pg),
          .ti_i (ti),
          .y_o  (col[l][i])
        );
      end else begin : g_pass
        assign col[l][i] = col[l-1][i];
      end
    end
  end

  assign grp_o = col[D];

endmodule
