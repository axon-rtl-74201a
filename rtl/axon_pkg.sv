// axon_pkg -- shared constants and elaboration-time functions of the hybrid
// parallel-prefix/Ling adder.
//
// Everything structural about the adder is decided here, before any gate is
// built, by constant functions that the modules evaluate into localparams:
//
//   * the prefix topology, of depth D0 + X where D0 = ceil(log2 WIDTH) and X
//     is the number of levels allowed beyond the minimum. The first X levels
//     pair columns up as in a Brent-Kung up-sweep, so that every column whose
//     low X bits are all ones ("group column") holds the span of its 2^X-bit
//     block; levels X+1..D0 run a Sklansky divide-and-conquer tree on the
//     group columns only; the last X levels fill in the other columns from
//     the group column below them (down-sweep). X = 0 is a pure Sklansky
//     tree. Node (l,i) merges its column's own span [i:k] with the span
//     [k-1:j] held by column k-1. This family is this design's choice: the
//     AXON flow starts from a minimal-node tree found by a search that is not
//     reproduced here; the depth knob mirrors its depth constraint.
//   * the node kinds: a coarse delay model d = D_INT + R_DR * C_load
//     (C_load = fan-out * C_IN) gives every node an arrival time; nodes with
//     zero slack are the critical path. Critical nodes above the last level
//     become Ling nodes (pseudo-carry H) together with the nodes above them in
//     their column, since a Ling node needs a Ling value from above; critical
//     last-level nodes become Ling only if their upper input already is one.
//     All other nodes stay standard prefix nodes (G).
//   * the demand-driven propagate network: only the group-propagate spans that
//     some node really uses are requested; each requested span [a:b] is split
//     at c = a with its bits below msb(a^b) cleared into [a:c] and [c-1:b],
//     which are requested in turn, so spans are shared between users. Plain
//     standard nodes may take their spans from a second network built from
//     the XOR propagates p (both kinds, as the AXON architecture has them);
//     every other node needs the OR propagates t.
//   * polarity: a level-l gate is an inverting AOI/OAI (or NAND/NOR) cell, so
//     its output is negative when l is odd and positive when l is even (the
//     bit-level signals, level 0, are positive). Counting the bit level as
//     level 1 instead, as the paper's insertion algorithm does, this is its
//     rule: odd levels positive, even levels negative. An edge between two
//     signals of the same polarity needs an inverter.
//
// All functions take the adder width w and the number x of levels beyond the
// minimum as arguments; widths 2..MAXW and depths up to MAXD are supported.
// The maps are packed bit vectors so that modules can hold them in
// localparams.
package axon_pkg;

  // Widest adder the tables below describe: 32 bits covers every width the
  // architecture was evaluated at (16, 23, 31, 32) and keeps the packed
  // span tables small.
  localparam int MAXW = 32;
  localparam int MAXD = 9;    // ceil(log2(MAXW)) + 4 extra levels at most

  // Coarse delay model, in arbitrary units: d = D_INT + R_DR * C_IN * fanout.
  localparam int D_INT = 1;
  localparam int R_DR  = 1;
  localparam int C_IN  = 1;

  typedef enum logic {
    NODE_STD  = 1'b0,   // standard prefix node, output is a group generate G
    NODE_LING = 1'b1    // Ling node, output is a group pseudo-carry H
  } node_kind_e;

  typedef logic [MAXD*MAXW-1:0] node_map_t;   // bit (l-1)*MAXW + i: node (l,i)
  typedef logic [MAXW*MAXW-1:0] span_map_t;   // bit a*MAXW + b: span [a:b]
  typedef logic [MAXW*MAXW*4-1:0] span_lvl_t; // 4 bits per span [a:b]
  typedef logic [MAXW-1:0] col_map_t;         // one bit per column

  // minimum prefix depth for a w-bit adder
  function automatic int base_depth(int w);
    return (w <= 1) ? 0 : $clog2(w);
  endfunction

  // prefix depth with x levels beyond the minimum
  function automatic int depth(int w, int x);
    return base_depth(w) + x;
  endfunction

  // ---------------------------------------------------------------- topology
  // column whose value is the lower span of node (l,i); -1 if there is no node
  function automatic int lo_col(int w, int x, int l, int i);
    int d0, q, r;
    d0 = base_depth(w);
    r  = -1;
    if (i >= 0 && i < w) begin
      if (l >= 1 && l <= x) begin
        // up-sweep: pair blocks of 2^(l-1) columns
        if ((i % (1 << l)) == (1 << l) - 1) r = i - (1 << (l - 1));
      end else if (l > x && l <= d0) begin
        // Sklansky tree over the group columns
        if ((i % (1 << x)) == (1 << x) - 1 && ((i >> (l - 1)) & 1) == 1)
          r = ((i >> (l - 1)) << (l - 1)) - 1;
      end else if (l > d0 && l <= d0 + x) begin
        // down-sweep: finish the columns inside each group
        q = x - (l - d0);
        if ((i % (1 << (q + 1))) == (1 << q) - 1 && i >= (1 << (q + 1))) r = i - (1 << q);
      end
    end
    return r;
  endfunction

  function automatic bit has_node(int w, int x, int l, int i);
    return lo_col(w, x, l, i) >= 0;
  endfunction

  // low end of the span held by column i after level l
  function automatic int span_lo(int w, int x, int l, int i);
    int lo [MAXW];
    int nx [MAXW];
    for (int c = 0; c < MAXW; c++) lo[c] = c;
    for (int y = 1; y <= l; y++) begin
      for (int c = 0; c < w; c++) nx[c] = has_node(w, x, y, c) ? lo[lo_col(w, x, y, c)] : lo[c];
      for (int c = 0; c < w; c++) lo[c] = nx[c];
    end
    return lo[i];
  endfunction

  // lowest bit of the upper (same-column) span merged by node (l,i)
  function automatic int hi_low(int w, int x, int l, int i);
    return span_lo(w, x, l - 1, i);
  endfunction

  // 1 if every node joins two adjacent spans and every column ends at bit 0
  function automatic bit topo_ok(int w, int x);
    bit ok;
    ok = (w >= 2) && (w <= MAXW) && (x >= 0) && (depth(w, x) <= MAXD);
    if (ok)
      for (int l = 1; l <= depth(w, x); l++)
        for (int i = 0; i < w; i++)
          if (has_node(w, x, l, i) && lo_col(w, x, l, i) != hi_low(w, x, l, i) - 1) ok = 1'b0;
    if (ok)
      for (int i = 0; i < w; i++)
        if (span_lo(w, x, depth(w, x), i) != 0) ok = 1'b0;
    return ok;
  endfunction

  // level of the node that produced column i's value after level l (0: the bit itself)
  function automatic int src_lvl(int w, int x, int l, int i);
    int s;
    s = 0;
    for (int y = 1; y <= l; y++)
      if (has_node(w, x, y, i)) s = y;
    return s;
  endfunction

  // number of gate inputs driven by the value produced at level l in column i
  function automatic int fanout(int w, int x, int l, int i);
    int f;
    f = 0;
    for (int y = l + 1; y <= depth(w, x); y++) begin
      if (has_node(w, x, y, i) && src_lvl(w, x, y - 1, i) == l) f++;
      for (int c = 0; c < w; c++)
        if (lo_col(w, x, y, c) == i && src_lvl(w, x, y - 1, i) == l) f++;
    end
    if (src_lvl(w, x, depth(w, x), i) == l) f++;   // the sum stage
    return f;
  endfunction

  // -------------------------------------------------------- Ling node choice
  function automatic node_map_t ling_map(int w, int x);
    int arr [(MAXD+1)*MAXW];
    int req [(MAXD+1)*MAXW];
    int dly [(MAXD+1)*MAXW];
    int tmax, hs, ls, m, r;
    node_map_t lm;
    lm = '0;
    for (int n = 0; n < (MAXD+1)*MAXW; n++) begin
      arr[n] = 0;
      dly[n] = 0;
      req[n] = 1 << 30;
    end
    // forward pass: arrival times
    for (int l = 1; l <= depth(w, x); l++)
      for (int i = 0; i < w; i++)
        if (has_node(w, x, l, i)) begin
          hs = src_lvl(w, x, l - 1, i);
          m  = lo_col(w, x, l, i);
          ls = src_lvl(w, x, l - 1, m);
          dly[l*MAXW+i] = D_INT + R_DR * C_IN * fanout(w, x, l, i);
          arr[l*MAXW+i] = ((arr[hs*MAXW+i] > arr[ls*MAXW+m]) ? arr[hs*MAXW+i] : arr[ls*MAXW+m])
                          + dly[l*MAXW+i];
        end
    tmax = 0;
    for (int i = 0; i < w; i++) begin
      hs = src_lvl(w, x, depth(w, x), i);
      if (arr[hs*MAXW+i] > tmax) tmax = arr[hs*MAXW+i];
    end
    // backward pass: required times
    for (int i = 0; i < w; i++) req[src_lvl(w, x, depth(w, x), i)*MAXW+i] = tmax;
    for (int l = depth(w, x); l >= 1; l--)
      for (int i = 0; i < w; i++)
        if (has_node(w, x, l, i)) begin
          r  = req[l*MAXW+i] - dly[l*MAXW+i];
          hs = src_lvl(w, x, l - 1, i);
          m  = lo_col(w, x, l, i);
          ls = src_lvl(w, x, l - 1, m);
          if (r < req[hs*MAXW+i]) req[hs*MAXW+i] = r;
          if (r < req[ls*MAXW+m]) req[ls*MAXW+m] = r;
        end
    // A zero-slack node below the last level becomes a Ling node, and so do
    // the nodes above it in its column, because a Ling node needs a Ling
    // value from above. A zero-slack node of the last level becomes Ling only
    // if its upper input already is one (or a bare bit); otherwise it stays a
    // standard node that converts the Ling value it receives.
    for (int l = 1; l < depth(w, x); l++)
      for (int i = 0; i < w; i++)
        if (has_node(w, x, l, i) && arr[l*MAXW+i] == req[l*MAXW+i])
          for (int y = 1; y <= l; y++)
            if (has_node(w, x, y, i)) lm[(y-1)*MAXW+i] = 1'b1;
    for (int i = 0; i < w; i++)
      if (has_node(w, x, depth(w, x), i) && arr[depth(w, x)*MAXW+i] == req[depth(w, x)*MAXW+i]) begin
        hs = src_lvl(w, x, depth(w, x) - 1, i);
        if (hs == 0 || lm[(hs-1)*MAXW+i]) lm[(depth(w, x)-1)*MAXW+i] = 1'b1;
      end
    return lm;
  endfunction

  // is the value of column i after level l a Ling pseudo-carry?
  function automatic bit is_ling(int w, int x, node_map_t lm, int l, int i);
    int s;
    s = src_lvl(w, x, l, i);
    return (s > 0) && lm[(s-1)*MAXW+i];
  endfunction

  function automatic col_map_t final_ling_mask(int w, int x);
    col_map_t m;
    node_map_t lm;
    m  = '0;
    lm = ling_map(w, x);
    for (int i = 0; i < w; i++) m[i] = is_ling(w, x, lm, depth(w, x), i);
    return m;
  endfunction

  // polarity of a level-l signal: 1 = negative (inverted)
  function automatic bit lvl_neg(int l);
    return (l & 1) == 1;
  endfunction

  // Polarity of node (l,i)'s output: its level's polarity, inverted where
  // the flip map has a one. A flip map describes one inverter placement: a
  // flipped node takes inputs of the other polarity and gives the other
  // output, which moves inverters from some edges to others.
  function automatic bit node_neg(node_map_t flip, int l, int i);
    return lvl_neg(l) ^ flip[(l-1)*MAXW+i];
  endfunction

  // polarity of column i's value after level l (the bit level is positive)
  function automatic bit col_neg(int w, int x, node_map_t flip, int l, int i);
    int s;
    s = src_lvl(w, x, l, i);
    return (s > 0) && node_neg(flip, s, i);
  endfunction

  function automatic col_map_t final_neg_mask(int w, int x, node_map_t flip = '0);
    col_map_t m;
    m = '0;
    for (int i = 0; i < w; i++) m[i] = col_neg(w, x, flip, depth(w, x), i);
    return m;
  endfunction

  // ---------------------------------------------- group-propagate spans
  // Span [pspan_a : pspan_b] of bit propagates needed by node (l,i); empty
  // (all ones) when pspan_a < pspan_b.
  //   G out, G below : P[i   : k]        (Eq. 3)
  //   G out, H below : P[i   : k-1]      (Ling to standard conversion)
  //   H out, H below : P[i-1 : k-1]      (Ling node)
  //   H out, G below : P[i-1 : k]        (standard to Ling conversion, Eq. 13)
  function automatic int pspan_a(node_map_t lm, int l, int i);
    return lm[(l-1)*MAXW+i] ? i - 1 : i;
  endfunction

  function automatic int pspan_b(int w, int x, node_map_t lm, int l, int i);
    return is_ling(w, x, lm, l - 1, lo_col(w, x, l, i)) ? hi_low(w, x, l, i) - 1 : hi_low(w, x, l, i);
  endfunction

  // Does node (l,i) take its propagate span from the XOR-propagates p instead
  // of the OR-propagates t? Only a plain standard node (G out, G below) may:
  // every other kind needs t, because its span either feeds a Ling node or
  // stands for the t_{k-1} factor of a pseudo-carry below it.
  function automatic bit pspan_xor(int w, int x, node_map_t lm, int l, int i);
    return !lm[(l-1)*MAXW+i] && !is_ling(w, x, lm, l - 1, lo_col(w, x, l, i));
  endfunction

  // split point c of a span [a:b], a > b: children [a:c] and [c-1:b]
  function automatic int psplit(int a, int b);
    int d, h;
    d = a ^ b;
    h = 0;
    for (int q = 0; q < 31; q++)
      if (((d >> q) & 1) == 1) h = q;
    return (a >> h) << h;
  endfunction

  // Spans of the propagate network of one kind: xr = 1 for the XOR network
  // (the spans of the nodes pspan_xor picks), xr = 0 for the OR network (all
  // other nodes). With xr_used = 0 every node uses the OR network.
  function automatic span_map_t pneed_map(int w, int x, node_map_t lm, bit xr_used, bit xr);
    span_map_t need;
    int a, b, c;
    need = '0;
    for (int l = 1; l <= depth(w, x); l++)
      for (int i = 0; i < w; i++)
        if (has_node(w, x, l, i) && ((xr_used && pspan_xor(w, x, lm, l, i)) == xr)) begin
          a = pspan_a(lm, l, i);
          b = pspan_b(w, x, lm, l, i);
          if (a >= b) need[a*MAXW+b] = 1'b1;
        end
    for (int len = w; len >= 2; len--)
      for (int bb = 0; bb + len <= w; bb++) begin
        a = bb + len - 1;
        if (need[a*MAXW+bb]) begin
          c = psplit(a, bb);
          need[a*MAXW+c]      = 1'b1;
          need[(c-1)*MAXW+bb] = 1'b1;
        end
      end
    for (int i = 0; i < w; i++) need[i*MAXW+i] = 1'b1;   // the bit propagates
    return need;
  endfunction

  // level of each span's P-node when the span is built by psplit (bits: 0)
  function automatic span_lvl_t plvl_map(int w);
    span_lvl_t t;
    int a, c, l1, l2;
    t = '0;
    for (int len = 2; len <= w; len++)
      for (int bb = 0; bb + len <= w; bb++) begin
        a  = bb + len - 1;
        c  = psplit(a, bb);
        l1 = int'(t[(a*MAXW+c)*4 +: 4]);
        l2 = int'(t[((c-1)*MAXW+bb)*4 +: 4]);
        t[(a*MAXW+bb)*4 +: 4] = 4'((l1 > l2 ? l1 : l2) + 1);
      end
    return t;
  endfunction

  // ----------------------------------------------------------- statistics
  function automatic int count_ling(int w, int x);
    node_map_t lm;
    int n;
    lm = ling_map(w, x);
    n  = 0;
    for (int l = 1; l <= depth(w, x); l++)
      for (int i = 0; i < w; i++)
        if (has_node(w, x, l, i) && lm[(l-1)*MAXW+i]) n++;
    return n;
  endfunction

  function automatic int count_nodes(int w, int x);
    int n;
    n = 0;
    for (int l = 1; l <= depth(w, x); l++)
      for (int i = 0; i < w; i++)
        if (has_node(w, x, l, i)) n++;
    return n;
  endfunction

  // conversion nodes (Fig. 6, right half): a standard node fed by a Ling
  // node, or a Ling node whose lower input is a standard node
  function automatic int count_conv(int w, int x);
    node_map_t lm;
    int n, m;
    bit out_l, hi_l, lo_l, lo_node;
    lm = ling_map(w, x);
    n  = 0;
    for (int l = 1; l <= depth(w, x); l++)
      for (int i = 0; i < w; i++)
        if (has_node(w, x, l, i)) begin
          m       = lo_col(w, x, l, i);
          out_l   = lm[(l-1)*MAXW+i];
          hi_l    = is_ling(w, x, lm, l - 1, i);
          lo_l    = is_ling(w, x, lm, l - 1, m);
          lo_node = src_lvl(w, x, l - 1, m) > 0;
          if ((!out_l && (hi_l || lo_l)) || (out_l && lo_node && !lo_l)) n++;
        end
    return n;
  endfunction

  // inverters on the inputs of the carry nodes (upper, lower, propagate and
  // t inputs) for a flip map; the propagate network's own inverters are not
  // counted, since they do not depend on the map
  function automatic int count_inv(int w, int x, node_map_t flip);
    node_map_t lm;
    span_lvl_t pl;
    int n, m, pa, pb;
    bit want, outl, hil;
    lm = ling_map(w, x);
    pl = plvl_map(w);
    n  = 0;
    for (int l = 1; l <= depth(w, x); l++)
      for (int i = 0; i < w; i++)
        if (has_node(w, x, l, i)) begin
          m    = lo_col(w, x, l, i);
          want = !node_neg(flip, l, i);
          outl = lm[(l-1)*MAXW+i];
          hil  = is_ling(w, x, lm, l - 1, i);
          pa   = pspan_a(lm, l, i);
          pb   = pspan_b(w, x, lm, l, i);
          if (col_neg(w, x, flip, l - 1, i) != want) n++;
          if (col_neg(w, x, flip, l - 1, m) != want) n++;
          if (pa >= pb && lvl_neg(int'(pl[(pa*MAXW+pb)*4 +: 4])) != want) n++;
          if (!outl && hil && want) n++;                // t_i of an H -> G node
        end
    return n;
  endfunction

  // carry nodes whose (non-empty) propagate span comes from the XOR network
  function automatic int count_xor(int w, int x);
    node_map_t lm;
    int n;
    lm = ling_map(w, x);
    n  = 0;
    for (int l = 1; l <= depth(w, x); l++)
      for (int i = 0; i < w; i++)
        if (has_node(w, x, l, i) && pspan_xor(w, x, lm, l, i) &&
            pspan_a(lm, l, i) >= pspan_b(w, x, lm, l, i)) n++;
    return n;
  endfunction

  // propagate nodes (NAND2/NOR2) of one network, as chosen by pneed_map
  function automatic int count_pnodes(int w, int x, bit xr_used, bit xr);
    span_map_t need;
    int n;
    need = pneed_map(w, x, ling_map(w, x), xr_used, xr);
    n    = 0;
    for (int a = 1; a < w; a++)
      for (int b = 0; b < a; b++)
        if (need[a*MAXW+b]) n++;
    return n;
  endfunction

endpackage
