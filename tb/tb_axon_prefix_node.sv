// tb_axon_prefix_node -- checks the four node kinds of the hybrid tree and
// the H-to-G upper-input conversion on real group signals.
//
// For random 16-bit operands and random spans [i:k] and [k-1:j], the upper
// and lower group values G or H and the propagate span each kind needs are
// computed from their definitions; the node must then produce the group value
// of the merged span [i:j]. Every case runs with positive inputs (AOI form,
// inverted output) and with inverted inputs (OAI form, positive output).
//   kind                  upper  lower  propagate     result
//   standard              G      G      P[i:k]        G[i:j]
//   Ling                  H      H      P[i-1:k-1]    H[i:j]
//   Ling -> standard      G      H      P[i:k-1]      G[i:j]
//   standard -> Ling      H      G      P[i-1:k]      H[i:j]
//   H upper, G result     H      G/H    P[i:k]/[i:k-1], t_i & H[i:k] as upper
module tb_axon_prefix_node;
  import axon_ref_pkg::*;

  localparam int W = 16;
  // instance index: 0 = (G out, G/bit upper), 1 = (H out, H upper), 2 = (G out, H upper)
  logic [2:0] hi, lo, pg, ti;
  logic [2:0] y_p, y_n;
  int checks = 0, failures = 0;
  int cnt [6];

  axon_prefix_node #(.OUT_LING(0), .HI_LING(0), .IN_NEG(0)) u0p (.hi_i(hi[0]), .lo_i(lo[0]), .pg_i(pg[0]), .ti_i(ti[0]), .y_o(y_p[0]));
  axon_prefix_node #(.OUT_LING(1), .HI_LING(1), .IN_NEG(0)) u1p (.hi_i(hi[1]), .lo_i(lo[1]), .pg_i(pg[1]), .ti_i(ti[1]), .y_o(y_p[1]));
  axon_prefix_node #(.OUT_LING(0), .HI_LING(1), .IN_NEG(0)) u2p (.hi_i(hi[2]), .lo_i(lo[2]), .pg_i(pg[2]), .ti_i(ti[2]), .y_o(y_p[2]));
  axon_prefix_node #(.OUT_LING(0), .HI_LING(0), .IN_NEG(1)) u0n (.hi_i(~hi[0]), .lo_i(~lo[0]), .pg_i(~pg[0]), .ti_i(~ti[0]), .y_o(y_n[0]));
  axon_prefix_node #(.OUT_LING(1), .HI_LING(1), .IN_NEG(1)) u1n (.hi_i(~hi[1]), .lo_i(~lo[1]), .pg_i(~pg[1]), .ti_i(~ti[1]), .y_o(y_n[1]));
  axon_prefix_node #(.OUT_LING(0), .HI_LING(1), .IN_NEG(1)) u2n (.hi_i(~hi[2]), .lo_i(~lo[2]), .pg_i(~pg[2]), .ti_i(~ti[2]), .y_o(y_n[2]));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_node(int inst, int kind, logic exp_v);
    checks += 2;
    cnt[kind]++;
    // positive inputs -> inverted output; inverted inputs -> positive output
    if (y_p[inst] !== ~exp_v || y_n[inst] !== exp_v) begin
      failures++;
      if (failures < 10) $display("kind %0d inst %0d: expected %b, AOI form %b, OAI form %b",
                                  kind, inst, exp_v, ~y_p[inst], y_n[inst]);
    end
  endtask

  initial begin
    vec_t a, b;
    int i, k, j;
    for (int n = 0; n < 4000; n++) begin
      if (n % 2 == 0) begin
        a = rand_vec(); b = rand_vec();
      end else begin
        rand_chain(W, a, b);
      end
      j = $urandom_range(0, W - 2);
      k = $urandom_range(j + 1, W - 1);
      i = $urandom_range(k, W - 1);
      // standard node
      hi[0] = ref_grp_g(a, b, i, k); lo[0] = ref_grp_g(a, b, k - 1, j);
      pg[0] = ref_grp_p(a, b, i, k); ti[0] = a[i] | b[i];
      // Ling node
      hi[1] = ref_grp_h(a, b, i, k); lo[1] = ref_grp_h(a, b, k - 1, j);
      pg[1] = ref_grp_p(a, b, i - 1, k - 1); ti[1] = a[i] | b[i];
      // H upper converted to G, G lower
      hi[2] = ref_grp_h(a, b, i, k); lo[2] = ref_grp_g(a, b, k - 1, j);
      pg[2] = ref_grp_p(a, b, i, k); ti[2] = a[i] | b[i];
      #1;
      expect_node(0, 0, ref_grp_g(a, b, i, j));
      expect_node(1, 1, ref_grp_h(a, b, i, j));
      expect_node(2, 4, ref_grp_g(a, b, i, j));
      // Ling -> standard: G upper, H lower
      lo[0] = ref_grp_h(a, b, k - 1, j); pg[0] = ref_grp_p(a, b, i, k - 1);
      // standard -> Ling: H upper, G lower
      lo[1] = ref_grp_g(a, b, k - 1, j); pg[1] = ref_grp_p(a, b, i - 1, k);
      // H upper converted to G, H lower
      lo[2] = ref_grp_h(a, b, k - 1, j); pg[2] = ref_grp_p(a, b, i, k - 1);
      #1;
      expect_node(0, 2, ref_grp_g(a, b, i, j));
      expect_node(1, 3, ref_grp_h(a, b, i, j));
      expect_node(2, 5, ref_grp_g(a, b, i, j));
    end
    // the paper's two-bit example: H[1:0] = g1 + g0 needs no propagate at all
    for (int v = 0; v < 16; v++) begin
      a = vec_t'(v[1:0]); b = vec_t'(v[3:2]);
      hi[1] = a[1] & b[1]; lo[1] = a[0] & b[0]; pg[1] = 1'b1; ti[1] = 1'b0;
      #1;
      expect_node(1, 1, (a[1] & b[1]) | (a[0] & b[0]));
    end
    for (int q = 0; q < 6; q++) begin
      checks++;
      if (cnt[q] == 0) begin
        failures++;
        $display("node kind %0d never exercised", q);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
