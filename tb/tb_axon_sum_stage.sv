// tb_axon_sum_stage -- checks the carry recovery and sum bits of a 32-bit
// sum stage. For random and long-carry operands, each column's prefix input
// is computed from its definition (H[i:0] for the columns the tree ends in a
// Ling node, G[i:0] for the others, inverted where the tree leaves it
// inverted); the stage must then return a + b and the carry out.
module tb_axon_sum_stage;
  import axon_pkg::*;
  import axon_ref_pkg::*;

  localparam int W = 32;
  localparam col_map_t LM = final_ling_mask(W, 0);
  localparam col_map_t NM = final_neg_mask(W, 0);

  logic [W-1:0] p, t, grp, sum;
  logic cout;
  int checks = 0, failures = 0, ling_gated = 0;

  axon_sum_stage #(.WIDTH(W)) dut (.p_i(p), .t_i(t), .grp_i(grp), .sum_o(sum), .cout_o(cout));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(vec_t a, vec_t b);
    logic [W:0] exp_v;
    p = a[W-1:0] ^ b[W-1:0];
    t = a[W-1:0] | b[W-1:0];
    for (int i = 0; i < W; i++) begin
      grp[i] = (LM[i] ? ref_grp_h(a, b, i, 0) : ref_grp_g(a, b, i, 0)) ^ NM[i];
      if (LM[i] && ref_grp_h(a, b, i, 0) && !t[i]) ling_gated++;
    end
    #1;
    exp_v = {1'b0, a[W-1:0]} + {1'b0, b[W-1:0]};
    checks++;
    if ({cout, sum} !== exp_v) begin
      failures++;
      if (failures < 10) $display("a=%h b=%h: got %h, expected %h", a[W-1:0], b[W-1:0], {cout, sum}, exp_v);
    end
  endtask

  initial begin
    vec_t a, b;
    checks++;
    if (LM == '0) begin
      failures++;
      $display("no Ling column at the tree output: nothing to recover");
    end
    run('0, '0);
    run(vec_t'({W{1'b1}}), 1);
    for (int n = 0; n < 5000; n++) begin
      if (n % 2 == 0) begin
        a = rand_vec(); b = rand_vec();
      end else begin
        rand_chain(W, a, b);
      end
      run(a, b);
    end
    checks++;
    if (ling_gated == 0) begin
      failures++;
      $display("a Ling column with H = 1 but no carry (t = 0) never occurred");
    end
    $display("Ling columns gated by t: %0d times", ling_gated);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
