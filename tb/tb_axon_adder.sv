// tb_axon_adder -- end-to-end test of the adder at its default size (32 bits,
// no parameter override): sum and carry out are compared with a + b computed
// by the simulator's own arithmetic, on corner operands, random operands and
// operands built to have long carry chains.
//
// It also counts how often each mechanism of the hybrid tree is really used,
// and fails if one never is:
//   ling_gated   a column ending in a Ling node holds H = 1 while its carry
//                is 0 (the sum stage's t & H recovery matters)
//   ling_differs the Ling node of column 15 holds a pseudo-carry H[15:0] that
//                differs from the true carry G[15:0]
//   cross_half   a carry made in bits 0..15 reaches a bit above 16 through the
//                conversion nodes of the last level
//   full_chain   a carry generated in bit 0 ripples to the carry out
//   carry_out    the carry out is set
module tb_axon_adder;
  import axon_pkg::*;
  import axon_ref_pkg::*;

  localparam int W = 32;
  localparam col_map_t LM = final_ling_mask(W, 0);

  logic [W-1:0] a, b, sum;
  logic cout;
  int checks = 0, failures = 0;
  int ling_gated = 0, ling_differs = 0, cross_half = 0, full_chain = 0, carry_out = 0;

  axon_adder dut (.a_i(a), .b_i(b), .sum_o(sum), .cout_o(cout));

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(vec_t x, vec_t y);
    logic [W:0] exp_v;
    a = x[W-1:0];
    b = y[W-1:0];
    #1;
    exp_v = {1'b0, a} + {1'b0, b};
    checks++;
    if ({cout, sum} !== exp_v) begin
      failures++;
      if (failures < 10) $display("%h + %h: got %h, expected %h", a, b, {cout, sum}, exp_v);
    end
    for (int i = 0; i < W; i++)
      if (LM[i] && ref_grp_h(x, y, i, 0) && !ref_grp_g(x, y, i, 0)) ling_gated++;
    if (ref_grp_h(x, y, 15, 0) != ref_grp_g(x, y, 15, 0)) ling_differs++;
    for (int i = 17; i < W; i++)
      if (ref_grp_g(x, y, 15, 0) && ref_grp_p(x, y, i - 1, 16) && !ref_grp_g(x, y, i - 1, 16)) begin
        cross_half++;
        break;
      end
    if (a[0] & b[0] && (a[W-1:1] ^ b[W-1:1]) == '1) full_chain++;
    if (exp_v[W]) carry_out++;
  endtask

  initial begin
    vec_t x, y;
    run('0, '0);
    run(vec_t'({W{1'b1}}), 1);
    run(vec_t'({W{1'b1}}), vec_t'({W{1'b1}}));
    run(vec_t'(32'h5555_5555), vec_t'(32'haaaa_aaab));
    for (int i = 0; i < W; i++) run(vec_t'(1) << i, vec_t'({W{1'b1}}));
    for (int n = 0; n < 100000; n++) begin
      if (n % 2 == 0) begin
        x = rand_vec(); y = rand_vec();
      end else begin
        rand_chain(W, x, y);
      end
      run(x, y);
    end
    $display("32-bit adder: %0d prefix nodes, %0d Ling, %0d conversion",
             count_nodes(W, 0), count_ling(W, 0), count_conv(W, 0));
    $display("ling_gated=%0d ling_differs=%0d cross_half=%0d full_chain=%0d carry_out=%0d",
             ling_gated, ling_differs, cross_half, full_chain, carry_out);
    checks += 5;
    if (ling_gated == 0)   begin failures++; $display("Ling t-gating never exercised"); end
    if (ling_differs == 0) begin failures++; $display("Ling pseudo-carry never differed from the carry"); end
    if (cross_half == 0)   begin failures++; $display("no carry crossed the conversion level"); end
    if (full_chain == 0)   begin failures++; $display("no full-length carry chain"); end
    if (carry_out == 0)    begin failures++; $display("carry out never set"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
