// tb_axon_bit_pregen -- checks the per-bit generate, XOR-propagate and
// OR-propagate of a 32-bit pre-processing stage against bitwise expressions
// on 2000 random operand pairs plus all-zeros and all-ones.
module tb_axon_bit_pregen;
  import axon_ref_pkg::*;

  localparam int W = 32;
  logic [W-1:0] a, b, g, p, t;
  int checks = 0, failures = 0;

  axon_bit_pregen #(.WIDTH(W)) dut (.a_i(a), .b_i(b), .g_o(g), .p_o(p), .t_o(t));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(logic [W-1:0] x, logic [W-1:0] y);
    a = x; b = y;
    #1;
    for (int i = 0; i < W; i++) begin
      checks++;
      if (g[i] !== (x[i] && y[i]) || p[i] !== (x[i] != y[i]) || t[i] !== (x[i] || y[i])) begin
        failures++;
        if (failures < 10) $display("bit %0d a=%b b=%b: g=%b p=%b t=%b", i, x[i], y[i], g[i], p[i], t[i]);
      end
    end
  endtask

  initial begin
    check('0, '0);
    check('1, '1);
    check('1, '0);
    for (int n = 0; n < 2000; n++) check($urandom(), $urandom());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
