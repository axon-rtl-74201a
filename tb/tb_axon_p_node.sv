// tb_axon_p_node -- exhaustive check of the propagate node in both
// polarities: with positive inputs it must give ~(hi & lo) (NAND2), with
// inverted inputs it must give the AND of the true values (NOR2).
module tb_axon_p_node;
  logic hi, lo, y_pos_in, y_neg_in;
  int checks = 0, failures = 0;

  axon_p_node #(.IN_NEG(1'b0)) dut_p (.hi_i(hi),  .lo_i(lo),  .y_o(y_pos_in));
  axon_p_node #(.IN_NEG(1'b1)) dut_n (.hi_i(~hi), .lo_i(~lo), .y_o(y_neg_in));

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 4; v++) begin
      {hi, lo} = 2'(v);
      #1;
      checks += 2;
      // true group propagate is hi AND lo
      if (y_pos_in !== !(v == 3)) begin
        failures++;
        $display("NAND form hi=%b lo=%b y=%b", hi, lo, y_pos_in);
      end
      if (y_neg_in !== (v == 3)) begin
        failures++;
        $display("NOR form hi=%b lo=%b y=%b", hi, lo, y_neg_in);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
