// tb_axon_prefix_network -- checks every output column of the hybrid carry
// tree against group signals computed from their definitions, for several
// sizes: 8-bit trees at 4, 5 and 6 logic levels on all 65536 operand pairs,
// and 23-bit (6 and 7 levels) and 32-bit (6, 7 and 8 levels) trees on 20000
// random and long-carry operand pairs. Each size is built with both
// propagate kinds in the tree (XOR_P = 1, the default) and some also with the
// OR kind alone (8 bits at 4 levels, 23 bits at 6, 32 bits at 6 and 7), and
// some with a non-default inverter placement (INV_FLIP: 8 bits at 4 and 5
// levels, 23 bits at 6, 32 bits at 6 and 7). The
// default 32-bit tree must contain Ling nodes, conversion nodes and
// standard nodes whose propagate span comes from the XOR network.
module tb_axon_prefix_network;
  import axon_pkg::*;
  import axon_ref_pkg::*;

  localparam int NCFG = 17;
  localparam int NEXH = 6;    // the first NEXH configurations are 8 bits wide
  localparam int CW [NCFG] = '{8, 8, 8, 8, 8, 8, 23, 23, 23, 23, 32, 32, 32, 32, 32, 32, 32};
  localparam int CL [NCFG] = '{4, 5, 6, 4, 4, 5, 6,  7,  6,  6,  6,  7,  8,  6,  7,  6,  7};
  localparam bit CX [NCFG] = '{1, 1, 1, 0, 1, 1, 1,  1,  0,  1,  1,  1,  1,  0,  0,  1,  0};
  localparam bit CF [NCFG] = '{0, 0, 0, 0, 1, 1, 0,  0,  0,  1,  0,  0,  0,  0,  0,  1,  1};
  // an arbitrary inverter placement: about half of the nodes flipped
  localparam node_map_t FLIP = {(MAXD * MAXW / 32){32'h6d2b_79f5}};

  vec_t a, b;
  int mism [NCFG];
  int checks = 0, failures = 0;

  for (genvar q = 0; q < NCFG; q++) begin : g_cfg
    axon_net_check #(.WIDTH(CW[q]), .LEVELS(CL[q]), .XOR_P(CX[q]),
                     .INV_FLIP(CF[q] ? FLIP : '0)) u_chk (.a(a), .b(b), .mism(mism[q]));
  end

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int first, int last);
    #1;
    for (int q = first; q <= last; q++) begin
      checks += CW[q];
      failures += mism[q];
      if (mism[q] != 0 && failures < 20)
        $display("%0d bits %0d levels XOR_P %0d flipped %0d: %0d wrong columns for a=%h b=%h",
                 CW[q], CL[q], CX[q], CF[q], mism[q], a, b);
    end
  endtask

  initial begin
    checks += 3;
    if (count_ling(32, 0) == 0) begin failures++; $display("no Ling node in the 32-bit tree"); end
    if (count_xor(32, 0) == 0) begin failures++; $display("no XOR-propagate node in the 32-bit tree"); end
    if (count_conv(32, 0) == 0) begin failures++; $display("no conversion node in the 32-bit tree"); end
    for (int v = 0; v < 65536; v++) begin
      a = vec_t'(v[7:0]);
      b = vec_t'(v[15:8]);
      run(0, NEXH - 1);
    end
    a = '0; b = '0; run(NEXH, NCFG - 1);
    a = '1; b = 1;  run(NEXH, NCFG - 1);
    for (int n = 0; n < 20000; n++) begin
      if (n % 2 == 0) begin
        a = rand_vec(); b = rand_vec();
      end else begin
        rand_chain(32, a, b);
      end
      run(NEXH, NCFG - 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
