// tb_axon_workloads -- the eight adder configurations on which the hybrid
// architecture was evaluated (bits + logic levels: 16b+L5, 16b+L6, 23b+L6,
// 23b+L7, 31b+L6, 31b+L7, 32b+L6, 32b+L7), each built with its own tree and
// checked against a + b on 40000 random and long-carry operand pairs plus
// the all-ones corner cases. 16b+L5 and 32b+L6 are also built a second time
// with a different inverter placement (INV_FLIP).
module tb_axon_workloads;
  import axon_pkg::*;
  import axon_ref_pkg::*;

  localparam int NCFG = 10;
  localparam int CW [NCFG] = '{16, 16, 23, 23, 31, 31, 32, 32, 16, 32};
  localparam int CL [NCFG] = '{5,  6,  6,  7,  6,  7,  6,  7,  5,  6};
  // the last two repeat a configuration with another inverter placement,
  // as the exploration of one configuration produces many netlists
  localparam bit CF [NCFG] = '{0,  0,  0,  0,  0,  0,  0,  0,  1,  1};
  localparam node_map_t FLIP = {(MAXD * MAXW / 32){32'h93a4_c1e7}};

  vec_t a, b;
  logic [NCFG-1:0] bad;
  int checks = 0, failures = 0;

  for (genvar q = 0; q < NCFG; q++) begin : g_cfg
    axon_add_check #(.WIDTH(CW[q]), .LEVELS(CL[q]), .INV_FLIP(CF[q] ? FLIP : '0)) u_chk (.a(a), .b(b), .bad(bad[q]));
  end

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run();
    #1;
    for (int q = 0; q < NCFG; q++) begin
      checks++;
      if (bad[q]) begin
        failures++;
        if (failures < 20) $display("%0db+L%0d wrong for a=%h b=%h", CW[q], CL[q], a, b);
      end
    end
  endtask

  initial begin
    a = '1; b = 1;  run();
    a = '1; b = '1; run();
    a = '0; b = '0; run();
    for (int n = 0; n < 40000; n++) begin
      if (n % 2 == 0) begin
        a = rand_vec(); b = rand_vec();
      end else begin
        rand_chain(32, a, b);
      end
      run();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
