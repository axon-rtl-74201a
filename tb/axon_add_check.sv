// axon_add_check -- testbench helper: one adder of WIDTH bits and LEVELS
// logic levels, fed from the low bits of shared 64-bit operands, flagging a
// result that differs from the simulator's own a + b. INV_FLIP is passed
// through to the adder.
module axon_add_check
  import axon_pkg::*;
  import axon_ref_pkg::*;
#(
  parameter int unsigned WIDTH  = 16,
  parameter int unsigned LEVELS = base_depth(WIDTH) + 1,
  parameter node_map_t   INV_FLIP = '0
) (
  input  vec_t a,
  input  vec_t b,
  output logic bad
);
  localparam int X = int'(LEVELS) - 1 - base_depth(WIDTH);

  logic [WIDTH-1:0] sum;
  logic             cout;

  axon_adder #(.WIDTH(WIDTH), .LEVELS(LEVELS), .INV_FLIP(INV_FLIP)) dut (
    .a_i (a[WIDTH-1:0]), .b_i (b[WIDTH-1:0]), .sum_o (sum), .cout_o (cout)
  );

  always_comb bad = ({cout, sum} !== ({1'b0, a[WIDTH-1:0]} + {1'b0, b[WIDTH-1:0]}));

  initial $display("%0db+L%0d: depth %0d, %0d prefix nodes, %0d Ling, %0d conversion",
                   WIDTH, LEVELS, depth(WIDTH, X), count_nodes(WIDTH, X), count_ling(WIDTH, X), count_conv(WIDTH, X));
endmodule
