// egc_rule_a -- Rule-A, the 4-input Boolean function evaluated at every graph vertex of F_core.
//
// Output y = TT[{x3,x2,x1,x0}] with TT = 0x036F (balanced, nonlinearity 4, algebraic degree 3,
// differential uniformity 12). The algebraic normal form is
//   y = 1 ^ x2 ^ x0&x2 ^ x1&x2 ^ x1&x3 ^ x0&x2&x3.
// x0 is the vertex's own bit, x1 its (i-1) neighbour, x2 its (i+1) neighbour and x3 its (i+16)
// neighbour. The truth table, the ANF and the argument order are the cipher's specification; the
// function is written as a truth-table lookup, which a synthesis tool maps to one LUT4 on an
// FPGA. Purely combinational, no clock.
module egc_rule_a
  import egc_pkg::*;
#(
  parameter logic [15:0] TT = RULE_A_TT
) (
  input  logic x0,
  input  logic x1,
  input  logic x2,
  input  logic x3,
  output logic y
);

  always_comb y = TT[{x3, x2, x1, x0}];

endmodule
