// carry_save_adder: one row of WIDTH full adders (a 3:2 counter row), the
// building block of compressor_tree.
//
// It reduces three operand rows to a sum row and a carry row with
// a + b + c = sum_o + 2*carry_o. The carry row is returned unshifted (bit k of
// carry_o has weight 2^(k+1)); the caller shifts it. Each bit costs one full
// adder, so the delay is that of one full adder whatever WIDTH is.
// Purely combinational. The use of 3:2 carry-save adders in a Wallace tree
// follows the paper; the module split is this design's own.
module carry_save_adder #(
  parameter int unsigned WIDTH = lau_pkg::SumWidth
) (
  input  logic [WIDTH-1:0] a_i,
  input  logic [WIDTH-1:0] b_i,
  input  logic [WIDTH-1:0] c_i,
  output logic [WIDTH-1:0] sum_o,
  output logic [WIDTH-1:0] carry_o
);

  assign sum_o   = a_i ^ b_i ^ c_i;
  assign carry_o = (a_i & b_i) | (a_i & c_i) | (b_i & c_i);

endmodule
