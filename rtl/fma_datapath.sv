// fma_datapath: the fused multiply-add datapath y = a*b + c + d that forms
// the critical path of the SoC's floating-point unit: a 54 x 54-bit unsigned
// significand multiplication whose product is added to two 163-bit operands.
//
// Structure (three stages, all combinational):
//   1. booth_encoder: radix-4 Booth recoding of b; 28 partial-product rows of
//      108 bits plus one negation bit per row.
//   2. compressor_tree: one Wallace carry-save tree that takes the 28 rows,
//      one correction row and the addends c and d (31 rows of 163 bits) down
//      to a sum row and a carry row in 8 full-adder levels. Adding c and d
//      inside the tree, rather than after a separate multiplier adder, is the
//      point of this datapath: only one carry-propagate adder remains.
//   3. sklansky_adder: 163-bit Sklansky parallel-prefix adder.
// The correction row holds the Booth negation bits (bit 2i for row i) and the
// two's complement of the sign-encoding bias of the Booth rows (see
// booth_encoder); the two never share a bit position.
//
// Interface: a_i, b_i (MUL_W bits), c_i, d_i (SUM_W bits) in, y_o out,
// y_o = (a_i * b_i + c_i + d_i) mod 2^SUM_W, no clock, no latency.
// Follows the paper: the 54x54-bit fused multiply-add with Booth encoding,
// compressor tree with C and D, 163-bit Sklansky adder. Own choices: 54-bit
// operands (the text also speaks of a 53x53 multiplier; a 53-bit significand
// zero-extended to 54 bits gives the same product), unsigned operands, c and d
// both full width, and the result taken modulo 2^SUM_W.
module fma_datapath #(
  parameter int unsigned MUL_W = lau_pkg::MulWidth,
  parameter int unsigned SUM_W = lau_pkg::SumWidth
) (
  input  logic [MUL_W-1:0] a_i,
  input  logic [MUL_W-1:0] b_i,
  input  logic [SUM_W-1:0] c_i,
  input  logic [SUM_W-1:0] d_i,
  output logic [SUM_W-1:0] y_o
);

  localparam int unsigned NumPp   = lau_pkg::booth_num_pp(MUL_W);
  localparam int unsigned PpW     = 2 * MUL_W;
  localparam int unsigned NumRows = NumPp + 3;

  // Two's complement of the Booth sign-encoding bias
  // sum_{i=0}^{NumPp-2} 2^(MUL_W+1+2i), taken modulo 2^SUM_W.
  function automatic logic [SUM_W-1:0] booth_bias_neg();
    logic [SUM_W-1:0] bias;
    bias = '0;
    for (int unsigned i = 0; i + 1 < NumPp; i++) begin
      bias[MUL_W+1+2*i] = 1'b1;
    end
    return ~bias + 1'b1;
  endfunction

  localparam logic [SUM_W-1:0] BiasNeg = booth_bias_neg();

  logic [PpW-1:0]   pp  [NumPp];
  logic [NumPp-1:0] neg;
  logic [SUM_W-1:0] rows[NumRows];
  logic [SUM_W-1:0] negrow;
  logic [SUM_W-1:0] tree_sum, tree_carry;
  logic             unused_cout;

  booth_encoder #(.MUL_W(MUL_W)) i_booth (
    .a_i  (a_i),
    .b_i  (b_i),
    .pp_o (pp),
    .neg_o(neg)
  );

  always_comb begin
    negrow = BiasNeg;
    for (int unsigned i = 0; i < NumPp; i++) begin
      negrow[2*i] = negrow[2*i] | neg[i];
    end
    for (int unsigned i = 0; i < NumPp; i++) begin
      rows[i] = SUM_W'(pp[i]);
    end
    rows[NumPp]   = negrow;
    rows[NumPp+1] = c_i;
    rows[NumPp+2] = d_i;
  end

  compressor_tree #(.NUM_ROWS(NumRows), .WIDTH(SUM_W)) i_tree (
    .rows_i (rows),
    .sum_o  (tree_sum),
    .carry_o(tree_carry)
  );

  sklansky_adder #(.WIDTH(SUM_W)) i_cpa (
    .a_i   (tree_sum),
    .b_i   (tree_carry),
    .cin_i (1'b0),
    .sum_o (y_o),
    .cout_o(unused_cout)
  );

endmodule
