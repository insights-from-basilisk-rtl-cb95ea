// booth_encoder: radix-4 Booth recoding and partial-product selection for an
// unsigned MUL_W x MUL_W multiplier (default 54 x 54, giving 28 rows of 108
// bits, as in the FPU multiply-add datapath of the SoC).
//
// How it works: the multiplier b is read in overlapping bit triplets
// {b[2i+1], b[2i], b[2i-1]} (b[-1] = 0, bits above MUL_W-1 are 0). Each triplet
// selects a digit in {-2,-1,0,+1,+2}; the row is 0, a or 2a, bit-inverted when
// the digit is negative. The two's-complement "+1" of a negative row is not
// added here: it leaves on neg_o[i] and belongs at bit 2i of the sum. Because b
// is unsigned, the top digit (i = MUL_W/2) only reads b[MUL_W-1] and is 0 or +1,
// so the row count is MUL_W/2 + 1 (28 for 54 bits) and every row fits the
// 2*MUL_W-bit frame.
//
// Sign extension: instead of sign-extending each signed row across the frame,
// row i (i < MUL_W/2) carries its MUL_W+2-bit two's-complement value with the
// sign bit inverted, which adds the constant 2^(MUL_W+1+2i). The consumer must
// subtract the sum of these constants, sum_{i=0}^{MUL_W/2-1} 2^(MUL_W+1+2i),
// once; fma_datapath folds it into one constant row. With that, for any a, b:
//   sum_i pp_o[i] + sum_i neg_o[i]*2^(2i) - bias = a*b.
//
// Interface: purely combinational, a_i/b_i in, pp_o/neg_o out, no clock.
// Follows the paper: radix-4 Booth encoding, 54-bit operands, 28 x 108-bit
// partial products. Own choices: the inverted-sign-bit form of the rows and
// the separate negation bits.
module booth_encoder #(
  parameter int unsigned MUL_W  = lau_pkg::MulWidth,
  parameter int unsigned NUM_PP = lau_pkg::booth_num_pp(MUL_W),
  parameter int unsigned PP_W   = 2 * MUL_W
) (
  input  logic [MUL_W-1:0] a_i,
  input  logic [MUL_W-1:0] b_i,
  output logic [PP_W-1:0]  pp_o  [NUM_PP],
  output logic [NUM_PP-1:0] neg_o
);

  // b with one zero below it (b[-1]); the rows below the top one never
  // read above b[MUL_W-1].
  logic [MUL_W:0] b_ext;
  assign b_ext = {b_i, 1'b0};

  for (genvar i = 0; i < NUM_PP - 1; i++) begin : g_row
    logic       one, two, neg;
    logic [MUL_W:0]   mag;  // |digit| * a, MUL_W+1 bits
    logic [MUL_W+1:0] pp;   // digit * a - neg, two's complement

    always_comb begin
      neg = b_ext[2*i+2];
      one = b_ext[2*i+1] ^ b_ext[2*i];
      two = (b_ext[2*i+2] & ~b_ext[2*i+1] & ~b_ext[2*i]) |
            (~b_ext[2*i+2] & b_ext[2*i+1] & b_ext[2*i]);
      mag = one ? {1'b0, a_i} : (two ? {a_i, 1'b0} : '0);
      pp  = neg ? ~{1'b0, mag} : {1'b0, mag};
      pp_o[i] = PP_W'({~pp[MUL_W+1], pp[MUL_W:0]}) << (2 * i);
    end
    assign neg_o[i] = neg;
  end

  // Top digit: triplet {0, 0, b[MUL_W-1]}, so the digit is 0 or +1.
  assign pp_o[NUM_PP-1]  = b_i[MUL_W-1] ? {a_i, {MUL_W{1'b0}}} : '0;
  assign neg_o[NUM_PP-1] = 1'b0;

endmodule
