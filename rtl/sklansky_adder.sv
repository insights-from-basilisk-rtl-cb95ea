// sklansky_adder: WIDTH-bit Sklansky parallel-prefix carry-propagate adder
// (default 163 bits), the final adder of the multiply-add datapath.
//
// How it works: every bit forms a generate g = a & b and propagate p = a ^ b.
// A prefix tree of LEVELS = ceil(log2(WIDTH)) levels (8 for 163 bits) then
// computes the group generate/propagate of every prefix [i:0]. At level k each
// bit whose index has bit k set combines its group with the group that ends
// just below its 2^(k+1)-aligned block; the other bits pass unchanged. This is
// the Sklansky (divide-and-conquer) pattern: minimum depth, with fan-out
// growing to 2^k at level k. The carry into bit i is the prefix [i-1:0]
// combined with cin_i, and sum = p ^ carry. In unit-gate delays that is
// 2 (p) + 2*8 (prefix) + 2 (sum xor) = 20, the figure printed for this adder.
//
// Interface: a_i, b_i, cin_i in; sum_o (mod 2^WIDTH) and cout_o out; no clock.
// The Sklansky architecture and width follow the paper; the (g, p) operator
// formulation and the carry-in are this design's own choices.
module sklansky_adder #(
  parameter int unsigned WIDTH  = lau_pkg::SumWidth,
  parameter int unsigned LEVELS = lau_pkg::prefix_levels(WIDTH)
) (
  input  logic [WIDTH-1:0] a_i,
  input  logic [WIDTH-1:0] b_i,
  input  logic             cin_i,
  output logic [WIDTH-1:0] sum_o,
  output logic             cout_o
);

  logic [WIDTH-1:0] gen [LEVELS+1];
  logic [WIDTH-1:0] prop[LEVELS+1];
  logic [WIDTH:0]   carry;

  always_comb begin
    gen[0]  = a_i & b_i;
    prop[0] = a_i ^ b_i;
    for (int unsigned k = 0; k < LEVELS; k++) begin
      for (int unsigned i = 0; i < WIDTH; i++) begin
        if (((i >> k) & 1) == 1) begin
          // j: last bit of the block just below i's aligned 2^(k+1) block
          gen[k+1][i]  = gen[k][i] | (prop[k][i] & gen[k][((i >> k) << k) - 1]);
          prop[k+1][i] = prop[k][i] & prop[k][((i >> k) << k) - 1];
        end else begin
          gen[k+1][i]  = gen[k][i];
          prop[k+1][i] = prop[k][i];
        end
      end
    end
    carry[0] = cin_i;
    for (int unsigned i = 0; i < WIDTH; i++) begin
      carry[i+1] = gen[LEVELS][i] | (prop[LEVELS][i] & cin_i);
    end
  end

  assign sum_o  = prop[0] ^ carry[WIDTH-1:0];
  assign cout_o = carry[WIDTH];

endmodule
