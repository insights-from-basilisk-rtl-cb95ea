// compressor_tree: Wallace-style carry-save reduction of NUM_ROWS operand rows
// of WIDTH bits to two rows whose sum (mod 2^WIDTH) equals the sum of all
// inputs. In the multiply-add datapath its inputs are the 28 Booth partial
// products, one row of negation bits and sign constant, and the two addends
// C and D: 31 rows of 163 bits.
//
// How it works: at every level the rows are taken three at a time into
// carry_save_adder rows; each group of three becomes a sum row and a carry row
// shifted one place left, and the one or two rows left over pass to the next
// level unchanged. A level turns n rows into 2*floor(n/3) + n mod 3, so 31 rows
// need LEVELS = 8 levels (31, 21, 14, 10, 7, 5, 4, 3, 2). At four unit-gate
// delays per full adder that is the 32 unit delays printed for the tree. Bits
// carried out of bit WIDTH-1 are dropped: the result is modulo 2^WIDTH.
//
// Interface: rows_i in, sum_o and carry_o out (carry_o already shifted), no
// clock. The fusion of C and D into the tree and the Wallace reduction follow
// the paper; the greedy row grouping is this design's own choice.
module compressor_tree #(
  parameter int unsigned NUM_ROWS = lau_pkg::booth_num_pp(lau_pkg::MulWidth) + 3,
  parameter int unsigned WIDTH    = lau_pkg::SumWidth,
  parameter int unsigned LEVELS   = lau_pkg::csa_levels(NUM_ROWS)
) (
  input  logic [WIDTH-1:0] rows_i [NUM_ROWS],
  output logic [WIDTH-1:0] sum_o,
  output logic [WIDTH-1:0] carry_o
);

  for (genvar l = 0; l <= LEVELS; l++) begin : g_lvl
    localparam int unsigned N = lau_pkg::csa_rows_after(NUM_ROWS, l);
    logic [WIDTH-1:0] r [N];

    if (l == 0) begin : g_in
      assign r = rows_i;
    end else begin : g_csa
      localparam int unsigned NP = lau_pkg::csa_rows_after(NUM_ROWS, l - 1);
      localparam int unsigned G  = NP / 3;
      for (genvar g = 0; g < G; g++) begin : g_grp
        logic [WIDTH-1:0] cy;
        carry_save_adder #(.WIDTH(WIDTH)) i_csa (
          .a_i    (g_lvl[l-1].r[3*g]),
          .b_i    (g_lvl[l-1].r[3*g+1]),
          .c_i    (g_lvl[l-1].r[3*g+2]),
          .sum_o  (r[2*g]),
          .carry_o(cy)
        );
        assign r[2*g+1] = {cy[WIDTH-2:0], 1'b0};
      end
      for (genvar k = 0; k < NP % 3; k++) begin : g_pass
        assign r[2*G+k] = g_lvl[l-1].r[3*G+k];
      end
    end
  end

  assign sum_o   = g_lvl[LEVELS].r[0];
  assign carry_o = g_lvl[LEVELS].r[1];

endmodule
