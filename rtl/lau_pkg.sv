// lau_pkg: sizes and constant functions shared by the fused multiply-add
// datapath (booth_encoder, compressor_tree, sklansky_adder, fma_datapath).
//
// The default sizes are those of the FPU critical path of the SoC: a 54x54-bit
// multiplier whose radix-4 Booth recoding gives 28 partial products of 108 bits,
// summed together with two addends into a 163-bit result. The constant
// functions below derive the secondary sizes (number of partial products,
// number of carry-save levels, prefix levels) from those widths, and the
// correction constant that replaces sign extension of the Booth rows.
package lau_pkg;

  // Operand width of the multiplier (the 53-bit significand plus one bit).
  localparam int unsigned MulWidth = 54;
  // Width of the final sum y = a*b + c + d.
  localparam int unsigned SumWidth = 163;

  // Number of radix-4 Booth digits of an unsigned operand of w bits (w even):
  // one digit per bit pair plus one top digit that is never negative.
  function automatic int unsigned booth_num_pp(int unsigned w);
    return w / 2 + 1;
  endfunction

  // Number of 3:2 carry-save levels needed to reduce n rows to two.
  function automatic int unsigned csa_levels(int unsigned n);
    int unsigned rows;
    int unsigned lv;
    rows = n;
    lv   = 0;
    while (rows > 2) begin
      rows = 2 * (rows / 3) + rows % 3;
      lv++;
    end
    return lv;
  endfunction

  // Number of rows left after l carry-save levels, starting from n rows.
  function automatic int unsigned csa_rows_after(int unsigned n, int unsigned l);
    int unsigned rows;
    rows = n;
    for (int unsigned i = 0; i < l; i++) begin
      if (rows > 2) rows = 2 * (rows / 3) + rows % 3;
    end
    return rows;
  endfunction

  // Number of prefix levels of a Sklansky adder of w bits: ceil(log2(w)).
  function automatic int unsigned prefix_levels(int unsigned w);
    return (w <= 1) ? 0 : $clog2(w);
  endfunction

endpackage
