// tb_compressor_tree: self-checking test of the carry-save compressor tree at
// its full size (31 rows of 163 bits) and at 5 rows of 8 bits.
//
// The two output rows must add (modulo 2^WIDTH) to the sum of all input rows,
// computed with the simulator's '+'. The test also checks that 31 rows are
// reduced in 8 carry-save levels (4 unit delays each: the 32 of the figure).
// Watchdog included.
module tb_compressor_tree;
  localparam int unsigned N = 31;
  localparam int unsigned W = 163;

  logic [W-1:0] rows [N];
  logic [W-1:0] s, c;
  logic [7:0]   srows [5];
  logic [7:0]   ss, sc;
  int checks = 0, failures = 0;

  compressor_tree dut   (.rows_i(rows),  .sum_o(s),  .carry_o(c));
  compressor_tree #(.NUM_ROWS(5), .WIDTH(8)) dut_s (.rows_i(srows), .sum_o(ss), .carry_o(sc));

  initial begin : watchdog
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] exp_v;
    logic [7:0]   sexp;
    checks++;
    if (dut.LEVELS != 8) begin
      failures++;
      $display("FAIL levels %0d", dut.LEVELS);
    end
    for (int n = 0; n < 5000; n++) begin
      exp_v = '0;
      for (int r = 0; r < N; r++) begin
        rows[r] = W'({$urandom, $urandom, $urandom, $urandom, $urandom, $urandom});
        if (n < 10) rows[r] = (n % 2 == 0) ? '1 : W'(1) << r;
        exp_v += rows[r];
      end
      #1;
      checks++;
      if (s + c !== exp_v) begin
        failures++;
        $display("FAIL n=%0d got=%h exp=%h", n, s + c, exp_v);
      end
    end
    for (int n = 0; n < 20000; n++) begin
      sexp = '0;
      for (int r = 0; r < 5; r++) begin
        srows[r] = 8'($urandom);
        sexp += srows[r];
      end
      #1;
      checks++;
      if (8'(ss + sc) !== sexp) begin
        failures++;
        $display("FAIL small n=%0d", n);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
