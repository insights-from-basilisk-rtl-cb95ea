// tb_sklansky_adder: self-checking test of the Sklansky prefix adder at its
// full size (163 bits) and exhaustively at 8 bits.
//
// The expected sum and carry out come from the simulator's own '+' on wider
// vectors. Directed cases make a carry ripple through all 163 bits. The test
// also checks that the 163-bit adder has 8 prefix levels. Watchdog included.
module tb_sklansky_adder;
  localparam int unsigned W = 163;

  logic [W-1:0] a, b, s;
  logic         cin, cout;
  logic [7:0]   sa, sb, ss;
  logic         scin, scout;
  int checks = 0, failures = 0;

  sklansky_adder dut   (.a_i(a),  .b_i(b),  .cin_i(cin),  .sum_o(s),  .cout_o(cout));
  sklansky_adder #(.WIDTH(8)) dut_s (.a_i(sa), .b_i(sb), .cin_i(scin), .sum_o(ss), .cout_o(scout));

  task automatic check();
    logic [W:0] exp_v;
    exp_v = (W+1)'(a) + (W+1)'(b) + (W+1)'(cin);
    checks++;
    if ({cout, s} !== exp_v) begin
      failures++;
      $display("FAIL a=%h b=%h cin=%0d got=%h exp=%h", a, b, cin, {cout, s}, exp_v);
    end
  endtask

  initial begin : watchdog
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    checks++;
    if (dut.LEVELS != 8) begin
      failures++;
      $display("FAIL prefix levels %0d", dut.LEVELS);
    end
    a = '1; b = '0; cin = 1'b1; #1; check();
    a = '1; b = 1;  cin = 1'b0; #1; check();
    a = '1; b = '1; cin = 1'b1; #1; check();
    a = '0; b = '0; cin = 1'b0; #1; check();
    for (int n = 0; n < 20000; n++) begin
      a = W'({$urandom, $urandom, $urandom, $urandom, $urandom, $urandom});
      b = W'({$urandom, $urandom, $urandom, $urandom, $urandom, $urandom});
      if (n % 4 == 0) b = ~a;  // long propagate chains
      cin = 1'($urandom);
      #1; check();
    end
    for (int x = 0; x < 256; x++) for (int y = 0; y < 256; y++) for (int c = 0; c < 2; c++) begin
      sa = 8'(x); sb = 8'(y); scin = 1'(c); #1;
      checks++;
      if ({scout, ss} !== 9'(x + y + c)) begin
        failures++;
        $display("FAIL small %0d+%0d+%0d", x, y, c);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
