// tb_fma_datapath: end-to-end test of the fused multiply-add datapath
// y = a*b + c + d at its full size (54 x 54-bit product, 163-bit sum, the
// module's default parameters). tb_fma_datapath_small covers a reduced size
// exhaustively.
//
// The expected result is computed with the simulator's own '*' and '+' on
// wide vectors, modulo 2^163. Besides random operands, directed cases hit the
// extremes (all-ones operands, zero). The test counts how often each
// mechanism of the datapath was exercised and fails if one never was:
// every radix-4 Booth digit -2..+2, the positive-only top Booth digit,
// a "-0" digit (triplet 111, negation of a zero row), a result that wraps
// modulo 2^163, and addends reaching the top bits of the 163-bit adder.
// Watchdog included.
module tb_fma_datapath;
  localparam int unsigned MW = 54;
  localparam int unsigned SW = 163;

  logic [MW-1:0] a, b;
  logic [SW-1:0] c, d, y;

  int checks = 0, failures = 0;
  int digit_seen [5];
  int top_digit = 0, neg_zero = 0, wraps = 0, high_addend = 0;

  fma_datapath dut (.a_i(a), .b_i(b), .c_i(c), .d_i(d), .y_o(y));

  task automatic check();
    logic [SW+1:0] full;
    logic [MW+2:0] bx;
    full = (SW+2)'(a) * (SW+2)'(b) + (SW+2)'(c) + (SW+2)'(d);
    if (full[SW+1:SW] != 0) wraps++;
    if (c[SW-1] || d[SW-1]) high_addend++;
    bx = {2'b00, b, 1'b0};
    for (int i = 0; i < MW / 2; i++) begin
      digit_seen[-2 * int'(bx[2*i+2]) + int'(bx[2*i+1]) + int'(bx[2*i]) + 2]++;
      if (bx[2*i+2 -: 3] == 3'b111) neg_zero++;
    end
    if (b[MW-1]) top_digit++;
    checks++;
    if (y !== full[SW-1:0]) begin
      failures++;
      $display("FAIL a=%h b=%h c=%h d=%h got=%h exp=%h", a, b, c, d, y, full[SW-1:0]);
    end
  endtask

  function automatic logic [SW-1:0] rnd_wide();
    return SW'({$urandom, $urandom, $urandom, $urandom, $urandom, $urandom});
  endfunction

  initial begin : watchdog
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a = '1; b = '1; c = '1; d = '1; #1; check();
    a = '1; b = '1; c = '0; d = '0; #1; check();
    a = '0; b = '0; c = '0; d = '0; #1; check();
    a = '1; b = '0; c = '1; d = 1;  #1; check();
    for (int n = 0; n < 20000; n++) begin
      a = MW'(rnd_wide());
      b = MW'(rnd_wide());
      c = rnd_wide();
      d = rnd_wide();
      case (n % 4)
        1: begin c = SW'({a, 1'b0}); d = '0; end     // addend in the product range
        2: begin a = a | (MW'(1) << (MW - 1)); b = '1; end
        default: ;
      endcase
      #1; check();
    end
    for (int k = 0; k < 5; k++) begin
      $display("booth digit %0d seen %0d times", k - 2, digit_seen[k]);
      checks++;
      if (digit_seen[k] == 0) failures++;
    end
    $display("top digit +1: %0d, -0 digits: %0d, wraps mod 2^163: %0d, top-bit addends: %0d",
             top_digit, neg_zero, wraps, high_addend);
    checks += 4;
    if (top_digit == 0)   failures++;
    if (neg_zero == 0)    failures++;
    if (wraps == 0)       failures++;
    if (high_addend == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
