// tb_booth_encoder: self-checking test of the radix-4 Booth encoder at its
// full size (54-bit operands, 28 rows of 108 bits) and at 8 bits.
//
// For each operand pair the expected row i is worked out from the arithmetic
// definition of the digit, d_i = -2*b[2i+1] + b[2i] + b[2i-1], as
// (d_i*a - neg_i + 2^(MUL_W+1)) * 4^i for the signed rows and b[MUL_W-1]*a*2^MUL_W
// for the top row, and the sum of all rows plus negation bits minus the bias
// must equal a*b. The 8-bit instance is run over all 65536 operand pairs.
// Every digit value -2..+2 must be seen. A watchdog ends the run if it hangs.
module tb_booth_encoder;
  localparam int unsigned W  = 54;
  localparam int unsigned NP = W / 2 + 1;
  localparam int unsigned SW = 8;
  localparam int unsigned SNP = SW / 2 + 1;

  logic [W-1:0]    a, b;
  logic [2*W-1:0]  pp [NP];
  logic [NP-1:0]   neg;
  logic [SW-1:0]   sa, sb;
  logic [2*SW-1:0] spp [SNP];
  logic [SNP-1:0]  sneg;

  int checks = 0, failures = 0;
  int digit_seen [5];

  booth_encoder dut   (.a_i(a),  .b_i(b),  .pp_o(pp),  .neg_o(neg));
  booth_encoder #(.MUL_W(SW)) dut_s (.a_i(sa), .b_i(sb), .pp_o(spp), .neg_o(sneg));

  function automatic int digit_of(logic [255:0] bb, int i);
    int hi, mid, lo;
    hi  = int'(bb[2*i+1]);
    mid = int'(bb[2*i]);
    lo  = (i == 0) ? 0 : int'(bb[2*i-1]);
    return -2 * hi + mid + lo;
  endfunction

  task automatic check_full();
    logic signed [255:0] exp_row, total, bias;
    int d;
    total = 0;
    bias  = 0;
    for (int i = 0; i < NP; i++) begin
      d = digit_of(256'(b), i);
      if (i < NP - 1) begin
        digit_seen[d+2]++;
        exp_row = 256'(256'(signed'(d)) * $signed(256'(a)) - 256'(b[2*i+1]) + (256'd1 << (W + 1))) <<< (2 * i);
        bias += 256'd1 << (W + 1 + 2 * i);
        checks++;
        if (neg[i] !== b[2*i+1]) begin
          failures++;
          $display("FAIL neg[%0d] a=%h b=%h", i, a, b);
        end
      end else begin
        exp_row = b[W-1] ? ($signed(256'(a)) <<< W) : 0;
      end
      checks++;
      if (256'(pp[i]) !== exp_row) begin
        failures++;
        $display("FAIL row %0d a=%h b=%h got=%h exp=%h", i, a, b, pp[i], exp_row);
      end
      total += 256'(pp[i]) + (256'(neg[i]) << (2 * i));
    end
    checks++;
    if (total - bias !== 256'(a) * 256'(b)) begin
      failures++;
      $display("FAIL sum a=%h b=%h", a, b);
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
    logic [W-1:0] corners [6];
    logic [255:0] tot, bias;
    corners = '{'0, '1, 54'h2AAAAAAAAAAAAA, 54'h15555555555555, 54'h20000000000000, 54'd1};
    foreach (corners[i]) foreach (corners[j]) begin
      a = corners[i]; b = corners[j]; #1; check_full();
    end
    for (int n = 0; n < 3000; n++) begin
      a = W'({$urandom, $urandom}); b = W'({$urandom, $urandom}); #1; check_full();
    end
    // exhaustive 8-bit
    for (int x = 0; x < 256; x++) begin
      for (int y = 0; y < 256; y++) begin
        sa = 8'(x); sb = 8'(y); #1;
        tot = 0; bias = 0;
        for (int i = 0; i < SNP; i++) begin
          tot += 256'(spp[i]) + (256'(sneg[i]) << (2 * i));
          if (i < SNP - 1) bias += 256'd1 << (SW + 1 + 2 * i);
        end
        checks++;
        if (tot - bias !== 256'(x * y)) begin
          failures++;
          $display("FAIL small %0d*%0d", x, y);
        end
      end
    end
    for (int k = 0; k < 5; k++) begin
      checks++;
      if (digit_seen[k] == 0) begin
        failures++;
        $display("FAIL digit %0d never seen", k - 2);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
