// tb_fma_datapath_small: exhaustive test of the multiply-add datapath at a
// reduced size, 8 x 8-bit operands and a 20-bit sum (5 Booth rows, 8 tree
// rows). Every a, b pair is applied with random addends c and d, and y must
// equal (a*b + c + d) mod 2^20 as computed by the simulator. Watchdog included.
module tb_fma_datapath_small;
  logic [7:0]  sa, sb;
  logic [19:0] sc, sd, sy;
  int checks = 0, failures = 0;

  fma_datapath #(.MUL_W(8), .SUM_W(20)) dut (.a_i(sa), .b_i(sb), .c_i(sc), .d_i(sd), .y_o(sy));

  initial begin : watchdog
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int rep = 0; rep < 4; rep++) begin
      for (int x = 0; x < 256; x++) begin
        for (int z = 0; z < 256; z++) begin
          sa = 8'(x); sb = 8'(z); sc = 20'($urandom); sd = 20'($urandom);
          if (rep == 3) begin sc = '1; sd = '1; end
          #1;
          checks++;
          if (sy !== 20'(x * z + int'(sc) + int'(sd))) begin
            failures++;
            $display("FAIL %0d*%0d+%0d+%0d got %0d", x, z, sc, sd, sy);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
