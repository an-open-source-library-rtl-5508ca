// digitized_tb: runs the digit-serial multiplier at the operand and digit
// sizes of the digitized evaluations.  Those are 521 and 571 bits with
// 32/41/53/81-bit digits; 1024 bits with digits of 2, 4, ... 1024 bits; 521
// bits with 64- and 128-bit digits; 2048 bits with 2-, 4- and 8-bit digits;
// and 571 bits with 64-bit digits.  Every configuration gets its own
// instance.
// Each instance multiplies an all-ones pair and a random pair.  It checks
// the product against the simulator's wide multiplication and the cycle
// count from the fall of rst to done against d*n.  Where the published
// digit count d is known (DPUB > 0), it also checks that ceil(m/n) equals it.
module digitized_tb;
  localparam int NC = 24;
  localparam int unsigned CM   [NC] = '{521, 521, 521, 521, 571, 571, 571, 571,
                                        1024, 1024, 1024, 1024, 1024, 1024, 1024, 1024, 1024, 1024,
                                        521, 521, 2048, 2048, 2048, 571};
  localparam int unsigned CN   [NC] = '{32, 41, 53, 81, 32, 41, 53, 81,
                                        2, 4, 8, 16, 32, 64, 128, 256, 512, 1024,
                                        64, 128, 2, 4, 8, 64};
  localparam int unsigned DPUB [NC] = '{17, 13, 10, 7, 18, 14, 11, 8,
                                        512, 256, 128, 64, 32, 16, 8, 4, 2, 1,
                                        9, 5, 0, 0, 0, 0};

  logic clk = 1'b0;
  logic rst;
  int checks = 0, failures = 0, finished = 0;
  localparam int ROUND = 2100;

  always #5 clk = ~clk;

  for (genvar s = 0; s < NC; s++) begin : g_cfg
    localparam int unsigned M = CM[s];
    localparam int unsigned N = CN[s];
    localparam int unsigned D = (M + N - 1) / N;
    logic [M-1:0]   a, b;
    logic [2*M-1:0] c, expect_c;
    logic           done;

    digit_serial_mul #(.WIDTH(M), .DIGIT(N)) dut (
      .clk(clk), .rst(rst), .a(a), .b(b), .c(c), .done(done)
    );

    initial begin
      if (DPUB[s] != 0) begin
        checks++;
        if (D != DPUB[s]) begin
          failures++;
          $display("FAIL: m=%0d n=%0d: %0d digits, published %0d", M, N, D, DPUB[s]);
        end
      end
      for (int v = 0; v < 2; v++) begin
        int cyc;
        cyc = 0;
        @(posedge rst);
        if (v == 0) begin
          a = '1; b = '1;
        end else begin
          for (int i = 0; i < (M + 31) / 32; i++) begin
            a = (a << 32) | M'($urandom);
            b = (b << 32) | M'($urandom);
          end
        end
        expect_c = (2*M)'(a) * (2*M)'(b);
        @(negedge rst);
        while (!done && cyc < ROUND) begin
          @(negedge clk);
          cyc++;
        end
        checks += 2;
        if (c !== expect_c) begin
          failures++;
          $display("FAIL: m=%0d n=%0d: wrong product", M, N);
        end
        if (cyc != int'(D * N)) begin
          failures++;
          $display("FAIL: m=%0d n=%0d: latency %0d, expected %0d", M, N, cyc, D * N);
        end
      end
      finished++;
    end
  end

  initial begin
    rst = 1'b0;
    for (int v = 0; v < 2; v++) begin
      @(negedge clk);
      rst = 1'b1;
      @(negedge clk);
      rst = 1'b0;
      repeat (ROUND + 10) @(negedge clk);
    end
    wait (finished == NC);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(10 * 3 * (ROUND + 50));
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
