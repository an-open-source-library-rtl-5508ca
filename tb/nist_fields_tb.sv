// nist_fields_tb: runs the four non-digitized multipliers (schoolbook,
// 2-way Karatsuba, 3-way and 4-way Toom-Cook) at every operand size of the
// NIST elliptic-curve fields: P-192, P-224, P-256, P-384, P-521, B-163,
// B-233, B-283, B-409 and B-571.  It also runs the 2-way Karatsuba at 128,
// 256 and 512 bits.  Every size/method pair gets its own instance.
// Each instance multiplies two operand pairs, all-ones and random, and its
// product is compared with the simulator's wide multiplication.  Its cycle
// count from the fall of rst to done is checked against the design's
// latency: m-1 for the schoolbook multiplier, H+1 for Karatsuba, H+3 and H+4
// for the Toom-Cook ones, where H = ceil(m/k).  All instances run at once.
module nist_fields_tb;
  localparam int NS = 13;
  // 0..9: NIST field sizes; 10..12: extra Karatsuba sizes
  localparam int unsigned SIZES [NS] = '{192, 224, 256, 384, 521, 163, 233, 283, 409, 571,
                                          128, 256, 512};

  logic clk = 1'b0;
  logic rst;
  int checks = 0, failures = 0, finished = 0;
  int expected_finished = 0;

  always #5 clk = ~clk;

  for (genvar s = 0; s < NS; s++) begin : g_size
    localparam int unsigned M = SIZES[s];
    for (genvar k = 1; k <= 4; k++) begin : g_method
      if (s < 10 || k == 2) begin : g_on
        logic [M-1:0]   a, b;
        logic [2*M-1:0] c, expect_c;
        logic           done;
        localparam int unsigned H = (M + k - 1) / k;
        localparam int unsigned LAT = (k == 1) ? M - 1 : (k == 2) ? H + 1 : (k == 3) ? H + 3 : H + 4;

        if (k == 1) begin : g_m
          sbm #(.WA(M), .WB(M)) dut (.clk(clk), .rst(rst), .a(a), .b(b), .c(c), .done(done));
        end else if (k == 2) begin : g_m
          karatsuba2_mul #(.WIDTH(M)) dut (.clk(clk), .rst(rst), .a(a), .b(b), .c(c), .done(done));
        end else if (k == 3) begin : g_m
          toom3_mul #(.WIDTH(M)) dut (.clk(clk), .rst(rst), .a(a), .b(b), .c(c), .done(done));
        end else begin : g_m
          toom4_mul #(.WIDTH(M)) dut (.clk(clk), .rst(rst), .a(a), .b(b), .c(c), .done(done));
        end

        initial begin
          expected_finished++;
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
            while (!done && cyc < 2 * M) begin
              @(negedge clk);
              cyc++;
            end
            checks += 2;
            if (c !== expect_c) begin
              failures++;
              $display("FAIL: m=%0d method %0d: wrong product", M, k);
            end
            if (cyc != int'(LAT)) begin
              failures++;
              $display("FAIL: m=%0d method %0d: latency %0d, expected %0d", M, k, cyc, LAT);
            end
          end
          finished++;
        end
      end
    end
  end

  // One rst pulse per round; the instances load their operands on it.
  initial begin
    rst = 1'b0;
    for (int v = 0; v < 2; v++) begin
      @(negedge clk);
      rst = 1'b1;
      @(negedge clk);
      rst = 1'b0;
      repeat (1200) @(negedge clk);
    end
    wait (finished == expected_finished);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(10 * 4000);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
