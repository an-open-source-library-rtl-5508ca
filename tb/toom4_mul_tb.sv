// toom4_mul_tb: self-checking testbench for toom4_mul.
//
// Drives the multiplier through a set of operand pairs: zero, one, all-ones,
// sparse word patterns (which push the evaluation points of the split
// multipliers to their extreme and negative values) and random values.  The
// product is compared with the simulator's own wide multiplication of the
// same operands.  The number of cycles from the fall of rst to done is
// checked against H+4 with H = ceil(WIDTH/4).  The operands are changed right after loading,
// so a multiplier that reads them after the load cycle fails.  A watchdog
// ends the run if done never comes.  One operation is aborted half-way
// by a new rst, and the one that replaces it must still be correct.
module toom4_mul_tb;
  localparam int unsigned WIDTH = 101;
  localparam int unsigned EXP   = (WIDTH + 3) / 4 + 4;
  localparam int unsigned NRAND = 25;

  logic               clk = 1'b0;
  logic               rst = 1'b1;
  logic [WIDTH-1:0]   a = '0, b = '0;
  logic [2*WIDTH-1:0] c;
  logic               done;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  toom4_mul #(.WIDTH(WIDTH)) dut (.clk(clk), .rst(rst), .a(a), .b(b), .c(c), .done(done));

  // Words are random, zero or all-ones, so the limbs hit their extremes.
  function automatic logic [WIDTH-1:0] pattern(input int mode);
    logic [WIDTH-1:0] v = '0;
    for (int i = 0; i < (WIDTH + 31) / 32; i++) begin
      logic [31:0] w;
      int sel = (mode == 0) ? 0 : int'($urandom_range(2));
      w = (sel == 0) ? $urandom : (sel == 1) ? 32'h0 : 32'hffff_ffff;
      v = (v << 32) | WIDTH'(w);
    end
    return v;
  endfunction

  task automatic run(input logic [WIDTH-1:0] x, input logic [WIDTH-1:0] y);
    logic [2*WIDTH-1:0] expect_c;
    int cyc = 0;
    expect_c = (2*WIDTH)'(x) * (2*WIDTH)'(y);
    @(negedge clk);
    a = x; b = y; rst = 1'b1;
    @(negedge clk);
    rst = 1'b0;
    a = pattern(0); b = pattern(0);
    checks++;
    if (done) begin
      failures++;
      $display("FAIL: done high right after load");
    end
    while (!done && cyc < 4 * EXP + 8) begin
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (c !== expect_c) begin
      failures++;
      $display("FAIL: %0h * %0h: got %0h, expected %0h", x, y, c, expect_c);
    end
    checks++;
    if (cyc != EXP) begin
      failures++;
      $display("FAIL: latency %0d cycles, expected %0d", cyc, EXP);
    end
    // The result must hold while rst stays low.
    repeat (3) @(negedge clk);
    checks++;
    if (!done || c !== expect_c) begin
      failures++;
      $display("FAIL: result not held after done");
    end
  endtask

  // Start an operation, abort it part-way by raising rst with new operands,
  // and check that the second product comes out with the full latency.
  task automatic run_abort(input logic [WIDTH-1:0] x, input logic [WIDTH-1:0] y);
    @(negedge clk);
    a = ~x; b = ~y; rst = 1'b1;
    @(negedge clk);
    rst = 1'b0;
    repeat (EXP / 2) @(negedge clk);
    run(x, y);
  endtask

  initial begin
    logic [WIDTH-1:0] ones = '1;
    repeat (2) @(negedge clk);
    run_abort(pattern(0), pattern(0));
    run('0, '0);
    run('0, ones);
    run(ones, '0);
    run(WIDTH'(1), ones);
    run(ones, WIDTH'(1));
    run(ones, ones);
    run(ones, ones - WIDTH'(1));
    for (int k = 0; k < NRAND; k++) run(pattern(1), pattern(1));
    for (int k = 0; k < NRAND; k++) run(pattern(0), pattern(0));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(10 * (4 * EXP + 20) * (2 * NRAND + 10));
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
