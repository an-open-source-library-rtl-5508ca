// digit_serial_inner_tb: the digit-serial multiplier with each square
// multiplier of the library inside it (2-way Karatsuba, 3-way and 4-way
// Toom-Cook) in place of the default schoolbook one.
//
// Three instances (40-bit operands, 8-bit digits, so 5 digits) run the same
// operand pairs at once: all-ones, one and random values.  Each product is
// checked against the simulator's wide multiplication.  The cycle count from
// the fall of rst to done is checked against d*(L+1), where L is the inner
// multiplier's latency from the fall of its rst to its done: H+1, H+3 and H+4
// with H = ceil(WIDTH/k).
module digit_serial_inner_tb;
  import polymul_pkg::*;
  localparam int unsigned WIDTH = 40;
  localparam int unsigned DIGIT = 8;
  localparam int unsigned ND    = (WIDTH + DIGIT - 1) / DIGIT;
  localparam int unsigned NVEC  = 12;

  logic               clk = 1'b0;
  logic               rst = 1'b1;
  logic [WIDTH-1:0]   a = '0, b = '0;
  logic [2*WIDTH-1:0] c [3];
  logic [2:0]         done;
  int checks = 0, failures = 0;
  int unsigned lat [3];

  always #5 clk = ~clk;

  digit_serial_mul #(.WIDTH(WIDTH), .DIGIT(DIGIT), .INNER(M_KARATSUBA2)) u_k2 (
    .clk(clk), .rst(rst), .a(a), .b(b), .c(c[0]), .done(done[0]));
  digit_serial_mul #(.WIDTH(WIDTH), .DIGIT(DIGIT), .INNER(M_TOOM3)) u_t3 (
    .clk(clk), .rst(rst), .a(a), .b(b), .c(c[1]), .done(done[1]));
  digit_serial_mul #(.WIDTH(WIDTH), .DIGIT(DIGIT), .INNER(M_TOOM4)) u_t4 (
    .clk(clk), .rst(rst), .a(a), .b(b), .c(c[2]), .done(done[2]));

  initial begin
    lat[0] = ND * ((WIDTH + 1) / 2 + 2);
    lat[1] = ND * ((WIDTH + 2) / 3 + 4);
    lat[2] = ND * ((WIDTH + 3) / 4 + 5);
  end

  task automatic run(input logic [WIDTH-1:0] x, input logic [WIDTH-1:0] y);
    logic [2*WIDTH-1:0] expect_c = (2*WIDTH)'(x) * (2*WIDTH)'(y);
    int seen [3] = '{-1, -1, -1};
    int cyc = 0;
    @(negedge clk);
    a = x; b = y; rst = 1'b1;
    @(negedge clk);
    rst = 1'b0;
    a = WIDTH'({$urandom, $urandom}); b = WIDTH'({$urandom, $urandom});
    while (done != 3'b111 && cyc < 400) begin
      @(negedge clk);
      cyc++;
      for (int i = 0; i < 3; i++) if (done[i] && seen[i] < 0) seen[i] = cyc;
    end
    for (int i = 0; i < 3; i++) begin
      checks += 2;
      if (c[i] !== expect_c) begin
        failures++;
        $display("FAIL: inner %0d: %0h * %0h gave %0h", i, x, y, c[i]);
      end
      if (seen[i] != int'(lat[i])) begin
        failures++;
        $display("FAIL: inner %0d: latency %0d, expected %0d", i, seen[i], lat[i]);
      end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    run('1, '1);
    run(WIDTH'(1), '1);
    run('1, WIDTH'(1));
    for (int k = 0; k < NVEC; k++) run(WIDTH'({$urandom, $urandom}), WIDTH'({$urandom, $urandom}));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(10 * 420 * (NVEC + 4));
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
