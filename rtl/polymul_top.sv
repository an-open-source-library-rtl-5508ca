// polymul_top: the multiplier library behind one port set.
//
// All five multipliers are instantiated for the same operand width:
// schoolbook, 2-way Karatsuba, 3-way and 4-way Toom-Cook, and the
// digit-serial wrapper.  They share the clk, rst, a, b inputs.  The method
// input (polymul_pkg::method_e) is captured while rst is high, like the
// operands.  Only the selected multiplier leaves reset when rst falls; the
// others are held in reset and stay idle.  c and done come from the selected
// one.
//
// The paper offers these flavours as alternatives produced by a generator,
// one file each, and gives them a common interface (clk, rst, a, b, c).
// Gathering them under one run-time select is this design's choice.  It puts
// the whole library into a single synthesizable unit that can be simulated
// and compared.
//
// Timing, in cycles after rst falls to done (H = ceil(WIDTH/k)):
//   schoolbook WIDTH-1, Karatsuba H+1, 3-way H+3, 4-way H+4,
//   digit-serial ceil(WIDTH/DIGIT)*DIGIT.
// With the defaults (WIDTH 1024, DIGIT 64): 1023, 513, 345, 260, 1024.
module polymul_top
  import polymul_pkg::*;
#(
  parameter int unsigned WIDTH = 1024,
  parameter int unsigned DIGIT = 64
) (
  input  logic                 clk,
  input  logic                 rst,
  input  method_e              method,
  input  logic [WIDTH-1:0]     a,
  input  logic [WIDTH-1:0]     b,
  output logic [2*WIDTH-1:0]   c,
  output logic                 done
);
  method_e                sel;
  logic [2*WIDTH-1:0]     cm [NUM_METHODS];
  logic [NUM_METHODS-1:0] dm;
  logic [NUM_METHODS-1:0] hold;

  always_ff @(posedge clk) begin
    if (rst) sel <= method;
  end

  // Unselected multipliers stay in reset.  While rst is high every one of
  // them loads, so sel need not be valid yet.
  always_comb begin
    for (int i = 0; i < NUM_METHODS; i++) begin
      hold[i] = rst || (sel != method_e'(i));
    end
  end

  sbm #(.WA(WIDTH), .WB(WIDTH)) u_sbm (
    .clk(clk), .rst(hold[M_SBM]), .a(a), .b(b),
    .c(cm[M_SBM]), .done(dm[M_SBM])
  );

  karatsuba2_mul #(.WIDTH(WIDTH)) u_kar2 (
    .clk(clk), .rst(hold[M_KARATSUBA2]), .a(a), .b(b),
    .c(cm[M_KARATSUBA2]), .done(dm[M_KARATSUBA2])
  );

  toom3_mul #(.WIDTH(WIDTH)) u_toom3 (
    .clk(clk), .rst(hold[M_TOOM3]), .a(a), .b(b),
    .c(cm[M_TOOM3]), .done(dm[M_TOOM3])
  );

  toom4_mul #(.WIDTH(WIDTH)) u_toom4 (
    .clk(clk), .rst(hold[M_TOOM4]), .a(a), .b(b),
    .c(cm[M_TOOM4]), .done(dm[M_TOOM4])
  );

  digit_serial_mul #(.WIDTH(WIDTH), .DIGIT(DIGIT)) u_dsm (
    .clk(clk), .rst(hold[M_DIGIT_SERIAL]), .a(a), .b(b),
    .c(cm[M_DIGIT_SERIAL]), .done(dm[M_DIGIT_SERIAL])
  );

  always_comb begin
    c    = '0;
    done = 1'b0;
    if (int'(sel) < NUM_METHODS) begin
      c    = cm[sel];
      done = dm[sel];
    end
  end

endmodule
