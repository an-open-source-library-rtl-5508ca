// karatsuba2_mul: 2-way Karatsuba multiplier, c = a * b for WIDTH-bit
// unsigned operands, built from three schoolbook multipliers running in
// parallel (the "hybrid" scheme of the paper).
//
// The operands are split at H = ceil(WIDTH/2) bits, a = a1*2^H + a0.  Three
// sbm instances form c0 = a0*b0, c1 = a1*b1 and cm = (a0+a1)*(b0+b1), all
// at the same time.  The middle term is c2 = cm - c1 - c0, and the result is
// c = c1*2^(2H) + c2*2^H + c0.  That is one adder/subtracter over the three
// partial products, registered once.  The split, the three products and the
// recombination follow the paper's equations.  The paper counts the middle
// multiplier as H bits wide.  Here it is H+1 bits wide, so that the carry of
// a0+a1 is kept: the product takes H+1 cycles, not H.
//
// Interface: clk, rst, a, b in and c out, as in the paper, plus done (this
// design's addition).  Operands are captured while rst is high.  done rises
// H+1 cycles after rst falls: H for the middle product, one for the output
// register.  c and done then hold until the next rst.
module karatsuba2_mul #(
  parameter int unsigned WIDTH = 1024
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic [WIDTH-1:0]     a,
  input  logic [WIDTH-1:0]     b,
  output logic [2*WIDTH-1:0]   c,
  output logic                 done
);
  localparam int unsigned H  = (WIDTH + 1) / 2;
  localparam int unsigned HI = WIDTH - H;          // width of a1, b1 (<= H)
  localparam int unsigned RW = 2 * WIDTH;          // recombination width (mod 2^RW is exact)

  logic [H-1:0]   a0, b0, a1, b1;
  logic [H:0]     as, bs;
  logic [2*H-1:0] p0, p1;
  logic [2*H+1:0] pm;
  logic           d0, d1, dm;
  logic [RW-1:0]  mid, sum;

  assign a0 = a[H-1:0];
  assign b0 = b[H-1:0];
  assign a1 = H'(a[WIDTH-1:H]);
  assign b1 = H'(b[WIDTH-1:H]);
  assign as = {1'b0, a0} + {1'b0, a1};
  assign bs = {1'b0, b0} + {1'b0, b1};

  sbm #(.WA(H),   .WB(H))   u_lo  (.clk(clk), .rst(rst), .a(a0), .b(b0), .c(p0), .done(d0));
  sbm #(.WA(H),   .WB(H))   u_hi  (.clk(clk), .rst(rst), .a(a1), .b(b1), .c(p1), .done(d1));
  sbm #(.WA(H+1), .WB(H+1)) u_mid (.clk(clk), .rst(rst), .a(as), .b(bs), .c(pm), .done(dm));

  always_comb begin
    mid = RW'(pm) - RW'(p0) - RW'(p1);
    sum = RW'(p0) + (mid << H) + (RW'(p1) << (2 * H));
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      done <= 1'b0;
    end else if (d0 && d1 && dm && !done) begin
      c    <= sum;
      done <= 1'b1;
    end
  end

  // a1 and b1 are zero-extended halves: nothing may be lost by the H' casts.
  initial assert (HI <= H);

endmodule
