// smul: signed multiplier built on the schoolbook sbm, used by the Toom-Cook
// multipliers for their products at negative evaluation points.
//
// The two's-complement operands (W magnitude bits plus a sign bit) are turned
// into magnitudes.  An unsigned W x W sbm multiplies the magnitudes, and the
// product is negated when the signs differ.  Operands must lie in
// (-2^W, 2^W).  The signs are captured while rst is high, together with the
// operands in the sbm.  Timing is that of sbm: done rises W-1 cycles after rst
// falls.  The sign-magnitude scheme is this design's choice; the paper does
// not say how its Toom-Cook products handle sign.
module smul #(
  parameter int unsigned W = 16
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic signed [W:0]    a,
  input  logic signed [W:0]    b,
  output logic signed [2*W:0]  c,
  output logic                 done
);
  logic [W-1:0]   a_mag, b_mag;
  logic [2*W-1:0] p;
  logic           neg;

  always_comb begin
    a_mag = a[W] ? W'(-a) : a[W-1:0];
    b_mag = b[W] ? W'(-b) : b[W-1:0];
  end

  always_ff @(posedge clk) begin
    if (rst) neg <= a[W] ^ b[W];
  end

  sbm #(.WA(W), .WB(W)) u_sbm (
    .clk(clk), .rst(rst), .a(a_mag), .b(b_mag), .c(p), .done(done)
  );

  assign c = neg ? -$signed({1'b0, p}) : $signed({1'b0, p});

endmodule
