// sbm: schoolbook (shift-and-add) multiplier, c = a * b, unsigned.
//
// One bit of b is consumed per clock.  While rst is high the operands are
// captured and bit 0 of b is already applied, so the accumulator holds
// a*b[0].  Each following cycle adds a, shifted left once more, when the next
// bit of b is set.  The adder is as wide as the product, the "2m + 2m bit
// adder" the paper names for its schoolbook multiplier.
//
// Interface: clk, rst, a, b in and c out, as the paper gives for every
// multiplier of the library.  done is this design's addition: it goes high
// WB-1 cycles after rst falls, so the product takes WB cycles in total,
// counting the loading cycle.  c and done then hold until the next rst.
// The paper's table of results implies one cycle per bit, m cycles for an
// m x m product.  Its text also says "2 x m", which this design does not
// follow.  The WA/WB split (a non-square multiplier) is this design's own
// choice; the digit-serial wrapper needs it.
module sbm #(
  parameter int unsigned WA = 1024,
  parameter int unsigned WB = WA
) (
  input  logic               clk,
  input  logic               rst,
  input  logic [WA-1:0]      a,
  input  logic [WB-1:0]      b,
  output logic [WA+WB-1:0]   c,
  output logic               done
);
  localparam int unsigned CW = $clog2(WB + 1);
  localparam logic [CW-1:0] LAST = CW'(WB);

  logic [WA+WB-1:0] acc;
  logic [WA+WB-1:0] a_sh;
  logic [WB-1:0]    b_sh;
  logic [CW-1:0]    cnt;

  always_ff @(posedge clk) begin
    if (rst) begin
      acc  <= b[0] ? {{WB{1'b0}}, a} : '0;
      a_sh <= {{(WB-1){1'b0}}, a, 1'b0};
      b_sh <= b >> 1;
      cnt  <= CW'(1);
    end else if (cnt != LAST) begin
      if (b_sh[0]) acc <= acc + a_sh;
      a_sh <= a_sh << 1;
      b_sh <= b_sh >> 1;
      cnt  <= cnt + CW'(1);
    end
  end

  assign c    = acc;
  assign done = (cnt == LAST);

endmodule
