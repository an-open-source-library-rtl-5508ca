// digit_serial_mul: digit-serial multiplier, c = a * b for WIDTH-bit unsigned
// operands, with b consumed DIGIT bits at a time.
//
// b is cut into ND = ceil(WIDTH/DIGIT) digits, zero-padded at the top.  An
// inner WIDTH x DIGIT schoolbook multiplier (sbm) forms a * digit_i in DIGIT
// cycles, least significant digit first.  Each partial product is added to
// the running upper part `hi` of the result.  The low DIGIT bits of that sum
// are final and shift into the register `lo`.  That is the paper's "shift
// and add" with an adder of WIDTH+DIGIT bits.  When the inner multiplier
// reports done, the wrapper takes its product and restarts it on the next
// digit in the same clock edge, so no cycle is lost between digits.
//
// Following the paper: the digits are taken from b, their count is
// d = m/n (rounded up, as Table 2 of the paper does), they are processed
// serially against all of a, and there is a schoolbook inner multiplier.  The
// LSB-first accumulation and the back-to-back restart are this design's own
// choices.  As the paper allows, the inner multiplier can be any of the
// library's methods (parameter INNER, schoolbook by default).  The
// Karatsuba and Toom-Cook multipliers are square, so they get the digit
// zero-extended to WIDTH bits.  A digit then takes their latency plus one
// cycle instead of DIGIT cycles.
//
// Interface: clk, rst, a, b in and c out, as in the paper, plus done (this
// design's addition).  Operands are captured while rst is high.  With the
// schoolbook inner multiplier, done rises exactly ND*DIGIT cycles after rst
// falls, matching the paper's d x n cycles.  With another inner multiplier
// of latency L (cycles from the fall of its rst to its done) it rises after
// ND*(L+1) cycles.  c and done then hold until the next rst.
module digit_serial_mul
  import polymul_pkg::*;
#(
  parameter int unsigned WIDTH = 1024,
  parameter int unsigned DIGIT = 64,
  parameter method_e     INNER = M_SBM
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic [WIDTH-1:0]     a,
  input  logic [WIDTH-1:0]     b,
  output logic [2*WIDTH-1:0]   c,
  output logic                 done
);
  localparam int unsigned ND = (WIDTH + DIGIT - 1) / DIGIT;   // total digits d
  localparam int unsigned LW = ND * DIGIT;                    // padded b width
  localparam int unsigned IW = $clog2(ND + 1);

  logic [WIDTH-1:0]        a_r;
  logic [LW+DIGIT-1:0]     b_r;        // digit in flight in [DIGIT-1:0]
  logic [WIDTH-1:0]        hi;
  logic [LW-1:0]           lo;
  logic [IW-1:0]           idx;        // digits already accumulated
  logic                    last;

  logic                    m_rst, m_done;
  logic [WIDTH-1:0]        m_a;
  logic [DIGIT-1:0]        m_b;
  logic [WIDTH+DIGIT-1:0]  m_p;
  logic [WIDTH+DIGIT-1:0]  t;
  logic                    take;

  assign last  = (idx == IW'(ND - 1));
  assign take  = !rst && m_done && !done;
  assign m_rst = rst || (take && !last);
  assign m_a   = rst ? a : a_r;
  assign m_b   = rst ? b[DIGIT-1:0] : b_r[2*DIGIT-1:DIGIT];
  assign t     = (WIDTH+DIGIT)'(hi) + m_p;

  if (INNER == M_SBM) begin : g_inner
    sbm #(.WA(WIDTH), .WB(DIGIT)) u_digit (
      .clk(clk), .rst(m_rst), .a(m_a), .b(m_b), .c(m_p), .done(m_done)
    );
  end else begin : g_inner
    // Square inner multiplier: the digit is zero-extended, and the product
    // is below 2^(WIDTH+DIGIT), so its upper bits are zero.
    logic [2*WIDTH-1:0] p_full;
    logic [WIDTH-1:0]   b_ext;
    assign b_ext = WIDTH'(m_b);
    if (INNER == M_KARATSUBA2) begin : g_m
      karatsuba2_mul #(.WIDTH(WIDTH)) u_digit (
        .clk(clk), .rst(m_rst), .a(m_a), .b(b_ext), .c(p_full), .done(m_done)
      );
    end else if (INNER == M_TOOM3) begin : g_m
      toom3_mul #(.WIDTH(WIDTH)) u_digit (
        .clk(clk), .rst(m_rst), .a(m_a), .b(b_ext), .c(p_full), .done(m_done)
      );
    end else begin : g_m
      toom4_mul #(.WIDTH(WIDTH)) u_digit (
        .clk(clk), .rst(m_rst), .a(m_a), .b(b_ext), .c(p_full), .done(m_done)
      );
    end
    assign m_p = p_full[WIDTH+DIGIT-1:0];
  end

  // The wrapper cannot contain itself.
  initial assert (INNER != M_DIGIT_SERIAL);
  // A digit must not be wider than the operand.
  initial assert (DIGIT <= WIDTH);

  always_ff @(posedge clk) begin
    if (rst) begin
      a_r  <= a;
      b_r  <= (LW+DIGIT)'(b);
      hi   <= '0;
      lo   <= '0;
      idx  <= '0;
      done <= 1'b0;
    end else if (take) begin
      hi   <= t[WIDTH+DIGIT-1:DIGIT];
      lo   <= (lo >> DIGIT) | (LW'(t[DIGIT-1:0]) << (LW - DIGIT));
      b_r  <= b_r >> DIGIT;
      idx  <= idx + IW'(1);
      done <= last;
    end
  end

  logic [WIDTH+LW-1:0] res;
  assign res = {hi, lo};
  assign c   = res[2*WIDTH-1:0];

endmodule
