// toom4_mul: 4-way Toom-Cook multiplier, c = a * b for WIDTH-bit unsigned
// operands, with seven schoolbook products running in parallel (the paper's
// "hybrid" scheme).
//
// Each operand is split into 4 limbs of H = ceil(WIDTH/4) bits.  The
// polynomials a(x), b(x) with x = 2^H are evaluated at the points
// {0, 1, -1, 2, -2, 1/2, inf} (weights in polymul_pkg::TOOM4_EVAL; the point
// 1/2 is scaled by 8 so that its weights are integers).  The seven signed
// values of each operand are H+4 bits of magnitude plus a sign.  Seven smul
// instances multiply them pairwise at the same time.  Interpolation forms each
// coefficient c_i of c(x) as an integer combination of the seven products,
// followed by an exact division by TOOM4_DEN[i].  The division is an
// arithmetic right shift by the power of two in the denominator, then a
// multiplication by the inverse of its odd part modulo 2^IW.  The
// coefficients are added at offsets i*H and registered.
//
// The paper gives the limb count, the seven products, the parallel schoolbook
// sub-multipliers and about m/4 cycles.  It omits the Toom-Cook equations.
// The evaluation points, the sign handling and the interpolation are this
// design's own choices.
//
// Interface: clk, rst, a, b in, c out, as in the paper, plus done (this
// design's addition).  Operands are captured while rst is high.  done rises
// H+4 cycles after rst falls (H+3 for the products, one for the output
// register).  c and done then hold until the next rst.
module toom4_mul
  import polymul_pkg::*;
#(
  parameter int unsigned WIDTH = 1024
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic [WIDTH-1:0]     a,
  input  logic [WIDTH-1:0]     b,
  output logic [2*WIDTH-1:0]   c,
  output logic                 done
);
  localparam int unsigned K   = 4;
  localparam int unsigned NP  = 2 * K - 1;
  localparam int unsigned H   = (WIDTH + K - 1) / K;
  localparam int unsigned G   = 4;                  // log2 of max sum |weight| (15)
  localparam int unsigned EW  = H + G;              // magnitude bits of an evaluation
  localparam int unsigned PW  = 2 * EW + 1;         // signed product width
  localparam int unsigned IW  = PW + 12;            // interpolation width
  localparam int unsigned RW  = 2 * WIDTH;          // recombination width (mod 2^RW is exact)

  // Inverse of an odd constant modulo 2^IW, by Newton iteration.
  function automatic logic [IW-1:0] inv_odd(input int unsigned q);
    logic [IW-1:0] x, qq;
    int unsigned bits;
    qq   = IW'(q);
    x    = qq;                  // q*q = 1 mod 8 for odd q
    bits = 3;
    while (bits < IW) begin
      x    = x * (IW'(2) - qq * x);
      bits = bits * 2;
    end
    return x;
  endfunction

  logic [K*H-1:0]          a_pad, b_pad;
  logic signed [EW:0]      ea [NP];
  logic signed [EW:0]      eb [NP];
  logic signed [PW-1:0]    v  [NP];
  logic [NP-1:0]           pdone;
  logic signed [IW-1:0]    num [NP];
  logic [IW-1:0]           coef [NP];
  logic [RW-1:0]           sum;

  assign a_pad = (K*H)'(a);
  assign b_pad = (K*H)'(b);

  // Evaluation of both operands at the NP points.
  always_comb begin
    for (int p = 0; p < NP; p++) begin
      ea[p] = '0;
      eb[p] = '0;
      for (int j = 0; j < K; j++) begin
        ea[p] = ea[p] + (EW+1)'(TOOM4_EVAL[p][j]) * $signed({1'b0, (EW)'(a_pad[j*H +: H])});
        eb[p] = eb[p] + (EW+1)'(TOOM4_EVAL[p][j]) * $signed({1'b0, (EW)'(b_pad[j*H +: H])});
      end
    end
  end

  // Pointwise products, all in parallel.
  for (genvar p = 0; p < NP; p++) begin : g_prod
    smul #(.W(EW)) u_mul (
      .clk(clk), .rst(rst), .a(ea[p]), .b(eb[p]), .c(v[p]), .done(pdone[p])
    );
  end

  // Interpolation: integer combination, then exact division.
  for (genvar i = 0; i < NP; i++) begin : g_interp
    localparam int unsigned SH  = tzcount(TOOM4_DEN[i]);
    localparam logic [IW-1:0] INV = inv_odd(TOOM4_DEN[i] >> SH);
    always_comb begin
      num[i] = '0;
      for (int p = 0; p < NP; p++) begin
        num[i] = num[i] + IW'(TOOM4_INTERP[i][p]) * IW'(v[p]);
      end
    end
    assign coef[i] = IW'($unsigned(num[i] >>> SH) * INV);
  end

  always_comb begin
    sum = '0;
    for (int i = 0; i < NP; i++) begin
      sum = sum + (RW'(coef[i]) << (i * H));
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      done <= 1'b0;
    end else if (&pdone && !done) begin
      c    <= sum;
      done <= 1'b1;
    end
  end

endmodule
