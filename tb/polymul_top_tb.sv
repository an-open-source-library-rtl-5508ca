// polymul_top_tb: end-to-end test of polymul_top at its default size
// (1024-bit operands, 64-bit digits), with no parameter overrides.
//
// Each operation loads a method and two operands during rst.  The test then
// waits for done and compares c with the simulator's own 2048-bit product.
// It checks the cycle count from the fall of rst to done for that method and
// checks that no other multiplier raised done.  Methods are switched from
// one operation to the next, in a shuffled order, with no idle cycle between
// them.  The mechanisms the design relies on are counted, and a failure is
// recorded for any that never happened:
//   - each of the five methods selected and completed;
//   - the Karatsuba middle operand a0+a1 (or b0+b1) carrying out of H bits;
//   - a negative evaluation at -1 or -2 in the 3-way and 4-way Toom-Cook;
//   - a digit hand-off in the digit-serial wrapper (one per digit, counted
//     from the wrapper's accumulate strobe, which must fire d times per run).
module polymul_top_tb;
  import polymul_pkg::*;

  localparam int unsigned WIDTH = 1024;
  localparam int unsigned DIGIT = 64;
  localparam int unsigned ND    = (WIDTH + DIGIT - 1) / DIGIT;
  localparam int unsigned NVEC  = 4;

  logic               clk = 1'b0;
  logic               rst = 1'b1;
  method_e            method = M_SBM;
  logic [WIDTH-1:0]   a = '0, b = '0;
  logic [2*WIDTH-1:0] c;
  logic               done;
  int checks = 0, failures = 0;
  int n_method [NUM_METHODS];
  int n_kar_carry = 0, n_t3_neg = 0, n_t4_neg = 0, n_digit = 0;

  always #5 clk = ~clk;

  polymul_top dut (.clk(clk), .rst(rst), .method(method), .a(a), .b(b), .c(c), .done(done));

  always @(posedge clk) if (dut.u_dsm.take) n_digit++;

  function automatic int unsigned expected_latency(input method_e m);
    case (m)
      M_SBM:        return WIDTH - 1;
      M_KARATSUBA2: return (WIDTH + 1) / 2 + 1;
      M_TOOM3:      return (WIDTH + 2) / 3 + 3;
      M_TOOM4:      return (WIDTH + 3) / 4 + 4;
      default:      return ND * DIGIT;
    endcase
  endfunction

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

  // Limb j of x for a k-way split, as a signed integer wide enough for sums.
  function automatic longint limb_sign(input logic [WIDTH-1:0] x, input int k, input int j);
    int unsigned h = (WIDTH + k - 1) / k;
    // compare only the top 62 bits of each limb: enough to see the sign of
    // the small weighted sums used below (limbs differ far above bit 62)
    logic [WIDTH+255:0] xp = (WIDTH+256)'(x);
    logic [WIDTH+255:0] l = (xp >> (j * h)) & ((WIDTH+256)'(1) << h) - 1;
    return longint'(l >> (h - 58));
  endfunction

  function automatic bit kar_carry(input logic [WIDTH-1:0] x);
    localparam int unsigned KH = (WIDTH + 1) / 2;
    logic [WIDTH:0] s = (WIDTH+1)'(x[KH-1:0]) + (WIDTH+1)'(x >> KH);
    return s[KH];
  endfunction

  function automatic bit toom_neg(input logic [WIDTH-1:0] x, input int k);
    longint l0 = limb_sign(x, k, 0), l1 = limb_sign(x, k, 1);
    longint l2 = limb_sign(x, k, 2), l3 = (k == 4) ? limb_sign(x, k, 3) : 0;
    return (l0 - l1 + l2 - l3 < 0) || (l0 - 2 * l1 + 4 * l2 - 8 * l3 < 0);
  endfunction

  task automatic run(input method_e m, input logic [WIDTH-1:0] x, input logic [WIDTH-1:0] y);
    logic [2*WIDTH-1:0] expect_c;
    int cyc = 0;
    int d0 = n_digit;
    int unsigned exp_lat = expected_latency(m);
    expect_c = (2*WIDTH)'(x) * (2*WIDTH)'(y);
    @(negedge clk);
    method = m; a = x; b = y; rst = 1'b1;
    @(negedge clk);
    rst = 1'b0;
    method = method_e'($urandom_range(NUM_METHODS - 1));
    a = pattern(0); b = pattern(0);
    while (!done && cyc < 2 * WIDTH + 16) begin
      @(negedge clk);
      cyc++;
      checks++;
      if ((dut.dm & ~(NUM_METHODS'(1) << m)) != '0) begin
        failures++;
        $display("FAIL: an unselected multiplier raised done (method %s)", m.name());
      end
    end
    checks++;
    if (c !== expect_c) begin
      failures++;
      $display("FAIL: method %s: wrong product", m.name());
    end
    checks++;
    if (cyc != int'(exp_lat)) begin
      failures++;
      $display("FAIL: method %s: latency %0d, expected %0d", m.name(), cyc, exp_lat);
    end
    if (m == M_DIGIT_SERIAL) begin
      checks++;
      if (n_digit - d0 != int'(ND)) begin
        failures++;
        $display("FAIL: %0d digit hand-offs, expected %0d", n_digit - d0, ND);
      end
    end
    n_method[m]++;
    if (m == M_KARATSUBA2 && (kar_carry(x) || kar_carry(y))) n_kar_carry++;
    if (m == M_TOOM3 && (toom_neg(x, 3) || toom_neg(y, 3))) n_t3_neg++;
    if (m == M_TOOM4 && (toom_neg(x, 4) || toom_neg(y, 4))) n_t4_neg++;
  endtask

  initial begin
    logic [WIDTH-1:0] ones = '1;
    method_e order [NUM_METHODS] = '{M_TOOM4, M_SBM, M_DIGIT_SERIAL, M_KARATSUBA2, M_TOOM3};
    for (int i = 0; i < NUM_METHODS; i++) n_method[i] = 0;
    repeat (2) @(negedge clk);
    for (int v = 0; v < NVEC + 1; v++) begin
      for (int i = 0; i < NUM_METHODS; i++) begin
        if (v == 0) run(order[i], ones, ones);
        else        run(order[i], pattern(v % 2), pattern(v % 2));
      end
    end
    // a limb pattern that makes a(-1) and a(-2) negative for both Toom splits
    run(M_TOOM3, {(WIDTH/2){2'b01}} << (WIDTH / 3), ones >> 2);
    run(M_TOOM4, {(WIDTH/2){2'b01}} << (WIDTH / 4), ones >> 2);
    for (int i = 0; i < NUM_METHODS; i++) begin
      checks++;
      if (n_method[i] == 0) begin
        failures++;
        $display("FAIL: method %0d never ran", i);
      end
    end
    checks += 4;
    if (n_kar_carry == 0) begin failures++; $display("FAIL: no Karatsuba middle carry"); end
    if (n_t3_neg == 0)    begin failures++; $display("FAIL: no negative 3-way evaluation"); end
    if (n_t4_neg == 0)    begin failures++; $display("FAIL: no negative 4-way evaluation"); end
    if (n_digit == 0)     begin failures++; $display("FAIL: no digit hand-off"); end
    $display("mechanisms: kar_carry=%0d toom3_neg=%0d toom4_neg=%0d digits=%0d",
             n_kar_carry, n_t3_neg, n_t4_neg, n_digit);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(10 * 2200 * (NUM_METHODS * (NVEC + 1) + 4));
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
