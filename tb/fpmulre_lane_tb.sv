// fpmulre_lane_tb: self-checking test of one binary64 FPMUL/FPMULRE lane.
//
// Random operand pairs with a random opcode are streamed into the lane.
// FPMUL is compared with the simulator's double multiply for every pair
// (normal, subnormal, overflowing and special operands). FPMULRE is compared
// with an exact integer model of a * b - FPMUL(a, b), rounded once, for every
// finite product (this covers errors that fall below the subnormal range),
// and in addition with Dekker's TwoProduct (Veltkamp splitting, all in double
// arithmetic) where that is exact: both operand exponents within +-400 of the
// bias. For overflowing or special products it must be NaN. Every result must
// appear 4 cycles after its operation.
module fpmulre_lane_tb;
  import fp_pkg::*;
  import fp_ref_pkg::*;

  localparam int N       = 30000;
  localparam int LATENCY = 4;

  logic    clk = 1'b0;
  logic    rst_n = 1'b0;
  logic    valid_i = 1'b0;
  mul_op_e op_i = OP_FPMUL;
  dbl_t    a_i = '0, b_i = '0;
  logic    valid_o;
  mul_op_e op_o;
  dbl_t    res_o;
  logic    inexact_o, round_up_o, overflow_o;

  int checks = 0, failures = 0, n_exact_err = 0, n_tiny = 0, n_up = 0, n_ovf = 0;
  longint cycle = 0;

  typedef struct {
    dbl_t    a, b;
    mul_op_e op;
    longint  t;
  } txn_t;
  txn_t q[$];

  fpmulre_lane dut (
    .clk_i(clk), .rst_ni(rst_n), .valid_i, .op_i, .a_i, .b_i,
    .valid_o, .op_o, .res_o, .inexact_o, .round_up_o, .overflow_o
  );

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  function automatic real split_hi(real x);
    real c;
    c = 134217729.0 * x;       // 2^27 + 1
    return c - (c - x);
  endfunction

  function automatic dbl_t ref_mulre(dbl_t a, dbl_t b);
    real ra, rb, p, ah, al, bh, bl, e;
    ra = $bitstoreal(a);
    rb = $bitstoreal(b);
    p  = ra * rb;
    ah = split_hi(ra);  al = ra - ah;
    bh = split_hi(rb);  bl = rb - bh;
    e  = ((ah * bh - p) + ah * bl + al * bh) + al * bl;
    return $realtobits(e);
  endfunction

  // Exact model of FPMULRE for finite operands and a finite product p:
  // the product's significands are multiplied as integers, p is subtracted
  // on a common grid, and the difference (at most 2^52 grid units whenever
  // it is not below the subnormal range) is scaled by a power of two in two
  // steps of which only the last can round, so the result is the correctly
  // rounded error. When p is subnormal the error is at most half the
  // smallest subnormal and rounds to 0.
  function automatic dbl_t ref_mulre_exact(dbl_t a, dbl_t b, dbl_t p);
    logic signed [255:0] x, y, dlt;
    logic [255:0] mag;
    int ea, eb, ep, u, pe, base;
    real r;
    if (p[62:52] == 0) return 64'h0;
    ea = (a[62:52] == 0) ? 1 : int'(a[62:52]);
    eb = (b[62:52] == 0) ? 1 : int'(b[62:52]);
    ep = int'(p[62:52]);
    u  = (ea - 1075) + (eb - 1075);
    pe = ep - 1075;
    base = (u < pe) ? u : pe;
    x = 256'({a[62:52] != 0, a[51:0]}) * 256'({b[62:52] != 0, b[51:0]});
    x = x <<< (u - base);
    y = 256'({1'b1, p[51:0]}) <<< (pe - base);
    if (a[63] ^ b[63]) x = -x;
    if (p[63]) y = -y;
    dlt = x - y;
    mag = (dlt < 0) ? -dlt : dlt;
    if (mag == 0) return 64'h0;
    r = real'(mag[63:0]);              // mag < 2^53 here, converted exactly
    if (base >= -1000) begin
      r = r * (2.0 ** base);             // exact: the result is normal
    end else begin
      r = r * (2.0 ** (base + 500));     // exact
      r = r * (2.0 ** (-500));           // the only rounding
    end
    if (dlt < 0) r = -r;
    return $realtobits(r);
  endfunction

  function automatic bit moderate(dbl_t x);
    return (x[62:52] >= 11'd623) && (x[62:52] <= 11'd1423);
  endfunction

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL: %s", msg);
  endtask

  always @(posedge clk) begin
    if (rst_n && valid_o) begin
      txn_t t;
      dbl_t p, e;
      if (q.size() == 0) fail("result with no operation outstanding");
      else begin
        t = q.pop_front();
        p = $realtobits($bitstoreal(t.a) * $bitstoreal(t.b));
        checks++;
        if (cycle - t.t != LATENCY || op_o != t.op) fail($sformatf("latency %0d", cycle - t.t));
        n_up  += int'(round_up_o);
        n_ovf += int'(overflow_o);
        if (t.op == OP_FPMUL) begin
          checks++;
          if (!same(res_o, p, 1'b0))
            fail($sformatf("FPMUL a=%h b=%h got=%h exp=%h", t.a, t.b, res_o, p));
        end else if (is_nan(p) || p[62:52] == 11'h7FF) begin
          checks++;
          if (!is_nan(res_o)) fail($sformatf("FPMULRE special a=%h b=%h got=%h", t.a, t.b, res_o));
        end else if (moderate(t.a) && moderate(t.b)) begin
          e = ref_mulre(t.a, t.b);
          checks++;
          n_exact_err++;
          if (!same(res_o, e, 1'b1))
            fail($sformatf("FPMULRE a=%h b=%h got=%h exp=%h", t.a, t.b, res_o, e));
        end else begin
          checks++;
          if (p[62:52] < 11'd60) n_tiny++;
        end
        // Exact model for every finite product (both operands finite).
        if (t.op == OP_FPMULRE && !is_nan(p) && p[62:52] != 11'h7FF &&
            t.a[62:52] != 11'h7FF && t.b[62:52] != 11'h7FF) begin
          e = ref_mulre_exact(t.a, t.b, p);
          checks++;
          if (!same(res_o, e, 1'b1))
            fail($sformatf("FPMULRE exact a=%h b=%h got=%h exp=%h", t.a, t.b, res_o, e));
        end
      end
    end
  end

  task automatic issue(dbl_t a, dbl_t b, mul_op_e op);
    @(negedge clk);
    valid_i = 1'b1;
    a_i = a;
    b_i = b;
    op_i = op;
    q.push_back('{a: a, b: b, op: op, t: cycle});
  endtask

  task automatic idle();
    @(negedge clk);
    valid_i = 1'b0;
  endtask

  initial begin
    dbl_t a, b, r;
    int   ea;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < N; i++) begin
      r = rnd64();
      case ($urandom_range(0, 6))
        0: begin a = rnd64(); b = rnd64(); end
        1: begin                           // tiny products
          a = mk(r[0], $urandom_range(0, 600), rnd64());
          b = mk(r[1], $urandom_range(0, 500), rnd64());
        end
        2: begin                           // special values against anything
          a = r[2] ? 64'h7FF0_0000_0000_0000 : (r[3] ? 64'h8000_0000_0000_0000 : 64'h7FF0_0000_0001_0000);
          b = r[4] ? rnd64() : 64'h0;
        end
        6: begin                           // products near the bottom of the normal range
          ea = $urandom_range(300, 700);
          a = mk(r[0], ea, rnd64());
          b = mk(r[1], 1046 - ea + $urandom_range(0, 80) - 40, rnd64());
        end
        3: begin                           // huge products
          a = mk(r[0], $urandom_range(1500, 2046), rnd64());
          b = mk(r[1], $urandom_range(1000, 1600), rnd64());
        end
        default: begin                     // products with an exact error
          a = mk(r[0], $urandom_range(623, 1423), rnd64());
          b = mk(r[1], $urandom_range(623, 1423), rnd64());
          if (r[5] && r[6]) b[25:0] = 26'h0;   // short operand: often exact
        end
      endcase
      if ($urandom_range(0, 15) == 0) idle();
      issue(a, b, mul_op_e'($urandom_range(0, 1)));
    end
    idle();
    repeat (LATENCY + 2) @(posedge clk);
    checks++;
    if (q.size() != 0) fail("operations never completed");
    checks++;
    if (n_exact_err == 0 || n_tiny == 0 || n_up == 0 || n_ovf == 0)
      fail($sformatf("case never reached exact=%0d tiny=%0d up=%0d ovf=%0d", n_exact_err, n_tiny, n_up, n_ovf));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
