// fpre_workloads_tb: two of the kernels that motivate FPADDRE, run on the
// SIMD unit at its default size (4 binary64 lanes per port).
//
//  1. Compensated Horner evaluation of a degree-15 polynomial (Graillat,
//     Langlois and Louvet), per lane:
//        s = a15, c = 0
//        for i = 14..0:  p, pi    = FPMUL(s, x), FPMULRE(s, x)
//                        s, sigma = FPADD(p, a_i), FPADDRE(p, a_i)
//                        c        = FPMUL(c, x) + (pi + sigma)
//        result = s + c
//  2. Double-double addition (two error-free additions of the high and low
//     parts, two renormalising ones), per lane:
//        s, e = TwoSum(ah, bh);  t, f = TwoSum(al, bl);  e = e + t
//        s, e = TwoSum(s, e);    e = e + f;              s, e = TwoSum(s, e)
//  3. Double-double multiplication, per lane:
//        p, e = TwoProduct(ah, bh);  e = e + (ah*bl + al*bh);  p, e = TwoSum(p, e)
// Every TwoSum / TwoProduct is the independent FPADD+FPADDRE or
// FPMUL+FPMULRE pair issued back to back. Each lane's result must equal, bit
// for bit, the same algorithm run in double arithmetic with Knuth's TwoSum
// and Dekker's TwoProduct. The Horner polynomial is (x - 1)^15 expanded,
// evaluated near x = 1 where plain Horner loses most digits; the test also
// checks that the compensated result is closer to the exact value.
module fpre_workloads_tb;
  import fp_pkg::*;
  import fp_ref_pkg::*;

  localparam int L       = 4;
  localparam int DEG     = 15;
  localparam int NDD     = 200;
  localparam int NDM     = 200;

  typedef logic [L-1:0][63:0] vec_t;

  logic    clk = 1'b0, rst_n = 1'b0;
  logic    add_valid_i = 1'b0, mul_valid_i = 1'b0;
  add_op_e add_op_i = OP_FPADD;
  mul_op_e mul_op_i = OP_FPMUL;
  vec_t    add_a_i = '0, add_b_i = '0, mul_a_i = '0, mul_b_i = '0;
  logic    add_valid_o, mul_valid_o;
  add_op_e add_op_o;
  mul_op_e mul_op_o;
  vec_t    add_res_o, mul_res_o;
  logic [L-1:0] add_inexact_o, add_round_up_o, add_carry_o, add_overflow_o;
  logic [L-1:0] mul_inexact_o, mul_round_up_o, mul_overflow_o;

  fpre_simd dut (
    .clk_i(clk), .rst_ni(rst_n),
    .add_valid_i, .add_op_i, .add_a_i, .add_b_i,
    .add_valid_o, .add_op_o, .add_res_o,
    .add_inexact_o, .add_round_up_o, .add_carry_o, .add_overflow_o,
    .mul_valid_i, .mul_op_i, .mul_a_i, .mul_b_i,
    .mul_valid_o, .mul_op_o, .mul_res_o,
    .mul_inexact_o, .mul_round_up_o, .mul_overflow_o
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  vec_t add_r[$], mul_r[$];

  always @(posedge clk) begin
    if (rst_n && add_valid_o) add_r.push_back(add_res_o);
    if (rst_n && mul_valid_o) mul_r.push_back(mul_res_o);
  end

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL: %s", msg);
  endtask

  task automatic add_issue(add_op_e op, vec_t a, vec_t b);
    @(negedge clk);
    add_valid_i = 1'b1;  add_op_i = op;  add_a_i = a;  add_b_i = b;
  endtask

  task automatic mul_issue(mul_op_e op, vec_t a, vec_t b);
    @(negedge clk);
    mul_valid_i = 1'b1;  mul_op_i = op;  mul_a_i = a;  mul_b_i = b;
  endtask

  task automatic quiet();
    @(negedge clk);
    add_valid_i = 1'b0;
    mul_valid_i = 1'b0;
  endtask

  task automatic two_sum(vec_t a, vec_t b, output vec_t s, output vec_t e);
    add_issue(OP_FPADD, a, b);
    add_issue(OP_FPADDRE, a, b);
    quiet();
    wait (add_r.size() >= 2);
    s = add_r.pop_front();
    e = add_r.pop_front();
  endtask

  task automatic two_prod(vec_t a, vec_t b, output vec_t p, output vec_t e);
    mul_issue(OP_FPMUL, a, b);
    mul_issue(OP_FPMULRE, a, b);
    quiet();
    wait (mul_r.size() >= 2);
    p = mul_r.pop_front();
    e = mul_r.pop_front();
  endtask

  task automatic add1(vec_t a, vec_t b, output vec_t s);
    add_issue(OP_FPADD, a, b);
    quiet();
    wait (add_r.size() >= 1);
    s = add_r.pop_front();
  endtask

  task automatic mul1(vec_t a, vec_t b, output vec_t p);
    mul_issue(OP_FPMUL, a, b);
    quiet();
    wait (mul_r.size() >= 1);
    p = mul_r.pop_front();
  endtask

  // Reference error-free transformations in double arithmetic.
  function automatic void r_two_sum(real a, real b, output real s, output real e);
    real bv, av;
    s  = a + b;
    bv = s - a;
    av = s - bv;
    e  = (a - av) + (b - bv);
  endfunction

  function automatic real split_hi(real x);
    real c;
    c = 134217729.0 * x;
    return c - (c - x);
  endfunction

  function automatic void r_two_prod(real a, real b, output real p, output real e);
    real ah, al, bh, bl;
    p  = a * b;
    ah = split_hi(a);  al = a - ah;  bh = split_hi(b);  bl = b - bh;
    e  = ((ah * bh - p) + ah * bl + al * bh) + al * bl;
  endfunction

  function automatic vec_t splat(real r);
    vec_t v;
    for (int l = 0; l < L; l++) v[l] = $realtobits(r);
    return v;
  endfunction

  initial begin : main
    real  coef[DEG+1];
    vec_t x, s, c, p, pi, sg, t, u, res;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;

    // ---------------- 1. compensated Horner, degree 15 -------------------
    // (x - 1)^15 = sum_k C(15,k) (-1)^(15-k) x^k
    begin
      real binom;
      binom = 1.0;
      for (int k = 0; k <= DEG; k++) begin
        coef[k] = ((DEG - k) % 2 == 1) ? -binom : binom;
        binom = binom * real'(DEG - k) / real'(k + 1);
      end
    end
    for (int l = 0; l < L; l++) x[l] = $realtobits(1.0 + real'(l + 1) * 0.0009765625 * 7.0);
    s = splat(coef[DEG]);
    c = splat(0.0);
    for (int i = DEG - 1; i >= 0; i--) begin
      two_prod(s, x, p, pi);
      two_sum(p, splat(coef[i]), s, sg);
      mul1(c, x, t);
      add1(pi, sg, u);
      add1(t, u, c);
    end
    add1(s, c, res);
    for (int l = 0; l < L; l++) begin
      real xr, rs, rc, rp, rpi, rsg, plain, exact, d, ec, ep;
      xr = $bitstoreal(x[l]);
      rs = coef[DEG];  rc = 0.0;  plain = coef[DEG];
      for (int i = DEG - 1; i >= 0; i--) begin
        r_two_prod(rs, xr, rp, rpi);
        r_two_sum(rp, coef[i], rs, rsg);
        rc = rc * xr + (rpi + rsg);
        plain = plain * xr + coef[i];
      end
      d = xr - 1.0;                       // exact (Sterbenz); d^15 is off by a few ulps only
      exact = 1.0;
      for (int k = 0; k < DEG; k++) exact = exact * d;
      checks += 2;
      if (res[l] != $realtobits(rs + rc))
        fail($sformatf("horner lane %0d got %h exp %h", l, res[l], $realtobits(rs + rc)));
      ec = rs + rc - exact;  ec = (ec < 0.0) ? -ec : ec;
      ep = plain - exact;    ep = (ep < 0.0) ? -ep : ep;
      if (ec >= ep)
        fail($sformatf("horner lane %0d: compensated not more accurate", l));
      $display("horner lane %0d: x=%0.10f exact %e compensated %e plain %e", l, xr, exact,
               $bitstoreal(res[l]), plain);
    end

    // ---------------- 2. double-double addition --------------------------
    for (int n = 0; n < NDD; n++) begin
      vec_t ah, al, bh, bl, sh, se, tt, ff;
      real  rah[L], ral[L], rbh[L], rbl[L];
      for (int l = 0; l < L; l++) begin
        dbl_t h1, h2, l1, l2;
        gen_pair(h1, h2);
        // keep the operands finite and away from the overflow threshold
        if (h1[62:52] > 11'd2000 || h1[62:52] < 11'd200) h1[62:52] = 11'd1023;
        if (h2[62:52] > 11'd2000 || h2[62:52] < 11'd200) h2[62:52] = 11'd1020;
        l1 = h1;  l1[62:52] = h1[62:52] - 11'd54;  l1[63] = $urandom_range(0, 1);
        l2 = h2;  l2[62:52] = h2[62:52] - 11'd55;  l2[63] = $urandom_range(0, 1);
        l1[30:0] = $urandom();  l2[30:0] = $urandom();
        ah[l] = h1;  al[l] = l1;  bh[l] = h2;  bl[l] = l2;
        rah[l] = $bitstoreal(h1);  ral[l] = $bitstoreal(l1);
        rbh[l] = $bitstoreal(h2);  rbl[l] = $bitstoreal(l2);
      end
      two_sum(ah, bh, sh, se);
      two_sum(al, bl, tt, ff);
      add1(se, tt, se);
      two_sum(sh, se, sh, se);
      add1(se, ff, se);
      two_sum(sh, se, sh, se);
      for (int l = 0; l < L; l++) begin
        real rs, re, rt, rf;
        r_two_sum(rah[l], rbh[l], rs, re);
        r_two_sum(ral[l], rbl[l], rt, rf);
        re = re + rt;
        r_two_sum(rs, re, rs, re);
        re = re + rf;
        r_two_sum(rs, re, rs, re);
        checks++;
        if (!same(sh[l], $realtobits(rs), 1'b0) || !same(se[l], $realtobits(re), 1'b1))
          fail($sformatf("dd add lane %0d: got %h %h exp %h %h", l, sh[l], se[l],
                         $realtobits(rs), $realtobits(re)));
      end
    end

    // ---------------- 3. double-double multiplication --------------------
    for (int n = 0; n < NDM; n++) begin
      vec_t ah, al, bh, bl, ph, pe, t1, t2;
      real  rah[L], ral[L], rbh[L], rbl[L];
      for (int l = 0; l < L; l++) begin
        dbl_t h1, h2, l1, l2;
        h1 = mk($urandom_range(0, 1), $urandom_range(700, 1340), 52'({$urandom(), $urandom()}));
        h2 = mk($urandom_range(0, 1), $urandom_range(700, 1340), 52'({$urandom(), $urandom()}));
        l1 = h1;  l1[62:52] = h1[62:52] - 11'd54;  l1[63] = $urandom_range(0, 1);
        l2 = h2;  l2[62:52] = h2[62:52] - 11'd55;  l2[63] = $urandom_range(0, 1);
        l1[30:0] = $urandom();  l2[30:0] = $urandom();
        ah[l] = h1;  al[l] = l1;  bh[l] = h2;  bl[l] = l2;
        rah[l] = $bitstoreal(h1);  ral[l] = $bitstoreal(l1);
        rbh[l] = $bitstoreal(h2);  rbl[l] = $bitstoreal(l2);
      end
      two_prod(ah, bh, ph, pe);
      mul1(ah, bl, t1);
      mul1(al, bh, t2);
      add1(t1, t2, t1);
      add1(pe, t1, pe);
      two_sum(ph, pe, ph, pe);
      for (int l = 0; l < L; l++) begin
        real rp, re;
        r_two_prod(rah[l], rbh[l], rp, re);
        re = re + (rah[l] * rbl[l] + ral[l] * rbh[l]);
        r_two_sum(rp, re, rp, re);
        checks++;
        if (!same(ph[l], $realtobits(rp), 1'b0) || !same(pe[l], $realtobits(re), 1'b1))
          fail($sformatf("dd mul lane %0d: got %h %h exp %h %h", l, ph[l], pe[l],
                         $realtobits(rp), $realtobits(re)));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
