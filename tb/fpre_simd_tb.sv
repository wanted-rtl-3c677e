// fpre_simd_tb: end-to-end test of the SIMD round-off-error unit at its
// default size (4 binary64 lanes per port).
//
// Phase 1 runs a compensated dot product (Ogita, Rump and Oishi's Dot2) on
// the unit, one vector of 4 independent lanes per step:
//   p = FPMUL(x, y)     q = FPMULRE(x, y)      issued back to back (mul port)
//   s', e = FPADD(s, p), FPADDRE(s, p)         issued back to back (add port)
//   c = FPADD(c, FPADD(q, e))
// and finally FPADD(s, c). Each lane's result must equal, bit for bit, the
// same algorithm run in double arithmetic with Knuth's TwoSum and Dekker's
// TwoProduct. The vectors are built so that every lane's terms are
// +B, small integer products, -B with B = 2^60: the naive dot product loses
// the small terms entirely, the compensated one must return their exact sum.
// Phase 2 issues random operand pairs on both ports in the same cycles and
// checks every lane against the reference, to reach overflow, rounding carry
// and the special values. Every result must appear 4 cycles after issue.
// Each mechanism (each opcode, back-to-back independent issue, simultaneous
// issue on both ports, round-up, carry, overflow on both ports) is counted
// and a failure is counted for any that never happened.
module fpre_simd_tb;
  import fp_pkg::*;
  import fp_ref_pkg::*;

  localparam int L       = 4;
  localparam int LATENCY = 4;
  localparam int NDOT    = 40;      // terms per lane in the dot product
  localparam int NRAND   = 3000;    // random vector pairs in phase 2

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
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // Mechanism counters.
  int n_fpadd = 0, n_fpaddre = 0, n_fpmul = 0, n_fpmulre = 0;
  int n_b2b = 0, n_dual = 0, n_up = 0, n_carry = 0, n_aovf = 0, n_mup = 0, n_movf = 0;

  // Issue-time and result queues per port.
  longint add_t[$], mul_t[$];
  vec_t   add_r[$], mul_r[$];

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL: %s", msg);
  endtask

  always @(posedge clk) begin
    if (rst_n && add_valid_o) begin
      checks++;
      if (add_t.size() == 0 || cycle - add_t.pop_front() != LATENCY) fail("add latency");
      add_r.push_back(add_res_o);
      n_up    += $countones(add_round_up_o);
      n_carry += $countones(add_carry_o);
      n_aovf  += $countones(add_overflow_o);
    end
    if (rst_n && mul_valid_o) begin
      checks++;
      if (mul_t.size() == 0 || cycle - mul_t.pop_front() != LATENCY) fail("mul latency");
      mul_r.push_back(mul_res_o);
      n_mup  += $countones(mul_round_up_o);
      n_movf += $countones(mul_overflow_o);
    end
  end

  // Present one instruction on each port (valid only where asked) for one
  // cycle; inputs change on the falling edge.
  task automatic drive(bit av, add_op_e aop, vec_t aa, vec_t ab,
                       bit mv, mul_op_e mop, vec_t ma, vec_t mb);
    @(negedge clk);
    add_valid_i = av;  add_op_i = aop;  add_a_i = aa;  add_b_i = ab;
    mul_valid_i = mv;  mul_op_i = mop;  mul_a_i = ma;  mul_b_i = mb;
    if (av) begin
      add_t.push_back(cycle);
      if (aop == OP_FPADD) n_fpadd++; else n_fpaddre++;
    end
    if (mv) begin
      mul_t.push_back(cycle);
      if (mop == OP_FPMUL) n_fpmul++; else n_fpmulre++;
    end
    if (av && mv) n_dual++;
  endtask

  task automatic idle();
    drive(1'b0, OP_FPADD, '0, '0, 1'b0, OP_FPMUL, '0, '0);
  endtask

  // Error-free addition on the add port: FPADD and FPADDRE back to back.
  task automatic two_sum(vec_t a, vec_t b, output vec_t s, output vec_t e);
    drive(1'b1, OP_FPADD,   a, b, 1'b0, OP_FPMUL, '0, '0);
    drive(1'b1, OP_FPADDRE, a, b, 1'b0, OP_FPMUL, '0, '0);
    n_b2b++;
    idle();
    wait (add_r.size() >= 2);
    s = add_r.pop_front();
    e = add_r.pop_front();
  endtask

  // Error-free product on the mul port: FPMUL and FPMULRE back to back.
  task automatic two_prod(vec_t a, vec_t b, output vec_t p, output vec_t e);
    drive(1'b0, OP_FPADD, '0, '0, 1'b1, OP_FPMUL,   a, b);
    drive(1'b0, OP_FPADD, '0, '0, 1'b1, OP_FPMULRE, a, b);
    n_b2b++;
    idle();
    wait (mul_r.size() >= 2);
    p = mul_r.pop_front();
    e = mul_r.pop_front();
  endtask

  task automatic add1(vec_t a, vec_t b, output vec_t s);
    drive(1'b1, OP_FPADD, a, b, 1'b0, OP_FPMUL, '0, '0);
    idle();
    wait (add_r.size() >= 1);
    s = add_r.pop_front();
  endtask

  // Reference Dot2 step in double arithmetic.
  function automatic real split_hi(real x);
    real c;
    c = 134217729.0 * x;
    return c - (c - x);
  endfunction

  initial begin : main
    vec_t x, y, p, q, s, c, e, t, res;
    real  rs[L], rc[L], rnaive[L], exact[L];
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;

    // ---------------- phase 1: compensated dot product ------------------
    s = '0;
    c = '0;
    for (int l = 0; l < L; l++) begin rs[l] = 0.0; rc[l] = 0.0; rnaive[l] = 0.0; exact[l] = 0.0; end
    for (int i = 0; i < NDOT; i++) begin
      for (int l = 0; l < L; l++) begin
        real xr, yr;
        if (i == 0)             begin xr = 1073741824.0 * (l + 1);  yr = 1073741824.0; end  // +2^60*(l+1)
        else if (i == NDOT - 1) begin xr = -1073741824.0 * (l + 1); yr = 1073741824.0; end  // -2^60*(l+1)
        else begin
          xr = real'($urandom_range(1, 999)) * ((i % 3 == 0) ? -1.0 : 1.0) / 64.0;
          yr = real'($urandom_range(1, 999)) / 8.0;
          exact[l] += xr * yr;       // products and partial sums are exact here
        end
        x[l] = $realtobits(xr);
        y[l] = $realtobits(yr);
      end
      two_prod(x, y, p, q);
      two_sum(s, p, s, e);
      add1(q, e, t);
      add1(c, t, c);
      // reference, lane by lane
      for (int l = 0; l < L; l++) begin
        real xr, yr, pr, qr, ah, al, bh, bl, sr, bv, av, er;
        xr = $bitstoreal(x[l]);  yr = $bitstoreal(y[l]);
        pr = xr * yr;
        ah = split_hi(xr);  al = xr - ah;  bh = split_hi(yr);  bl = yr - bh;
        qr = ((ah * bh - pr) + ah * bl + al * bh) + al * bl;
        sr = rs[l] + pr;  bv = sr - rs[l];  av = sr - bv;
        er = (rs[l] - av) + (pr - bv);
        rs[l] = sr;
        rc[l] = rc[l] + (qr + er);
        rnaive[l] = rnaive[l] + pr;
      end
    end
    add1(s, c, res);
    for (int l = 0; l < L; l++) begin
      checks += 3;
      if (s[l] != $realtobits(rs[l]) || c[l] != $realtobits(rc[l]))
        fail($sformatf("dot2 lane %0d: s=%h c=%h ref s=%h c=%h", l, s[l], c[l],
                       $realtobits(rs[l]), $realtobits(rc[l])));
      if ($bitstoreal(res[l]) != exact[l])
        fail($sformatf("dot2 lane %0d: result %g, exact %g", l, $bitstoreal(res[l]), exact[l]));
      if (rnaive[l] == exact[l])
        fail($sformatf("lane %0d: naive dot product was already exact, test too weak", l));
      $display("lane %0d: exact %0.6f  compensated %0.6f  naive %0.6f", l, exact[l],
               $bitstoreal(res[l]), rnaive[l]);
    end

    // ---------------- phase 2: random pairs on both ports ---------------
    begin
      vec_t aa[$], ab[$], ma[$], mb[$];
      add_op_e aop[$];
      mul_op_e mop[$];
      for (int i = 0; i < NRAND; i++) begin
        vec_t va, vb, wa, wb;
        add_op_e o1;
        mul_op_e o2;
        for (int l = 0; l < L; l++) begin
          dbl_t u, v;
          gen_pair(u, v);  va[l] = u;  vb[l] = v;
          gen_pair(u, v);  wa[l] = u;  wb[l] = v;
          if (i % 50 == 0) begin wa[l] = 64'h7FE0_0000_0000_0001; wb[l] = 64'h4000_0000_0000_0000; end
        end
        o1 = add_op_e'($urandom_range(0, 1));
        o2 = mul_op_e'($urandom_range(0, 1));
        aa.push_back(va);  ab.push_back(vb);  aop.push_back(o1);
        ma.push_back(wa);  mb.push_back(wb);  mop.push_back(o2);
        drive(1'b1, o1, va, vb, 1'b1, o2, wa, wb);
      end
      idle();
      repeat (LATENCY + 2) @(posedge clk);
      checks++;
      if (add_r.size() != NRAND || mul_r.size() != NRAND) fail("phase 2 results missing");
      while (add_r.size() > 0 && aa.size() > 0) begin
        vec_t r, va, vb;
        add_op_e o;
        r = add_r.pop_front();  va = aa.pop_front();  vb = ab.pop_front();  o = aop.pop_front();
        for (int l = 0; l < L; l++) begin
          checks++;
          if (!same(r[l], (o == OP_FPADDRE) ? ref_addre(va[l], vb[l]) : ref_add(va[l], vb[l]),
                    o == OP_FPADDRE))
            fail($sformatf("add lane %0d op %s a=%h b=%h got %h", l, o.name(), va[l], vb[l], r[l]));
        end
      end
      while (mul_r.size() > 0 && ma.size() > 0) begin
        vec_t r, wa, wb;
        mul_op_e o;
        r = mul_r.pop_front();  wa = ma.pop_front();  wb = mb.pop_front();  o = mop.pop_front();
        for (int l = 0; l < L; l++) begin
          dbl_t pr;
          pr = $realtobits($bitstoreal(wa[l]) * $bitstoreal(wb[l]));
          if (o == OP_FPMUL) begin
            checks++;
            if (!same(r[l], pr, 1'b0))
              fail($sformatf("mul lane %0d a=%h b=%h got %h exp %h", l, wa[l], wb[l], r[l], pr));
          end else if (pr[62:52] == 11'h7FF) begin
            checks++;
            if (!is_nan(r[l])) fail($sformatf("mulre special lane %0d got %h", l, r[l]));
          end
        end
      end
    end

    // ---------------- mechanism coverage --------------------------------
    $display("FPADD=%0d FPADDRE=%0d FPMUL=%0d FPMULRE=%0d back-to-back=%0d dual-issue=%0d",
             n_fpadd, n_fpaddre, n_fpmul, n_fpmulre, n_b2b, n_dual);
    $display("add: round-up=%0d carry=%0d overflow=%0d  mul: round-up=%0d overflow=%0d",
             n_up, n_carry, n_aovf, n_mup, n_movf);
    checks++;
    if (n_fpadd == 0 || n_fpaddre == 0 || n_fpmul == 0 || n_fpmulre == 0 || n_b2b == 0 ||
        n_dual == 0 || n_up == 0 || n_carry == 0 || n_aovf == 0 || n_mup == 0 || n_movf == 0)
      fail("a mechanism never occurred");
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
