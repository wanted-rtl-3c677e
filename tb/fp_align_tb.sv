// fp_align_tb: self-checking test of the alignment stage (binary64).
//
// For random operand pairs it checks, against values computed here from the
// operand fields: the magnitude ordering (checked with real-valued
// magnitudes), the special-value flags, the far flag (exponent difference
// above MAN_W+2 = 54), the small operand's effective exponent, and that the
// window holds the big significand shifted left by the exponent difference
// and the small significand unshifted.
module fp_align_tb;
  import fp_ref_pkg::*;

  localparam int N = 20000;

  dbl_t         a, b;
  logic         nan_o, inf_o, inf_sign_o, far_o, eff_sub_o, sign_big_o, zero_sign_o;
  logic [10:0]  eb_o;
  dbl_t         big_o, small_o;
  logic [106:0] big_al_o, small_al_o;
  int checks = 0, failures = 0, n_far = 0, n_near = 0;

  fp_align dut (
    .a_i(a), .b_i(b), .nan_o, .inf_o, .inf_sign_o, .far_o, .eff_sub_o,
    .sign_big_o, .zero_sign_o, .eb_o, .big_o, .small_o, .big_al_o, .small_al_o
  );

  function automatic bit is_inf(dbl_t x);
    return (x[62:52] == 11'h7FF) && (x[51:0] == 0);
  endfunction

  function automatic real mag(dbl_t x);
    real r;
    r = $bitstoreal(x);
    return (r < 0.0) ? -r : r;
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s: a=%h b=%h", what, a, b);
    end
  endtask

  initial begin
    for (int i = 0; i < N; i++) begin
      int eb_exp, ebig, d;
      logic [52:0] mb, ms;
      bit exp_nan, exp_inf;
      gen_pair(a, b);
      if ($urandom_range(0, 1)) begin dbl_t t = a; a = b; b = t; end
      #1;
      exp_nan = is_nan(a) || is_nan(b) || (is_inf(a) && is_inf(b) && a[63] != b[63]);
      exp_inf = !exp_nan && (is_inf(a) || is_inf(b));
      check(nan_o == exp_nan, "nan");
      check(inf_o == exp_inf, "inf");
      if (exp_inf) check(inf_sign_o == (is_inf(a) ? a[63] : b[63]), "inf sign");
      check(eff_sub_o == (a[63] ^ b[63]), "eff_sub");
      check(zero_sign_o == (a[63] & b[63]), "zero sign");
      check((big_o == a && small_o == b) || (big_o == b && small_o == a), "permutation");
      if (!is_nan(a) && !is_nan(b) && !is_inf(a) && !is_inf(b))
        check(mag(big_o) >= mag(small_o), "order");
      check(sign_big_o == big_o[63], "sign big");
      eb_exp = (small_o[62:52] == 0) ? 1 : int'(small_o[62:52]);
      ebig   = (big_o[62:52] == 0) ? 1 : int'(big_o[62:52]);
      d      = ebig - eb_exp;
      check(int'(eb_o) == eb_exp, "eb");
      check(far_o == (d > 54), "far");
      mb = {big_o[62:52] != 0, big_o[51:0]};
      ms = {small_o[62:52] != 0, small_o[51:0]};
      if (d <= 54) begin
        n_near++;
        check(big_al_o == (107'(mb) << d), "big window");
        check(small_al_o == 107'(ms), "small window");
      end else begin
        n_far++;
      end
    end
    checks++;
    if (n_far == 0 || n_near == 0) begin
      failures++;
      $display("FAIL: path never taken near=%0d far=%0d", n_near, n_far);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
