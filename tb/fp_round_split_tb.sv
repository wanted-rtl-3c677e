// fp_round_split_tb: self-checking test of the rounding / result-split stage.
//
// The stage is fed by fp_align and fp_sum (combinational chain, binary64), so
// that its inputs are the ones it sees in the lane. Both of its results are
// compared at once for every operand pair: fpadd_o with the reference double
// sum and fpaddre_o with Knuth's TwoSum error. It also checks that the flags
// agree with the reference (inexact exactly when the error is nonzero and the
// sum finite) and that rounding up, carry-out and overflow each occur.
module fp_round_split_tb;
  import fp_ref_pkg::*;

  localparam int N = 40000;

  dbl_t         a, b;
  logic         nan, inf, inf_sign, far, sub, sign_big, zsign, zero;
  logic [10:0]  eb;
  dbl_t         big, sml;
  logic [106:0] big_al, small_al, sum;
  logic [6:0]   lead;
  dbl_t         fpadd_o, fpaddre_o;
  logic         inexact_o, round_up_o, carry_o, overflow_o;
  int checks = 0, failures = 0, n_up = 0, n_carry = 0, n_ovf = 0, n_far = 0;

  fp_align u_align (
    .a_i(a), .b_i(b), .nan_o(nan), .inf_o(inf), .inf_sign_o(inf_sign), .far_o(far),
    .eff_sub_o(sub), .sign_big_o(sign_big), .zero_sign_o(zsign), .eb_o(eb),
    .big_o(big), .small_o(sml), .big_al_o(big_al), .small_al_o(small_al)
  );
  fp_sum u_sum (.big_al_i(big_al), .small_al_i(small_al), .eff_sub_i(sub),
                .sum_o(sum), .lead_o(lead), .zero_o(zero));
  fp_round_split dut (
    .sum_i(sum), .lead_i(lead), .zero_i(zero), .eb_i(eb), .sign_big_i(sign_big),
    .zero_sign_i(zsign), .far_i(far), .big_i(big), .small_i(sml),
    .nan_i(nan), .inf_i(inf), .inf_sign_i(inf_sign),
    .fpadd_o, .fpaddre_o, .inexact_o, .round_up_o, .carry_o, .overflow_o
  );

  initial begin
    for (int i = 0; i < N; i++) begin
      dbl_t es, ee;
      gen_pair(a, b);
      #1;
      es = ref_add(a, b);
      ee = ref_addre(a, b);
      checks += 3;
      if (!same(fpadd_o, es, 1'b0)) begin
        failures++;
        if (failures < 20) $display("FAIL FPADD a=%h b=%h got=%h exp=%h", a, b, fpadd_o, es);
      end
      if (!same(fpaddre_o, ee, 1'b1)) begin
        failures++;
        if (failures < 20) $display("FAIL FPADDRE a=%h b=%h got=%h exp=%h", a, b, fpaddre_o, ee);
      end
      if (!is_nan(ee) && inexact_o != !is_zero(ee)) begin
        failures++;
        if (failures < 20) $display("FAIL inexact a=%h b=%h", a, b);
      end
      n_up    += int'(round_up_o);
      n_carry += int'(carry_o);
      n_ovf   += int'(overflow_o);
      n_far   += int'(far);
    end
    checks++;
    if (n_up == 0 || n_carry == 0 || n_ovf == 0 || n_far == 0) begin
      failures++;
      $display("FAIL: case never reached up=%0d carry=%0d ovf=%0d far=%0d",
               n_up, n_carry, n_ovf, n_far);
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
