// fp_sum_tb: self-checking test of the summation stage (binary64 window,
// 107 bits).
//
// Drives random aligned significands with big >= small (as fp_align
// guarantees), both for addition and subtraction, including exact
// cancellation, and checks the exact sum or difference and the position of
// its leading one (found here by scanning down from the top bit).
module fp_sum_tb;

  localparam int WIN = 107;
  localparam int N   = 20000;

  logic [WIN-1:0] big, sml, sum_o;
  logic           sub;
  logic [6:0]     lead_o;
  logic           zero_o;
  int checks = 0, failures = 0;

  fp_sum dut (.big_al_i(big), .small_al_i(sml), .eff_sub_i(sub),
              .sum_o, .lead_o, .zero_o);

  function automatic logic [WIN-1:0] rnd(int bits);
    logic [127:0] r = {$urandom(), $urandom(), $urandom(), $urandom()};
    return WIN'(r) >> (WIN - bits);
  endfunction

  initial begin
    for (int i = 0; i < N; i++) begin
      logic [WIN-1:0] e;
      int el;
      big = rnd($urandom_range(1, WIN - 1));
      sml = rnd($urandom_range(1, WIN - 1));
      if (sml > big) begin logic [WIN-1:0] t = big; big = sml; sml = t; end
      sub = $urandom_range(0, 1);
      if ($urandom_range(0, 20) == 0) begin sml = big; sub = 1'b1; end
      #1;
      e  = sub ? big - sml : big + sml;
      el = 0;
      for (int j = WIN - 1; j >= 0; j--) if (e[j]) begin el = j; break; end
      checks++;
      if (sum_o != e || int'(lead_o) != el || zero_o != (e == 0)) begin
        failures++;
        if (failures < 20)
          $display("FAIL: big=%h small=%h sub=%b sum=%h lead=%0d exp %h %0d",
                   big, sml, sub, sum_o, lead_o, e, el);
      end
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
