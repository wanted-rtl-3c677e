// fpaddre_lane_tb: self-checking test of one binary64 FPADD/FPADDRE lane.
//
// Streams random operand pairs (see fp_ref_pkg::gen_pair) with a random
// opcode into the lane, mostly back to back and sometimes with idle cycles.
// Every result is compared with the reference sum (FPADD) or the TwoSum
// round-off error (FPADDRE), and every result must appear exactly 4 cycles
// after its operation was presented (one operation per cycle, no stall).
// A second pass checks that FPADD and FPADDRE of the same pair add up to the
// exact sum: sum + error reproduces a + b when re-added (TwoSum identity).
module fpaddre_lane_tb;
  import fp_pkg::*;
  import fp_ref_pkg::*;

  localparam int N       = 40000;
  localparam int LATENCY = 4;

  logic    clk = 1'b0;
  logic    rst_n = 1'b0;
  logic    valid_i = 1'b0;
  add_op_e op_i = OP_FPADD;
  dbl_t    a_i = '0, b_i = '0;
  logic    valid_o;
  add_op_e op_o;
  dbl_t    res_o;
  logic    inexact_o, round_up_o, carry_o, overflow_o;

  int checks = 0, failures = 0;
  longint cycle = 0;

  typedef struct {
    dbl_t    a, b;
    add_op_e op;
    longint  t;
  } txn_t;
  txn_t q[$];

  fpaddre_lane dut (
    .clk_i(clk), .rst_ni(rst_n), .valid_i, .op_i, .a_i, .b_i,
    .valid_o, .op_o, .res_o, .inexact_o, .round_up_o, .carry_o, .overflow_o
  );

  // A half-precision lane (5-bit exponent, 10-bit fraction) for the
  // worked example of the FPADD/FPADDRE schema: a = +1.1101011011b x 2^(12-15),
  // b = +1.1111111101b x 2^(7-15). In units of b's LSB (2^-18) the exact sum
  // is 62301 = 11110011010_11101b; the 5 discarded bits 11101 exceed half, so
  // FPADD rounds up to 1.1110011011b x 2^-3 (0x339B) and FPADDRE is
  // 29 - 32 = -3 units = -3 x 2^-18, a half-precision subnormal (0x80C0).
  logic        h_valid_i = 1'b0, h_valid_o;
  add_op_e     h_op_i = OP_FPADD, h_op_o;
  logic [15:0] h_res_o;
  logic        h_f0, h_f1, h_f2, h_f3;
  fpaddre_lane #(.EXP_W(5), .MAN_W(10)) dut_half (
    .clk_i(clk), .rst_ni(rst_n), .valid_i(h_valid_i), .op_i(h_op_i),
    .a_i(16'h335B), .b_i(16'h1FFD), .valid_o(h_valid_o), .op_o(h_op_o), .res_o(h_res_o),
    .inexact_o(h_f0), .round_up_o(h_f1), .carry_o(h_f2), .overflow_o(h_f3)
  );
  int n_half = 0;
  always @(posedge clk) begin
    if (rst_n && h_valid_o) begin
      checks++;
      n_half++;
      if (h_res_o != ((h_op_o == OP_FPADDRE) ? 16'h80C0 : 16'h339B) || !h_f1) begin
        failures++;
        $display("FAIL: half-precision example op=%s got %h", h_op_o.name(), h_res_o);
      end
    end
  end

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  // Scoreboard.
  int n_up = 0, n_carry = 0, n_ovf = 0, n_inexact = 0, n_done = 0;
  always @(posedge clk) begin
    if (rst_n && valid_o) begin
      txn_t t;
      dbl_t exp;
      if (q.size() == 0) begin
        failures++;
        $display("FAIL: result with no operation outstanding");
      end else begin
        t = q.pop_front();
        exp = (t.op == OP_FPADDRE) ? ref_addre(t.a, t.b) : ref_add(t.a, t.b);
        checks++;
        if (!same(res_o, exp, t.op == OP_FPADDRE) || op_o != t.op) begin
          failures++;
          if (failures < 20)
            $display("FAIL: op=%s a=%h b=%h got=%h exp=%h", t.op.name(), t.a, t.b, res_o, exp);
        end
        checks++;
        if (cycle - t.t != LATENCY) begin
          failures++;
          if (failures < 20) $display("FAIL: latency %0d", cycle - t.t);
        end
        n_up      += int'(round_up_o);
        n_carry   += int'(carry_o);
        n_ovf     += int'(overflow_o);
        n_inexact += int'(inexact_o);
        n_done++;
      end
    end
  end

  // Inputs change on the falling edge, so the rising edge that samples them
  // is unambiguous; cycle then counts the rising edges seen so far.
  task automatic issue(dbl_t a, dbl_t b, add_op_e op);
    @(negedge clk);
    valid_i = 1'b1;
    a_i     = a;
    b_i     = b;
    op_i    = op;
    q.push_back('{a: a, b: b, op: op, t: cycle});
  endtask

  task automatic idle();
    @(negedge clk);
    valid_i = 1'b0;
  endtask

  initial begin
    dbl_t a, b;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    // Figure-style example: same signs, overlapping significands.
    @(negedge clk) h_valid_i = 1'b1;  h_op_i = OP_FPADD;
    @(negedge clk) h_op_i = OP_FPADDRE;
    @(negedge clk) h_valid_i = 1'b0;
    issue(64'h3FF0_0000_0000_0001, 64'h3CA8_0000_0000_0000, OP_FPADD);
    issue(64'h3FF0_0000_0000_0001, 64'h3CA8_0000_0000_0000, OP_FPADDRE);
    for (int i = 0; i < N; i++) begin
      gen_pair(a, b);
      if ($urandom_range(0, 15) == 0) idle();
      issue(a, b, add_op_e'($urandom_range(0, 1)));
      // Same pair, other opcode, right behind it.
      if ($urandom_range(0, 3) == 0) issue(a, b, add_op_e'(1 - int'(op_i)));
    end
    idle();
    repeat (LATENCY + 2) @(posedge clk);
    checks++;
    if (q.size() != 0) begin
      failures++;
      $display("FAIL: %0d operations never completed", q.size());
    end
    checks++;
    if (n_half != 2 || n_up == 0 || n_carry == 0 || n_ovf == 0 || n_inexact == 0) begin
      failures++;
      $display("FAIL: flag never raised up=%0d carry=%0d ovf=%0d inexact=%0d",
               n_up, n_carry, n_ovf, n_inexact);
    end
    $display("results=%0d round_up=%0d carry=%0d overflow=%0d inexact=%0d",
             n_done, n_up, n_carry, n_ovf, n_inexact);
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
