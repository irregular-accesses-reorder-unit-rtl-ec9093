// iru_merge_unit_tb: checks the three merge operations. FILT_DROP must keep
// the stored value, FILT_MIN the smaller unsigned value; FILT_FADD is
// compared with an independent reference: both operands are widened to
// double precision, added exactly (exponents kept within 20 of each other)
// and rounded back to single precision with round-to-nearest-even, results
// below the normal range flushed to zero. Special cases (zero operands,
// cancellation to zero, infinity, NaN) are checked directly.
module iru_merge_unit_tb;
  import iru_pkg::*;
  iru_filter_e op;
  logic [31:0] a, b, m;
  int checks = 0, failures = 0;

  iru_merge_unit dut (.op, .old_sec(a), .new_sec(b), .merged(m));

  function automatic real f2r(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 0) return 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction
  function automatic logic [31:0] r2f(input real r);
    logic [63:0] d = $realtobits(r);
    int e = int'(d[62:52]) - 1023 + 127;
    logic [23:0] mant = {1'b0, d[51:29]};
    logic [28:0] rest = d[28:0];
    if (d[62:0] == 0) return 32'd0;
    if (rest > 29'h1000_0000 || (rest == 29'h1000_0000 && mant[0])) mant = mant + 1'b1;
    if (mant[23]) begin mant = '0; e = e + 1; end
    if (e <= 0) return {d[63], 31'd0};
    if (e >= 255) return {d[63], 8'hff, 23'd0};
    return {d[63], 8'(e), mant[22:0]};
  endfunction

  task automatic expect_eq(input logic [31:0] exp, input string what);
    #1;
    checks++;
    if (m !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: a=%h b=%h got %h exp %h", what, a, b, m, exp);
    end
  endtask

  initial begin
    for (int t = 0; t < 3000; t++) begin
      a = $urandom; b = $urandom;
      op = FILT_DROP; expect_eq(a, "drop");
      op = FILT_MIN;  expect_eq((a < b) ? a : b, "min");
      op = FILT_NONE; expect_eq(a, "none");
    end
    op = FILT_FADD;
    for (int t = 0; t < 20000; t++) begin
      int ea, eb;
      ea = $urandom_range(30, 220);
      eb = ea + $urandom_range(0, 40) - 20;
      a = {1'($urandom), 8'(ea), 23'($urandom)};
      b = {1'($urandom), 8'(eb), 23'($urandom)};
      if (t % 5 == 0) b = {~a[31], a[30:0] ^ 31'($urandom_range(0, 3))};   // near cancellation
      if (t % 7 == 0) b = {a[31], 8'(ea), 23'($urandom)};                  // same exponent
      expect_eq(r2f(f2r(a) + f2r(b)), "fadd");
    end
    a = 32'h3f80_0000; b = 32'h0000_0000; expect_eq(32'h3f80_0000, "x+0");
    a = 32'h0000_0000; b = 32'h4000_0000; expect_eq(32'h4000_0000, "0+x");
    a = 32'h4040_0000; b = 32'hc040_0000; expect_eq(32'h0000_0000, "x-x");
    a = 32'h7f80_0000; b = 32'h3f80_0000; expect_eq(32'h7f80_0000, "inf+1");
    a = 32'h7f80_0000; b = 32'hff80_0000; expect_eq(32'h7fc0_0000, "inf-inf");
    a = 32'h7fc0_0001; b = 32'h3f80_0000; expect_eq(32'h7fc0_0000, "nan");
    a = 32'h7f7f_ffff; b = 32'h7f7f_ffff; expect_eq(32'h7f80_0000, "overflow");
    a = 32'h3fc0_0000; b = 32'h4010_0000; expect_eq(32'h4070_0000, "1.5+2.25");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10000000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
