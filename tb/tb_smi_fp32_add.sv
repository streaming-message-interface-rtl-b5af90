// tb_smi_fp32_add: checks smi_fp32_pkg::fp32_add against the simulator's own
// floating point. Operands are random single-precision values whose
// exponents differ by less than 25, so their exact sum fits a double and
// rounding it once to single precision gives the correctly rounded result.
// Special cases (zeros, infinities, NaN, cancellation, subnormals) are
// checked against values worked out by hand.
module tb_smi_fp32_add;
  import smi_fp32_pkg::*;
  int checks = 0, failures = 0;

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic real widen(input logic [31:0] f);   // normal values only
    return $bitstoreal({f[31], f[30], {3{~f[30]}}, f[29:23], f[22:0], 29'b0});
  endfunction

  function automatic logic [31:0] narrow(input real r);   // result in normal range
    logic [63:0] d;
    logic [10:0] e;
    logic [24:0] m;
    d = $realtobits(r);
    if (d[62:0] == 0) return {d[63], 31'b0};
    e = d[62:52] - 11'd896;
    m = {2'b01, d[51:29]};
    if (d[28] && (d[27:0] != 0 || d[29])) m = m + 1'b1;
    if (m[24]) begin m = m >> 1; e = e + 1'b1; end
    return {d[63], e[7:0], m[22:0]};
  endfunction

  initial begin
    logic [31:0] a, b, r, e;
    real s;
    for (int n = 0; n < 20000; n++) begin
      a = $urandom; b = $urandom;
      a[30:23] = 8'($urandom_range(80, 170));
      b[30:23] = 8'(int'(a[30:23]) + $urandom_range(0, 48) - 24);
      s  = widen(a) + widen(b);
      e  = narrow(s);
      r  = fp32_add(a, b);
      check(r == e, $sformatf("%h + %h = %h, expected %h", a, b, r, e));
    end
    check(fp32_add(32'h3f80_0000, 32'h3f80_0000) == 32'h4000_0000, "1+1");
    check(fp32_add(32'h3f80_0000, 32'hbf80_0000) == 32'h0000_0000, "1-1 = +0");
    check(fp32_add(32'h8000_0000, 32'h8000_0000) == 32'h8000_0000, "-0 + -0");
    check(fp32_add(32'h7f80_0000, 32'h3f80_0000) == 32'h7f80_0000, "inf + 1");
    check(fp32_add(32'h7f80_0000, 32'hff80_0000) == 32'h7fc0_0000, "inf - inf");
    check(fp32_add(32'h7f7f_ffff, 32'h7f7f_ffff) == 32'h7f80_0000, "overflow");
    check(fp32_add(32'h0000_0001, 32'h0000_0001) == 32'h0000_0002, "subnormals");
    check(fp32_add(32'h0080_0000, 32'h8000_0001) == 32'h007f_ffff, "normal to subnormal");
    check(fp32_add(32'h3f80_0000, 32'h3380_0000) == 32'h3f80_0000, "tie to even (down)");
    check(fp32_add(32'h3f80_0001, 32'h3380_0000) == 32'h3f80_0002, "tie to even (up)");
    check(fp32_less(32'hbf80_0000, 32'h3f80_0000) && !fp32_less(32'h4000_0000, 32'h3f80_0000), "ordering");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
