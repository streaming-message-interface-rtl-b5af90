// smi_fp32_pkg: IEEE-754 binary32 helpers for the reduce support kernel.
//
// fp32_add is a combinational single-precision adder: operands are unpacked
// (subnormals included), the smaller one is aligned with guard, round and
// sticky bits, the significands are added or subtracted, the result is
// normalised and rounded to nearest, ties to even. Overflow gives infinity;
// a NaN operand or inf - inf gives the canonical quiet NaN. An exact zero
// sum is +0 unless both operands are -0.
// fp32_less orders two values as real numbers (-0 equals +0 is not
// distinguished: -0 < +0); NaN operands are not treated specially.
// These functions are this design's implementation of the FP32 arithmetic
// that the reduce collective needs; the hardware used for the published
// numbers was generated by an HLS tool and is not described.
package smi_fp32_pkg;

  function automatic logic [31:0] fp32_add(input logic [31:0] a, input logic [31:0] b);
    logic        sa, sb, sx, sy, sr;
    logic [7:0]  ea, eb;
    logic [9:0]  ex, ey, er;
    logic [23:0] ma, mb, mx, my;
    logic [26:0] xa, ya;      // significand with guard, round, sticky
    logic [27:0] sum;
    logic [9:0]  d;
    logic [4:0]  lz;
    logic [24:0] rnd;
    logic        nan_a, nan_b, inf_a, inf_b;
    sa = a[31]; ea = a[30:23]; ma = {ea != 0, a[22:0]};
    sb = b[31]; eb = b[30:23]; mb = {eb != 0, b[22:0]};
    nan_a = (ea == 8'hff) && (a[22:0] != 0);
    nan_b = (eb == 8'hff) && (b[22:0] != 0);
    inf_a = (ea == 8'hff) && (a[22:0] == 0);
    inf_b = (eb == 8'hff) && (b[22:0] == 0);
    if (nan_a || nan_b || (inf_a && inf_b && sa != sb)) return 32'h7fc0_0000;
    if (inf_a) return a;
    if (inf_b) return b;
    // order by magnitude: x is the larger
    if ({ea, a[22:0]} >= {eb, b[22:0]}) begin
      sx = sa; ex = {2'b0, (ea == 0) ? 8'd1 : ea}; mx = ma;
      sy = sb; ey = {2'b0, (eb == 0) ? 8'd1 : eb}; my = mb;
    end else begin
      sx = sb; ex = {2'b0, (eb == 0) ? 8'd1 : eb}; mx = mb;
      sy = sa; ey = {2'b0, (ea == 0) ? 8'd1 : ea}; my = ma;
    end
    d  = ex - ey;
    xa = {mx, 3'b000};
    if (d >= 10'd27) begin
      ya = {26'b0, my != 0};
    end else begin
      ya = {my, 3'b000} >> d;
      ya[0] = ya[0] | (({my, 3'b000} & ((27'd1 << d) - 27'd1)) != 0);
    end
    if (sx == sy) sum = {1'b0, xa} + {1'b0, ya};
    else          sum = {1'b0, xa} - {1'b0, ya};
    if (sum == 0) return {sa & sb, 31'b0};
    sr = sx;
    er = ex;
    if (sum[27]) begin
      sum = {1'b0, sum[27:2], sum[1] | sum[0]};
      er  = er + 1'b1;
    end else begin
      lz = 0;
      for (int i = 26; i >= 0; i--) begin
        if (sum[i]) break;
        lz = lz + 1'b1;
      end
      // normalise, but not below the smallest exponent (subnormal result)
      if ({5'b0, lz} >= er) begin
        sum = sum << (er - 1);
        er  = 10'd0;
      end else begin
        sum = sum << lz;
        er  = er - {5'b0, lz};
      end
    end
    // round to nearest even on guard/round/sticky
    rnd = {1'b0, sum[26:3]};
    if (sum[2] && (sum[1] || sum[0] || sum[3])) rnd = rnd + 1'b1;
    if (rnd[24]) begin
      rnd = rnd >> 1;
      er  = er + 1'b1;
    end else if (er == 0 && rnd[23]) begin
      er = 10'd1;   // subnormal rounded up to the smallest normal
    end
    if (er >= 10'd255) return {sr, 8'hff, 23'b0};
    return {sr, er[7:0], rnd[22:0]};
  endfunction

  function automatic logic fp32_less(input logic [31:0] a, input logic [31:0] b);
    logic [31:0] ka, kb;
    ka = a[31] ? ~a : {1'b1, a[30:0]};
    kb = b[31] ? ~b : {1'b1, b[30:0]};
    return ka < kb;
  endfunction

endpackage
