// tb_afpm: self-checking test of the approximate multiplier afpm.
//
// Instances: AC5-5, AC4-4, AC6-6 and ACL5 on FP32, AC3-3 on FP16, and AC5-5
// with SPECIALS=0. The reference rebuilds the approximate significand
// product from the algorithm's rules (segments, flags, compensation, no B*D,
// truncated mantissas, or A + C + (A AND C) in the low-precision mode) as a
// real number, derives the exponent from whether it reaches 2.0, and compares
// the decoded value of the multiplier's output with it exactly. Exceptions
// (zero, subnormal, infinity, NaN, overflow, underflow) are compared bit by
// bit. It also measures the mean relative error against the exact product
// for each configuration and checks that accuracy improves with N and that
// ACL5 is the least accurate.
module tb_afpm;
  int checks = 0, failures = 0;
  int n_exec = 0, n_comp = 0, n_drop = 0, n_force = 0, n_sel = 0, n_nosel = 0;
  int n_ovf = 0, n_unf = 0, n_spec = 0;

  logic [31:0] x, y, p5, p4, p6, pl5, pb;
  logic [15:0] x16, y16, p3;

  afpm #(.EXP_W(8), .MAN_W(23), .N(5))                  dut5  (.x(x), .y(y), .p(p5));
  afpm #(.EXP_W(8), .MAN_W(23), .N(4))                  dut4  (.x(x), .y(y), .p(p4));
  afpm #(.EXP_W(8), .MAN_W(23), .N(6))                  dut6  (.x(x), .y(y), .p(p6));
  afpm #(.EXP_W(8), .MAN_W(23), .N(5), .LOW_PREC(1'b1)) dutl5 (.x(x), .y(y), .p(pl5));
  afpm #(.EXP_W(8), .MAN_W(23), .N(5), .SPECIALS(1'b0)) dutb  (.x(x), .y(y), .p(pb));
  afpm #(.EXP_W(5), .MAN_W(10), .N(3))                  dut3  (.x(x16), .y(y16), .p(p3));

  real sum_re[4];
  int  n_re;

  function automatic real pow2(input int k);
    return 2.0 ** real'(k);
  endfunction

  // Value of a packed float (normal numbers only).
  function automatic real fval(input longint v, input int ew, input int mw);
    longint m, e, s;
    m = v % (longint'(1) << mw);
    e = (v >> mw) % (longint'(1) << ew);
    s = v >> (ew + mw);
    return (s ? -1.0 : 1.0) * (1.0 + real'(m) / pow2(mw)) * pow2(int'(e) - ((1 << (ew - 1)) - 1));
  endfunction

  // Approximate cross term hi*low following the flow chart; other_hi is the
  // other operand's high segment (zero forces execution).
  function automatic longint cross_term(input longint hi, input longint low, input longint other_hi,
                                   input bit count);
    if (other_hi == 0 && hi != 0 && low != 0) begin
      if (count) n_force++;
      return hi * low;
    end
    if (low >= 4) begin
      if (count) n_exec++;
      return hi * low;
    end
    if (hi != 0 && low != 0) begin
      if (count) n_comp++;
      return hi * 2;
    end
    if (count) n_drop++;
    return 0;
  endfunction

  // Expected result; returns the packed value, and through exact_val the
  // exact real product for error measurement.
  function automatic longint ref_afpm(input longint a, input longint b, input int ew, input int mw,
                                      input int n, input bit low, input bit specials,
                                      input bit count);
    longint sa, sb, ea, eb, ma, mb, s, emax, bias, sum, xt, yt, sa_, sb_, sc, sd;
    longint e, w, mres;
    real r;
    emax = (longint'(1) << ew) - 1;
    bias = (longint'(1) << (ew - 1)) - 1;
    ma = a % (longint'(1) << mw);
    mb = b % (longint'(1) << mw);
    ea = (a >> mw) % (longint'(1) << ew);
    eb = (b >> mw) % (longint'(1) << ew);
    sa = a >> (ew + mw);
    sb = b >> (ew + mw);
    s  = (sa + sb) % 2;
    if (specials) begin
      if ((ea == emax && ma != 0) || (eb == emax && mb != 0) ||
          (ea == emax && eb == 0) || (ea == 0 && eb == emax))
        return (s << (ew + mw)) | (emax << mw) | (longint'(1) << (mw - 1));
      if (ea == emax || eb == emax) return (s << (ew + mw)) | (emax << mw);
      if (ea == 0 || eb == 0) return (s << (ew + mw));
    end
    if (low) begin
      w   = n;
      sa_ = ma / (longint'(1) << (mw - n));
      sc  = mb / (longint'(1) << (mw - n));
      sum = sa_ + sc;
      for (int k = 0; k < n; k++)
        if (((sa_ >> k) % 2 == 1) && ((sc >> k) % 2 == 1)) sum += longint'(1) << k;
    end else begin
      w   = 3 * n;
      xt  = ma / (longint'(1) << (mw - 3 * n));
      yt  = mb / (longint'(1) << (mw - 3 * n));
      sa_ = xt / (longint'(1) << (2 * n));
      sb_ = (xt / (longint'(1) << n)) % (longint'(1) << n);
      sc  = yt / (longint'(1) << (2 * n));
      sd  = (yt / (longint'(1) << n)) % (longint'(1) << n);
      sum = sa_ * sc * (longint'(1) << n) + cross_term(sa_, sd, sc, count) + cross_term(sc, sb_, sa_, 0)
          + xt + yt;
    end
    r = 1.0 + real'(sum) / pow2(int'(w));
    e = ea + eb - bias + ((r >= 2.0) ? 1 : 0);
    if (count) begin
      if (r >= 2.0) n_sel++; else n_nosel++;
    end
    if (r >= 2.0) r = r / 2.0;
    // r is now in [1,2) and exactly representable with w+1 fraction bits
    mres = longint'((r - 1.0) * pow2(mw));
    if (specials) begin
      if (e > emax - 1) begin
        if (count) n_ovf++;
        return (s << (ew + mw)) | (emax << mw);
      end
      if (e < 1) begin
        if (count) n_unf++;
        return (s << (ew + mw));
      end
    end
    return (s << (ew + mw)) | ((e % (longint'(1) << ew) + (longint'(1) << ew)) % (longint'(1) << ew)
                               << mw) | mres;
  endfunction

  task automatic cmp(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s x=%h y=%h got %h expected %h", what, x, y, got, exp);
    end
  endtask

  function automatic logic [31:0] rnd32(input int i);
    logic [31:0] v;
    v = $urandom;
    v[30:23] = 8'($urandom_range(64, 190));
    if (i % 5 == 1) v[22:18] = 5'b0;            // A or C zero: forced cross term
    if (i % 3 == 2) v[17:15] = 3'b0;            // small low segment: compensation
    if (i % 7 == 3) v[17:13] = 5'b0;            // zero low segment: dropped
    return v;
  endfunction

  task automatic run32(input logic [31:0] a, input logic [31:0] b, input bit measure);
    real ex, er;
    x = a; y = b;
    #1;
    cmp("AC5-5", longint'(p5),  ref_afpm(longint'(a), longint'(b), 8, 23, 5, 0, 1, 1));
    cmp("AC4-4", longint'(p4),  ref_afpm(longint'(a), longint'(b), 8, 23, 4, 0, 1, 0));
    cmp("AC6-6", longint'(p6),  ref_afpm(longint'(a), longint'(b), 8, 23, 6, 0, 1, 0));
    cmp("ACL5",  longint'(pl5), ref_afpm(longint'(a), longint'(b), 8, 23, 5, 1, 1, 0));
    cmp("bare",  longint'(pb),  ref_afpm(longint'(a), longint'(b), 8, 23, 5, 0, 0, 0));
    if (measure) begin
      ex = fval(longint'(a), 8, 23) * fval(longint'(b), 8, 23);
      er = (fval(longint'(p4), 8, 23) - ex) / ex;  sum_re[0] += (er < 0 ? -er : er);
      er = (fval(longint'(p5), 8, 23) - ex) / ex;  sum_re[1] += (er < 0 ? -er : er);
      er = (fval(longint'(p6), 8, 23) - ex) / ex;  sum_re[2] += (er < 0 ? -er : er);
      er = (fval(longint'(pl5), 8, 23) - ex) / ex; sum_re[3] += (er < 0 ? -er : er);
      n_re++;
    end
  endtask

  initial begin
    #100ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real mred[4];
    n_re = 0;
    foreach (sum_re[i]) sum_re[i] = 0.0;
    // directed: 1*1, 1.5*1.5, max mantissas, specials, range limits
    run32(32'h3f800000, 32'h3f800000, 0);
    run32(32'h3fc00000, 32'hbfc00000, 0);
    run32(32'h3fffffff, 32'h3fffffff, 0);
    run32(32'h00000000, 32'h3fc00000, 0);
    run32(32'h00000055, 32'h3fc00000, 0);
    run32(32'h7f800000, 32'h3fc00000, 0);
    run32(32'h7f800000, 32'h00000000, 0);
    run32(32'hffc00001, 32'h3fc00000, 0);
    run32(32'h7f000000, 32'h7f000000, 0);
    run32(32'h00800000, 32'h00800000, 0);
    n_spec = 10;
    for (int i = 0; i < 30000; i++) run32(rnd32(i), rnd32(i * 3 + 1), 1);
    // uniform operands for the error statistics only
    for (int i = 0; i < 30000; i++) begin
      logic [31:0] a, b;
      a = {1'b0, 8'd127, 23'($urandom)};
      b = {1'b0, 8'd127, 23'($urandom)};
      run32(a, b, 1);
    end
    for (int i = 0; i < 20000; i++) begin
      x16 = 16'($urandom); y16 = 16'($urandom);
      #1;
      cmp("AC3-3 fp16", longint'(p3), ref_afpm(longint'(x16), longint'(y16), 5, 10, 3, 0, 1, 0));
    end
    foreach (mred[i]) mred[i] = sum_re[i] / real'(n_re);
    $display("MRED over %0d products: AC4-4 %e  AC5-5 %e  AC6-6 %e  ACL5 %e",
             n_re, mred[0], mred[1], mred[2], mred[3]);
    checks++;
    if (!(mred[2] < mred[1] && mred[1] < mred[0] && mred[0] < mred[3])) failures++;
    $display("events (AC5-5, AD term): exact=%0d compensated=%0d dropped=%0d forced=%0d",
             n_exec, n_comp, n_drop, n_force);
    $display("events: sel=%0d no_sel=%0d overflow=%0d underflow=%0d", n_sel, n_nosel, n_ovf, n_unf);
    checks++;
    if (n_exec == 0 || n_comp == 0 || n_drop == 0 || n_force == 0 || n_sel == 0 ||
        n_nosel == 0 || n_ovf == 0 || n_unf == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
