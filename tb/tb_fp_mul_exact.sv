// tb_fp_mul_exact: self-checking test of fp_mul_exact.
//
// Three instances, FP32 (8/23), FP16 (5/10) and an 8-bit format (4/3) that
// is tested exhaustively. The reference multiplies the
// integer significands, finds the leading one of the product, and rounds to
// nearest-even by comparing the discarded remainder with one half ULP (rather
// than with guard and sticky bits). Results whose exponent leaves the normal
// range become infinity or zero; subnormal inputs count as zero.
// Stimulus: directed special values, overflow, underflow and rounding ties,
// then random operands, half of them with sparse mantissas so that ties and
// mantissa carry-outs on rounding occur often. Counts each rounding outcome.
module tb_fp_mul_exact;
  int checks = 0, failures = 0;
  int n_tie = 0, n_up = 0, n_carry = 0, n_ovf = 0, n_unf = 0, n_spec = 0;

  logic [31:0] a32, b32, p32;
  logic [15:0] a16, b16, p16;
  logic [7:0]  a8, b8, p8;

  fp_mul_exact #(.EXP_W(8),  .MAN_W(23)) dut32 (.a(a32), .b(b32), .p(p32));
  fp_mul_exact #(.EXP_W(5),  .MAN_W(10)) dut16 (.a(a16), .b(b16), .p(p16));
  fp_mul_exact #(.EXP_W(4),  .MAN_W(3))  dut8  (.a(a8),  .b(b8),  .p(p8));

  // Reference product of two (1+ew+mw)-bit floats held in the low bits of a longint.
  function automatic longint ref_mul(input longint a, input longint b, input int ew, input int mw);
    longint sa, sb, ea, eb, ma, mb, s, emax, bias, sig_a, sig_b, prod, q, rem, half;
    longint e;
    int msb, k;
    logic za, zb, ia, ib, na, nb;
    emax = (longint'(1) << ew) - 1;
    bias = (longint'(1) << (ew - 1)) - 1;
    ma = a % (longint'(1) << mw);
    mb = b % (longint'(1) << mw);
    ea = (a >> mw) % (longint'(1) << ew);
    eb = (b >> mw) % (longint'(1) << ew);
    sa = a >> (ew + mw);
    sb = b >> (ew + mw);
    s  = (sa + sb) % 2;
    za = (ea == 0); zb = (eb == 0);
    ia = (ea == emax) && (ma == 0); ib = (eb == emax) && (mb == 0);
    na = (ea == emax) && (ma != 0); nb = (eb == emax) && (mb != 0);
    if (na || nb || (ia && zb) || (za && ib))
      return (s << (ew + mw)) | (emax << mw) | (longint'(1) << (mw - 1));
    if (ia || ib) return (s << (ew + mw)) | (emax << mw);
    if (za || zb) return (s << (ew + mw));
    sig_a = ma + (longint'(1) << mw);
    sig_b = mb + (longint'(1) << mw);
    prod  = sig_a * sig_b;
    msb = 0;
    for (int i = 0; i < 62; i++) if ((prod >> i) != 0) msb = i;
    k    = msb - mw;                       // bits to drop
    q    = prod >> k;
    rem  = prod - (q << k);
    half = longint'(1) << (k - 1);
    e    = ea + eb - bias + (msb - 2 * mw);
    if (rem == half) n_tie++;
    if (rem > half || (rem == half && (q % 2) == 1)) begin
      q = q + 1;
      n_up++;
      if (q == (longint'(1) << (mw + 1))) begin
        q = q >> 1;
        e = e + 1;
        n_carry++;
      end
    end
    if (e > emax - 1) begin
      n_ovf++;
      return (s << (ew + mw)) | (emax << mw);
    end
    if (e < 1) begin
      n_unf++;
      return (s << (ew + mw));
    end
    return (s << (ew + mw)) | (e << mw) | (q - (longint'(1) << mw));
  endfunction

  task automatic run32(input logic [31:0] a, input logic [31:0] b);
    longint e;
    a32 = a; b32 = b;
    #1;
    e = ref_mul(longint'(a), longint'(b), 8, 23);
    checks++;
    if (longint'(p32) != e) begin
      failures++;
      if (failures < 20) $display("FAIL fp32 %h * %h = %h expected %h", a, b, p32, e);
    end
  endtask

  task automatic run16(input logic [15:0] a, input logic [15:0] b);
    longint e;
    a16 = a; b16 = b;
    #1;
    e = ref_mul(longint'(a), longint'(b), 5, 10);
    checks++;
    if (longint'(p16) != e) begin
      failures++;
      if (failures < 20) $display("FAIL fp16 %h * %h = %h expected %h", a, b, p16, e);
    end
  endtask

  function automatic logic [31:0] rnd32(input int i);
    logic [31:0] v;
    v = $urandom;
    if (i % 2 == 1) v[22:0] = {v[22:18], 15'b0, v[2:0]} & 23'h7c0007;  // sparse
    if (i % 4 == 0) v[30:23] = 8'($urandom_range(60, 190));            // mid range
    return v;
  endfunction

  initial begin
    #100ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // 1.0 * 1.0, 1.5 * 1.5, -2 * 3
    run32(32'h3f800000, 32'h3f800000);
    run32(32'h3fc00000, 32'h3fc00000);
    run32(32'hc0000000, 32'h40400000);
    // specials: zero, subnormal, inf, NaN, inf*0
    run32(32'h00000000, 32'h40400000);
    run32(32'h80000000, 32'h40400000);
    run32(32'h00000123, 32'h40400000);
    run32(32'h7f800000, 32'h40400000);
    run32(32'h7fc00000, 32'h3f800000);
    run32(32'h7f800000, 32'h00000000);
    // overflow and underflow
    run32(32'h7f000000, 32'h40000000);
    run32(32'h00800000, 32'h3f000000);
    // tie, round up to even: (1+2^-23)*(1+2^-1)
    run32(32'h3f800001, 32'h3fc00000);
    // tie, stays even: (1+2^-22)*(1+2^-1)
    run32(32'h3f800002, 32'h3fc00000);
    // all-ones mantissas: rounding carries into the exponent
    run32(32'h3fffffff, 32'h3fffffff);
    run32(32'h3f7fffff, 32'h3f800001);
    for (int i = 0; i < 40000; i++) run32(rnd32(i), rnd32(i + 1));
    for (int i = 0; i < 20000; i++) run16(16'($urandom), 16'($urandom));
    run16(16'h3c00, 16'h3c00);
    for (int i = 0; i < 65536; i++) begin
      longint e;
      {a8, b8} = 16'(i);
      #1;
      e = ref_mul(longint'(a8), longint'(b8), 4, 3);
      checks++;
      if (longint'(p8) != e) begin
        failures++;
        if (failures < 20) $display("FAIL fp8 %h * %h = %h expected %h", a8, b8, p8, e);
      end
    end
    run16(16'h7bff, 16'h7bff);
    $display("events: ties=%0d round_up=%0d carry=%0d overflow=%0d underflow=%0d",
             n_tie, n_up, n_carry, n_ovf, n_unf);
    checks++;
    if (n_tie == 0 || n_up == 0 || n_carry == 0 || n_ovf == 0 || n_unf == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
