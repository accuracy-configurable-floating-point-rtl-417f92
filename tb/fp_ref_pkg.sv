// fp_ref_pkg: reference models used by the macro-level testbenches.
//
// ref_exact: IEEE 754 product with round to nearest even, computed from the
//   integer significand product and a remainder-versus-half-ULP comparison;
//   subnormal inputs count as zero, results outside the normal range become
//   infinity or zero.
// ref_afpm: the approximate product of the segmented multiplier (ACn-n) or
//   of its low-precision mode (ACLn), rebuilt from the algorithm's rules as a
//   real significand in [1,4) and then normalised.
// Both take and return floats of 1+ew+mw bits in the low bits of a longint.
// The counters record which mechanisms the operands exercised.
package fp_ref_pkg;

  int n_exec, n_comp, n_drop, n_force, n_sel, n_nosel, n_ovf, n_unf, n_spec, n_round_up;

  function automatic real pow2(input int k);
    return 2.0 ** real'(k);
  endfunction

  // Returns 1 and the special result in res if either operand is special.
  function automatic bit special(input longint a, input longint b, input int ew, input int mw,
                                 output longint res);
    longint ea, eb, ma, mb, s, emax;
    emax = (longint'(1) << ew) - 1;
    ma = a % (longint'(1) << mw);
    mb = b % (longint'(1) << mw);
    ea = (a >> mw) % (longint'(1) << ew);
    eb = (b >> mw) % (longint'(1) << ew);
    s  = ((a >> (ew + mw)) + (b >> (ew + mw))) % 2;
    res = 0;
    if ((ea == emax && ma != 0) || (eb == emax && mb != 0) ||
        (ea == emax && eb == 0) || (ea == 0 && eb == emax)) begin
      res = (s << (ew + mw)) | (emax << mw) | (longint'(1) << (mw - 1));
      return 1;
    end
    if (ea == emax || eb == emax) begin
      res = (s << (ew + mw)) | (emax << mw);
      return 1;
    end
    if (ea == 0 || eb == 0) begin
      res = s << (ew + mw);
      return 1;
    end
    return 0;
  endfunction

  // Packs sign, unbounded exponent and mantissa field, applying overflow/underflow.
  function automatic longint pack(input longint s, input longint e, input longint m,
                                  input int ew, input int mw);
    longint emax;
    emax = (longint'(1) << ew) - 1;
    if (e > emax - 1) begin
      n_ovf++;
      return (s << (ew + mw)) | (emax << mw);
    end
    if (e < 1) begin
      n_unf++;
      return s << (ew + mw);
    end
    return (s << (ew + mw)) | (e << mw) | m;
  endfunction

  function automatic longint ref_exact(input longint a, input longint b, input int ew, input int mw);
    longint ea, eb, ma, mb, s, bias, prod, q, rem, half, e, res;
    int msb, k;
    if (special(a, b, ew, mw, res)) begin
      n_spec++;
      return res;
    end
    bias = (longint'(1) << (ew - 1)) - 1;
    ma = a % (longint'(1) << mw);
    mb = b % (longint'(1) << mw);
    ea = (a >> mw) % (longint'(1) << ew);
    eb = (b >> mw) % (longint'(1) << ew);
    s  = ((a >> (ew + mw)) + (b >> (ew + mw))) % 2;
    prod = (ma + (longint'(1) << mw)) * (mb + (longint'(1) << mw));
    msb = 0;
    for (int i = 0; i < 62; i++) if ((prod >> i) != 0) msb = i;
    k    = msb - mw;
    q    = prod >> k;
    rem  = prod - (q << k);
    half = longint'(1) << (k - 1);
    e    = ea + eb - bias + (msb - 2 * mw);
    if (rem > half || (rem == half && (q % 2) == 1)) begin
      n_round_up++;
      q = q + 1;
      if (q == (longint'(1) << (mw + 1))) begin
        q = q >> 1;
        e = e + 1;
      end
    end
    return pack(s, e, q - (longint'(1) << mw), ew, mw);
  endfunction

  // Approximate cross term hi*low; other_hi is the other operand's high segment.
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

  function automatic longint ref_afpm(input longint a, input longint b, input int ew, input int mw,
                                      input int n, input bit low);
    longint ea, eb, ma, mb, s, bias, sum, xt, yt, sa, sb, sc, sd, e, w, res;
    real r;
    if (special(a, b, ew, mw, res)) begin
      n_spec++;
      return res;
    end
    bias = (longint'(1) << (ew - 1)) - 1;
    ma = a % (longint'(1) << mw);
    mb = b % (longint'(1) << mw);
    ea = (a >> mw) % (longint'(1) << ew);
    eb = (b >> mw) % (longint'(1) << ew);
    s  = ((a >> (ew + mw)) + (b >> (ew + mw))) % 2;
    if (low) begin
      w   = n;
      sa  = ma / (longint'(1) << (mw - n));
      sc  = mb / (longint'(1) << (mw - n));
      sum = sa + sc;
      for (int k = 0; k < n; k++)
        if (((sa >> k) % 2 == 1) && ((sc >> k) % 2 == 1)) sum += longint'(1) << k;
    end else begin
      w   = 3 * n;
      xt  = ma / (longint'(1) << (mw - 3 * n));
      yt  = mb / (longint'(1) << (mw - 3 * n));
      sa  = xt / (longint'(1) << (2 * n));
      sb  = (xt / (longint'(1) << n)) % (longint'(1) << n);
      sc  = yt / (longint'(1) << (2 * n));
      sd  = (yt / (longint'(1) << n)) % (longint'(1) << n);
      sum = sa * sc * (longint'(1) << n) + cross_term(sa, sd, sc, 1) + cross_term(sc, sb, sa, 0)
          + xt + yt;
    end
    r = 1.0 + real'(sum) / pow2(int'(w));
    e = ea + eb - bias;
    if (r >= 2.0) begin
      n_sel++;
      r = r / 2.0;
      e = e + 1;
    end else begin
      n_nosel++;
    end
    return pack(s, e, longint'((r - 1.0) * pow2(mw)), ew, mw);
  endfunction

  // Real number to FP32 bits, round to nearest (used to build test data).
  function automatic logic [31:0] to_fp32(input real r);
    logic s;
    int e;
    longint m;
    real a;
    if (r == 0.0) return 32'h0;
    s = (r < 0.0);
    a = s ? -r : r;
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    m = longint'((a - 1.0) * 8388608.0);
    if (m == 8388608) begin m = 0; e++; end
    if (e + 127 < 1) return {s, 31'h0};
    return {s, 8'(e + 127), 23'(m)};
  endfunction

  // FP32 bits to real (normal numbers and zero).
  function automatic real from_fp32(input logic [31:0] b);
    real v;
    if (b[30:23] == 8'h00) return 0.0;
    v = (1.0 + real'(b[22:0]) / 8388608.0) * pow2(int'(b[30:23]) - 127);
    return b[31] ? -v : v;
  endfunction

  function automatic void clear_counts();
    n_exec = 0; n_comp = 0; n_drop = 0; n_force = 0; n_sel = 0; n_nosel = 0;
    n_ovf = 0; n_unf = 0; n_spec = 0; n_round_up = 0;
  endfunction

endpackage
