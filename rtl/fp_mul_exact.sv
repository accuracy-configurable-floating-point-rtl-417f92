// fp_mul_exact: IEEE 754 floating-point multiplier (exact baseline operator).
//
// Parameterised by exponent width EXP_W and mantissa width MAN_W (FP32 by
// default). The five steps follow the classic multiplication flow:
//   1. sign = Sa ^ Sb; operands are classified as zero, subnormal, infinity,
//      NaN or normal, and normal mantissas get their hidden one back;
//   2. exponent = Ea + Eb - Bias, Bias = 2^(EXP_W-1)-1;
//   3. the (MAN_W+1)x(MAN_W+1) significand product IP, in [1,4);
//   4. if IP >= 2 (its top bit set) it is shifted right by one and the
//      exponent incremented;
//   5. round to nearest, ties to even, using a guard bit and a sticky bit; a
//      round-up that carries out of the mantissa increments the exponent.
//      Then exponent > 2^EXP_W-2 gives signed infinity and exponent < 1
//      signed zero.
// Design choices where the paper says nothing: subnormal inputs are flushed to
// zero, inf*0 and NaN inputs give a quiet NaN, and the range checks use the
// exponent after rounding. Purely combinational (one cycle).
module fp_mul_exact #(
  parameter int unsigned EXP_W = 8,
  parameter int unsigned MAN_W = 23
) (
  input  logic [EXP_W+MAN_W:0] a,
  input  logic [EXP_W+MAN_W:0] b,
  output logic [EXP_W+MAN_W:0] p
);

  localparam int unsigned SW = MAN_W + 1;           // significand width
  localparam int unsigned PW = 2 * SW;              // product width
  localparam int          BIAS = (1 << (EXP_W - 1)) - 1;

  logic              sa, sb, sp;
  logic [EXP_W-1:0]  ea, eb;
  logic [MAN_W-1:0]  ma, mb;
  logic              zero_a, zero_b, inf_a, inf_b, nan_a, nan_b;
  logic              nan, inf, zero;
  logic [PW-1:0]     ip, ip_n;
  logic              top;
  logic [MAN_W-1:0]  man_t;
  logic              guard, sticky, round_up;
  logic [MAN_W:0]    man_r;
  logic signed [EXP_W+1:0] e_final;

  always_comb begin
    {sa, ea, ma} = a;
    {sb, eb, mb} = b;
    sp = sa ^ sb;

    zero_a = (ea == '0);
    zero_b = (eb == '0);
    inf_a  = (ea == '1) && (ma == '0);
    inf_b  = (eb == '1) && (mb == '0);
    nan_a  = (ea == '1) && (ma != '0);
    nan_b  = (eb == '1) && (mb != '0);
    nan    = nan_a | nan_b | (inf_a & zero_b) | (zero_a & inf_b);
    inf    = inf_a | inf_b;
    zero   = zero_a | zero_b;

    ip   = PW'({1'b1, ma}) * PW'({1'b1, mb});
    top  = ip[PW-1];
    ip_n = top ? ip : (ip << 1);

    man_t    = ip_n[PW-2 -: MAN_W];
    guard    = ip_n[PW-2-MAN_W];
    sticky   = |ip_n[PW-3-MAN_W:0];
    round_up = guard & (sticky | man_t[0]);
    man_r    = {1'b0, man_t} + (MAN_W+1)'(round_up);

    e_final = $signed((EXP_W+2)'(ea)) + $signed((EXP_W+2)'(eb))
            - $signed((EXP_W+2)'(BIAS))
            + $signed((EXP_W+2)'(top)) + $signed((EXP_W+2)'(man_r[MAN_W]));
  end

  fp_result_pack #(.EXP_W(EXP_W), .MAN_W(MAN_W)) u_pack (
    .sign (sp),
    .nan  (nan),
    .inf  (inf),
    .zero (zero),
    .exp  (e_final),
    .man  (man_r[MAN_W-1:0]),
    .p    (p)
  );

endmodule
