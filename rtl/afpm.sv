// afpm: accuracy-configurable approximate floating-point multiplier.
//
// Sign and exponent are handled as in an exact multiplier (Sp = Sx ^ Sy,
// Ep = Ex + Ey - Bias + Sel); only the mantissa product is approximated.
//
// Segmented mode ACn-n (LOW_PREC = 0): each mantissa is cut into a high
// segment (A, C) and a low segment (B, D) of N bits. The significand product
// is built in a 3N-bit accumulator as
//   (A*C << N) + [A*D | A<<1 | 0] + [B*C | C<<1 | 0] + Mx_t + My_t
// where A*C is always exact, A*D and B*C run only when their flag says the
// low segment is large enough (or a special case forces them) and are
// otherwise replaced by a shift-based compensation or dropped, B*D is never
// formed, and Mx_t, My_t are the mantissas truncated to 3N bits.
//
// Low-precision mode ACLn (LOW_PREC = 1): the sum is A + C + (A & C) on an
// N-bit width; no multiplier at all.
//
// Normalisation looks at the two bits above the accumulator: if either is set
// the exponent is incremented and the mantissa realigned with the hidden-bit
// inversion; the result mantissa is zero-padded, never rounded.
//
// Special values are not part of the approximate datapath in the paper. With
// SPECIALS = 1 (default) this design applies the exact multiplier's rules
// (zero and subnormal inputs give zero, infinity and NaN propagate, overflow
// gives infinity, underflow zero); with SPECIALS = 0 the exponent simply wraps
// as in the bare datapath. Purely combinational.
module afpm #(
  parameter int unsigned EXP_W    = 8,
  parameter int unsigned MAN_W    = 23,
  parameter int unsigned N        = 5,
  parameter bit          LOW_PREC = 1'b0,
  parameter bit          SPECIALS = 1'b1
) (
  input  logic [EXP_W+MAN_W:0] x,
  input  logic [EXP_W+MAN_W:0] y,
  output logic [EXP_W+MAN_W:0] p
);

  localparam int unsigned W    = LOW_PREC ? N : 3 * N;  // accumulator width
  localparam int          BIAS = (1 << (EXP_W - 1)) - 1;

  initial begin
    if (W + 1 > MAN_W) $error("afpm: accumulator width + 1 must not exceed MAN_W");
  end

  logic             sx, sy, sp;
  logic [EXP_W-1:0] ex, ey;
  logic [MAN_W-1:0] mx, my, mp;
  logic [W+1:0]     total;
  logic             sel;
  logic             nan, inf, zero;
  logic signed [EXP_W+1:0] ep;

  assign {sx, ex, mx} = x;
  assign {sy, ey, my} = y;
  assign sp = sx ^ sy;

  if (LOW_PREC) begin : g_acl
    acl_sum #(.N(N)) u_acl (
      .a     (mx[MAN_W-1 -: N]),
      .c     (my[MAN_W-1 -: N]),
      .total (total)
    );
  end else begin : g_ac
    logic [N-1:0]   seg_a, seg_b, seg_c, seg_d;
    logic [3*N-1:0] mx_t, my_t;
    logic           a_nz, b_nz, c_nz, d_nz, b_big, d_big;
    logic           d_ad, d_bc, c_ad, c_bc;
    logic [2*N-1:0] p_ac, p_ad, p_bc;
    logic [N:0]     comp_ad, comp_bc;

    mant_segment #(.MAN_W(MAN_W), .N(N)) u_seg_x (
      .man (mx), .hi (seg_a), .lo (seg_b), .trun (mx_t),
      .hi_nz (a_nz), .lo_nz (b_nz), .lo_big (b_big)
    );
    mant_segment #(.MAN_W(MAN_W), .N(N)) u_seg_y (
      .man (my), .hi (seg_c), .lo (seg_d), .trun (my_t),
      .hi_nz (c_nz), .lo_nz (d_nz), .lo_big (d_big)
    );

    afpm_flags u_flags (
      .a_nz (a_nz), .b_nz (b_nz), .c_nz (c_nz), .d_nz (d_nz),
      .b_big (b_big), .d_big (d_big),
      .d_ad (d_ad), .d_bc (d_bc), .comp_ad (c_ad), .comp_bc (c_bc)
    );

    // A*C carries the largest weight and is always exact.
    assign p_ac = (2*N)'(seg_a) * (2*N)'(seg_c);

    cond_pp #(.N(N)) u_pp_ad (
      .full_op (seg_a), .low_op (seg_d), .exec (d_ad), .comp_en (c_ad),
      .pp (p_ad), .comp (comp_ad)
    );
    cond_pp #(.N(N)) u_pp_bc (
      .full_op (seg_c), .low_op (seg_b), .exec (d_bc), .comp_en (c_bc),
      .pp (p_bc), .comp (comp_bc)
    );

    shift_add_acc #(.N(N)) u_acc (
      .p_ac (p_ac), .p_ad (p_ad), .p_bc (p_bc),
      .comp_ad (comp_ad), .comp_bc (comp_bc),
      .mx_t (mx_t), .my_t (my_t),
      .total (total)
    );
  end

  mant_norm #(.W(W), .MAN_W(MAN_W)) u_norm (
    .total (total), .sel (sel), .man (mp)
  );

  assign ep = $signed((EXP_W+2)'(ex)) + $signed((EXP_W+2)'(ey))
            - $signed((EXP_W+2)'(BIAS)) + $signed((EXP_W+2)'(sel));

  if (SPECIALS) begin : g_spec
    logic zero_x, zero_y, inf_x, inf_y, nan_x, nan_y;
    always_comb begin
      zero_x = (ex == '0);
      zero_y = (ey == '0);
      inf_x  = (ex == '1) && (mx == '0);
      inf_y  = (ey == '1) && (my == '0);
      nan_x  = (ex == '1) && (mx != '0);
      nan_y  = (ey == '1) && (my != '0);
      nan    = nan_x | nan_y | (inf_x & zero_y) | (zero_x & inf_y);
      inf    = inf_x | inf_y;
      zero   = zero_x | zero_y;
    end
    fp_result_pack #(.EXP_W(EXP_W), .MAN_W(MAN_W)) u_pack (
      .sign (sp), .nan (nan), .inf (inf), .zero (zero),
      .exp (ep), .man (mp), .p (p)
    );
  end else begin : g_bare
    assign {nan, inf, zero} = 3'b000;
    assign p = {sp, ep[EXP_W-1:0], mp};
  end

endmodule
