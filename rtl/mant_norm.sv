// mant_norm: normalisation of the approximate mantissa sum.
//
// total holds the accumulated sum S without the implicit one at weight 2^W
// (W = 3N in the segmented mode, W = N in the low-precision mode), so the
// significand product is P = 2^W + S, with 1 <= P/2^W < 4.
//   sel = total[W+1] | total[W]: P >= 2, the exponent is incremented and the
//         mantissa is P/2. Adding the implicit one to S flips bit W, so the
//         new mantissa is {~total[W], total[W-1:0]} (W+1 bits), left-aligned
//         in the MAN_W-bit field, i.e. shifted by MAN_W-1-W.
//   sel = 0: P < 2, the mantissa is total[W-1:0] shifted by MAN_W-W.
// The low bits are zero-padded (no rounding). Combinational.
module mant_norm #(
  parameter int unsigned W     = 15,
  parameter int unsigned MAN_W = 23
) (
  input  logic [W+1:0]     total,
  output logic             sel,
  output logic [MAN_W-1:0] man
);

  initial begin
    if (W + 1 > MAN_W) $error("mant_norm: W+1 must not exceed MAN_W");
  end

  always_comb begin
    sel = total[W+1] | total[W];
    if (sel) man = MAN_W'({~total[W], total[W-1:0]}) << (MAN_W - 1 - W);
    else     man = MAN_W'(total[W-1:0]) << (MAN_W - W);
  end

endmodule
