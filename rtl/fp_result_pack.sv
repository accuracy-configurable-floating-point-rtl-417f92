// fp_result_pack: final exception handling and packing of a floating-point product.
//
// Takes the sign, the special-operand flags decided from the inputs, the
// product's biased exponent as a signed number that may be out of range,
// and the mantissa field, and returns the packed result:
//   nan            -> quiet NaN (exponent all ones, mantissa MSB set)
//   inf            -> signed infinity
//   zero           -> signed zero
//   exp > 2^EXP_W-2 -> overflow, signed infinity
//   exp < 1        -> underflow, signed zero (no subnormal results)
//   otherwise      -> {sign, exp, man}
// Shared by the exact and the approximate multiplier. Combinational.
module fp_result_pack #(
  parameter int unsigned EXP_W = 8,
  parameter int unsigned MAN_W = 23
) (
  input  logic                     sign,
  input  logic                     nan,
  input  logic                     inf,
  input  logic                     zero,
  input  logic signed [EXP_W+1:0]  exp,
  input  logic [MAN_W-1:0]         man,
  output logic [EXP_W+MAN_W:0]     p
);

  localparam logic signed [EXP_W+1:0] EXP_MAX = (EXP_W+2)'((1 << EXP_W) - 2);

  always_comb begin
    if (nan)                 p = {sign, {EXP_W{1'b1}}, 1'b1, {(MAN_W-1){1'b0}}};
    else if (inf)            p = {sign, {EXP_W{1'b1}}, {MAN_W{1'b0}}};
    else if (zero)           p = {sign, {(EXP_W+MAN_W){1'b0}}};
    else if (exp > EXP_MAX)  p = {sign, {EXP_W{1'b1}}, {MAN_W{1'b0}}};
    else if (exp < 1)        p = {sign, {(EXP_W+MAN_W){1'b0}}};
    else                     p = {sign, exp[EXP_W-1:0], man};
  end

endmodule
