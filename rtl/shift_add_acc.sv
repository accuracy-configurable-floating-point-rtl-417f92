// shift_add_acc: alignment and summation of the approximate mantissa product.
//
// With the implicit leading one at weight 2^3N, the product of the two
// significands (1+Mx)(1+My) is approximated as
//   2^3N + (A*C << N) + A*D + B*C + comp_ad + comp_bc + Mx_t + My_t
// in units of 2^-3N, where Mx_t and My_t are the mantissas truncated to 3N
// bits and B*D is dropped. Each partial product is 2N bits wide; only A*C
// needs a shift (by N). The sum, without the implicit 2^3N, is returned in
// total[3N+1:0]; for real operands it stays below 3*2^3N, so the implicit
// one can be folded in by the normaliser without a carry out.
// Combinational.
module shift_add_acc #(
  parameter int unsigned N = 5
) (
  input  logic [2*N-1:0] p_ac,
  input  logic [2*N-1:0] p_ad,
  input  logic [2*N-1:0] p_bc,
  input  logic [N:0]     comp_ad,
  input  logic [N:0]     comp_bc,
  input  logic [3*N-1:0] mx_t,
  input  logic [3*N-1:0] my_t,
  output logic [3*N+1:0] total
);

  localparam int unsigned TW = 3*N + 2;

  always_comb begin
    total = (TW'(p_ac) << N)
          + TW'(p_ad) + TW'(p_bc)
          + TW'(comp_ad) + TW'(comp_bc)
          + TW'(mx_t) + TW'(my_t);
  end

endmodule
