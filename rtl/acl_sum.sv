// acl_sum: mantissa core of the low-precision mode ACLn.
//
// Only the highest N bits of each mantissa are used: a = Mx[top N],
// c = My[top N]. With the implicit one at weight 2^N, (1+a)(1+c) is
// approximated as 2^N + a + c + (a & c): the cross product a*c*2^-N is
// replaced by the bitwise AND of the two segments at the same weight as a
// and c, a first-order estimate of which high-order bits are jointly set.
// No multiplier is used and the accumulation is N bits wide plus two carry
// bits. The AND term's weight is this design's reading of the paper.
// Combinational.
module acl_sum #(
  parameter int unsigned N = 5
) (
  input  logic [N-1:0] a,
  input  logic [N-1:0] c,
  output logic [N+1:0] total
);

  always_comb begin
    total = (N+2)'(a) + (N+2)'(c) + (N+2)'(a & c);
  end

endmodule
