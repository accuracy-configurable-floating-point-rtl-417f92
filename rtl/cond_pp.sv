// cond_pp: one conditionally executed cross partial product (A*D or B*C).
//
// full_op is the high segment that is kept (A for the AD term, C for the BC
// term) and low_op the low segment that may be approximated (D or B).
// When exec is set the N x N product full_op*low_op is formed exactly; when
// it is clear the multiplier's operands are held at zero, so it neither
// toggles nor contributes. When comp_en is set the compensation term
// full_op<<1 is produced instead, i.e. the small low segment is replaced by
// the constant 2. Holding the operands at zero (operand isolation) is this
// design's way of bypassing the multiplier; the paper only says it is bypassed.
// Combinational.
module cond_pp #(
  parameter int unsigned N = 5
) (
  input  logic [N-1:0]   full_op,
  input  logic [N-1:0]   low_op,
  input  logic           exec,
  input  logic           comp_en,
  output logic [2*N-1:0] pp,
  output logic [N:0]     comp
);

  logic [N-1:0] op_a, op_b;

  always_comb begin
    op_a = exec ? full_op : '0;
    op_b = exec ? low_op  : '0;
    pp   = (2*N)'(op_a) * (2*N)'(op_b);
    comp = comp_en ? {full_op, 1'b0} : '0;
  end

endmodule
