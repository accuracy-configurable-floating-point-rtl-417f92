// fp_dcim_macro: SRAM-based compute-in-memory macro with a floating-point multiplier.
//
// An array of ROWS floating-point words (cim_sram) sits next to one
// floating-point multiplier. A host writes operands (e.g. weights) into the
// array; a multiplication request names a row and brings the second operand
// (e.g. an activation), and the macro returns the product of the stored word
// and that operand. Which multiplier is built is chosen at elaboration time by
// MULT: the IEEE 754 exact multiplier, the segmented approximate multiplier
// ACn-n (default, N = 5) or its low-precision mode ACLn.
//
// Timing (this design's choice; the source describes only the array sizes,
// the multiplier options and 100 MHz operation with SRAM access as the
// critical path):
//   cycle 0: mul_en, mul_addr, mul_x sampled; SRAM read starts, mul_x is
//            registered;
//   cycle 1: SRAM data and the registered operand feed the combinational
//            multiplier; the product is registered at the end of the cycle;
//   cycle 2: out_valid = 1, out_p = product.
// One request may be issued every cycle. A write and a multiplication may be
// issued in the same cycle; a read of the row being written returns the old
// word. rst_n (active low, synchronous) clears the valid pipeline only.
module fp_dcim_macro
  import fpmul_pkg::*;
#(
  parameter int unsigned ROWS  = 64,
  parameter int unsigned EXP_W = 8,
  parameter int unsigned MAN_W = 23,
  parameter mult_e       MULT  = MUL_AC,
  parameter int unsigned N     = 5
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    wr_en,
  input  logic [$clog2(ROWS)-1:0] wr_addr,
  input  logic [EXP_W+MAN_W:0]    wr_data,
  input  logic                    mul_en,
  input  logic [$clog2(ROWS)-1:0] mul_addr,
  input  logic [EXP_W+MAN_W:0]    mul_x,
  output logic                    out_valid,
  output logic [EXP_W+MAN_W:0]    out_p
);

  localparam int unsigned FW = 1 + EXP_W + MAN_W;

  logic [FW-1:0] w_rd;       // stored operand, valid in cycle 1
  logic [FW-1:0] x_q;        // input operand, registered
  logic          v_q;        // request in cycle 1
  logic [FW-1:0] prod;

  cim_sram #(.ROWS(ROWS), .WIDTH(FW)) u_sram (
    .clk   (clk),
    .we    (wr_en),
    .waddr (wr_addr),
    .wdata (wr_data),
    .re    (mul_en),
    .raddr (mul_addr),
    .rdata (w_rd)
  );

  always_ff @(posedge clk) begin
    if (mul_en) x_q <= mul_x;
  end

  if (MULT == MUL_EXACT) begin : g_exact
    fp_mul_exact #(.EXP_W(EXP_W), .MAN_W(MAN_W)) u_mul (
      .a (w_rd), .b (x_q), .p (prod)
    );
  end else if (MULT == MUL_ACL) begin : g_acl
    afpm #(.EXP_W(EXP_W), .MAN_W(MAN_W), .N(N), .LOW_PREC(1'b1)) u_mul (
      .x (w_rd), .y (x_q), .p (prod)
    );
  end else begin : g_ac
    afpm #(.EXP_W(EXP_W), .MAN_W(MAN_W), .N(N), .LOW_PREC(1'b0)) u_mul (
      .x (w_rd), .y (x_q), .p (prod)
    );
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v_q       <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      v_q       <= mul_en;
      out_valid <= v_q;
    end
  end

  always_ff @(posedge clk) begin
    if (v_q) out_p <= prod;
  end

endmodule
