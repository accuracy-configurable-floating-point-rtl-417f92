// afpm_flags: conditional-execution flag generation of the approximate multiplier.
//
// Works on the per-segment tests made by mant_segment for X = (A, B) and
// Y = (C, D) and decides how each intermediate-weight cross product is formed:
//   d_ad = 1 : A*D is computed exactly. This happens when the upper N-2 bits
//              of D are not all zero (d_big), or when C == 0 while A and D
//              are not zero (A*C then carries nothing, so A*D is forced).
//   d_bc = 1 : B*C is computed exactly, symmetric with B (b_big), and forced
//              when A == 0 while B and C are not zero.
//   comp_ad  : A*D is not executed but A and D are both non-zero; D is then
//              taken as the constant 2 and the product becomes A<<1.
//   comp_bc  : same for B*C, giving C<<1.
// When neither applies the term is zero. Combinational.
module afpm_flags (
  input  logic a_nz,     // A != 0
  input  logic b_nz,     // B != 0
  input  logic c_nz,     // C != 0
  input  logic d_nz,     // D != 0
  input  logic b_big,    // upper N-2 bits of B not all zero
  input  logic d_big,    // upper N-2 bits of D not all zero
  output logic d_ad,
  output logic d_bc,
  output logic comp_ad,
  output logic comp_bc
);

  logic force_ad, force_bc;

  always_comb begin
    force_ad = !c_nz && a_nz && d_nz;
    force_bc = !a_nz && b_nz && c_nz;
    d_ad     = d_big | force_ad;
    d_bc     = b_big | force_bc;
    comp_ad  = !d_ad && a_nz && d_nz;
    comp_bc  = !d_bc && b_nz && c_nz;
  end

endmodule
