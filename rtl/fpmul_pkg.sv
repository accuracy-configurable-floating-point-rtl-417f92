// fpmul_pkg: types shared by the floating-point multipliers and the DCiM macro.
//
// mult_e names the three multiplier implementations that can be placed next
// to the SRAM array: the IEEE 754 exact multiplier, the segmented approximate
// multiplier ACn-n, and its low-precision mode ACLn. The choice is made at
// elaboration time, the way an operator is picked when a macro is generated.
package fpmul_pkg;

  typedef enum logic [1:0] {
    MUL_EXACT = 2'd0,  // IEEE 754, round to nearest even
    MUL_AC    = 2'd1,  // segmented approximate multiplier ACn-n
    MUL_ACL   = 2'd2   // low-precision mode ACLn
  } mult_e;

endpackage
