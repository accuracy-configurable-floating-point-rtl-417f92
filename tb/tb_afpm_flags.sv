// tb_afpm_flags: self-checking test of afpm_flags.
//
// Exhaustive over all 2^20 segment combinations for N=5; the segment tests
// that feed the block (non-zero, upper N-2 bits set) are derived here from the
// segment values.
// The expected flags follow the decision tree of the flow chart: first the
// forced cases, then "low segment large enough?", then "both operands
// non-zero?" for the compensation. Also counts how often each outcome
// (exact, compensated, dropped, forced) occurred and fails if one never did.
module tb_afpm_flags;
  int checks = 0, failures = 0;
  int n_exec = 0, n_comp = 0, n_drop = 0, n_force = 0;

  logic [4:0] a, b, c, d;
  logic d_ad, d_bc, c_ad, c_bc;

  afpm_flags dut (.a_nz(a != 0), .b_nz(b != 0), .c_nz(c != 0), .d_nz(d != 0),
                  .b_big(b >= 4), .d_big(d >= 4),
                  .d_ad(d_ad), .d_bc(d_bc), .comp_ad(c_ad), .comp_bc(c_bc));

  // Expected decision for the term hi_op*low_op: 2 = exact, 1 = compensated, 0 = dropped.
  // other_hi is the high segment of the other operand (checked for the forced case).
  function automatic int decide(input int hi_op, input int low_op, input int other_hi);
    if (other_hi == 0 && hi_op != 0 && low_op != 0) return 3;  // forced
    if (low_op >= 4) return 2;                                   // upper n-2 bits not all zero
    if (hi_op != 0 && low_op != 0) return 1;
    return 0;
  endfunction

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d (a=%0d b=%0d c=%0d d=%0d)",
                                  what, got, exp, a, b, c, d);
    end
  endtask

  function automatic int enc(input logic ex, input logic cp);
    return ex ? 2 : (cp ? 1 : 0);
  endfunction

  initial begin
    #100ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ead, ebc;
    for (int i = 0; i < (1 << 20); i++) begin
      {a, b, c, d} = 20'(i);
      #1;
      // AD: hi = A, low = D, forced when C == 0. BC: hi = C, low = B, forced when A == 0.
      ead = decide(a, d, c);
      ebc = decide(c, b, a);
      if (ead == 3) n_force++;
      if (ead == 2) n_exec++;
      if (ead == 1) n_comp++;
      if (ead == 0) n_drop++;
      check("AD", enc(d_ad, c_ad), (ead == 3) ? 2 : ead);
      check("BC", enc(d_bc, c_bc), (ebc == 3) ? 2 : ebc);
      checks++;
      if ((d_ad && c_ad) || (d_bc && c_bc)) failures++;  // never both
    end
    $display("outcomes AD: exact=%0d compensated=%0d dropped=%0d forced=%0d",
             n_exec, n_comp, n_drop, n_force);
    checks++;
    if (n_exec == 0 || n_comp == 0 || n_drop == 0 || n_force == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
