// tb_dcim_configs: the macro builds of the published area/power comparison.
//
// Runs one complete fill-and-multiply pass on each array/multiplier build:
// 16 x 8 with the exact multiplier on an 8-bit float (4-bit exponent, 3-bit
// mantissa), 32 x 16 with the exact multiplier and with AC3-3 on FP16, and
// 64 x 32 (FP32) with the exact multiplier, ACL5, AC4-4, AC5-5 and AC6-6.
module tb_dcim_configs;
  import fpmul_pkg::*;

  localparam int NB = 8;
  int checks = 0, failures = 0;
  logic clk = 0, start = 0;
  logic done [NB];
  int   c [NB], f [NB];

  always #5 clk = ~clk;

  dcim_cfg_run #(.ROWS(16), .EXP_W(4), .MAN_W(3),  .MULT(MUL_EXACT))       r0 (clk, start, done[0], c[0], f[0]);
  dcim_cfg_run #(.ROWS(32), .EXP_W(5), .MAN_W(10), .MULT(MUL_EXACT))       r1 (clk, start, done[1], c[1], f[1]);
  dcim_cfg_run #(.ROWS(32), .EXP_W(5), .MAN_W(10), .MULT(MUL_AC), .N(3))   r2 (clk, start, done[2], c[2], f[2]);
  dcim_cfg_run #(.ROWS(64), .EXP_W(8), .MAN_W(23), .MULT(MUL_EXACT))       r3 (clk, start, done[3], c[3], f[3]);
  dcim_cfg_run #(.ROWS(64), .EXP_W(8), .MAN_W(23), .MULT(MUL_ACL), .N(5))  r4 (clk, start, done[4], c[4], f[4]);
  dcim_cfg_run #(.ROWS(64), .EXP_W(8), .MAN_W(23), .MULT(MUL_AC), .N(4))   r5 (clk, start, done[5], c[5], f[5]);
  dcim_cfg_run #(.ROWS(64), .EXP_W(8), .MAN_W(23), .MULT(MUL_AC), .N(5))   r6 (clk, start, done[6], c[6], f[6]);
  dcim_cfg_run #(.ROWS(64), .EXP_W(8), .MAN_W(23), .MULT(MUL_AC), .N(6))   r7 (clk, start, done[7], c[7], f[7]);

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit all;
    @(negedge clk);
    start = 1;
    do begin
      @(negedge clk);
      all = 1;
      for (int i = 0; i < NB; i++) all &= done[i];
    end while (!all);
    for (int i = 0; i < NB; i++) begin
      checks += c[i];
      failures += f[i];
      $display("build %0d: checks=%0d failures=%0d", i, c[i], f[i]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
