// dcim_cfg_run: test driver for one build of fp_dcim_macro.
//
// Builds the macro with the given array size, float format and multiplier,
// writes random operands into every row, then issues one multiplication per
// row back to back, and compares each product (two cycles after its request)
// with the reference model. Reports its counts on its ports when done.
module dcim_cfg_run
  import fpmul_pkg::*;
  import fp_ref_pkg::*;
#(
  parameter int    ROWS  = 16,
  parameter int    EXP_W = 4,
  parameter int    MAN_W = 3,
  parameter mult_e MULT  = MUL_EXACT,
  parameter int    N     = 5
) (
  input  logic clk,
  input  logic start,
  output logic done,
  output int   checks,
  output int   failures
);
  localparam int FW = 1 + EXP_W + MAN_W;
  localparam int AW = $clog2(ROWS);

  logic          rst_n = 0, wr_en = 0, mul_en = 0, out_valid;
  logic [AW-1:0] wr_addr = 0, mul_addr = 0;
  logic [FW-1:0] wr_data = 0, mul_x = 0, out_p;
  logic [FW-1:0] w [ROWS], xs [ROWS], e [ROWS];
  int            n_out = 0;

  fp_dcim_macro #(.ROWS(ROWS), .EXP_W(EXP_W), .MAN_W(MAN_W), .MULT(MULT), .N(N)) dut (
    .clk(clk), .rst_n(rst_n), .wr_en(wr_en), .wr_addr(wr_addr), .wr_data(wr_data),
    .mul_en(mul_en), .mul_addr(mul_addr), .mul_x(mul_x), .out_valid(out_valid), .out_p(out_p));

  function automatic logic [FW-1:0] rnd();
    logic [FW-1:0] v;
    v = FW'({$urandom, $urandom});
    // keep most exponents near the bias so that products stay in range
    if ($urandom_range(0, 3) != 0)
      v[FW-2 -: EXP_W] = EXP_W'((1 << (EXP_W - 1)) - 1 + $urandom_range(0, 2) - 1);
    return v;
  endfunction

  always @(posedge clk) begin
    #1;
    if (rst_n && out_valid) begin
      checks++;
      if (n_out >= ROWS || out_p != e[n_out % ROWS]) begin
        failures++;
        $display("FAIL rows=%0d fmt=%0d/%0d mult=%0d: product %0d got %h expected %h",
                 ROWS, EXP_W, MAN_W, MULT, n_out, out_p, e[n_out % ROWS]);
      end
      n_out++;
    end
  end

  initial begin
    checks = 0; failures = 0; done = 0;
    wait (start);
    for (int r = 0; r < ROWS; r++) begin
      w[r]  = rnd();
      xs[r] = rnd();
      if (MULT == MUL_EXACT) e[r] = FW'(ref_exact(longint'(w[r]), longint'(xs[r]), EXP_W, MAN_W));
      else e[r] = FW'(ref_afpm(longint'(w[r]), longint'(xs[r]), EXP_W, MAN_W, N, MULT == MUL_ACL));
    end
    @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      wr_en = 1; wr_addr = AW'(r); wr_data = w[r];
      @(negedge clk);
    end
    wr_en = 0;
    for (int r = 0; r < ROWS; r++) begin
      mul_en = 1; mul_addr = AW'(r); mul_x = xs[r];
      @(negedge clk);
    end
    mul_en = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (n_out != ROWS) begin
      failures++;
      $display("FAIL rows=%0d: %0d products", ROWS, n_out);
    end
    done = 1;
  end
endmodule
