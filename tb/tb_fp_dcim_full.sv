// tb_fp_dcim_full: one complete operation of the macro at its default build.
//
// Default parameters (64 rows of FP32, AC5-5 multiplier). All 64 rows are
// written with weights, then one input vector of 64 activations is applied
// row by row, one request per cycle, and the 64 products are checked against
// the reference model. The pass takes 64 write cycles plus 64 + 2 compute
// cycles; the last product must appear exactly 2 cycles after the last
// request.
module tb_fp_dcim_full;
  import fp_ref_pkg::*;

  int checks = 0, failures = 0;

  logic        clk = 0, rst_n = 0;
  logic        wr_en = 0, mul_en = 0;
  logic [5:0]  wr_addr = 0, mul_addr = 0;
  logic [31:0] wr_data = 0, mul_x = 0;
  logic        out_valid;
  logic [31:0] out_p;

  fp_dcim_macro dut (
    .clk(clk), .rst_n(rst_n), .wr_en(wr_en), .wr_addr(wr_addr), .wr_data(wr_data),
    .mul_en(mul_en), .mul_addr(mul_addr), .mul_x(mul_x), .out_valid(out_valid), .out_p(out_p));

  always #5 clk = ~clk;

  logic [31:0] w [64], act [64], exp_p [64];
  int cyc = 0, last_issue = 0, last_result = 0, n_out = 0;

  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) begin
    #1;
    if (rst_n && out_valid) begin
      checks++;
      if (n_out >= 64 || out_p != exp_p[n_out]) begin
        failures++;
        $display("FAIL product %0d: got %h expected %h", n_out, out_p, exp_p[n_out % 64]);
      end
      n_out++;
      last_result = cyc;
    end
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear_counts();
    for (int r = 0; r < 64; r++) begin
      // weights and activations in a typical DNN range, some zeros (ReLU)
      w[r]   = {1'($urandom), 8'($urandom_range(115, 127)), 23'($urandom)};
      act[r] = (r % 8 == 5) ? 32'h0 : {1'b0, 8'($urandom_range(118, 130)), 23'($urandom)};
      exp_p[r] = 32'(ref_afpm(longint'(w[r]), longint'(act[r]), 8, 23, 5, 0));
    end
    @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 64; r++) begin
      wr_en = 1; wr_addr = 6'(r); wr_data = w[r];
      @(negedge clk);
    end
    wr_en = 0;
    for (int r = 0; r < 64; r++) begin
      mul_en = 1; mul_addr = 6'(r); mul_x = act[r];
      last_issue = cyc;
      @(negedge clk);
    end
    mul_en = 0;
    repeat (4) @(negedge clk);
    checks += 2;
    if (n_out != 64) begin
      failures++;
      $display("FAIL %0d products instead of 64", n_out);
    end
    if (last_result - last_issue != 2) begin
      failures++;
      $display("FAIL latency %0d", last_result - last_issue);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
