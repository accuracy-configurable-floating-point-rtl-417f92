// tb_fp_dcim_macro: end-to-end test of the floating-point DCiM macro.
//
// Three macros share the same stimulus: the default build (AC5-5, 64 x FP32),
// an exact-multiplier build and an ACL5 build, i.e. every multiplier option
// of the generator. The test loads operands into all rows, streams
// multiplication requests back to back and with gaps, writes rows while
// multiplications run, and resets in the middle of a burst. Each product is
// checked against the reference models two cycles after its request; the
// number of valid results and the cycle on which they appear are checked too.
// Every mechanism (conditional execution, compensation, dropped and forced
// cross terms, normalisation with and without exponent increment, rounding,
// overflow, underflow, special values, back-to-back issue, bubbles, write
// during compute, reset) is counted and must occur at least once.
module tb_fp_dcim_macro;
  import fpmul_pkg::*;
  import fp_ref_pkg::*;

  localparam int ROWS = 64;
  localparam int LAT  = 2;

  int checks = 0, failures = 0;
  int n_b2b = 0, n_bubble = 0, n_wr_during = 0, n_reset = 0, n_results = 0;

  logic        clk = 0, rst_n = 0;
  logic        wr_en = 0, mul_en = 0;
  logic [5:0]  wr_addr = 0, mul_addr = 0;
  logic [31:0] wr_data = 0, mul_x = 0;
  logic        v_ac, v_ex, v_acl;
  logic [31:0] p_ac, p_ex, p_acl;

  fp_dcim_macro dut_ac (
    .clk(clk), .rst_n(rst_n), .wr_en(wr_en), .wr_addr(wr_addr), .wr_data(wr_data),
    .mul_en(mul_en), .mul_addr(mul_addr), .mul_x(mul_x), .out_valid(v_ac), .out_p(p_ac));
  fp_dcim_macro #(.MULT(MUL_EXACT)) dut_ex (
    .clk(clk), .rst_n(rst_n), .wr_en(wr_en), .wr_addr(wr_addr), .wr_data(wr_data),
    .mul_en(mul_en), .mul_addr(mul_addr), .mul_x(mul_x), .out_valid(v_ex), .out_p(p_ex));
  fp_dcim_macro #(.MULT(MUL_ACL)) dut_acl (
    .clk(clk), .rst_n(rst_n), .wr_en(wr_en), .wr_addr(wr_addr), .wr_data(wr_data),
    .mul_en(mul_en), .mul_addr(mul_addr), .mul_x(mul_x), .out_valid(v_acl), .out_p(p_acl));

  always #5 clk = ~clk;

  logic [31:0] mem [ROWS];
  // expected results in flight, indexed by issue cycle
  logic [31:0] exp_ac [$], exp_ex [$], exp_acl [$];
  int          exp_cyc [$];
  int          cyc = 0;

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Output monitor: sampled just after each rising edge.
  always @(posedge clk) begin
    #1;
    if (rst_n) begin
      checks++;
      if (v_ac != v_ex || v_ac != v_acl) begin
        failures++;
        $display("FAIL valid mismatch between builds");
      end
      if (v_ac) begin
        n_results++;
        checks += 4;
        if (exp_cyc.size() == 0) begin
          failures++;
          $display("FAIL unexpected result at cycle %0d", cyc);
        end else begin
          int c;
          logic [31:0] e_ac, e_ex, e_acl;
          c = exp_cyc.pop_front();
          e_ac = exp_ac.pop_front(); e_ex = exp_ex.pop_front(); e_acl = exp_acl.pop_front();
          if (cyc - c != LAT) begin
            failures++;
            $display("FAIL latency %0d cycles", cyc - c);
          end
          if (p_ac != e_ac) begin
            failures++;
            $display("FAIL AC5-5 got %h expected %h", p_ac, e_ac);
          end
          if (p_ex != e_ex) begin
            failures++;
            $display("FAIL exact got %h expected %h", p_ex, e_ex);
          end
          if (p_acl != e_acl) begin
            failures++;
            $display("FAIL ACL5 got %h expected %h", p_acl, e_acl);
          end
        end
      end
    end
  end

  function automatic logic [31:0] rnd_fp(input int i);
    logic [31:0] v;
    v = $urandom;
    v[30:23] = 8'($urandom_range(80, 175));
    case (i % 11)
      1: v[22:18] = 5'b0;
      2: v[17:15] = 3'b0;
      3: v[17:13] = 5'b0;
      4: v[30:23] = 8'd250;
      5: v[30:23] = 8'd3;
      6: v[30:23] = 8'd0;
      7: v = 32'h7f800000;
      default: ;
    endcase
    return v;
  endfunction

  task automatic issue(input logic [5:0] addr, input logic [31:0] x);
    mul_en = 1; mul_addr = addr; mul_x = x;
    exp_ac.push_back(32'(ref_afpm(longint'(mem[addr]), longint'(x), 8, 23, 5, 0)));
    exp_ex.push_back(32'(ref_exact(longint'(mem[addr]), longint'(x), 8, 23)));
    exp_acl.push_back(32'(ref_afpm(longint'(mem[addr]), longint'(x), 8, 23, 5, 1)));
    exp_cyc.push_back(cyc);
  endtask

  initial begin
    int issued, prev_issue;
    clear_counts();
    @(negedge clk);
    @(negedge clk);
    rst_n = 1;
    // load all rows
    for (int r = 0; r < ROWS; r++) begin
      wr_en = 1; wr_addr = 6'(r); wr_data = rnd_fp(r); mem[r] = wr_data;
      @(negedge clk);
    end
    wr_en = 0;
    // traffic: bursts, gaps, writes to rows not being read
    issued = 0; prev_issue = -10;
    for (int i = 0; i < 3000; i++) begin
      logic [5:0] a;
      wr_en = 0; mul_en = 0;
      if ($urandom_range(0, 3) != 0) begin
        a = 6'($urandom);
        issue(a, rnd_fp(i + 5));
        if (prev_issue == cyc - 1) n_b2b++;
        else if (issued > 0) n_bubble++;
        prev_issue = cyc;
        issued++;
        if ($urandom_range(0, 4) == 0) begin
          wr_en = 1; wr_addr = a + 6'd1; wr_data = rnd_fp(i * 7);
          n_wr_during++;
        end
      end
      @(negedge clk);
      if (wr_en) mem[wr_addr] = wr_data;
      // reset in the middle of a burst, once
      if (i == 1500) begin
        mul_en = 0; wr_en = 0;
        issue(6'd0, 32'h3f800000);   // this request is dropped by the reset
        void'(exp_ac.pop_back()); void'(exp_ex.pop_back()); void'(exp_acl.pop_back());
        void'(exp_cyc.pop_back());
        mul_en = 1;
        rst_n = 0;
        @(negedge clk);
        mul_en = 0;
        // requests issued before the reset are lost too
        exp_ac.delete(); exp_ex.delete(); exp_acl.delete(); exp_cyc.delete();
        @(negedge clk);
        rst_n = 1;
        n_reset++;
        checks++;
        if (v_ac) begin
          failures++;
          $display("FAIL valid after reset");
        end
      end
    end
    mul_en = 0; wr_en = 0;
    repeat (4) @(negedge clk);
    checks++;
    if (exp_cyc.size() != 0) begin
      failures++;
      $display("FAIL %0d results never appeared", exp_cyc.size());
    end
    $display("results=%0d back_to_back=%0d bubbles=%0d write_during_compute=%0d resets=%0d",
             n_results, n_b2b, n_bubble, n_wr_during, n_reset);
    $display("AC5-5 AD term: exact=%0d compensated=%0d dropped=%0d forced=%0d",
             n_exec, n_comp, n_drop, n_force);
    $display("normalise: increment=%0d none=%0d  overflow=%0d underflow=%0d special=%0d round_up=%0d",
             n_sel, n_nosel, n_ovf, n_unf, n_spec, n_round_up);
    checks++;
    if (n_b2b == 0 || n_bubble == 0 || n_wr_during == 0 || n_reset == 0 || n_exec == 0 ||
        n_comp == 0 || n_drop == 0 || n_force == 0 || n_sel == 0 || n_nosel == 0 ||
        n_ovf == 0 || n_unf == 0 || n_spec == 0 || n_round_up == 0) begin
      failures++;
      $display("FAIL a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
