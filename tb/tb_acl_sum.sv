// tb_acl_sum: self-checking test of acl_sum.
//
// Exhaustive for N=5: total must be a + c + (a AND c), the AND computed bit
// by bit with weights in the testbench.
module tb_acl_sum;
  int checks = 0, failures = 0;

  logic [4:0] a, c;
  logic [6:0] tot;

  acl_sum #(.N(5)) dut (.a(a), .c(c), .total(tot));

  initial begin
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e, andv;
    for (int i = 0; i < 1024; i++) begin
      {a, c} = 10'(i);
      #1;
      andv = 0;
      for (int k = 0; k < 5; k++) if (a[k] && c[k]) andv += (1 << k);
      e = int'(a) + int'(c) + andv;
      checks++;
      if (int'(tot) != e) begin
        failures++;
        $display("FAIL a=%0d c=%0d got %0d expected %0d", a, c, tot, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
