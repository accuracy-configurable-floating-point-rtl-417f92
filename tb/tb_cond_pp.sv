// tb_cond_pp: self-checking test of cond_pp.
//
// Exhaustive over both operands and both control bits for N=5: the product
// must equal full_op*low_op only when exec is set, and the compensation must
// equal 2*full_op only when comp_en is set.
module tb_cond_pp;
  int checks = 0, failures = 0;

  logic [4:0] f, l;
  logic ex, ce;
  logic [9:0] pp;
  logic [5:0] comp;

  cond_pp #(.N(5)) dut (.full_op(f), .low_op(l), .exec(ex), .comp_en(ce), .pp(pp), .comp(comp));

  initial begin
    #10ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < (1 << 12); i++) begin
      {f, l, ex, ce} = 12'(i);
      #1;
      checks += 2;
      if (int'(pp) != (ex ? int'(f) * int'(l) : 0)) begin
        failures++;
        $display("FAIL pp f=%0d l=%0d exec=%0d got %0d", f, l, ex, pp);
      end
      if (int'(comp) != (ce ? 2 * int'(f) : 0)) begin
        failures++;
        $display("FAIL comp f=%0d comp_en=%0d got %0d", f, ce, comp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
