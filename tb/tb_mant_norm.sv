// tb_mant_norm: self-checking test of mant_norm.
//
// For W=15 (3N, N=5) and W=5 (ACL5), all in a 23-bit mantissa. The testbench
// adds the implicit one (2^W) to the sum, and if the significand is 2 or more
// halves it; the expected mantissa field is then the fractional part scaled
// to 23 bits. Sums cover [0, 3*2^W), the range real operands produce.
module tb_mant_norm;
  int checks = 0, failures = 0;
  int n_sel = 0, n_nosel = 0;

  logic [16:0] t15;
  logic        s15;
  logic [22:0] m15;
  logic [6:0]  t5;
  logic        s5;
  logic [22:0] m5;

  mant_norm #(.W(15), .MAN_W(23)) dut15 (.total(t15), .sel(s15), .man(m15));
  mant_norm #(.W(5),  .MAN_W(23)) dut5  (.total(t5),  .sel(s5),  .man(m5));

  task automatic expect_norm(input longint total, input int w, input logic sel, input logic [22:0] man);
    longint p, em;
    logic es;
    p  = total + (longint'(1) << w);
    es = (p >= (longint'(1) << (w + 1)));
    if (es) em = (p - (longint'(1) << (w + 1))) * (longint'(1) << 23) / (longint'(1) << (w + 1));
    else    em = (p - (longint'(1) << w)) * (longint'(1) << 23) / (longint'(1) << w);
    checks += 2;
    if (sel != es) begin
      failures++;
      $display("FAIL sel W=%0d total=%0d got %0d", w, total, sel);
    end
    if (longint'(man) != em) begin
      failures++;
      $display("FAIL man W=%0d total=%0d got %0h expected %0h", w, total, man, em);
    end
    if (es) n_sel++; else n_nosel++;
  endtask

  initial begin
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4000; i++) begin
      case (i)
        0: t15 = 0;
        1: t15 = 17'((1 << 15) - 1);
        2: t15 = 17'(1 << 15);
        3: t15 = 17'(3 * (1 << 15) - 1);
        4: t15 = 17'(1 << 16);
        default: t15 = 17'($urandom_range(0, 3 * (1 << 15) - 1));
      endcase
      t5 = 7'(i % 96);
      #1;
      expect_norm(t15, 15, s15, m15);
      expect_norm(t5, 5, s5, m5);
    end
    checks++;
    if (n_sel == 0 || n_nosel == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
