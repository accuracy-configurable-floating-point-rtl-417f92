// tb_shift_add_acc: self-checking test of shift_add_acc.
//
// Random partial products for N=5 and N=4. The expected total is the
// weighted sum with A*C counted at weight 2^N, computed in integer
// arithmetic. Also the all-ones corner, which must not overflow the
// 3N+2-bit result.
module tb_shift_add_acc;
  int checks = 0, failures = 0;

  logic [9:0]  ac, ad, bc;
  logic [5:0]  cad, cbc;
  logic [14:0] mx, my;
  logic [16:0] tot;
  logic [7:0]  ac4, ad4, bc4;
  logic [4:0]  cad4, cbc4;
  logic [11:0] mx4, my4;
  logic [13:0] tot4;

  shift_add_acc #(.N(5)) dut (.p_ac(ac), .p_ad(ad), .p_bc(bc), .comp_ad(cad), .comp_bc(cbc),
                              .mx_t(mx), .my_t(my), .total(tot));
  shift_add_acc #(.N(4)) dut4 (.p_ac(ac4), .p_ad(ad4), .p_bc(bc4), .comp_ad(cad4), .comp_bc(cbc4),
                               .mx_t(mx4), .my_t(my4), .total(tot4));

  initial begin
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint e;
    for (int i = 0; i < 3000; i++) begin
      if (i == 0) begin
        // largest values that real segments can produce: 31*31 each, 62 compensations
        ac = 961; ad = 961; bc = 961; cad = 0; cbc = 0; mx = '1; my = '1;
        ac4 = 225; ad4 = 225; bc4 = 225; cad4 = 0; cbc4 = 0; mx4 = '1; my4 = '1;
      end else begin
        ac = 10'($urandom_range(0, 961)); ad = 10'($urandom_range(0, 961));
        bc = 10'($urandom_range(0, 961));
        cad = 6'($urandom_range(0, 31) * 2); cbc = 6'($urandom_range(0, 31) * 2);
        mx = 15'($urandom); my = 15'($urandom);
        ac4 = 8'($urandom_range(0, 225)); ad4 = 8'($urandom_range(0, 225));
        bc4 = 8'($urandom_range(0, 225));
        cad4 = 5'($urandom_range(0, 15) * 2); cbc4 = 5'($urandom_range(0, 15) * 2);
        mx4 = 12'($urandom); my4 = 12'($urandom);
      end
      #1;
      e = longint'(ac) * 32 + ad + bc + cad + cbc + mx + my;
      checks++;
      if (longint'(tot) != e) begin
        failures++;
        $display("FAIL N=5 got %0d expected %0d", tot, e);
      end
      e = longint'(ac4) * 16 + ad4 + bc4 + cad4 + cbc4 + mx4 + my4;
      checks++;
      if (longint'(tot4) != e) begin
        failures++;
        $display("FAIL N=4 got %0d expected %0d", tot4, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
