// tb_mant_segment: self-checking test of mant_segment.
//
// Two instances: FP32 mantissa with N=5 (the figure's example, A = M[22:18],
// B = M[17:13]) and FP16 mantissa with N=3. Random mantissas plus a few
// directed ones; the expected segments are computed by integer division and
// modulo rather than by bit slicing, and the segment tests by comparing the
// segment values (lo_big: low segment >= 4, i.e. not representable in 2 bits).
// Random mantissas are biased so that zero and small low segments occur.
module tb_mant_segment;
  int checks = 0, failures = 0;

  logic [22:0] m32;
  logic [4:0]  hi32, lo32;
  logic [14:0] tr32;
  logic        hz32, lz32, lb32, hz16, lz16, lb16;
  logic [9:0]  m16;
  logic [2:0]  hi16, lo16;
  logic [8:0]  tr16;

  mant_segment #(.MAN_W(23), .N(5)) dut32 (.man(m32), .hi(hi32), .lo(lo32), .trun(tr32),
                                            .hi_nz(hz32), .lo_nz(lz32), .lo_big(lb32));
  mant_segment #(.MAN_W(10), .N(3)) dut16 (.man(m16), .hi(hi16), .lo(lo16), .trun(tr16),
                                            .hi_nz(hz16), .lo_nz(lz16), .lo_big(lb16));

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  initial begin
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2000; i++) begin
      case (i)
        0: m32 = 23'h7fffff;
        1: m32 = 23'h000000;
        2: m32 = 23'b10000_00001_0000000000000;
        default: m32 = 23'($urandom);
      endcase
      m16 = 10'($urandom);
      if (i % 4 == 1) begin m32[22:18] = 0; m16[9:7] = 0; end
      if (i % 3 == 1) begin m32[17:15] = 0; m16[6] = 0; end
      if (i % 5 == 2) begin m32[17:13] = 0; m16[6:4] = 0; end
      #1;
      check("A32", hi32, longint'(m32) / (1 << 18));
      check("B32", lo32, (longint'(m32) / (1 << 13)) % 32);
      check("T32", tr32, longint'(m32) / (1 << 8));
      check("A16", hi16, longint'(m16) / (1 << 7));
      check("B16", lo16, (longint'(m16) / (1 << 4)) % 8);
      check("T16", tr16, longint'(m16) / 2);
      check("hz32", hz32, (longint'(m32) / (1 << 18)) != 0);
      check("lz32", lz32, ((longint'(m32) / (1 << 13)) % 32) != 0);
      check("lb32", lb32, ((longint'(m32) / (1 << 13)) % 32) >= 4);
      check("hz16", hz16, (longint'(m16) / (1 << 7)) != 0);
      check("lz16", lz16, ((longint'(m16) / (1 << 4)) % 8) != 0);
      check("lb16", lb16, ((longint'(m16) / (1 << 4)) % 8) >= 4);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
