// tb_afpm_error: error metrics of the approximate multipliers.
//
// Multiplies 100,000 pairs of random FP32 operands (uniform mantissas,
// exponents spread over +-8 around 1.0, random signs) with AC4-4, AC5-5,
// AC6-6 and ACL5 and with the exact multiplier, and reports
//   MRED = mean(|approx - exact| / |exact|)
//   NMED = mean(|approx - exact|) / max(|exact|)
// The MRED of each configuration must lie within 10% of the value published
// for ResNet-18 operands (AC4-4 1.38e-3, AC5-5 3.36e-4, AC6-6 8.29e-5,
// ACL5 4.16e-2); NMED depends on the operand range and is only printed.
// It also checks that the approximate product is never larger than the exact
// product by more than the compensation can add, i.e. |rel. error| < 2^-(2N-2)
// for ACn-n.
module tb_afpm_error;
  import fp_ref_pkg::*;

  localparam int NCFG = 4;
  localparam int NS   = 100000;

  int checks = 0, failures = 0;

  logic [31:0] x, y, p_ex;
  logic [31:0] p_ap [NCFG];

  fp_mul_exact u_ex (.a(x), .b(y), .p(p_ex));
  afpm #(.N(4)) u_ac4 (.x(x), .y(y), .p(p_ap[0]));
  afpm #(.N(5)) u_ac5 (.x(x), .y(y), .p(p_ap[1]));
  afpm #(.N(6)) u_ac6 (.x(x), .y(y), .p(p_ap[2]));
  afpm #(.N(5), .LOW_PREC(1'b1)) u_acl5 (.x(x), .y(y), .p(p_ap[3]));

  initial begin
    #100ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    string names [NCFG] = '{"AC4-4", "AC5-5", "AC6-6", "ACL5"};
    real published [NCFG] = '{1.38e-3, 3.36e-4, 8.29e-5, 4.16e-2};
    real bound [NCFG];
    real sum_red [NCFG], sum_ed [NCFG], max_ex, mred, nmed, ex, ap, ed, worst [NCFG];
    bound[0] = pow2(-6); bound[1] = pow2(-8); bound[2] = pow2(-10); bound[3] = 1.0;
    max_ex = 0.0;
    for (int k = 0; k < NCFG; k++) begin sum_red[k] = 0.0; sum_ed[k] = 0.0; worst[k] = 0.0; end
    for (int i = 0; i < NS; i++) begin
      x = {1'($urandom), 8'($urandom_range(119, 135)), 23'($urandom)};
      y = {1'($urandom), 8'($urandom_range(119, 135)), 23'($urandom)};
      #1;
      ex = from_fp32(p_ex);
      if ((ex < 0 ? -ex : ex) > max_ex) max_ex = (ex < 0 ? -ex : ex);
      for (int k = 0; k < NCFG; k++) begin
        ap = from_fp32(p_ap[k]);
        ed = ap - ex;
        if (ed < 0) ed = -ed;
        sum_ed[k]  += ed;
        sum_red[k] += ed / (ex < 0 ? -ex : ex);
        if (ed / (ex < 0 ? -ex : ex) > worst[k]) worst[k] = ed / (ex < 0 ? -ex : ex);
      end
    end
    for (int k = 0; k < NCFG; k++) begin
      mred = sum_red[k] / real'(NS);
      nmed = sum_ed[k] / real'(NS) / max_ex;
      $display("%-6s MRED %e (published %e)  NMED %e  worst relative error %e",
               names[k], mred, published[k], nmed, worst[k]);
      checks += 2;
      if (mred < 0.90 * published[k] || mred > 1.10 * published[k]) begin
        failures++;
        $display("FAIL %s: MRED outside 10%% of the published value", names[k]);
      end
      if (worst[k] >= bound[k]) begin
        failures++;
        $display("FAIL %s: worst-case relative error above bound", names[k]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
