// tb_mv_pam_unit: random observations, SINRs and priors. The reference
// computes the bit LLRs by its own nearest-point search, quantises them as
// the hardware's 8-bit LLR and 7-bit table input do, and then forms the
// posterior mean and variance by summing over all 16 symbols with the bit
// probabilities (1 +- tanh(L/2))/2. Tolerances: LLR 1 LSB, mean 0.05,
// variance 0.3. Soft bits are rounded to 1/256 in the reference as in the
// hardware's table, so the tolerances only cover internal rounding.
module tb_mv_pam_unit;
  import lama_pkg::*;
  import lama_ref_pkg::*;
  sym_t  mu, mean;
  rho_t  rho;
  llr4_t prior, lam;
  var_t  vv;
  int checks = 0, failures = 0;

  mv_pam_unit dut (.mu_i(mu), .rho_i(rho), .prior_i(prior), .mean_o(mean), .var_o(vv), .lambda_o(lam));

  task automatic check(input string what, input real got, input real exp, input real tol);
    checks++;
    if (got > exp + tol || got < exp - tol) begin
      failures++;
      if (failures < 20) $display("FAIL %s mu=%0d rho=%0d got %f exp %f", what, mu, rho, got, exp);
    end
  endtask

  initial begin
    for (int n = 0; n < 3000; n++) begin
      real t [4];
      real em, ev;
      int lq [4];
      int l7;
      mu  = sym_t'($signed($urandom_range(0, 9000)) - 4500);
      case (n % 4)
        0: rho = '0;
        1: rho = rho_t'($urandom_range(0, 64));
        2: rho = rho_t'($urandom_range(0, 600));
        default: rho = rho_t'($urandom_range(0, 4000));
      endcase
      for (int k = 0; k < 4; k++)
        prior[k] = (n % 3 == 0) ? llr_t'(0) : llr_t'($signed($urandom_range(0, 60)) - 30);
      #1;
      for (int k = 0; k < 4; k++) begin
        lq[k] = q_llr(ref_chan_llr(mu / 256.0, rho / 256.0, k), 24) + int'($signed(prior[k]));
        if (lq[k] > 127)  lq[k] = 127;
        if (lq[k] < -128) lq[k] = -128;
        check("lambda", real'($signed(lam[k])), real'(lq[k]), 1.01);
        l7 = lq[k];
        if (l7 > 63)  l7 = 63;
        if (l7 < -64) l7 = -64;
        t[k] = $rtoi(256.0 * rtanh((l7 < 0 ? -l7 : l7) / 8.0) + 0.5) / 256.0;
        if (l7 < 0) t[k] = -t[k];
      end
      ref_meanvar(t, em, ev);
      check("mean", mean / 256.0, em, 0.05);
      check("var", vv / 256.0, ev, 0.3);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
