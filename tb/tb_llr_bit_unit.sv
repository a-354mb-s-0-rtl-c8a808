// tb_llr_bit_unit: random operands against the real-valued formula
// rho*((mu-a0)^2 - (mu-a1)^2) + llr, rounded to 2 fractional bits and
// saturated to 8 bits; one LSB of tolerance.
module tb_llr_bit_unit;
  import lama_pkg::*;
  sym_t mu;
  logic signed [4:0] a0, a1;
  rho_t rho;
  llr_t llr, lam;
  int checks = 0, failures = 0;

  llr_bit_unit dut (.mu_i(mu), .a0_i(a0), .a1_i(a1), .rho_i(rho), .llr_i(llr), .lambda_o(lam));

  initial begin
    for (int n = 0; n < 4000; n++) begin
      real m, r, e, c;
      int ec;
      mu  = sym_t'($signed($urandom_range(0, 16000)) - 8000);
      a0  = 5'(2 * $urandom_range(0, 15) - 15);
      a1  = 5'(2 * $urandom_range(0, 15) - 15);
      rho = (n % 2) ? rho_t'($urandom_range(0, 2000)) : rho_t'($urandom_range(0, 64));
      llr = llr_t'($urandom);
      #1;
      m = mu / 256.0;
      r = rho / 256.0;
      e = r * ((m - a0) * (m - a0) - (m - a1) * (m - a1));
      c = e * 4.0;
      c = (c >= 0.0) ? c + 0.5 : c - 0.5;
      if (c > 1.0e6) c = 1.0e6;
      if (c < -1.0e6) c = -1.0e6;
      ec = $rtoi(c) + int'(llr);
      if (ec > 127) ec = 127;
      if (ec < -128) ec = -128;
      checks++;
      if (int'(lam) > ec + 1 || int'(lam) < ec - 1) begin
        failures++;
        if (failures < 10) $display("FAIL mu=%0d a0=%0d a1=%0d rho=%0d llr=%0d got %0d exp %0d", mu, a0, a1, rho, llr, lam, ec);
      end
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
