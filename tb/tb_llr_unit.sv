// tb_llr_unit: random z, rho and g_u; every one of the 8 output LLRs is
// compared with the floating-point max-log LLR rho*g_u*(d0^2 - d1^2)
// (independent nearest-point search), rounded to 2 fractional bits and
// saturated, within 1 LSB, with rho*g_u rounded to 8 fractional bits. Checks the
// 1-cycle latency and the UE/problem tags.
module tb_llr_unit;
  import lama_pkg::*;
  import lama_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_prob = 0;
  logic [UW-1:0] in_ue = 0;
  csym_t z = '0;
  rho_t rho = '0;
  gdiag_t g = '0;
  logic out_valid, out_prob;
  logic [UW-1:0] out_ue;
  llr8_t llr;
  int checks = 0, failures = 0;

  llr_unit dut (.clk, .rst_n, .in_valid, .in_prob, .in_ue, .z_i(z), .rho_i(rho), .g_i(g),
                .out_valid, .out_prob, .out_ue, .llr_o(llr));

  initial begin
    real e [8];
    int  eu, ep;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      real r;
      @(negedge clk);
      in_valid = 1; in_prob = n[0]; in_ue = UW'(n);
      z.re = sym_t'($signed($urandom_range(0, 9000)) - 4500);
      z.im = sym_t'($signed($urandom_range(0, 9000)) - 4500);
      rho  = rho_t'($urandom_range(0, 60000));
      g    = gdiag_t'($urandom_range(0, 8192));
      r = real'((longint'(rho) * longint'(g) + 2048) / 4096) / 256.0;   // rho*g_u at 8 fractional bits
      for (int k = 0; k < 4; k++) begin
        e[k]   = ref_chan_llr(z.re / 256.0, r, k) * 4.0;
        e[k+4] = ref_chan_llr(z.im / 256.0, r, k) * 4.0;
      end
      eu = n % 32; ep = n % 2;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid || int'(out_ue) != eu || int'(out_prob) != ep) begin
        failures++;
        $display("FAIL tags/latency at %0d", n);
      end
      for (int k = 0; k < 8; k++) begin
        real ek, tol;
        ek = e[k];
        tol = 1.01;
        if (ek > 127.0) ek = 127.0;
        if (ek < -128.0) ek = -128.0;
        checks++;
        if (real'($signed(llr[k])) > ek + tol || real'($signed(llr[k])) < ek - tol) begin
          failures++;
          if (failures < 10) $display("FAIL bit %0d got %0d exp %f", k, $signed(llr[k]), ek);
        end
      end
    end
    @(negedge clk);
    checks++;
    if (out_valid) begin failures++; $display("FAIL valid without input"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
