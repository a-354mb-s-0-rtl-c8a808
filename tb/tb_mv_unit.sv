// tb_mv_unit: four passes of 32 UEs through the MV unit - first iteration of
// problem 0 and 1 (z, s_hat, rho forced to zero), then a later iteration of
// each with random z, rho and g. Checks against the floating-point 16-PAM
// reference with rho*g_u as SINR, the Onsager term z - s_hat(previous pass
// of the same problem, exact), the g^T tau sum (exact, from the reported
// tau) and the 2-cycle latency.
module tb_mv_unit;
  import lama_pkg::*;
  import lama_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, in_prob = 0, in_first = 0;
  logic [UW-1:0] in_ue = 0;
  csym_t z = '0;
  rho_t rho = '0;
  gdiag_t g = '0;
  llr8_t prior = '0;
  logic out_valid, out_prob;
  logic [UW-1:0] out_ue;
  csym_t shat, alpha;
  logic [VW:0] tau;
  logic [GTW-1:0] gtau;

  mv_unit dut (.clk, .rst_n, .in_valid, .in_prob, .in_ue, .in_first, .z_i(z), .rho_i(rho), .g_i(g),
               .prior_i(prior), .out_valid, .out_prob, .out_ue, .shat_o(shat), .alpha_o(alpha),
               .tau_o(tau), .gtau_o(gtau));

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  // expected values, indexed by issue cycle
  real  e_mr [int], e_mi [int], e_v [int];
  int   e_ar [int], e_ai [int], e_ue [int], e_prob [int];
  int   issued = 0, seen = 0;
  csym_t last_shat [2][U];
  logic [63:0] gsum;
  int   g_of [U];

  task automatic chk(input string w, input real got, input real exp, input real tol);
    checks++;
    if (got > exp + tol || got < exp - tol) begin
      failures++;
      if (failures < 20) $display("FAIL %s got %f exp %f at %0t", w, got, exp, $time);
    end
  endtask

  task automatic pass(input bit p, input bit first);
    for (int u = 0; u < U; u++) begin
      int pr [4], pi [4], lq [4];
      int rho_u;
      real mr, vr, mi, vi;
      @(negedge clk);
      in_valid = 1; in_prob = p; in_ue = UW'(u); in_first = first;
      z.re = sym_t'($signed($urandom_range(0, 8000)) - 4000);
      z.im = sym_t'($signed($urandom_range(0, 8000)) - 4000);
      rho  = rho_t'($urandom_range(0, 3000));
      g    = gdiag_t'($urandom_range(64, 8192));
      g_of[u] = int'(g);
      for (int k = 0; k < 8; k++) prior[k] = llr_t'($signed($urandom_range(0, 40)) - 20);
      for (int k = 0; k < 4; k++) begin pr[k] = int'($signed(prior[k])); pi[k] = int'($signed(prior[k+4])); end
      rho_u = first ? 0 : int'((longint'(rho) * longint'(g) + 2048) / 4096);
      ref_pam(first ? 0 : int'(z.re), rho_u, pr, mr, vr, lq);
      ref_pam(first ? 0 : int'(z.im), rho_u, pi, mi, vi, lq);
      e_mr[cyc + 2] = mr; e_mi[cyc + 2] = mi; e_v[cyc + 2] = vr + vi;
      e_ar[cyc + 2] = first ? 0 : int'(z.re) - int'(last_shat[p][u].re);
      e_ai[cyc + 2] = first ? 0 : int'(z.im) - int'(last_shat[p][u].im);
      e_ue[cyc + 2] = u; e_prob[cyc + 2] = p;
      issued++;
    end
    @(negedge clk);
    in_valid = 0;
  endtask

  always @(negedge clk) begin
    if (out_valid) begin
      seen++;
      checks++;
      if (!e_ue.exists(cyc) || e_ue[cyc] != int'(out_ue) || e_prob[cyc] != int'(out_prob)) begin
        failures++;
        $display("FAIL output at unexpected cycle %0d ue %0d", cyc, out_ue);
      end else begin
        chk("mean re", shat.re / 256.0, e_mr[cyc], 0.05);
        chk("mean im", shat.im / 256.0, e_mi[cyc], 0.05);
        chk("tau", tau / 256.0, e_v[cyc], 0.5);
        chk("alpha re", real'(alpha.re), real'(e_ar[cyc]), 0.0);
        chk("alpha im", real'(alpha.im), real'(e_ai[cyc]), 0.0);
        last_shat[out_prob][out_ue] = shat;
        if (out_ue == 0) gsum = 0;
        gsum += 64'(tau) * 64'(g_of[out_ue]);
      end
    end
  end

  task automatic check_gtau();
    repeat (3) @(posedge clk);
    #1;
    chk("gtau", real'(gtau), real'(gsum), 0.0);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    pass(0, 1); check_gtau();
    pass(1, 1); check_gtau();
    pass(0, 0); check_gtau();
    pass(1, 0); check_gtau();
    pass(0, 0); check_gtau();
    repeat (4) @(posedge clk);
    checks++;
    if (seen != issued) begin failures++; $display("FAIL %0d outputs for %0d inputs", seen, issued); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
