// mv_unit: mean and variance estimation (MV) task of LAMA, one UE per cycle.
//
// For the UE presented at the input it forms the effective SINR rho*g_u,
// runs the real and the imaginary 16-PAM estimators (mv_pam_unit) on z, and
// produces
//   s_hat^{t+1} = posterior mean        (complex)
//   alpha^t     = z^t - s_hat^t         (Onsager term; s_hat^t is the value
//                                        this unit produced one iteration ago)
//   gtau        = running sum of g_u * (var_re + var_im)
// The previous s_hat of each UE is kept for both interleaved problems. On the
// first iteration z, s_hat and rho are taken as zero (LAMA's initialisation),
// so the estimates come from the priors alone.
// Interface: in_valid/prob/ue/first with z, rho^t, g_u and the 8 prior LLRs
// (bits 0..3 real, 4..7 imaginary); results appear LAT = 2 cycles later with
// out_valid/out_prob/out_ue. gtau restarts at the output of UE 0 and holds its
// value after UE U-1 until the next UE 0. The pipeline depth, the bit order
// and all word widths are this design's choices; the function (Algorithm 1,
// line 5, with one real and one imaginary unit) follows the paper.
module mv_unit
  import lama_pkg::*;
#(
  parameter int NU = U
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  input  logic           in_prob,
  input  logic [UW-1:0]  in_ue,
  input  logic           in_first,
  input  csym_t          z_i,
  input  rho_t           rho_i,
  input  gdiag_t         g_i,
  input  llr8_t          prior_i,
  output logic           out_valid,
  output logic           out_prob,
  output logic [UW-1:0]  out_ue,
  output csym_t          shat_o,
  output csym_t          alpha_o,
  output logic [VW:0]    tau_o,
  output logic [GTW-1:0] gtau_o
);
  // ---------------- stage 1: operand registers ----------------
  logic           s1_valid, s1_prob;
  logic [UW-1:0]  s1_ue;
  csym_t          s1_z, s1_shat_old;
  rho_t           s1_rho;
  gdiag_t         s1_g;
  llr8_t          s1_prior;

  csym_t shat_st [2][NU];

  logic [63:0] rho_u;
  assign rho_u = sat_u(64'((64'({40'd0, rho_i}) * 64'({48'd0, g_i}) + (64'd1 << (GGF-1))) >> GGF), RW);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
    end else begin
      s1_valid <= in_valid;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      s1_prob     <= in_prob;
      s1_ue       <= in_ue;
      s1_z        <= in_first ? '0 : z_i;
      s1_rho      <= in_first ? '0 : rho_t'(rho_u);
      s1_g        <= g_i;
      s1_prior    <= prior_i;
      s1_shat_old <= in_first ? '0 : shat_st[in_prob][in_ue];
    end
  end

  // ---------------- estimators (real and imaginary) ----------------
  sym_t  mean_re, mean_im;
  var_t  var_re, var_im;
  llr4_t lam_re, lam_im;

  mv_pam_unit u_re (.mu_i(s1_z.re), .rho_i(s1_rho), .prior_i(s1_prior[3:0]),
                    .mean_o(mean_re), .var_o(var_re), .lambda_o(lam_re));
  mv_pam_unit u_im (.mu_i(s1_z.im), .rho_i(s1_rho), .prior_i(s1_prior[7:4]),
                    .mean_o(mean_im), .var_o(var_im), .lambda_o(lam_im));

  // ---------------- stage 2: results, Onsager term, g^T tau ----------------
  logic [VW:0]     tau_sum;
  logic [GTW-1:0]  gt_prod;
  assign tau_sum = (VW+1)'(var_re) + (VW+1)'(var_im);
  assign gt_prod = GTW'(tau_sum) * GTW'(s1_g);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      gtau_o    <= '0;
    end else begin
      out_valid <= s1_valid;
      if (s1_valid) gtau_o <= (s1_ue == '0) ? gt_prod : gtau_o + gt_prod;
    end
  end

  always_ff @(posedge clk) begin
    if (s1_valid) begin
      out_prob   <= s1_prob;
      out_ue     <= s1_ue;
      shat_o     <= '{re: mean_re, im: mean_im};
      alpha_o.re <= sym_t'(sat_s(64'(s1_z.re) - 64'(s1_shat_old.re), ZW));
      alpha_o.im <= sym_t'(sat_s(64'(s1_z.im) - 64'(s1_shat_old.im), ZW));
      tau_o      <= tau_sum;
      shat_st[s1_prob][s1_ue] <= '{re: mean_re, im: mean_im};
    end
  end
endmodule
