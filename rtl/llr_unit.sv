// llr_unit: output LLRs of one UE per cycle, after the last LAMA iteration.
//
// LAMA decouples the MIMO channel into per-UE Gaussian channels
// z_u = s_u + noise with SINR rho*g_u. For each of the 8 bits (4 per real
// dimension) this unit returns the max-log extrinsic LLR
//     Lambda_d = rho*g_u * ((z - a0)^2 - (z - a1)^2)
// with a0/a1 the closest 16-PAM points whose bit is 0/1, using the same
// nearest-point search and bit-LLR datapath as the MV unit but without the
// prior term (the extrinsic output excludes the decoder's own information).
// One real and one imaginary part per cycle; output registered, 1 cycle of
// latency. Bit order: 0..3 real (0 = sign), 4..7 imaginary. LLRs are 8 bits
// with 2 fractional bits, saturated.
module llr_unit
  import lama_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic          in_prob,
  input  logic [UW-1:0] in_ue,
  input  csym_t         z_i,
  input  rho_t          rho_i,
  input  gdiag_t        g_i,
  output logic          out_valid,
  output logic          out_prob,
  output logic [UW-1:0] out_ue,
  output llr8_t         llr_o
);
  rho_t rho_u;
  assign rho_u = rho_t'(sat_u(64'((64'({40'd0, rho_i}) * 64'({48'd0, g_i}) + (64'd1 << (GGF-1))) >> GGF), RW));

  logic signed [3:0][4:0] a0_re, a1_re, a0_im, a1_im;
  pam_nearest u_nre (.mu_i(z_i.re), .a0_o(a0_re), .a1_o(a1_re));
  pam_nearest u_nim (.mu_i(z_i.im), .a0_o(a0_im), .a1_o(a1_im));

  llr8_t lam;
  for (genvar k = 0; k < 4; k++) begin : g_bit
    llr_bit_unit u_re (.mu_i(z_i.re), .a0_i(a0_re[k]), .a1_i(a1_re[k]), .rho_i(rho_u),
                       .llr_i('0), .lambda_o(lam[k]));
    llr_bit_unit u_im (.mu_i(z_i.im), .a0_i(a0_im[k]), .a1_i(a1_im[k]), .rho_i(rho_u),
                       .llr_i('0), .lambda_o(lam[k+4]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      out_prob <= in_prob;
      out_ue   <= in_ue;
      llr_o    <= lam;
    end
  end
endmodule
