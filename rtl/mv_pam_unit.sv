// mv_pam_unit: posterior mean and variance of one real dimension (16-PAM)
// of one UE, computed in the bit domain with the max-log approximation.
//
// This is the paper's low-complexity replacement of the 16-likelihood,
// one-division symbol-domain estimator:
//   1. four max-log bit LLRs  Lambda_k = rho*((mu-a0_k)^2 - (mu-a1_k)^2) + prior_k
//      (llr_bit_unit, closest points from pam_nearest);
//   2. soft bits t_k = tanh(Lambda_k/2) from a 7-bit table (tanh_lut);
//   3. with the Gray labelling a = x0*(8 - x1*(4 - x2*(2 - x3))) and
//      independent bits, the mean and the second moment are polynomials in t:
//        mid  = 4*(2 - t1) + t1*t2*(2 - t3)
//        mean = t0 * mid
//        var  = 8*((2 - t3)/2 - t2*(2 - t3)) - 51 + 16*mid - mean^2
// Steps 1 to 3 and the shifts and constants (2, -51, >>1, <<2, <<3, <<4)
// follow the paper's bit-domain datapath. The sign in front of t2*(2 - t3) in
// the variance branch is this design's: it is the one that makes the variance
// exact for the labelling the mean branch implies.
// mu has 8 fractional bits, rho 8, priors are 8-bit LLRs with 2 fractional
// bits; mean (16 bits) and variance (16 bits, unsigned) have 8. Products are
// rounded to 8 fractional bits. Purely combinational; the caller registers.
module mv_pam_unit
  import lama_pkg::*;
(
  input  sym_t   mu_i,
  input  rho_t   rho_i,
  input  llr4_t  prior_i,
  output sym_t   mean_o,
  output var_t   var_o,
  output llr4_t  lambda_o
);
  logic signed [3:0][4:0] a0, a1;
  soft_t t [4];

  pam_nearest u_near (.mu_i(mu_i), .a0_o(a0), .a1_o(a1));

  for (genvar k = 0; k < 4; k++) begin : g_bit
    llr_t lam;
    llr_bit_unit u_b (.mu_i(mu_i), .a0_i(a0[k]), .a1_i(a1[k]), .rho_i(rho_i),
                      .llr_i(prior_i[k]), .lambda_o(lam));
    assign lambda_o[k] = lam;
    // 7-bit table input: saturate the 8-bit LLR
    tanh_lut u_t (.llr_i(7'(sat_s(64'(lam), 7))), .t_o(t[k]));
  end

  // rounded product of two 8-fractional-bit numbers
  function automatic logic signed [31:0] mulr(input logic signed [31:0] a, input logic signed [31:0] b);
    logic signed [63:0] p;
    p = 64'(a) * 64'(b);
    return 32'((p + 64'sd128) >>> 8);
  endfunction

  always_comb begin
    logic signed [31:0] v, p2, mid, mean, w, e2, vv;
    v    = 32'sd512 - 32'(t[3]);                        // 2 - t3
    p2   = mulr(32'(t[2]), v);                          // t2*(2 - t3)
    mid  = ((32'sd512 - 32'(t[1])) <<< 2) + mulr(32'(t[1]), p2);
    mean = mulr(32'(t[0]), mid);
    w    = (v >>> 1) - p2;
    e2   = (w <<< 3) - 32'sd13056 + (mid <<< 4);        // 13056 = 51*256
    vv   = e2 - mulr(mean, mean);
    mean_o = sym_t'(sat_s(64'(mean), ZW));
    var_o  = var_t'(sat_u(64'(vv), VW));
  end
endmodule
