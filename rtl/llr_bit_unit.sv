// llr_bit_unit: max-log LLR of one bit of a 16-PAM symbol observed in
// Gaussian noise, plus an added LLR.
//
//   lambda = rho * ((mu - a0)^2 - (mu - a1)^2) + llr
//
// a0 and a1 are the PAM points closest to mu whose bit is 0 and 1, so a
// positive result favours bit 1. The adder/squarer/multiplier chain is the
// paper's "log-likelihood function" unit. mu has 8 fractional bits, a0/a1 are
// odd integers, rho has 8 fractional bits, llr and lambda are 8-bit LLRs with
// 2 fractional bits; the result saturates. Purely combinational.
module llr_bit_unit
  import lama_pkg::*;
(
  input  sym_t              mu_i,
  input  logic signed [4:0] a0_i,
  input  logic signed [4:0] a1_i,
  input  rho_t              rho_i,
  input  llr_t              llr_i,
  output llr_t              lambda_o
);
  logic signed [ZW+1:0]  d0, d1;        // mu - a, ZF fractional bits
  logic signed [2*ZW+3:0] sq0, sq1;     // 2*ZF fractional bits
  logic signed [2*ZW+4:0] dd;
  logic signed [63:0]    prod;          // 2*ZF + RF fractional bits
  logic signed [63:0]    scaled;

  always_comb begin
    d0   = (ZW+2)'(mu_i) - ((ZW+2)'(a0_i) <<< ZF);
    d1   = (ZW+2)'(mu_i) - ((ZW+2)'(a1_i) <<< ZF);
    sq0  = d0 * d0;
    sq1  = d1 * d1;
    dd   = (2*ZW+5)'(sq0) - (2*ZW+5)'(sq1);
    prod = 64'(dd) * $signed({40'd0, rho_i});
    // to LF fractional bits, rounding to nearest
    scaled = (prod + (64'sd1 <<< (2*ZF + RF - LF - 1))) >>> (2*ZF + RF - LF);
    scaled = sat_s(scaled, 24) + 64'(llr_i);
    lambda_o = llr_t'(sat_s(scaled, LW));
  end
endmodule
