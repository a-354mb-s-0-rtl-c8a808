// pam_nearest: for each of the 4 bits of a Gray-labelled 16-PAM symbol, the
// constellation point closest to mu among those whose bit is 0 (a0) and among
// those whose bit is 1 (a1).
//
// These are the two candidate points each max-log bit-LLR unit needs. The
// paper does not say how they are found; this design compares |mu - a| over
// all 16 points (an exhaustive search, the simplest correct choice). Points
// are the odd integers -15..15, labelled as in lama_pkg::pam_bits. mu has
// 8 fractional bits. Purely combinational.
module pam_nearest
  import lama_pkg::*;
(
  input  sym_t                    mu_i,
  output logic signed [3:0][4:0]  a0_o,
  output logic signed [3:0][4:0]  a1_o
);
  always_comb begin
    logic [ZW+1:0] dst [16];
    logic [ZW+1:0] best0 [4];
    logic [ZW+1:0] best1 [4];
    logic signed [ZW+1:0] d;
    logic [3:0] lab;
    for (int i = 0; i < 16; i++) begin
      d = (ZW+2)'(mu_i) - (ZW+2)'((2*i - 15) * (1 << ZF));
      dst[i] = d[ZW+1] ? (ZW+2)'(-d) : (ZW+2)'(d);
    end
    for (int k = 0; k < 4; k++) begin
      best0[k] = '1;
      best1[k] = '1;
      a0_o[k]  = '0;
      a1_o[k]  = '0;
    end
    for (int i = 0; i < 16; i++) begin
      lab = pam_bits(i);
      for (int k = 0; k < 4; k++) begin
        if (lab[k]) begin
          if (dst[i] < best1[k]) begin best1[k] = dst[i]; a1_o[k] = 5'(2*i - 15); end
        end else begin
          if (dst[i] < best0[k]) begin best0[k] = dst[i]; a0_o[k] = 5'(2*i - 15); end
        end
      end
    end
  end
endmodule
