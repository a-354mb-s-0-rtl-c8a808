// sinr_unit: post-equalisation SINR update with message damping, for the two
// interleaved detection problems.
//
// On `start` (with the problem index, the first-iteration flag and the sum
// g^T tau from the MV unit) it runs three steps:
//   1. tau_hat = g^T tau / B
//   2. tau_d   = theta*tau_hat + (1-theta)*tau_d_prev   (tau_hat when first)
//      b       = rho_old * tau_hat                        (rho_old = 0 when first)
//      x       = N0/B + tau_d
//   3. rho_new = 1/x (nr_recip); rho and tau_d of the problem are updated.
// b_o is valid from 2 cycles after start and rho_o (read port selected by
// rd_prob) reflects the new rho from 3 cycles after start. The update rules
// are LAMA's (Algorithm 1, lines 5 and 6) with the paper's damping: the
// damped tau_d replaces tau_hat in the SINR update (line 6) only, while the
// Onsager weight b (line 5) uses the undamped tau_hat; B is given as log2(B) so the division is a shift, and theta has 7
// fractional bits (128 = 1.0): these are this design's choices.
// Formats: gtau 40 bits with 20 fractional bits; N0, tau_hat, tau_d 32 bits
// with 16; rho 24 bits with 8; b 14 bits signed with 12 (saturated, b < 1).
module sinr_unit
  import lama_pkg::*;
(
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic           prob,
  input  logic           first,
  input  logic [GTW-1:0] gtau_i,
  input  xval_t          n0_i,
  input  logic [3:0]     log2b_i,
  input  logic [THW-1:0] theta_i,
  output gc_t            b_o,
  input  logic           rd_prob,
  output rho_t           rho_o
);
  typedef enum logic [1:0] {IDLE, S_TAU, S_DAMP, S_RECIP} state_e;
  state_e state;

  logic  cur_prob, cur_first;
  xval_t tau_hat, tau_d, x;
  rho_t  rho_st   [2];
  xval_t taud_st  [2];
  rho_t  rho_new;

  nr_recip u_nr (.x_i(x), .y_o(rho_new));

  logic [63:0] tau_hat_w, taud_w, b_w;
  always_comb begin
    tau_hat_w = 64'(gtau_i) >> ((GGF + VF - XF) + int'(log2b_i));
    taud_w    = cur_first ? 64'(tau_hat)
              : (64'(theta_i) * 64'(tau_hat) + 64'((1 << THF) - int'(theta_i)) * 64'(taud_st[cur_prob])) >> THF;
    b_w       = cur_first ? '0
              : (64'(rho_st[cur_prob]) * 64'(tau_hat)) >> (RF + XF - GF);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE;
      rho_st  <= '{default: '0};
      taud_st <= '{default: '0};
      b_o     <= '0;
    end else begin
      unique case (state)
        IDLE: if (start) begin
          cur_prob  <= prob;
          cur_first <= first;
          tau_hat   <= xval_t'(sat_u($signed(tau_hat_w), XW));
          state     <= S_DAMP;
        end
        S_DAMP: begin
          tau_d <= xval_t'(sat_u($signed(taud_w), XW));
          b_o   <= gc_t'(sat_u($signed(b_w), GW - 1));
          x     <= xval_t'(sat_u($signed(64'(n0_i >> log2b_i) + taud_w), XW));
          state <= S_RECIP;
        end
        S_RECIP: begin
          rho_st[cur_prob]  <= rho_new;
          taud_st[cur_prob] <= tau_d;
          state <= IDLE;
        end
        default: state <= IDLE;
      endcase
    end
  end

  assign rho_o = rho_st[rd_prob];
endmodule
