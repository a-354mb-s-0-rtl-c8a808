// lama_top: LAMA soft-input soft-output data detector for a massive MU-MIMO
// uplink with NU users (32) and 256-QAM.
//
// The detector runs the large-MIMO approximate message passing iteration on
// the Gram-matrix form of the problem. Each iteration has two tasks: the MV
// unit turns the current per-UE estimates z into posterior means s_hat and
// variances (bit domain, max-log, using the decoder's prior LLRs), and the IC
// unit computes z = y_MF + G~ s_hat + b*alpha on a 32-lane MAC array and
// updates the SINR rho. Two independent problems are interleaved so that
// both units are busy in every TS-cycle slot (lama_ctrl). After tmax
// iterations the LLR unit emits 8 extrinsic LLRs per UE.
//
// Host interface (this design's own; the paper does not describe its I/O):
//   - G~ (normalised Gram matrix I - diag(G)^-1 G, shared by both problems)
//     through gram_we/gram_row/gram_col/gram_data;
//   - g_u = G_uu/U through g_we/g_ue/g_data;
//   - y_MF = diag(G)^-1 H^H y and the prior LLRs of problem 0 and 1 through
//     y_we/..., pr_we/...; all of these are register files;
//   - n0 (16 fractional bits), log2b (B = 2^log2b antennas), theta (damping,
//     128 = 1.0) and tmax are held stable while busy.
// y_MF and the priors are double-buffered: writes go to the bank the
// running pair does not read, so the next pair can be loaded while one
// runs (write it from the cycle after the current pair's start was taken).
// start launches both problems of a pair; it is taken when `accept` is high:
// when idle, or in the last cycle of the running pair's slot 2*tmax-1, in
// which case the new pair follows without a gap. 2*NU LLR words come out on
// llr_valid (problem 0, then problem 1, UE 0..NU-1 each) and done pulses
// (2*tmax+2)*TS cycles after the start; back to back, pairs finish every
// 2*tmax*TS cycles.
module lama_top
  import lama_pkg::*;
#(
  parameter int NU  = U,
  parameter int NTS = TS,
  localparam int AW = $clog2(NU)
) (
  input  logic          clk,
  input  logic          rst_n,
  // configuration
  input  xval_t         n0,
  input  logic [3:0]    log2b,
  input  logic [THW-1:0] theta,
  input  logic [4:0]    tmax,
  // channel
  input  logic          gram_we,
  input  logic [AW-1:0] gram_row,
  input  logic [AW-1:0] gram_col,
  input  cgram_t        gram_data,
  input  logic          g_we,
  input  logic [AW-1:0] g_ue,
  input  gdiag_t        g_data,
  // per-problem inputs
  input  logic          y_we,
  input  logic          y_prob,
  input  logic [AW-1:0] y_ue,
  input  csym_t         y_data,
  input  logic          pr_we,
  input  logic          pr_prob,
  input  logic [AW-1:0] pr_ue,
  input  llr8_t         pr_data,
  // control
  input  logic          start,
  output logic          accept,
  output logic          busy,
  output logic          done,
  // output
  output logic          llr_valid,
  output logic          llr_prob,
  output logic [AW-1:0] llr_ue,
  output llr8_t         llr_data
);
  // ---------------- input register files ----------------
  // y_MF and priors are double-buffered: [bank][problem][UE]. The host
  // writes the bank the running pair does not use; start flips the banks.
  gdiag_t gdiag [NU];
  csym_t  ybuf  [2][2][NU];
  llr8_t  prior [2][2][NU];
  logic   bank, ic_tail, tail_bank, ic_bank;

  always_ff @(posedge clk) begin
    if (g_we)  gdiag[g_ue] <= g_data;
    if (y_we)  ybuf[~bank][y_prob][y_ue] <= y_data;
    if (pr_we) prior[~bank][pr_prob][pr_ue] <= pr_data;
  end

  // ---------------- control ----------------
  logic          mv_issue, mv_prob, mv_first;
  logic [AW-1:0] mv_ue;
  logic          ic_load, ic_prob, ic_first, ic_step_valid, ic_capture;
  logic [AW:0]   ic_step;
  logic          llr_issue, llr_prob_c;
  logic [AW-1:0] llr_ue_c;

  lama_ctrl #(.NU(NU), .NTS(NTS)) u_ctrl (
    .clk, .rst_n, .start, .tmax_i(tmax), .busy, .done, .accept, .bank, .ic_tail, .tail_bank,
    .mv_issue, .mv_prob, .mv_ue, .mv_first,
    .ic_load, .ic_prob, .ic_first, .ic_step_valid, .ic_step, .ic_capture,
    .llr_issue, .llr_prob(llr_prob_c), .llr_ue(llr_ue_c));

  // ---------------- exchange registers between the units ----------------
  csym_t ic2mv [NU];           // z of the problem that just left IC
  csym_t mv2ic_shat  [NU];     // s_hat of the problem that just left MV
  csym_t mv2ic_alpha [NU];
  csym_t z_ic [NU];
  csym_t y_sel [NU];

  // ---------------- SINR ----------------
  logic [GTW-1:0] gtau;
  gc_t            b;
  rho_t           rho_rd;
  logic           rho_sel;

  // MV reads the rho of its own problem (not needed in its first
  // iteration); otherwise the LLR unit does
  assign rho_sel = (mv_issue && !mv_first) ? mv_prob : llr_prob_c;

  sinr_unit u_sinr (
    .clk, .rst_n, .start(ic_load), .prob(ic_prob), .first(ic_first),
    .gtau_i(gtau), .n0_i(n0), .log2b_i(log2b), .theta_i(theta),
    .b_o(b), .rd_prob(rho_sel), .rho_o(rho_rd));

  // ---------------- MV ----------------
  logic           mv_ov, mv_oprob;
  logic [UW-1:0]  mv_oue;
  csym_t          mv_shat, mv_alpha;
  logic [VW:0]    mv_tau;

  mv_unit #(.NU(NU)) u_mv (
    .clk, .rst_n, .in_valid(mv_issue), .in_prob(mv_prob), .in_ue(UW'(mv_ue)), .in_first(mv_first),
    .z_i(ic2mv[mv_ue]), .rho_i(rho_rd), .g_i(gdiag[mv_ue]), .prior_i(prior[bank][mv_prob][mv_ue]),
    .out_valid(mv_ov), .out_prob(mv_oprob), .out_ue(mv_oue),
    .shat_o(mv_shat), .alpha_o(mv_alpha), .tau_o(mv_tau), .gtau_o(gtau));

  always_ff @(posedge clk) begin
    if (mv_ov) begin
      mv2ic_shat[AW'(mv_oue)]  <= mv_shat;
      mv2ic_alpha[AW'(mv_oue)] <= mv_alpha;
    end
    if (ic_capture) ic2mv <= z_ic;
  end

  // ---------------- IC ----------------
  // the closing IC slot of a pair still reads that pair's bank
  assign ic_bank = ic_tail ? tail_bank : bank;
  always_comb for (int u = 0; u < NU; u++) y_sel[u] = ybuf[ic_bank][ic_prob][u];

  ic_matvec #(.NU(NU)) u_ic (
    .clk, .g_we(gram_we), .g_row(gram_row), .g_col(gram_col), .g_data(gram_data),
    .load(ic_load), .shat_i(mv2ic_shat), .alpha_i(mv2ic_alpha), .y_i(y_sel),
    .step_valid(ic_step_valid), .step(ic_step), .b_i(b), .z_o(z_ic));

  // ---------------- LLR ----------------
  logic [UW-1:0] llr_oue;
  llr_unit u_llr (
    .clk, .rst_n, .in_valid(llr_issue), .in_prob(llr_prob_c), .in_ue(UW'(llr_ue_c)),
    .z_i(ic2mv[llr_ue_c]), .rho_i(rho_rd), .g_i(gdiag[llr_ue_c]),
    .out_valid(llr_valid), .out_prob(llr_prob), .out_ue(llr_oue), .llr_o(llr_data));
  assign llr_ue = AW'(llr_oue);

  // the MV and LLR units never need the SINR read port in the same cycle
  assert property (@(posedge clk) disable iff (!rst_n)
                   !(mv_issue && !mv_first && llr_issue && (mv_prob != llr_prob_c)));
endmodule
