// tb_lama_top: end-to-end test of the whole detector at its default size
// (32 UEs, 256-QAM, Ts = 36).
//
// For each scenario it draws a Rayleigh channel H (B x 32, entries of
// variance 1/B), 256-QAM symbols for two problems and Gaussian noise of
// variance N0, forms the detector inputs G~ = I - diag(G)^-1 G,
// y_MF = diag(G)^-1 H^H y and g_u = G_uu/32 (G = H^H H) in floating point,
// loads them, runs the detector and collects the 2 x 32 x 8 output LLRs.
// A floating-point model of the same LAMA iteration (symbol-domain moments,
// damping, real reciprocal) runs on the same inputs. Checks:
//   - run time (2*tmax+2)*Ts cycles from start to done, 2*32 LLR words,
//     problem 0 before problem 1, UEs in order;
//   - hard decisions of the hardware agree with the model on nearly all bits
//     and, at high SNR, with the transmitted bits;
//   - prior LLRs are used (soft input): strong correct priors in a noisy
//     32 x 32 system give fewer bit errors than no priors.
//   - 256 x 32 with per-UE path loss and antenna correlation, tmax = 9,
//     damping: hardware follows the model;
//   - 32 x 32 QPSK with tmax = 14, emulated by pinning three bits per
//     dimension with saturated priors: few errors on the data bits;
//   - chaining: three pairs started back to back (the next pair's y_MF
//     written into the idle input bank while the current pair runs) must
//     give bit-identical LLRs to the same pairs run one at a time, must be
//     taken without a gap and must finish every 2*tmax*Ts cycles.
// Each mechanism is counted (both interleaved problems, damping theta < 1,
// non-zero priors, B = 256 and B = 32, saturated output LLRs, chained
// starts); one that never happened counts as a failure.
module tb_lama_top;
  import lama_pkg::*;
  import lama_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  xval_t n0 = '0;
  logic [3:0] log2b = 0;
  logic [7:0] theta = 128;
  logic [4:0] tmax = 8;
  logic gram_we = 0, g_we = 0, y_we = 0, pr_we = 0, start = 0;
  logic [4:0] gram_row = 0, gram_col = 0, g_ue = 0, y_ue = 0, pr_ue = 0;
  cgram_t gram_data = '0;
  gdiag_t g_data = '0;
  logic y_prob = 0, pr_prob = 0;
  csym_t y_data = '0;
  llr8_t pr_data = '0;
  logic accept, busy, done, llr_valid, llr_prob;
  logic [4:0] llr_ue;
  llr8_t llr_data;

  lama_top dut (.clk, .rst_n, .n0, .log2b, .theta, .tmax,
                .gram_we, .gram_row, .gram_col, .gram_data, .g_we, .g_ue, .g_data,
                .y_we, .y_prob, .y_ue, .y_data, .pr_we, .pr_prob, .pr_ue, .pr_data,
                .start, .accept, .busy, .done, .llr_valid, .llr_prob, .llr_ue, .llr_data);

  int checks = 0, failures = 0;
  int n_prob [2], n_damp, n_prior, n_b256, n_b32, n_sat, n_chain, n_qpsk, n_fading;

  task automatic chk(input string w, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", w); end
  endtask

  // ---------------- random numbers ----------------
  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom) + 1.0) / 4294967297.0;
    u2 = real'($urandom) / 4294967296.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  // ---------------- scenario data ----------------
  localparam int BMAX = 256;
  // bits 1..3 of a dimension pinned for QPSK: the points left are +-9
  localparam int QPSK_PIN [4] = '{0, 0, 1, 0};
  real hr [BMAX][U], hi [BMAX][U];
  real gtr [U][U], gti [U][U];   // quantised G~
  real gd [U];                    // quantised g_u
  int  bits [2][U][8];
  real ymr [2][U], ymi [2][U];    // quantised y_MF
  int  pri [2][U][8];
  int  hw_llr [2][U][8];
  int  got_words, order_ok;

  // new_chan = 0 keeps the channel of the previous call (new symbols/noise)
  // qpsk = 1 fixes bits 1..3 of each dimension (QPSK emulation, see below)
  // spread_db > 0 gives each UE a random large-scale gain, uniform in
  // [-spread_db, 0] dB, and correlates neighbouring antennas (factor 0.5)
  task automatic make(input int nb, input real noise, input bit use_prior, input bit new_chan = 1,
                      input bit qpsk = 0, input real spread_db = 0.0);
    real grr [U][U], gri [U][U];
    if (new_chan) for (int u = 0; u < U; u++) begin
      real amp, pr, pi_;
      amp = $pow(10.0, -spread_db * (real'($urandom_range(0, 1000)) / 1000.0) / 20.0);
      pr = 0.0; pi_ = 0.0;
      for (int b = 0; b < nb; b++) begin
        real wr, wi, c;
        c = (spread_db > 0.0) ? 0.5 : 0.0;
        wr = gauss() / $sqrt(2.0 * nb);
        wi = gauss() / $sqrt(2.0 * nb);
        pr = c * pr + $sqrt(1.0 - c * c) * wr;
        pi_ = c * pi_ + $sqrt(1.0 - c * c) * wi;
        hr[b][u] = amp * pr;
        hi[b][u] = amp * pi_;
      end
    end
    for (int u = 0; u < U; u++) for (int v = 0; v < U; v++) begin
      grr[u][v] = 0.0; gri[u][v] = 0.0;
      for (int b = 0; b < nb; b++) begin      // G = H^H H
        grr[u][v] += hr[b][u] * hr[b][v] + hi[b][u] * hi[b][v];
        gri[u][v] += hr[b][u] * hi[b][v] - hi[b][u] * hr[b][v];
      end
    end
    for (int u = 0; u < U; u++) begin
      int c;
      c = $rtoi(grr[u][u] / U * 4096.0 + 0.5);
      gd[u] = c / 4096.0;
      for (int v = 0; v < U; v++) begin
        int cr, ci;
        cr = (u == v) ? 0 : int'($floor(-grr[u][v] / grr[u][u] * 4096.0 + 0.5));
        ci = (u == v) ? 0 : int'($floor(-gri[u][v] / grr[u][u] * 4096.0 + 0.5));
        gtr[u][v] = cr / 4096.0; gti[u][v] = ci / 4096.0;
      end
    end
    for (int p = 0; p < 2; p++) begin
      real sr [U], si [U], yr [BMAX], yi [BMAX];
      for (int u = 0; u < U; u++) begin
        int ar, ai;
        for (int k = 0; k < 8; k++) bits[p][u][k] = $urandom_range(0, 1);
        if (qpsk) for (int k = 1; k < 4; k++) begin
          bits[p][u][k] = QPSK_PIN[k]; bits[p][u][k+4] = QPSK_PIN[k];
        end
        ar = 0; ai = 0;
        for (int a = -15; a <= 15; a += 2) begin
          bit mr, mi;
          mr = 1; mi = 1;
          for (int k = 0; k < 4; k++) begin
            if (ref_bit(a, k) != bits[p][u][k])   mr = 0;
            if (ref_bit(a, k) != bits[p][u][k+4]) mi = 0;
          end
          if (mr) ar = a;
          if (mi) ai = a;
        end
        sr[u] = ar; si[u] = ai;
        for (int k = 0; k < 8; k++)
          pri[p][u][k] = use_prior ? (bits[p][u][k] ? 24 : -24) : 0;   // +-6 in LLR units
        if (qpsk) for (int k = 1; k < 8; k++)
          if (k != 4) pri[p][u][k] = bits[p][u][k] ? 127 : -128;          // pinned
      end
      for (int b = 0; b < nb; b++) begin
        yr[b] = gauss() * $sqrt(noise / 2.0);
        yi[b] = gauss() * $sqrt(noise / 2.0);
        for (int u = 0; u < U; u++) begin
          yr[b] += hr[b][u] * sr[u] - hi[b][u] * si[u];
          yi[b] += hr[b][u] * si[u] + hi[b][u] * sr[u];
        end
      end
      for (int u = 0; u < U; u++) begin
        real ar, ai;
        ar = 0.0; ai = 0.0;
        for (int b = 0; b < nb; b++) begin    // H^H y
          ar += hr[b][u] * yr[b] + hi[b][u] * yi[b];
          ai += hr[b][u] * yi[b] - hi[b][u] * yr[b];
        end
        ymr[p][u] = $floor(ar / grr[u][u] * 256.0 + 0.5) / 256.0;
        ymi[p][u] = $floor(ai / grr[u][u] * 256.0 + 0.5) / 256.0;
      end
    end
  endtask

  // writes y_MF and priors of both problems (into the idle input bank)
  task automatic load_y(input real yr [2][U], input real yi [2][U], input int pr [2][U][8]);
    for (int u = 0; u < U; u++) for (int p = 0; p < 2; p++) begin
      @(negedge clk);
      y_we = 1; y_prob = p[0]; y_ue = 5'(u);
      y_data.re = sym_t'($rtoi(yr[p][u] * 256.0 + (yr[p][u] >= 0 ? 0.5 : -0.5)));
      y_data.im = sym_t'($rtoi(yi[p][u] * 256.0 + (yi[p][u] >= 0 ? 0.5 : -0.5)));
      pr_we = 1; pr_prob = p[0]; pr_ue = 5'(u);
      for (int k = 0; k < 8; k++) pr_data[k] = llr_t'(pr[p][u][k]);
    end
    @(negedge clk); y_we = 0; pr_we = 0;
  endtask

  task automatic load_and_run(input int lb, input real noise, input int th, input int tm);
    int cycles;
    log2b = 4'(lb); theta = 8'(th); tmax = 5'(tm);
    n0 = xval_t'($rtoi(noise * 65536.0 + 0.5));
    for (int u = 0; u < U; u++) for (int v = 0; v < U; v++) begin
      @(negedge clk);
      gram_we = 1; gram_row = 5'(u); gram_col = 5'(v);
      gram_data.re = gc_t'($rtoi(gtr[u][v] * 4096.0 + (gtr[u][v] >= 0 ? 0.5 : -0.5)));
      gram_data.im = gc_t'($rtoi(gti[u][v] * 4096.0 + (gti[u][v] >= 0 ? 0.5 : -0.5)));
    end
    @(negedge clk); gram_we = 0;
    for (int u = 0; u < U; u++) begin
      @(negedge clk);
      g_we = 1; g_ue = 5'(u); g_data = gdiag_t'($rtoi(gd[u] * 4096.0 + 0.5));
    end
    @(negedge clk); g_we = 0;
    load_y(ymr, ymi, pri);
    got_words = 0; order_ok = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
    chk($sformatf("run time %0d cycles, expected %0d", cycles, (2 * tm + 2) * TS), cycles == (2 * tm + 2) * TS);
    @(negedge clk);
    chk("64 LLR words in order", got_words == 2 * U && order_ok == 1);
    if (th < 128) n_damp++;
    if (lb == 8) n_b256++;
    if (lb == 5) n_b32++;
  endtask

  // chained runs: LLRs per pair, free-running cycle count, take/done times
  int  ch_llr [3][2][U][8];
  int  cyc_now = 0, take_n = 0, done_n = 0;
  int  take_at [8], done_at [8];
  always @(posedge clk) begin
    cyc_now++;
    if (rst_n && start && accept) begin take_at[take_n % 8] = cyc_now; take_n++; end
    if (rst_n && done) begin done_at[done_n % 8] = cyc_now; done_n++; end
  end

  always @(negedge clk) begin
    if (llr_valid) begin
      if (int'(llr_prob) != (got_words / U) % 2 || int'(llr_ue) != got_words % U) order_ok = 0;
      for (int k = 0; k < 8; k++) begin
        hw_llr[llr_prob][llr_ue][k] = int'($signed(llr_data[k]));
        if (got_words < 6 * U) ch_llr[got_words / (2 * U)][llr_prob][llr_ue][k] = int'($signed(llr_data[k]));
        if (llr_data[k] == 8'sd127 || llr_data[k] == -8'sd128) n_sat++;
      end
      n_prob[llr_prob]++;
      got_words++;
    end
  end

  // floating-point LAMA model; returns hard-decision mismatches against the
  // hardware and bit errors of the model and of the hardware
  task automatic model(input int lb, input real noise, input int th, input int tm,
                       output int mism, output int err_model, output int err_hw);
    real nb, theta_r;
    nb = real'(1 << lb); theta_r = th / 128.0;
    mism = 0; err_model = 0; err_hw = 0;
    for (int p = 0; p < 2; p++) begin
      real zr [U], zi [U], shr [U], shi [U], nsr [U], nsi [U], tau [U];
      real rho, taud, tau_hat, b, ar, ai;
      for (int u = 0; u < U; u++) begin zr[u] = 0; zi[u] = 0; shr[u] = 0; shi[u] = 0; end
      rho = 0.0; taud = 0.0;
      for (int t = 1; t <= tm; t++) begin
        tau_hat = 0.0;
        for (int u = 0; u < U; u++) begin
          int pr4 [4], pi4 [4], lq [4], rc;
          real mr, vr, mi, vi;
          for (int k = 0; k < 4; k++) begin pr4[k] = pri[p][u][k]; pi4[k] = pri[p][u][k+4]; end
          rc = $rtoi(rho * gd[u] * 256.0 + 0.5);
          ref_pam($rtoi(zr[u] * 256.0 + (zr[u] >= 0 ? 0.5 : -0.5)), rc, pr4, mr, vr, lq);
          ref_pam($rtoi(zi[u] * 256.0 + (zi[u] >= 0 ? 0.5 : -0.5)), rc, pi4, mi, vi, lq);
          nsr[u] = mr; nsi[u] = mi; tau[u] = vr + vi;
          tau_hat += gd[u] * tau[u] / nb;
        end
        taud = (t == 1) ? tau_hat : theta_r * tau_hat + (1.0 - theta_r) * taud;
        b = rho * tau_hat;          // Onsager weight: undamped
        for (int u = 0; u < U; u++) begin
          ar = zr[u] - shr[u]; ai = zi[u] - shi[u];
          zr[u] = ymr[p][u] + b * ar; zi[u] = ymi[p][u] + b * ai;
        end
        for (int u = 0; u < U; u++) for (int v = 0; v < U; v++) begin
          zr[u] += gtr[u][v] * nsr[v] - gti[u][v] * nsi[v];
          zi[u] += gtr[u][v] * nsi[v] + gti[u][v] * nsr[v];
        end
        for (int u = 0; u < U; u++) begin shr[u] = nsr[u]; shi[u] = nsi[u]; end
        rho = 1.0 / (noise / nb + taud);
      end
      for (int u = 0; u < U; u++) for (int k = 0; k < 8; k++) begin
        real l;
        int dm, dh;
        l = ref_chan_llr((k < 4) ? zr[u] : zi[u], rho * gd[u], k % 4);
        dm = (l > 0.0) ? 1 : 0;
        dh = (hw_llr[p][u][k] > 0) ? 1 : 0;
        if (l != 0.0 && hw_llr[p][u][k] != 0 && dm != dh) mism++;
        if (dm != bits[p][u][k]) err_model++;
        if (dh != bits[p][u][k]) err_hw++;
      end
    end
  endtask

  initial begin
    int mism, em, eh, eh_noprior, eh_prior;
    n_prob = '{0, 0}; n_damp = 0; n_prior = 0; n_b256 = 0; n_b32 = 0; n_sat = 0; n_chain = 0; n_qpsk = 0; n_fading = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // 1) 256 x 32, high SNR, no damping: detection must be error free
    make(256, 0.05, 0);
    load_and_run(8, 0.05, 128, 8);
    model(8, 0.05, 128, 8, mism, em, eh);
    $display("256x32 N0=0.05: mismatches %0d, bit errors model %0d hw %0d", mism, em, eh);
    chk("256x32 high SNR: no bit errors", eh == 0);
    chk("256x32 high SNR: agrees with model", mism <= 5);

    // 2) 256 x 32, lower SNR, damping theta = 0.5
    make(256, 1.0, 0);
    load_and_run(8, 1.0, 64, 8);
    model(8, 1.0, 64, 8, mism, em, eh);
    $display("256x32 N0=1   : mismatches %0d, bit errors model %0d hw %0d", mism, em, eh);
    chk("256x32 damped: agrees with model", mism <= 10);
    chk("256x32 damped: few bit errors", eh <= em + 10);

    // 3) 32 x 32, noisy, without and with priors (soft input)
    make(32, 20.0, 0);
    load_and_run(5, 20.0, 96, 10);
    model(5, 20.0, 96, 10, mism, em, eh);
    eh_noprior = eh;
    $display("32x32 no prior: mismatches %0d, bit errors model %0d hw %0d", mism, em, eh);
    chk("32x32: agrees with model", mism <= 25);
    for (int p = 0; p < 2; p++) for (int u = 0; u < U; u++) for (int k = 0; k < 8; k++)
      pri[p][u][k] = bits[p][u][k] ? 24 : -24;
    n_prior++;
    load_and_run(5, 20.0, 96, 10);
    model(5, 20.0, 96, 10, mism, em, eh);
    eh_prior = eh;
    $display("32x32 prior   : mismatches %0d, bit errors model %0d hw %0d", mism, em, eh);
    chk("32x32 with priors: agrees with model", mism <= 25);
    chk("priors reduce bit errors", eh_prior < eh_noprior || eh_noprior == 0);

    // 6) 256 x 32 with per-UE path loss (0..-6 dB) and antenna correlation,
    //    tmax = 9, damping theta = 0.5: a stand-in for the paper's urban
    //    micro case (LAMA-9). The hardware must follow the model.
    make(256, 0.02, 0, 1, 0, 6.0);
    load_and_run(8, 0.02, 64, 9);
    model(8, 0.02, 64, 9, mism, em, eh);
    n_fading++;
    $display("256x32 fading : mismatches %0d, bit errors model %0d hw %0d", mism, em, eh);
    chk("256x32 fading: agrees with model", mism <= 10);
    chk("256x32 fading: few bit errors", eh <= em + 10);

    // 5) 32 x 32 QPSK, tmax = 14 (the paper's 32 x 32 workload): the
    //    detector has no QPSK mode; saturated priors pin bits 1..3 of each
    //    dimension, leaving +-9. Bits 0 and 4 carry the data.
    begin
      int eq_hw, eq_model, amp_ok;
      make(32, 8.0, 0, 1, 1);
      amp_ok = 1;
      for (int a = -15; a <= 15; a += 2)
        if (ref_bit(a, 1) == QPSK_PIN[1] && ref_bit(a, 2) == QPSK_PIN[2] && ref_bit(a, 3) == QPSK_PIN[3] && a != 9 && a != -9) amp_ok = 0;
      chk("QPSK pin leaves +-9", amp_ok == 1);
      load_and_run(5, 8.0, 96, 14);
      model(5, 8.0, 96, 14, mism, em, eh);
      n_qpsk++; n_prior++;
      eq_hw = 0;
      for (int p = 0; p < 2; p++) for (int u = 0; u < U; u++) for (int k = 0; k < 8; k += 4)
        if ((hw_llr[p][u][k] > 0 ? 1 : 0) != bits[p][u][k]) eq_hw++;
      $display("32x32 QPSK    : mismatches %0d, data-bit errors hw %0d of %0d", mism, eq_hw, 4 * U);
      chk("32x32 QPSK: agrees with model", mism <= 10);
      chk("32x32 QPSK: few data-bit errors", eq_hw <= 8);
    end

    // 4) chaining: pairs A, B, A back to back on one 256 x 32 channel
    begin
      real ya_r [2][U], ya_i [2][U], yb_r [2][U], yb_i [2][U];
      int  pa [2][U][8], pb [2][U][8], ref_a [2][U][8], ref_b [2][U][8];
      int  t0, d0, same;
      make(256, 0.05, 0, 1);
      ya_r = ymr; ya_i = ymi; pa = pri;
      load_and_run(8, 0.05, 128, 8);
      ref_a = hw_llr;
      make(256, 0.05, 0, 0);
      yb_r = ymr; yb_i = ymi; pb = pri;
      load_and_run(8, 0.05, 128, 8);
      ref_b = hw_llr;
      got_words = 0; order_ok = 1;
      t0 = take_n; d0 = done_n;
      load_y(ya_r, ya_i, pa);
      @(negedge clk); start = 1;
      while (take_n < t0 + 1) @(negedge clk);
      load_y(yb_r, yb_i, pb);                 // while A runs
      while (take_n < t0 + 2) @(negedge clk);
      n_chain++;
      load_y(ya_r, ya_i, pa);                 // while B runs
      while (take_n < t0 + 3) @(negedge clk);
      n_chain++;
      start = 0;
      while (done_n < d0 + 3) @(negedge clk);
      @(negedge clk);
      chk("chained: 192 LLR words in order", got_words == 6 * U && order_ok == 1);
      for (int i = 1; i < 3; i++)
        chk($sformatf("chained: start %0d taken %0d cycles after the previous, expected %0d", i,
                      take_at[(t0 + i) % 8] - take_at[(t0 + i - 1) % 8], 2 * 8 * TS),
            take_at[(t0 + i) % 8] - take_at[(t0 + i - 1) % 8] == 2 * 8 * TS);
      chk("chained: first pair done after (2*tmax+2)*Ts",
          done_at[d0 % 8] - take_at[t0 % 8] == (2 * 8 + 2) * TS);
      for (int i = 1; i < 3; i++)
        chk($sformatf("chained: pair %0d done %0d cycles after the previous, expected %0d", i,
                      done_at[(d0 + i) % 8] - done_at[(d0 + i - 1) % 8], 2 * 8 * TS),
            done_at[(d0 + i) % 8] - done_at[(d0 + i - 1) % 8] == 2 * 8 * TS);
      same = 1;
      for (int p = 0; p < 2; p++) for (int u = 0; u < U; u++) for (int k = 0; k < 8; k++)
        if (ch_llr[0][p][u][k] != ref_a[p][u][k] || ch_llr[1][p][u][k] != ref_b[p][u][k] ||
            ch_llr[2][p][u][k] != ref_a[p][u][k]) same = 0;
      chk("chained: LLRs identical to single runs", same == 1);
    end

    $display("mechanisms: problem0 words %0d, problem1 words %0d, damped runs %0d, prior runs %0d, B=256 runs %0d, B=32 runs %0d, saturated LLRs %0d, chained starts %0d, QPSK runs %0d, fading runs %0d",
             n_prob[0], n_prob[1], n_damp, n_prior, n_b256, n_b32, n_sat, n_chain, n_qpsk, n_fading);
    chk("problem 0 seen", n_prob[0] > 0);
    chk("problem 1 seen", n_prob[1] > 0);
    chk("damping used", n_damp > 0);
    chk("priors used", n_prior > 0);
    chk("B=256 run", n_b256 > 0);
    chk("B=32 run", n_b32 > 0);
    chk("saturated LLR seen", n_sat > 0);
    chk("chained start seen", n_chain > 0);
    chk("QPSK run seen", n_qpsk > 0);
    chk("path-loss run seen", n_fading > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (80000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
