// tb_sinr_unit: several damped SINR updates for two interleaved problems
// with random g^T tau, N0, B and theta. A floating-point model keeps rho and
// tau_d per problem; b must match rho_old*tau_hat (undamped) and rho_new 1/(N0/B + tau_d)
// within 0.5 % (plus the output LSBs); b must be ready 2 cycles and rho 3
// cycles after start, and the other problem's rho must not change.
module tb_sinr_unit;
  import lama_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, prob = 0, first = 0, rd_prob = 0;
  logic [GTW-1:0] gtau = '0;
  xval_t n0 = '0;
  logic [3:0] log2b = 0;
  logic [7:0] theta = 0;
  gc_t b;
  rho_t rho;
  int checks = 0, failures = 0;

  sinr_unit dut (.clk, .rst_n, .start, .prob, .first, .gtau_i(gtau), .n0_i(n0), .log2b_i(log2b),
                 .theta_i(theta), .b_o(b), .rd_prob, .rho_o(rho));

  real m_rho [2], m_taud [2];

  task automatic chk(input string w, input real got, input real exp, input real rel, input real abs_tol);
    checks++;
    if (got > exp * (1.0 + rel) + abs_tol || got < exp * (1.0 - rel) - abs_tol) begin
      failures++;
      if (failures < 20) $display("FAIL %s got %f exp %f", w, got, exp);
    end
  endtask

  task automatic update(input bit p, input bit f);
    real th, tau_hat, taud, bb, rn, other;
    gtau  = GTW'($urandom_range(0, 2000000)) * GTW'($urandom_range(1, 4000));
    th    = theta / 128.0;
    tau_hat = real'(gtau) / 1048576.0 / real'(1 << log2b);
    taud  = f ? tau_hat : th * tau_hat + (1.0 - th) * m_taud[p];
    bb    = f ? 0.0 : m_rho[p] * tau_hat;
    if (bb > 8191.0 / 4096.0) bb = 8191.0 / 4096.0;
    rn    = 1.0 / (real'(n0) / 65536.0 / real'(1 << log2b) + taud);
    if (rn > 65535.0) rn = 65535.0;
    @(negedge clk);
    start = 1; prob = p; first = f; rd_prob = ~p;
    other = rho / 256.0;
    @(negedge clk);
    start = 0;
    @(negedge clk);          // 2 cycles after start
    chk("b", b / 4096.0, bb, 0.005, 2.0 / 4096.0);
    @(negedge clk);          // 3 cycles after start
    chk("rho other", rho / 256.0, other, 0.0, 0.0);
    rd_prob = p;
    #1;
    chk("rho", rho / 256.0, rn, 0.005, 2.0 / 256.0);
    m_rho[p] = rho / 256.0;   // the model follows the hardware's quantised rho
    m_taud[p] = taud;
  endtask

  initial begin
    m_rho = '{0.0, 0.0}; m_taud = '{0.0, 0.0};
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 20; run++) begin
      n0    = xval_t'($urandom_range(1, 400000));
      log2b = 4'($urandom_range(0, 8));
      theta = 8'($urandom_range(1, 128));
      update(0, 1);
      update(1, 1);
      for (int it = 0; it < 5; it++) begin
        update(0, 0);
        update(1, 0);
      end
    end
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
