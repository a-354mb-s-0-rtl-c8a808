// tb_ic_matvec: loads a random G~ (full 32x32, written in random order),
// then runs several products z = y + G~ s + b*alpha with random vectors and
// compares every element bit-exactly with an integer reference (accumulate
// at 20 fractional bits, round, saturate). Also checks that the result is
// there right after the 33rd step.
module tb_ic_matvec;
  import lama_pkg::*;
  localparam int N = 32;
  logic clk = 0;
  always #5 clk = ~clk;
  logic g_we = 0;
  logic [4:0] g_row = 0, g_col = 0;
  cgram_t g_data = '0;
  logic load = 0, step_valid = 0;
  logic [5:0] step = 0;
  gc_t b = '0;
  csym_t shat [N], alpha [N], y [N], z [N];
  cgram_t gm [N][N];
  int checks = 0, failures = 0;

  ic_matvec dut (.clk, .g_we, .g_row, .g_col, .g_data, .load, .shat_i(shat), .alpha_i(alpha), .y_i(y),
                 .step_valid, .step, .b_i(b), .z_o(z));

  function automatic longint sat16(input longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  initial begin
    int order [N*N];
    for (int i = 0; i < N*N; i++) order[i] = i;
    order.shuffle();
    for (int i = 0; i < N*N; i++) begin
      @(negedge clk);
      g_we = 1; g_row = 5'(order[i] / N); g_col = 5'(order[i] % N);
      g_data.re = gc_t'($signed($urandom_range(0, 6000)) - 3000);
      g_data.im = gc_t'($signed($urandom_range(0, 6000)) - 3000);
      if (g_row == g_col) g_data = '0;
      gm[g_row][g_col] = g_data;
    end
    @(negedge clk); g_we = 0;
    for (int run = 0; run < 6; run++) begin
      int big = (run == 5);     // last run drives values large enough to saturate
      for (int u = 0; u < N; u++) begin
        shat[u].re  = sym_t'($signed($urandom_range(0, 7680)) - 3840);
        shat[u].im  = sym_t'($signed($urandom_range(0, 7680)) - 3840);
        alpha[u].re = sym_t'($signed($urandom_range(0, 4000)) - 2000);
        alpha[u].im = sym_t'($signed($urandom_range(0, 4000)) - 2000);
        y[u].re     = big ? sym_t'(30000) : sym_t'($signed($urandom_range(0, 8000)) - 4000);
        y[u].im     = big ? sym_t'(-30000) : sym_t'($signed($urandom_range(0, 8000)) - 4000);
      end
      b = gc_t'($urandom_range(0, 4095));
      @(negedge clk); load = 1;
      @(negedge clk); load = 0;
      for (int c = 0; c <= N; c++) begin
        step_valid = 1; step = 6'(c);
        @(negedge clk);
      end
      step_valid = 0;
      // scramble the next operands to show the result no longer depends on them
      for (int u = 0; u < N; u++) begin shat[u] = '0; y[u] = '0; end
      for (int u = 0; u < N; u++) begin
        longint ar, ai;
        ar = longint'(y_hist(u, 1)) <<< 12;
        ai = longint'(y_hist(u, 0)) <<< 12;
        for (int v = 0; v < N; v++) begin
          ar += longint'(gm[u][v].re) * s_hist(v, 1) - longint'(gm[u][v].im) * s_hist(v, 0);
          ai += longint'(gm[u][v].re) * s_hist(v, 0) + longint'(gm[u][v].im) * s_hist(v, 1);
        end
        ar += longint'(b) * alpha[u].re;
        ai += longint'(b) * alpha[u].im;
        checks += 2;
        if (longint'(z[u].re) != sat16((ar + 2048) >>> 12) || longint'(z[u].im) != sat16((ai + 2048) >>> 12)) begin
          failures++;
          if (failures < 10) $display("FAIL run %0d u %0d got %0d,%0d exp %0d,%0d", run, u, z[u].re, z[u].im,
                                      sat16((ar + 2048) >>> 12), sat16((ai + 2048) >>> 12));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // copies of the operands as loaded (the loop above clears shat and y)
  csym_t s_keep [N], y_keep [N];
  always @(posedge clk) if (load) begin s_keep <= shat; y_keep <= y; end
  function automatic longint s_hist(input int v, input bit re);
    return re ? longint'(s_keep[v].re) : longint'(s_keep[v].im);
  endfunction
  function automatic longint y_hist(input int v, input bit re);
    return re ? longint'(y_keep[v].re) : longint'(y_keep[v].im);
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
