// ic_matvec: the interference-cancellation product
//     z = y_MF + G~ * s_hat + b * alpha
// on a linear array of NU complex multiply-accumulate lanes, in NU+1 steps.
//
// Following the paper's simplified Cannon scheme, the vector s_hat sits in a
// ring of registers (loaded with `load`) that rotates by one position every
// step, so each ring register drives exactly one MAC lane and one register,
// not all NU lanes. Lane u sees s_hat[(u+c) mod NU] at step c and therefore
// reads G~[u][(u+c) mod NU]; each lane's row memory (gram_row_mem) stores its
// row in that rotated order, so all lanes share one read address c. The
// write port takes the natural (row, col) address and rotates it.
// Step 0 also preloads the accumulator with y_MF; step NU adds b*alpha_u in
// the same multiplier (b is real). Both are this design's choices; the paper
// does not say where y_MF and the Onsager product enter.
// Timing: assert `load` one cycle, then `step_valid` with step = 0..NU on
// NU+1 consecutive cycles; z_o is valid from the cycle after the last step
// until the next load. G~ and b: 14 bits, 12 fractional; vectors: 16 bits,
// 8 fractional; accumulators keep 20 fractional bits and z_o is rounded and
// saturated.
module ic_matvec
  import lama_pkg::*;
#(
  parameter int NU = U,
  localparam int AW = $clog2(NU)
) (
  input  logic            clk,
  // G~ write port
  input  logic            g_we,
  input  logic [AW-1:0]   g_row,
  input  logic [AW-1:0]   g_col,
  input  cgram_t          g_data,
  // operation
  input  logic            load,
  input  csym_t           shat_i  [NU],
  input  csym_t           alpha_i [NU],
  input  csym_t           y_i     [NU],
  input  logic            step_valid,
  input  logic [AW:0]     step,
  input  gc_t             b_i,
  output csym_t           z_o     [NU]
);
  localparam int AccW = 40;

  csym_t ring  [NU];
  csym_t alpha [NU];
  csym_t yv    [NU];

  logic [AW-1:0] waddr;
  assign waddr = g_col - g_row;     // rotated position, mod NU

  always_ff @(posedge clk) begin
    if (load) begin
      ring  <= shat_i;
      alpha <= alpha_i;
      yv    <= y_i;
    end else if (step_valid && step < (AW+1)'(NU)) begin
      for (int u = 0; u < NU; u++) ring[u] <= ring[(u + 1) % NU];
    end
  end

  for (genvar u = 0; u < NU; u++) begin : g_lane
    cgram_t coef_mem, coef;
    csym_t  vec;
    logic signed [AccW-1:0] acc, pre, pr_re, pr_im;

    gram_row_mem #(.DEPTH(NU), .W(2*GW)) u_row (
      .clk(clk), .we(g_we && (g_row == AW'(u))), .waddr(waddr), .wdata(g_data),
      .raddr(step[AW-1:0]), .rdata(coef_mem));

    always_comb begin
      if (step == (AW+1)'(NU)) begin
        coef = '{re: b_i, im: '0};
        vec  = alpha[u];
      end else begin
        coef = coef_mem;
        vec  = ring[u];
      end
      pr_re = AccW'(coef.re) * AccW'(vec.re) - AccW'(coef.im) * AccW'(vec.im);
      pr_im = AccW'(coef.re) * AccW'(vec.im) + AccW'(coef.im) * AccW'(vec.re);
    end

    // accumulator: real part in acc, imaginary part in pre
    always_ff @(posedge clk) begin
      if (step_valid) begin
        if (step == '0) begin
          acc <= (AccW'(yv[u].re) <<< GF) + pr_re;
          pre <= (AccW'(yv[u].im) <<< GF) + pr_im;
        end else begin
          acc <= acc + pr_re;
          pre <= pre + pr_im;
        end
      end
    end

    localparam logic signed [AccW-1:0] RND = AccW'(1) <<< (GF-1);
    assign z_o[u].re = sym_t'(sat_s(64'(acc + RND) >>> GF, ZW));
    assign z_o[u].im = sym_t'(sat_s(64'(pre + RND) >>> GF, ZW));
  end
endmodule
