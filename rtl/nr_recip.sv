// nr_recip: reciprocal y ~ 1/x by normalisation, table and one Newton-Raphson
// iteration.
//
// As in the paper, x is first shifted by a power of two into [0.5, 1), an
// initial guess y0 ~ 1/x_bar comes from a look-up table, one iteration
// y1 = y0*(2 - x_bar*y0) refines it, and the shift is undone. The table size
// (32 entries, indexed by the 5 bits after the leading one) and its contents,
// y0 = round(2^21 / (65 + 2*i)) = 1/midpoint of the interval with 14
// fractional bits, are this design's choice and are computed at elaboration.
// x: 32 bits unsigned with 16 fractional bits; y: 24 bits unsigned with 8
// fractional bits, saturated (also for x = 0). Purely combinational.
module nr_recip
  import lama_pkg::*;
(
  input  xval_t x_i,
  output rho_t  y_o
);
  typedef logic [15:0] lut_t [32];

  function automatic lut_t init_lut();
    lut_t l;
    for (int i = 0; i < 32; i++) l[i] = 16'(((1 << 22) / (65 + 2*i) + 1) / 2);
    return l;
  endfunction

  localparam lut_t LUT = init_lut();

  always_comb begin
    int          p;
    logic [31:0] xn;
    logic [15:0] y0;
    logic [15:0] xs;
    logic [33:0] e, two_m_e;
    logic [63:0] y1p;
    logic [63:0] y1;
    logic [63:0] r;
    p = -1;
    for (int i = 0; i < 32; i++) if (x_i[i]) p = i;
    xn      = (p < 0) ? 32'd0 : x_i << (31 - p);       // MSB at bit 31: x_bar in [0.5,1)
    y0      = LUT[xn[30:26]];                          // Q2.14
    xs      = xn[31:16];                               // Q0.16
    e       = 34'(xs) * 34'(y0);                       // Q.30, about 1.0
    two_m_e = (34'd1 << 31) - e;                       // 2 - x_bar*y0, Q.30
    y1p     = 64'(y0) * 64'(two_m_e);                  // Q.44
    y1      = (y1p + (64'd1 << 29)) >> 30;             // Q.14
    // y = y1 * 2^(9-p) in 8-fractional-bit units
    if (p < 0)       r = '1;
    else if (p <= 9) r = y1 << (9 - p);
    else             r = (y1 + (64'd1 << (p - 10))) >> (p - 9);
    y_o = (p < 0) ? '1 : rho_t'(sat_u($signed(r), RW));
  end
endmodule
