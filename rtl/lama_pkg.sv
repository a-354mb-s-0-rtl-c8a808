// lama_pkg: sizes, number formats and small shared helpers of the LAMA
// massive MU-MIMO data detector.
//
// The system size (32 UEs, 256-QAM, Ts = 36 cycles per task) follows the
// paper. All word widths and fractional-bit positions are this design's own
// choice, since the paper does not list its fixed-point parameters:
//   symbols (z, s_hat, y_MF, alpha, means) : ZW=16 signed, ZF=8 fractional bits,
//                                            PAM points are the odd integers -15..15
//   Gram entries G~ and the Onsager weight b: GW=14 signed, GF=12 (28-bit complex word)
//   g_u = G_uu/U                            : GGW=16 unsigned, GGF=12
//   variances tau                           : VW=16 unsigned, VF=8 (per real dimension)
//   tau_hat, N0, N0/B + tau_d               : XW=32 unsigned, XF=16
//   SINR rho and rho*g_u                    : RW=24 unsigned, RF=8
//   LLRs (prior in, extrinsic out)          : LW=8 signed, LF=2
//   soft bits tanh(LLR/2)                   : TW=10 signed, TF=8
//   damping factor theta                    : 8 bits, 7 fractional (128 = 1.0)
package lama_pkg;
  localparam int U    = 32;   // users
  localparam int Q    = 8;    // bits per 256-QAM symbol
  localparam int QH   = 4;    // bits per 16-PAM dimension
  localparam int TS   = 36;   // cycles per MV or IC task
  localparam int UW   = 5;    // UE index width

  localparam int ZW = 16, ZF = 8;
  localparam int GW = 14, GF = 12;
  localparam int GGW = 16, GGF = 12;
  localparam int VW = 16, VF = 8;
  localparam int XW = 32, XF = 16;
  localparam int RW = 24, RF = 8;
  localparam int LW = 8,  LF = 2;
  localparam int TW = 10, TF = 8;
  localparam int THW = 8, THF = 7;
  localparam int GTW = 40;    // width of the g^T tau accumulator (GGF+VF fractional bits)

  typedef logic signed [ZW-1:0] sym_t;
  typedef struct packed { sym_t re; sym_t im; } csym_t;
  typedef logic signed [GW-1:0] gc_t;
  typedef struct packed { gc_t re; gc_t im; } cgram_t;   // 28-bit Gram word
  typedef logic [GGW-1:0] gdiag_t;
  typedef logic [VW-1:0]  var_t;
  typedef logic [XW-1:0]  xval_t;
  typedef logic [RW-1:0]  rho_t;
  typedef logic signed [LW-1:0] llr_t;
  typedef logic signed [TW-1:0] soft_t;
  typedef llr_t [QH-1:0]  llr4_t;     // LLRs of one PAM dimension, index = bit k
  typedef llr_t [Q-1:0]   llr8_t;     // bits 0..3 real part, 4..7 imaginary part

  // Signed saturation of a wide value to n bits (n <= 63).
  function automatic logic signed [63:0] sat_s(input logic signed [63:0] v, input int n);
    logic signed [63:0] hi, lo;
    hi = (64'sd1 <<< (n-1)) - 1;
    lo = -(64'sd1 <<< (n-1));
    if (v > hi)      return hi;
    else if (v < lo) return lo;
    else             return v;
  endfunction

  // Unsigned saturation of a non-negative value to n bits.
  function automatic logic [63:0] sat_u(input logic signed [63:0] v, input int n);
    logic signed [63:0] hi;
    hi = (64'sd1 <<< n) - 1;
    if (v < 0)       return '0;
    else if (v > hi) return hi;
    else             return v;
  endfunction

  // Gray label of 16-PAM point index i (point a = 2*i - 15, i = 0..15):
  // a = x0*(8 - x1*(4 - x2*(2 - x3))), x_k = +1 for bit k = 1, -1 for 0.
  function automatic logic [3:0] pam_bits(input int i);
    int a, m;
    logic [3:0] b;
    a = 2*i - 15;
    b[0] = (a > 0);
    m = (a < 0) ? -a : a;                 // 1..15
    b[1] = (m <= 7);                      // 8 - x1*B, B in 1..7
    b[2] = (m >= 5 && m <= 11);
    b[3] = (m == 3 || m == 5 || m == 11 || m == 13);
    return b;
  endfunction
endpackage
