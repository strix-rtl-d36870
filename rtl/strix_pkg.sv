// strix_pkg: sizes, types and small arithmetic helpers shared by the Strix
// TFHE accelerator.  The defaults are the main configuration of the design:
// 8 Homomorphic Streaming Cores (TvLP = 8), 4 complex FFT lanes (CLP = 4),
// 8 real coefficient lanes (2 x CLP, the folding scheme), two polynomials in
// flight per stage (PLP = CoLP = 2) and polynomials of up to 16384
// coefficients, transformed by an 8192-point folded FFT.  Coefficients are
// 32-bit torus integers; the FFT datapath carries 64-bit fixed-point real and
// imaginary parts with 16-bit twiddles.  Widths that the source does not give
// (bsk word split, batch size, LWE length limit) are this design's choices.
package strix_pkg;

  // ---------------------------------------------------------------- sizes
  parameter int unsigned TVLP      = 8;      // cores (device-level batch)
  parameter int unsigned CLP       = 4;      // complex lanes of an I/FFT unit
  parameter int unsigned LANES     = 2*CLP;  // real coefficient lanes (folding)
  parameter int unsigned POLY_N    = 16384;  // largest polynomial degree N
  parameter int unsigned LB_MAX    = 4;      // largest decomposition level l_b
  parameter int unsigned LK_MAX    = 8;      // largest keyswitch level l_k
  parameter int unsigned N_LWE_MAX = 1024;   // largest LWE mask length n
  parameter int unsigned BATCH     = 4;      // core-level batch at N = 16384
  parameter int unsigned KS_COLP   = 8;      // keyswitch output columns per pass

  // ---------------------------------------------------------------- widths
  parameter int unsigned COEF_W = 32;        // torus coefficient
  parameter int unsigned FFT_W  = 64;        // FFT real / imaginary part
  parameter int unsigned TW_W   = 16;        // twiddle real / imaginary part
  parameter int unsigned TW_FRAC = TW_W-2;   // twiddle fraction bits (Q1.14)
  parameter int unsigned BSK_W  = 16;        // bsk real / imaginary part
  parameter int unsigned BSK_BUS_W = 512;    // bsk multicast bus
  parameter int unsigned KSK_BUS_W = 256;    // ksk multicast bus (paper value)

  typedef logic signed [COEF_W-1:0] coef_t;

  typedef struct packed {
    logic signed [FFT_W-1:0] re;
    logic signed [FFT_W-1:0] im;
  } cplx_t;

  typedef struct packed {
    logic signed [TW_W-1:0] re;
    logic signed [TW_W-1:0] im;
  } twid_t;

  typedef struct packed {
    logic signed [BSK_W-1:0] re;
    logic signed [BSK_W-1:0] im;
  } bsk_t;

  // Runtime TFHE parameters of a blind rotation / keyswitch.
  typedef struct packed {
    logic [4:0]  log_base_pbs;   // log2 B for bootstrapping decomposition
    logic [2:0]  lb;             // l_b, 1..LB_MAX
    logic [4:0]  log_base_ks;    // log2 B for keyswitch decomposition
    logic [3:0]  lk;             // l_k, 1..LK_MAX
    logic [10:0] n;              // LWE mask length, 1..N_LWE_MAX
    logic [2:0]  batch;          // LWEs per core in this epoch, 1..BATCH
  } tfhe_cfg_t;

  // ------------------------------------------------------------- helpers
  // Complex product of a datapath value and a Q1.(TW_W-2) twiddle, rounded.
  function automatic cplx_t cmul_tw(cplx_t a, twid_t w);
    logic signed [FFT_W+TW_W:0] rr, ii, ri, ir;
    cplx_t r;
    rr = a.re * w.re;  ii = a.im * w.im;
    ri = a.re * w.im;  ir = a.im * w.re;
    r.re = FFT_W'((rr - ii + (1 <<< (TW_FRAC-1))) >>> TW_FRAC);
    r.im = FFT_W'((ri + ir + (1 <<< (TW_FRAC-1))) >>> TW_FRAC);
    return r;
  endfunction

  // exp(sign * i * pi * num / den) as a rounded Q1.(TW_W-2) twiddle.
  function automatic twid_t make_twiddle(longint num, longint den, bit negative);
    real ang, c, s;
    twid_t t;
    ang = 3.14159265358979323846 * real'(num) / real'(den);
    c = $cos(ang);
    s = $sin(ang);
    if (negative) s = -s;
    t.re = TW_W'($rtoi(c * real'(1 << TW_FRAC) + (c >= 0.0 ? 0.5 : -0.5)));
    t.im = TW_W'($rtoi(s * real'(1 << TW_FRAC) + (s >= 0.0 ? 0.5 : -0.5)));
    return t;
  endfunction

endpackage
