// rsp_pkg: shared sizes, fixed-point formats and complex types of the
// reconfigurable SARP/MJARP radar signal processing (RSP) accelerator.
//
// Fixed-point formats are written <W,Z>: W bits in total, Z integer bits
// (sign included), W-Z fractional bits. The four formats follow the
// word-length study of the design: DBF <22,2>, FFT <24,1>, complex
// multiplier (matched filter) <26,6>, IFFT <32,1>. The Givens-rotation QR
// block uses <32,12>.
//
// Scaling convention (a choice of this implementation, so that each format
// holds its signal without overflow):
//   * FFT output  = (1/P) * sum x[p] e^{-j2pi kp/P}
//   * DBF output  = (1/L) * sum_l D[p,l] * W[i,l]
//   * MF output   = Y[i,k] * conj(Gt[m,k]), Gt = unscaled FFT of the Golay code
//   * IFFT output = (1/P) * sum_k Z[k] e^{+j2pi kr/P}
// A target of amplitude a (Golay code of length P/2, +-1 chips) therefore
// peaks at a/2 after matched filtering, which the PSR generator undoes.
package rsp_pkg;

  // ---- default sizes (the design's main configuration) ----
  localparam int unsigned P_DEF  = 1024; // fast-time samples per packet
  localparam int unsigned L_DEF  = 32;   // receive antennas
  localparam int unsigned I_DEF  = 181;  // search angles, -90..90 deg in 1 deg steps
  localparam int unsigned M_DEF  = 32;   // slow-time packets
  localparam int unsigned NT_DEF = 3;    // targets localised by CLEAN
  localparam int unsigned K_DEF  = 16;   // covariance size after spatial smoothing

  // ---- word lengths <W,Z> ----
  localparam int unsigned FFT_W  = 24; localparam int unsigned FFT_F  = 23; // <24,1>
  localparam int unsigned DBF_W  = 22; localparam int unsigned DBF_F  = 20; // <22,2>
  localparam int unsigned CM_W   = 26; localparam int unsigned CM_F   = 20; // <26,6>
  localparam int unsigned IFFT_W = 32; localparam int unsigned IFFT_F = 31; // <32,1>
  localparam int unsigned QR_W   = 32; localparam int unsigned QR_F   = 20; // <32,12>

  typedef struct packed { logic signed [FFT_W-1:0]  re; logic signed [FFT_W-1:0]  im; } c_fft_t;
  typedef struct packed { logic signed [DBF_W-1:0]  re; logic signed [DBF_W-1:0]  im; } c_dbf_t;
  typedef struct packed { logic signed [CM_W-1:0]   re; logic signed [CM_W-1:0]   im; } c_cm_t;
  typedef struct packed { logic signed [IFFT_W-1:0] re; logic signed [IFFT_W-1:0] im; } c_ifft_t;
  typedef struct packed { logic signed [QR_W-1:0]   re; logic signed [QR_W-1:0]   im; } c_qr_t;

  // RSP flag (register R14): 0 selects SARP, 1 selects MJARP.
  typedef enum logic { RSP_SARP = 1'b0, RSP_MJARP = 1'b1 } rsp_mode_e;

  // Arithmetic shift right with round-half-up, then saturation to w bits.
  function automatic logic signed [63:0] shr_sat(input logic signed [63:0] x,
                                                 input int unsigned sh,
                                                 input int unsigned w);
    logic signed [63:0] y, hi, lo;
    y  = (sh == 0) ? x : ((x + (64'sd1 <<< (sh - 1))) >>> sh);
    hi = (64'sd1 <<< (w - 1)) - 64'sd1;
    lo = -(64'sd1 <<< (w - 1));
    if (y > hi)      return hi;
    else if (y < lo) return lo;
    else             return y;
  endfunction

  // Magnitude approximation |x| ~ max(|re|,|im|) + min(|re|,|im|)/2,
  // used for the SARP non-coherent fast-time integration.
  function automatic logic [63:0] mag_approx(input logic signed [63:0] re,
                                             input logic signed [63:0] im);
    logic [63:0] a, b;
    a = (re < 0) ? 64'(-re) : 64'(re);
    b = (im < 0) ? 64'(-im) : 64'(im);
    return (a > b) ? a + (b >> 1) : b + (a >> 1);
  endfunction

  // Squared magnitude, used to rank peaks (same order as |x|).
  function automatic logic [63:0] mag2(input logic signed [31:0] re,
                                       input logic signed [31:0] im);
    logic signed [63:0] r2, i2;
    r2 = 64'(re) * 64'(re);
    i2 = 64'(im) * 64'(im);
    return 64'(r2) + 64'(i2);
  endfunction

endpackage
