// mwc_pkg: sizes and shared types of the modulated wideband converter (MWC)
// digital part.
//
// The defaults follow the main design example of the paper: Nyquist rate
// 10 GHz, N = 6 bands of width B = 50 MHz, fp = fs = fNYQ/195, so there are
// L = 195 spectrum slices, sign patterns of M = 195 intervals and m = 100
// sampling channels (Option A). The frame for support recovery is built from
// N_CTF = 50 sample vectors. Sample and coefficient word widths are not given
// by the paper (it mentions "8 or 16" bits per sample); 16 bits is this
// design's choice. The fixed-point formats of the solver and DSP are also this
// design's own.
package mwc_pkg;

  // ---- system sizes (paper) ----
  localparam int unsigned M_CH    = 100;  // m, sampling channels
  localparam int unsigned M_LEN   = 195;  // M, sign intervals per period Tp
  localparam int unsigned L0      = 97;   // eq. (10) with fs = fp
  localparam int unsigned L_SLICE = 2*L0 + 1; // L = 195, eq. (12)
  localparam int unsigned N_BANDS = 6;    // N
  localparam int unsigned N_CTF   = 50;   // samples per frame construction
  localparam int unsigned N_MEM   = 50;   // delay memory depth (>= N_CTF)

  // ---- word widths (design choice) ----
  localparam int unsigned SW  = 16;  // ADC sample width
  localparam int unsigned AW  = 16;  // width of each part of an entry of A
  localparam int unsigned RW  = 32;  // width of each part of residual / basis words
  localparam int unsigned FB  = 16;  // fraction bits of Gram-Schmidt coefficients
  localparam int unsigned BF  = 8;   // basis vectors carry A scaled up by 2^BF
  localparam int unsigned ZW  = 32;  // width of each part of a recovered z value
  localparam int unsigned ZO  = 16;  // fraction bits of recovered z values
  localparam int unsigned NBW = 64;  // width of a squared basis norm
  localparam int unsigned IP  = 96;  // inverse norms are 2^IP / norm

  // complex word of a residual / basis vector
  typedef struct packed {
    logic signed [RW-1:0] re;
    logic signed [RW-1:0] im;
  } cplx_r_t;

  // complex entry of the sensing matrix A = S F D (eq. (19))
  typedef struct packed {
    logic signed [AW-1:0] re;
    logic signed [AW-1:0] im;
  } cplx_a_t;

  // complex recovered slice value z_i[n]
  typedef struct packed {
    logic signed [ZW-1:0] re;
    logic signed [ZW-1:0] im;
  } cplx_z_t;

  // index of the slice that mirrors slice l (conjugate symmetry of X(f)):
  // slice l (0-based, centre L0) holds X(f + (l-L0) fp); its mirror is L-1-l.
  function automatic int unsigned mirror_idx(input int unsigned l, input int unsigned nl);
    return nl - 1 - l;
  endfunction

endpackage
