// genre_pkg -- types, constants and helper functions shared by the GenRE-Haar
// image denoiser.
//
// Number formats (the paper's 16-bit configuration):
//   * pixels are unsigned 8-bit integers (Q8.0);
//   * decomposition sub-bands of level j carry min(2j,6) fraction bits, the
//     truncation of the paper's Q7.2j to Q7.6 from level 3 on;
//   * recomposed sub-bands (the columns of Psi) carry 4 fraction bits at level 1
//     and 6 above; all of them travel in one signed 16-bit word with 6 fraction
//     bits (PSI_FRAC), so the level-1 columns have two zero low bits;
//   * the normalised Gram matrix Q/N and vector c/N carry 12 fraction bits,
//     alpha carries 24 (these three are this design's choice).
// Sub-band numbering: column 3(j-1)+0/1/2 of Psi is LH/HL/HH of level j, the
// last column (3*LEVELS) is the LL band of the deepest level.
package genre_pkg;

  localparam int PIX_W      = 8;   // input and output pixel width
  localparam int SMP_W      = 16;  // stored width of every decomposition sample
  localparam int MAX_FRAC   = 6;   // fraction bits kept after truncation (Table 4)
  localparam int PSI_W      = 16;  // width of one column of Psi
  localparam int PSI_FRAC   = 6;
  localparam int QN_W       = 34;  // width of an entry of Q/N or c/N
  localparam int QN_FRAC    = 12;
  localparam int ALPHA_W    = 32;
  localparam int ALPHA_FRAC = 24;
  localparam int MU_SHIFT   = 13;  // gradient-descent step size 2^-13
  // The solver sees Q and c in units of 4N rather than N (a further shift by
  // GD_PRESCALE), so that mu * lambda_max < 2 holds for any image whose
  // low band has a mean square below 65536, i.e. every 8-bit image of
  // natural content.
  localparam int GD_PRESCALE = 2;
  localparam int SIGMA2_W   = 16;  // noise variance, unsigned integer (pixel units)

  typedef enum logic [1:0] {
    BAND_LH = 2'd0,
    BAND_HL = 2'd1,
    BAND_HH = 2'd2,
    BAND_LL = 2'd3
  } band_e;

  typedef logic signed [SMP_W-1:0] smp_t;
  typedef logic signed [PSI_W-1:0] psi_t;
  typedef logic signed [QN_W-1:0]  qn_t;
  typedef logic signed [ALPHA_W-1:0] alpha_t;

  // Number of Psi columns for a given number of levels.
  function automatic int nbands(input int levels);
    return 3 * levels + 1;
  endfunction

  // Level (1..levels) of Psi column idx.
  function automatic int band_level(input int idx, input int levels);
    return (idx >= 3 * levels) ? levels : idx / 3 + 1;
  endfunction

  // Kind of sub-band of Psi column idx.
  function automatic band_e band_kind(input int idx, input int levels);
    return (idx >= 3 * levels) ? BAND_LL : band_e'(idx % 3);
  endfunction

  // Fraction bits of a level-j decomposition sub-band (level 0 is the image).
  function automatic int dec_frac(input int level);
    return (2 * level < MAX_FRAC) ? 2 * level : MAX_FRAC;
  endfunction

  // Fraction bits of a level-j recomposed sub-band after truncation.
  function automatic int rec_frac(input int level);
    return (dec_frac(level) + 2 * level < MAX_FRAC) ? dec_frac(level) + 2 * level : MAX_FRAC;
  endfunction

  // Cycles (accepted samples) from a pixel entering the filter bank to the
  // row of Psi centred on that pixel leaving it.
  function automatic int fb_latency(input int levels, input int line);
    return levels + 3 + ((1 << levels) - 1) * (line + 1);
  endfunction

endpackage
