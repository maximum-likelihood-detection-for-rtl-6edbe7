// npss_pkg: sizes, word types and helper functions shared by the NPSS detector.
//
// The detector correlates the received 240 kHz stream r[k] with the known
// 189-sample NPSS for 31 frequency-offset hypotheses, using overlap-save
// blocks of N = 1,024 samples that overlap by N_O = 188. The sizes below are
// those of the detector's main configuration (FFT size, overlap, number of
// hypotheses, 2,400 samples per 10 ms sub-frame, the 44/54/9-bit memory words
// of the block diagram). Input width, reference width and twiddle precision
// are this design's own choices.
package npss_pkg;
  localparam int LOG2N   = 10;              // 1,024-point FFT/IFFT
  localparam int N       = 1 << LOG2N;
  localparam int NO      = 188;             // overlap samples
  localparam int NVALID  = N - NO;          // 836 valid lags per block
  localparam int NF      = 31;              // frequency hypotheses
  localparam int NS      = 2400;            // samples per sub-frame at 240 kHz
  localparam int NBIN    = NS / 2;          // timing bins after decimation by 2
  localparam int GRID    = 4;               // hypothesis spacing in FFT bins
  localparam int IN_W    = 12;              // input I/Q width (own choice)
  localparam int FFT_W   = 22;              // 44-bit complex FFT words
  localparam int IFFT_W  = 27;              // 54-bit complex IFFT words
  localparam int REF_W   = 8;               // reference spectrum width (own choice)
  localparam int TW_W    = 16;              // twiddle width, Q1.14 (own choice)
  localparam int TW_FRAC = 14;
  localparam int CW      = 9;               // correlation RAM word

  typedef logic signed [TW_W-1:0] tw_t;

  // Twiddle factor exp(-j*2*pi*e/2^log2n) in Q1.14, real (im=0) or imaginary part.
  function automatic tw_t tw_val(int e, int log2n, bit im);
    real ang;
    real v;
    ang = 2.0 * 3.14159265358979323846 * e / (2.0 ** log2n);
    v   = im ? -$sin(ang) : $cos(ang);
    return tw_t'($rtoi($floor(v * real'(1 << TW_FRAC) + 0.5)));
  endfunction

  // Parity of a word (used by the IFFT bank mapping).
  function automatic logic parity10(logic [LOG2N-1:0] a);
    return ^a;
  endfunction
endpackage
