// radix2: combinational radix-2 decimation-in-frequency butterfly.
//
//   x = a + b
//   y = (a - b) * w,   w a Q1.14 twiddle, product rounded to nearest
//
// No scaling: the word width W must hold the growth of a whole transform
// (the FFT and IFFT of the detector are sized for it). Sums wrap on overflow.
// The same unit serves the forward FFT and, fed conjugate twiddles, the IFFT;
// the engines register its operands and results around it.
//
// The radix-2 unit as the engine of both transforms is from the original
// design; DIF form, Q1.14 twiddles and rounding are this design's choices.
module radix2
  import npss_pkg::*;
#(
  parameter int W = npss_pkg::FFT_W
) (
  input  logic signed [W-1:0] a_re, a_im,
  input  logic signed [W-1:0] b_re, b_im,
  input  tw_t                 w_re, w_im,
  output logic signed [W-1:0] x_re, x_im,
  output logic signed [W-1:0] y_re, y_im
);
  localparam int PW = W + 1 + TW_W + 1;
  logic signed [W:0]    d_re, d_im;
  logic signed [PW-1:0] p_re, p_im;

  always_comb begin
    x_re = a_re + b_re;
    x_im = a_im + b_im;
    d_re = {a_re[W-1], a_re} - {b_re[W-1], b_re};
    d_im = {a_im[W-1], a_im} - {b_im[W-1], b_im};
    p_re = PW'(d_re) * PW'(w_re) - PW'(d_im) * PW'(w_im) + PW'(1 << (TW_FRAC - 1));
    p_im = PW'(d_re) * PW'(w_im) + PW'(d_im) * PW'(w_re) + PW'(1 << (TW_FRAC - 1));
    y_re = W'(p_re >>> TW_FRAC);
    y_im = W'(p_im >>> TW_FRAC);
  end
endmodule
