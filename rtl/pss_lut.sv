// pss_lut: reference spectrum S*[m] of the NPSS with shift-related address
// conversion.
//
// The ROM holds conj(DFT_1024(s)) of the 189-sample NPSS s[k] at 240 kHz,
// 8-bit signed real and imaginary parts, scaled so that the largest component
// is 127. s[k] = s(8k) for k = 0..188, where s(t) (t in 1.92 MHz samples) is
// the NPSS of 11 OFDM symbols: symbol q carries
// S_q[n] = exp(-j*5*pi*n*(n+1)/11) * c[q] on subcarrier frequency
// (n - 5.5) * 15 kHz, n = 0..10, with code cover
// c = [1,1,1,1,-1,-1,1,1,1,-1,1], 128 samples per symbol and cyclic prefixes
// of 9 samples (10 for the fifth symbol, the first of the second slot); 1,508
// samples in all. The contents are in pss_lut.hex, one word RRII per line.
//
// A frequency offset of hypothesis h (offset index h - 15, GRID = 4 FFT bins
// of 234.4 Hz apart) moves the received spectrum by 4*(h-15) bins, so the
// reference is read cyclically shifted: address (bin - 4*(h-15)) mod 1,024.
// Read latency one clock. The shift-by-address idea, the LUT and the grid of
// every fourth bin are the paper's; table width and layout are this design's.
module pss_lut
  import npss_pkg::*;
#(
  parameter int LOG2N = npss_pkg::LOG2N,
  parameter int GRID_STEP = npss_pkg::GRID,
  parameter int NHYP  = npss_pkg::NF
) (
  input  logic                    clk,
  input  logic [LOG2N-1:0]        bin,
  input  logic [4:0]              hyp,
  output logic signed [REF_W-1:0] ref_re,
  output logic signed [REF_W-1:0] ref_im
);
  localparam int N = 1 << LOG2N;
  logic [2*REF_W-1:0] rom [N];
  initial $readmemh("rtl/pss_lut.hex", rom);

  // shift-related address conversion
  logic [LOG2N-1:0] addr;
  always_comb begin
    int shift;
    shift = GRID_STEP * (int'(hyp) - (NHYP - 1) / 2);
    addr  = LOG2N'(int'(bin) - shift);
  end

  always_ff @(posedge clk) {ref_re, ref_im} <= rom[addr];
endmodule
