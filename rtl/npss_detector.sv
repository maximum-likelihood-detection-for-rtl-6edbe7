// npss_detector: maximum-likelihood NPSS detector for NB-IoT timing
// acquisition (top level).
//
// r[k], the received baseband at 240 kHz (in_valid once per sample), is cut
// into overlap-save blocks of 1,024 samples advancing by 836. Each block is
// transformed once (fft1024), then for each of 31 frequency hypotheses its
// spectrum is multiplied with the cyclically shifted NPSS reference spectrum
// (pss_lut) and transformed back (ifft1024_4bank), giving the
// cross-correlation of 836 timing hypotheses. Powers are decimated by two
// (mag_decim), added to the 37,200-word correlation RAM across sub-frames
// (corr_accum) and tracked by the four-largest peak detector (peak_detect).
// After every 2,400 lags (one 10 ms sub-frame) a decision is made; on a hit
// the detector stops with the frequency hypothesis f_o_hat (units of
// 937.5 Hz, -15..15) and timing t_o_hat (0..2,398, sample of the sub-frame
// where the NPSS starts, even values only).
//
// Configuration inputs: mag_shift scales the correlation power into 9 bits,
// thresh is the peak ratio threshold (1/16 steps). Status: done, busy,
// fft_wait (a block is ready but both spectrum halves are still in use),
// fft_overflow (input ring overrun, sticky). All blocks share one clock; the
// real-time budget assumes about 258 clocks per input sample (62 MHz).
//
// Following the original design: the chain FFT, product with shifted reference,
// IFFT, decimation by two, non-coherent combining and four-largest peak
// detection, and all memory sizes. This design's own choices: widths and
// scaling, the decision rule, the sequencing, and halting after a hit. The
// fine frequency/timing estimation of the original is not included.
module npss_detector
  import npss_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic signed [IN_W-1:0] in_re,
  input  logic signed [IN_W-1:0] in_im,
  input  logic [5:0]             mag_shift,
  input  logic [7:0]             thresh,
  output logic                   res_valid,
  output logic                   hit,
  output logic signed [4:0]      f_o_hat,
  output logic [11:0]            t_o_hat,
  output logic                   done,
  output logic                   busy,
  output logic                   fft_wait,
  output logic                   fft_overflow
);
  // FFT -> spectrum buffer
  logic                    fft_ready, fft_start, fft_busy, fft_done, fft_we;
  logic [LOG2N-1:0]        fft_addr;
  logic signed [FFT_W-1:0] fft_re, fft_im;
  logic                    wr_sel, rd_sel;

  // IFFT
  logic                    ifft_start, ifft_busy, ifft_done;
  logic                    spec_re;
  logic [LOG2N-1:0]        spec_raddr, ref_bin;
  logic [2*FFT_W-1:0]      spec_rdata;
  logic signed [REF_W-1:0] ref_re, ref_im;
  logic                    c_valid;
  logic [LOG2N-1:0]        c_lag;
  logic signed [IFFT_W-1:0] c_re, c_im;

  // control
  logic [4:0]  hyp;
  logic [11:0] block_pos, lag_base;
  logic        eval;

  // back end
  logic        m_valid, a_valid;
  logic [CW-1:0]    m_pow, a_sum;
  logic [16:0]      tag, m_tag;
  logic [4:0]       a_hyp;
  logic [10:0]      a_bin;

  fft1024 u_fft (
    .clk, .rst_n, .in_valid, .in_re, .in_im,
    .block_ready(fft_ready), .start(fft_start), .busy(fft_busy), .done(fft_done),
    .out_we(fft_we), .out_addr(fft_addr), .out_re(fft_re), .out_im(fft_im),
    .overflow(fft_overflow)
  );

  spectrum_buffer u_spec (
    .clk, .wr_sel, .we(fft_we), .waddr(fft_addr), .wdata({fft_re, fft_im}),
    .rd_sel, .re(spec_re), .raddr(spec_raddr), .rdata(spec_rdata)
  );

  pss_lut u_lut (.clk, .bin(ref_bin), .hyp, .ref_re, .ref_im);

  ifft1024_4bank u_ifft (
    .clk, .rst_n, .start(ifft_start), .busy(ifft_busy), .done(ifft_done),
    .spec_re, .spec_raddr, .spec_rdata,
    .ref_bin, .ref_re, .ref_im,
    .out_valid(c_valid), .out_lag(c_lag), .out_re(c_re), .out_im(c_im)
  );

  assign busy = fft_busy || ifft_busy;

  // timing bin and first-write flag of the current lag pair
  always_comb begin
    int unsigned pos;
    logic        first;
    pos   = (int'(block_pos) + int'(c_lag)) % NS;
    first = (int'(lag_base) + int'(c_lag)) < NS;
    tag   = {hyp, 11'(pos / 2), first};
  end

  mag_decim u_mag (
    .clk, .rst_n, .in_valid(c_valid), .in_lag(c_lag), .in_re(c_re), .in_im(c_im),
    .in_tag(tag), .mag_shift,
    .out_valid(m_valid), .out_idx(), .out_pow(m_pow), .out_tag(m_tag)
  );

  corr_accum u_acc (
    .clk, .rst_n, .in_valid(m_valid), .in_hyp(m_tag[16:12]), .in_bin(m_tag[11:1]),
    .in_pow(m_pow), .in_first(m_tag[0]),
    .out_valid(a_valid), .out_hyp(a_hyp), .out_bin(a_bin), .out_sum(a_sum)
  );

  peak_detect u_peak (
    .clk, .rst_n, .clear(1'b0), .in_valid(a_valid), .in_hyp(a_hyp), .in_bin(a_bin), .in_val(a_sum),
    .eval, .thresh, .res_valid, .hit, .f_o_hat, .t_o_hat
  );

  control_unit u_ctrl (
    .clk, .rst_n,
    .fft_block_ready(fft_ready), .fft_done, .fft_start, .wr_sel,
    .ifft_done, .ifft_start, .rd_sel, .hyp, .block_pos, .lag_base,
    .res_valid, .res_hit(hit), .eval, .done, .fft_wait
  );
endmodule
