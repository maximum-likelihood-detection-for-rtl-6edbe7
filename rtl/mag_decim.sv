// mag_decim: squared magnitude, scaling and decimation by two.
//
// Each correlation value c[l] arriving in lag order becomes the power
// |c[l]|^2 = re^2 + im^2, shifted right by the run-time `mag_shift` and
// saturated to the CW = 9-bit word of the correlation RAM. Lags 2i and 2i+1
// form a pair; the larger of the two powers is passed on as one output, so
// the timing grid is halved (2,400 -> 1,200 bins per sub-frame). The sideband
// `in_tag` (hypothesis, bin, first-pass flag in the detector) is taken with
// the odd lag and travels with the result.
//
// Timing: out_valid one clock after the odd lag of a pair; at most one output
// per two input clocks. Squaring and decimation by 2 are the paper's; keeping
// the maximum of the pair, the shift and the saturation are this design's.
module mag_decim
  import npss_pkg::*;
#(
  parameter int W     = npss_pkg::IFFT_W,
  parameter int CWD   = npss_pkg::CW,
  parameter int LAG_W = npss_pkg::LOG2N,
  parameter int TAG_W = 17
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic [LAG_W-1:0]      in_lag,
  input  logic signed [W-1:0]   in_re,
  input  logic signed [W-1:0]   in_im,
  input  logic [TAG_W-1:0]      in_tag,
  input  logic [5:0]            mag_shift,
  output logic                  out_valid,
  output logic [LAG_W-2:0]      out_idx,
  output logic [CWD-1:0]        out_pow,
  output logic [TAG_W-1:0]      out_tag
);
  localparam int PW = 2 * W;
  logic [PW-1:0]        p, ps;
  logic signed [PW-1:0] re_x, im_x;
  logic [CWD-1:0]       pow, held;

  always_comb begin
    re_x = PW'(in_re);
    im_x = PW'(in_im);
    p    = PW'(re_x * re_x) + PW'(im_x * im_x);
    ps  = p >> mag_shift;
    pow = (ps > PW'((1 << CWD) - 1)) ? CWD'((1 << CWD) - 1) : CWD'(ps);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      held      <= '0;
      out_valid <= 1'b0;
      out_idx   <= '0;
      out_pow   <= '0;
      out_tag   <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        if (!in_lag[0]) begin
          held <= pow;
        end else begin
          out_valid <= 1'b1;
          out_idx   <= in_lag[LAG_W-1:1];
          out_pow   <= (pow > held) ? pow : held;
          out_tag   <= in_tag;
        end
      end
    end
  end
endmodule
