// control_unit: sequencing of the NPSS detector.
//
// * FFT: when the input buffer holds a complete block and the spectrum half
//   `wr_sel` is free, pulse fft_start. When the FFT is done the half is marked
//   full and wr_sel toggles.
// * Correlation: when half `rd_sel` is full and the IFFT engine is idle, run the
//   NF = 31 hypotheses hyp = 0..30 one after another (ifft_start per
//   hypothesis). After the last one the half is freed and rd_sel toggles.
// * Addressing: block_pos is the position of the current block's first lag in
//   the sub-frame, (836 * block) mod 2,400; lag_base counts lags processed so
//   far (saturating at 2,400) and tells whether a bin is written for the first
//   time.
// * Peak detection: after the block that completes a further 2,400 lags (one
//   sub-frame) and a short drain of the magnitude/accumulate pipeline, pulse
//   eval. On a hit the unit stops and raises `done`; reset starts a new
//   acquisition.
// The control unit, the start signal and the address generation appear in
// the paper's block diagram; the sequencing rules are this design's.
module control_unit
  import npss_pkg::*;
#(
  parameter int NHYP  = npss_pkg::NF,
  parameter int NSUB  = npss_pkg::NS,
  parameter int STEP  = npss_pkg::NVALID,
  parameter int DRAIN = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  // FFT
  input  logic        fft_block_ready,
  input  logic        fft_done,
  output logic        fft_start,
  output logic        wr_sel,
  // IFFT
  input  logic        ifft_done,
  output logic        ifft_start,
  output logic        rd_sel,
  output logic [4:0]  hyp,
  output logic [11:0] block_pos,
  output logic [11:0] lag_base,
  // peak detection
  input  logic        res_valid,
  input  logic        res_hit,
  output logic        eval,
  output logic        done,
  output logic        fft_wait
);
  typedef enum logic [1:0] {C_IDLE, C_RUN, C_DRAIN, C_EVAL} cstate_t;
  cstate_t cstate;

  logic [1:0]  full;
  logic        fft_active;
  logic        sf_cross;
  logic [$clog2(DRAIN+1)-1:0] drain_cnt;

  assign fft_start = fft_block_ready && !fft_active && !full[wr_sel] && !done;
  assign fft_wait  = fft_block_ready && !fft_active && full[wr_sel] && !done;
  assign sf_cross     = (int'(block_pos) + STEP) >= NSUB;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cstate     <= C_IDLE;
      full       <= '0;
      fft_active <= 1'b0;
      wr_sel     <= 1'b0;
      rd_sel     <= 1'b0;
      hyp        <= '0;
      block_pos  <= '0;
      lag_base   <= '0;
      ifft_start <= 1'b0;
      eval       <= 1'b0;
      done       <= 1'b0;
      drain_cnt  <= '0;
    end else begin
      ifft_start <= 1'b0;
      eval       <= 1'b0;

      if (fft_start) fft_active <= 1'b1;
      if (fft_done) begin
        fft_active   <= 1'b0;
        full[wr_sel] <= 1'b1;
        wr_sel       <= ~wr_sel;
      end

      unique case (cstate)
        C_IDLE: if (full[rd_sel] && !done) begin
          cstate     <= C_RUN;
          hyp        <= '0;
          ifft_start <= 1'b1;
        end
        C_RUN: if (ifft_done) begin
          if (int'(hyp) == NHYP - 1) begin
            cstate    <= C_DRAIN;
            drain_cnt <= '0;
          end else begin
            hyp        <= hyp + 1'b1;
            ifft_start <= 1'b1;
          end
        end
        C_DRAIN: begin
          drain_cnt <= drain_cnt + 1'b1;
          if (int'(drain_cnt) == DRAIN) begin
            cstate       <= sf_cross ? C_EVAL : C_IDLE;
            full[rd_sel] <= 1'b0;
            rd_sel       <= ~rd_sel;
            block_pos    <= sf_cross ? 12'(int'(block_pos) + STEP - NSUB) : 12'(int'(block_pos) + STEP);
            lag_base     <= (int'(lag_base) + STEP >= NSUB) ? 12'(NSUB) : 12'(int'(lag_base) + STEP);
            eval         <= sf_cross;
          end
        end
        C_EVAL: if (res_valid) cstate <= C_IDLE;   // wait for the decision
        default: cstate <= C_IDLE;
      endcase

      if (res_valid && res_hit) done <= 1'b1;
    end
  end
endmodule
