// ifft1024_4bank: frequency-domain correlation of one hypothesis.
//
// For one frequency hypothesis the engine computes the overlap-save
// cross-correlation c[l] = IFFT(R[m] * S*[m - shift])[l], l = 0..NVALID-1
// (836 valid lags of a 1,024-point block), where R is the stored block
// spectrum and S* the shifted reference from the PSS LUT.
//
// Memory: four single-port banks of 256 x 54 bits (27-bit I/Q). Word a lives
// in bank {a[0], ^a} at row a[9:2]. The two words of any butterfly differ in
// exactly one bit, hence in parity, so they sit in two different banks. For
// spans >= 2 consecutive butterflies alternate in a[0]; for span 1 they are
// issued in Gray-code order so their parity alternates. Thus the reads of
// butterfly j+1 and the writes of butterfly j, issued in the same clock, use
// four different banks, and the unit runs one radix-2 operation per clock.
//
// Sequence after `start` (hyp must stay stable until `done`):
//   LOAD   1,024 clocks. Bins are fetched in the order 0,512,1,513,...; the
//          product R*S* (scaled by 2^-PROD_SHIFT) of each pair goes through
//          the first decimation-in-frequency stage (span 512) at once and both
//          results are written.
//   STAGES spans 256..1, 512 butterflies each plus one idle clock between
//          stages for the read-after-write dependency.
//   OUT    lags 0..NVALID-1 read at bit-reversed addresses, one per clock, on
//          out_valid/out_lag/out_re/out_im.
// Total about 1,025 + 9*513 + 837 = 6,479 clocks, so 31 hypotheses take about
// 201,000 clocks, below the 216,000 clocks of one 836-sample block at 62 MHz
// and 240 kHz. Four single-port banks and one butterfly per clock are the
// paper's; the bank mapping, the merged first stage and the scaling are this
// design's own choices.
module ifft1024_4bank
  import npss_pkg::*;
#(
  parameter int LOG2N      = npss_pkg::LOG2N,
  parameter int W          = npss_pkg::IFFT_W,
  parameter int XW         = npss_pkg::FFT_W,
  parameter int NVALID     = npss_pkg::NVALID,
  parameter int PROD_SHIFT = 6
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  output logic                     busy,
  output logic                     done,
  // spectrum buffer read port (latency 1)
  output logic                     spec_re,
  output logic [LOG2N-1:0]         spec_raddr,
  input  logic [2*XW-1:0]          spec_rdata,
  // reference read (latency 1)
  output logic [LOG2N-1:0]         ref_bin,
  input  logic signed [REF_W-1:0]  ref_re,
  input  logic signed [REF_W-1:0]  ref_im,
  // correlation output
  output logic                     out_valid,
  output logic [LOG2N-1:0]         out_lag,
  output logic signed [W-1:0]      out_re,
  output logic signed [W-1:0]      out_im
);
  localparam int N    = 1 << LOG2N;
  localparam int H    = N / 2;
  localparam int RW   = LOG2N - 2;
  localparam int SW   = $clog2(LOG2N);
  localparam int PW   = XW + REF_W + 1;

  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_STAGE, S_OUT} state_t;
  state_t state;

  logic [LOG2N:0]    cnt;      // issue counter
  logic [SW-1:0]     s;        // current span 2^s
  logic              bubble;

  function automatic logic [1:0] bank_of(logic [LOG2N-1:0] a);
    return {a[0], ^a};
  endfunction

  function automatic logic [LOG2N-1:0] bitrev(logic [LOG2N-1:0] x);
    for (int b = 0; b < LOG2N; b++) bitrev[b] = x[LOG2N-1-b];
  endfunction

  // ---------------------------------------------------------------- banks
  logic          b_en [4];
  logic          b_we [4];
  logic [RW-1:0] b_addr [4];
  logic [2*W-1:0] b_wdata [4];
  logic [2*W-1:0] b_rdata [4];

  for (genvar b = 0; b < 4; b++) begin : g_bank
    sp_ram #(.DEPTH(N / 4), .WIDTH(2*W)) u_ram (
      .clk, .en(b_en[b]), .we(b_we[b]), .addr(b_addr[b]), .wdata(b_wdata[b]), .rdata(b_rdata[b])
    );
  end

  // ---------------------------------------------------------------- issue side
  logic [LOG2N-2:0] j, jo;          // butterfly index, issue order
  logic [LOG2N-1:0] lo, hi;
  logic [LOG2N-2:0] tw_idx;
  logic             rd_issue, ld_issue, out_issue;

  always_comb begin
    logic [LOG2N-1:0] jj, mask;
    j        = cnt[LOG2N-2:0];
    jo       = (s == '0) ? (j ^ (j >> 1)) : j;   // Gray order in the last stage
    jj       = {1'b0, jo};
    mask     = (LOG2N'(1) << s) - 1'b1;
    lo       = ((jj & ~mask) << 1) | (jj & mask);
    hi       = lo | (LOG2N'(1) << s);
    tw_idx   = (state == S_LOAD) ? cnt[LOG2N-1:1]
                                 : (LOG2N-1)'((jj & mask) << (LOG2N - 1 - int'(s)));
    ld_issue  = (state == S_LOAD) && (cnt < (LOG2N+1)'(N));
    rd_issue  = (state == S_STAGE) && !bubble;
    out_issue = (state == S_OUT) && !bubble && (cnt < (LOG2N+1)'(NVALID));
  end

  // load order 0,512,1,513,...
  assign spec_re    = ld_issue;
  assign spec_raddr = {cnt[0], cnt[LOG2N-1:1]};
  assign ref_bin    = spec_raddr;

  tw_t w_re, w_im;
  twiddle_rom #(.LOG2N(LOG2N)) u_tw (.clk, .idx(tw_idx), .conj(1'b1), .w_re, .w_im);

  // ---------------------------------------------------------------- data side
  logic             ld_v, ld_odd, rd_v, out_v;
  logic [LOG2N-1:0] rd_lo, rd_hi, out_k;
  logic [LOG2N-2:0] ld_j;

  // product of spectrum and reference
  logic signed [XW-1:0] xr, xi;
  logic signed [PW-1:0] pr_full, pi_full;
  logic signed [W-1:0]  pr, pim;
  always_comb begin
    xr      = spec_rdata[2*XW-1:XW];
    xi      = spec_rdata[XW-1:0];
    pr_full = PW'(xr) * PW'(ref_re) - PW'(xi) * PW'(ref_im);
    pi_full = PW'(xr) * PW'(ref_im) + PW'(xi) * PW'(ref_re);
    pr      = W'(pr_full >>> PROD_SHIFT);
    pim     = W'(pi_full >>> PROD_SHIFT);
  end

  logic signed [W-1:0] ha_re, ha_im;        // held even product during load
  logic signed [W-1:0] a_re, a_im, b_re, b_im;
  logic signed [W-1:0] x_re, x_im, y_re, y_im;
  always_comb begin
    if (ld_v) begin
      a_re = ha_re; a_im = ha_im; b_re = pr; b_im = pim;
    end else begin
      a_re = W'(b_rdata[bank_of(rd_lo)] >> W);
      a_im = W'(b_rdata[bank_of(rd_lo)]);
      b_re = W'(b_rdata[bank_of(rd_hi)] >> W);
      b_im = W'(b_rdata[bank_of(rd_hi)]);
    end
  end
  radix2 #(.W(W)) u_bf (.a_re, .a_im, .b_re, .b_im, .w_re, .w_im, .x_re, .x_im, .y_re, .y_im);

  // bank port assignment: reads of the issued butterfly, writes of the
  // butterfly whose data arrived this clock
  always_comb begin
    logic [LOG2N-1:0] wlo, whi, oa;
    logic             wr;
    for (int b = 0; b < 4; b++) begin
      b_en[b] = 1'b0; b_we[b] = 1'b0; b_addr[b] = '0; b_wdata[b] = '0;
    end
    oa  = '0;
    wr  = (ld_v && ld_odd) || rd_v;
    wlo = ld_v ? {1'b0, ld_j} : rd_lo;
    whi = ld_v ? {1'b1, ld_j} : rd_hi;
    if (wr) begin
      b_en[bank_of(wlo)] = 1'b1; b_we[bank_of(wlo)] = 1'b1;
      b_addr[bank_of(wlo)] = wlo[LOG2N-1:2]; b_wdata[bank_of(wlo)] = {x_re, x_im};
      b_en[bank_of(whi)] = 1'b1; b_we[bank_of(whi)] = 1'b1;
      b_addr[bank_of(whi)] = whi[LOG2N-1:2]; b_wdata[bank_of(whi)] = {y_re, y_im};
    end
    if (rd_issue) begin
      b_en[bank_of(lo)] = 1'b1; b_addr[bank_of(lo)] = lo[LOG2N-1:2];
      b_en[bank_of(hi)] = 1'b1; b_addr[bank_of(hi)] = hi[LOG2N-1:2];
    end
    if (out_issue) begin
      oa = bitrev(cnt[LOG2N-1:0]);
      b_en[bank_of(oa)] = 1'b1; b_addr[bank_of(oa)] = oa[LOG2N-1:2];
    end
  end

  assign out_valid = out_v;
  assign out_lag   = out_k;
  assign out_re    = W'(b_rdata[bank_of(rd_lo)] >> W);
  assign out_im    = W'(b_rdata[bank_of(rd_lo)]);
  assign busy      = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      cnt    <= '0;
      s      <= '0;
      bubble <= 1'b0;
      ld_v   <= 1'b0;
      ld_odd <= 1'b0;
      ld_j   <= '0;
      rd_v   <= 1'b0;
      out_v  <= 1'b0;
      out_k  <= '0;
      rd_lo  <= '0;
      rd_hi  <= '0;
      ha_re  <= '0;
      ha_im  <= '0;
      done   <= 1'b0;
    end else begin
      done   <= 1'b0;
      ld_v   <= ld_issue;
      ld_odd <= cnt[0];
      ld_j   <= cnt[LOG2N-1:1];
      rd_v   <= rd_issue;
      out_v  <= out_issue;
      out_k  <= cnt[LOG2N-1:0];
      if (rd_issue) begin
        rd_lo <= lo;
        rd_hi <= hi;
      end
      if (out_issue) rd_lo <= bitrev(cnt[LOG2N-1:0]);
      if (ld_v && !ld_odd) begin
        ha_re <= pr;
        ha_im <= pim;
      end

      unique case (state)
        S_IDLE: if (start) begin
          state <= S_LOAD;
          cnt   <= '0;
        end
        S_LOAD: begin
          if (ld_issue) cnt <= cnt + 1'b1;
          else if (!ld_v) begin             // last pair written
            state  <= S_STAGE;
            cnt    <= '0;
            s      <= SW'(LOG2N - 2);
            bubble <= 1'b0;
          end
        end
        S_STAGE: begin
          if (bubble) begin
            bubble <= 1'b0;
          end else if (cnt == (LOG2N+1)'(H - 1)) begin
            cnt    <= '0;
            bubble <= 1'b1;
            if (s == '0) state <= S_OUT;
            else         s     <= s - 1'b1;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        S_OUT: begin
          if (bubble) bubble <= 1'b0;
          else if (out_issue) cnt <= cnt + 1'b1;
          else if (!out_v) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // no bank may see two accesses in one clock
  logic [3:0] m_wlo, m_whi, m_rlo, m_rhi, m_out;
  logic [LOG2N-1:0] chk_wlo, chk_whi, chk_oa;
  always_comb begin
    chk_wlo = ld_v ? {1'b0, ld_j} : rd_lo;
    chk_whi = ld_v ? {1'b1, ld_j} : rd_hi;
    chk_oa  = bitrev(cnt[LOG2N-1:0]);
    m_wlo = ((ld_v && ld_odd) || rd_v) ? (4'b0001 << bank_of(chk_wlo)) : 4'b0000;
    m_whi = ((ld_v && ld_odd) || rd_v) ? (4'b0001 << bank_of(chk_whi)) : 4'b0000;
    m_rlo = rd_issue  ? (4'b0001 << bank_of(lo)) : 4'b0000;
    m_rhi = rd_issue  ? (4'b0001 << bank_of(hi)) : 4'b0000;
    m_out = out_issue ? (4'b0001 << bank_of(chk_oa)) : 4'b0000;
  end
  a_bank: assert property (@(posedge clk) disable iff (!rst_n)
      ((m_wlo & m_whi) | (m_wlo & m_rlo) | (m_wlo & m_rhi) | (m_wlo & m_out) |
       (m_whi & m_rlo) | (m_whi & m_rhi) | (m_whi & m_out) |
       (m_rlo & m_rhi) | (m_rlo & m_out) | (m_rhi & m_out)) == 4'b0000)
    else $error("ifft1024_4bank: bank conflict");
endmodule
