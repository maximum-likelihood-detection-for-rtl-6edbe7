// fft1024: overlap-save input buffer and 1,024-point FFT on one single-port RAM.
//
// Received samples r[k] (240 kHz, one in_valid pulse per sample) are written
// into a ring of DEPTH = 1,360 complex words. A block is N = 1,024
// consecutive words starting at `base`; consecutive blocks overlap by
// NO = 188 samples. When the control unit pulses `start` on a ready block the
// engine
//   1. copies the block's last 188 samples to the 188 words following it,
//      where they form the head of the next block (the in-place transform
//      destroys the originals),
//   2. runs an in-place radix-2 decimation-in-frequency FFT, one butterfly per
//      four clocks (read a, read b, write a', write b'): the RAM has a single
//      port,
//   3. reads the result in bit-reversed order and writes it, in natural bin
//      order, to the spectrum buffer through out_we/out_addr/out_re/out_im.
// Then `base` advances by N. Samples arriving while a block is full or
// being transformed are written behind the copied overlap; the remaining
// DEPTH - N - NO = 148 words must hold them until the block is done, which at
// 240 kHz and a clock of tens of MHz leaves a wide margin (`overflow` flags a
// violation). An arriving sample always gets the port in its cycle and holds
// the transform sequencer for that cycle.
//
// Timing: about 2*NO + 4*(N/2)*LOG2N + N cycles from start to `done`
// (21,880 at N = 1,024) plus one cycle per sample arriving meanwhile.
// The 1,360-word single-port RAM, the 44-bit word and the one butterfly per
// four clocks follow the paper; the ring layout, copy step, arbitration and
// DIF ordering are this design's choices. Input words are sign-extended from
// IN_W = 12 bits, so the 10 bits of FFT growth fit the 22-bit halves without
// scaling.
module fft1024
  import npss_pkg::*;
#(
  parameter int LOG2N = npss_pkg::LOG2N,
  parameter int NO    = npss_pkg::NO,
  parameter int DEPTH = 1360,
  parameter int W     = npss_pkg::FFT_W,
  parameter int IN_W  = npss_pkg::IN_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  in_re,
  input  logic signed [IN_W-1:0]  in_im,
  output logic                    block_ready,
  input  logic                    start,
  output logic                    busy,
  output logic                    done,
  output logic                    out_we,
  output logic [LOG2N-1:0]        out_addr,
  output logic signed [W-1:0]     out_re,
  output logic signed [W-1:0]     out_im,
  output logic                    overflow
);
  localparam int N     = 1 << LOG2N;
  localparam int AW    = $clog2(DEPTH);
  localparam int SPARE = DEPTH - N - NO;

  typedef enum logic [1:0] {S_IDLE, S_COPY, S_BFLY, S_UNLOAD} state_t;
  state_t state;

  logic [AW-1:0]    base, wp;
  logic [LOG2N:0]   fill;          // samples of the current block present
  logic [AW-1:0]    extra;         // samples stored behind the copied overlap
  logic [LOG2N:0]   idx;           // copy index / unload index
  logic [LOG2N-2:0] j;             // butterfly index within a stage
  logic [$clog2(LOG2N)-1:0] s;     // stage: span 2^s
  logic [1:0]       ph;            // phase of the 4-cycle butterfly / 2-cycle copy
  logic             go;

  // RAM port
  logic             ram_en, ram_we;
  logic [AW-1:0]    ram_addr;
  logic [2*W-1:0]   ram_wdata, ram_rdata;

  sp_ram #(.DEPTH(DEPTH), .WIDTH(2*W)) u_ram (
    .clk, .en(ram_en), .we(ram_we), .addr(ram_addr), .wdata(ram_wdata), .rdata(ram_rdata)
  );

  function automatic logic [AW-1:0] ring(logic [AW-1:0] a, int unsigned off);
    int unsigned t;
    t = (int'(a) + off) % DEPTH;
    return AW'(t);
  endfunction

  function automatic logic [LOG2N-1:0] bitrev(logic [LOG2N-1:0] x);
    for (int b = 0; b < LOG2N; b++) bitrev[b] = x[LOG2N-1-b];
  endfunction

  // Butterfly addressing: lo = j with a 0 inserted at bit s, hi = lo | 2^s.
  logic [LOG2N-1:0] lo, hi;
  logic [LOG2N-2:0] tw_idx;
  always_comb begin
    logic [LOG2N-1:0] jj, mask;
    jj     = {1'b0, j};
    mask   = (LOG2N'(1) << s) - 1'b1;
    lo     = ((jj & ~mask) << 1) | (jj & mask);
    hi     = lo | (LOG2N'(1) << s);
    tw_idx = (LOG2N-1)'((jj & mask) << (LOG2N - 1 - int'(s)));
  end

  tw_t w_re, w_im;
  twiddle_rom #(.LOG2N(LOG2N)) u_tw (.clk, .idx(tw_idx), .conj(1'b0), .w_re, .w_im);

  logic signed [W-1:0] a_re, a_im, y_re_q, y_im_q;
  logic signed [W-1:0] bx_re, bx_im, by_re, by_im;
  radix2 #(.W(W)) u_bf (
    .a_re, .a_im,
    .b_re(ram_rdata[2*W-1:W]), .b_im(ram_rdata[W-1:0]),
    .w_re, .w_im,
    .x_re(bx_re), .x_im(bx_im), .y_re(by_re), .y_im(by_im)
  );

  assign go          = !in_valid;   // an arriving sample owns the port this cycle
  assign block_ready = (state == S_IDLE) && (fill == (LOG2N+1)'(N));
  assign busy        = (state != S_IDLE);

  // Port multiplexer
  always_comb begin
    ram_en    = 1'b0;
    ram_we    = 1'b0;
    ram_addr  = '0;
    ram_wdata = '0;
    if (in_valid) begin
      ram_en    = 1'b1;
      ram_we    = 1'b1;
      ram_addr  = wp;
      ram_wdata = {W'(in_re), W'(in_im)};
    end else begin
      unique case (state)
        S_COPY: begin
          ram_en = 1'b1;
          if (ph[0] == 1'b0) begin
            ram_addr = ring(base, N - NO + int'(idx));
          end else begin
            ram_we    = 1'b1;
            ram_addr  = ring(base, N + int'(idx));
            ram_wdata = ram_rdata;
          end
        end
        S_BFLY: begin
          ram_en = 1'b1;
          unique case (ph)
            2'd0: ram_addr = ring(base, int'(lo));
            2'd1: ram_addr = ring(base, int'(hi));
            2'd2: begin ram_we = 1'b1; ram_addr = ring(base, int'(lo)); ram_wdata = {bx_re, bx_im}; end
            default: begin ram_we = 1'b1; ram_addr = ring(base, int'(hi)); ram_wdata = {y_re_q, y_im_q}; end
          endcase
        end
        S_UNLOAD: begin
          ram_en   = (idx < (LOG2N+1)'(N));
          ram_addr = ring(base, int'(bitrev(idx[LOG2N-1:0])));
        end
        default: ;
      endcase
    end
  end

  logic             pend;
  logic [LOG2N-1:0] pend_k;
  assign out_we   = pend;
  assign out_addr = pend_k;
  assign out_re   = ram_rdata[2*W-1:W];
  assign out_im   = ram_rdata[W-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      base     <= '0;
      wp       <= '0;
      fill     <= '0;
      extra    <= '0;
      idx      <= '0;
      j        <= '0;
      s        <= '0;
      ph       <= '0;
      pend     <= 1'b0;
      pend_k   <= '0;
      done     <= 1'b0;
      overflow <= 1'b0;
      a_re     <= '0;
      a_im     <= '0;
      y_re_q   <= '0;
      y_im_q   <= '0;
    end else begin
      done <= 1'b0;
      pend <= 1'b0;

      // input side: fill the block, then continue behind the overlap copy
      if (in_valid) begin
        if (fill < (LOG2N+1)'(N)) begin
          fill <= fill + 1'b1;
          wp   <= (fill == (LOG2N+1)'(N - 1)) ? ring(base, N + NO) : ring(wp, 1);
        end else begin
          if (int'(extra) >= SPARE) overflow <= 1'b1;
          extra <= extra + 1'b1;
          wp    <= ring(wp, 1);
        end
      end

      unique case (state)
        S_IDLE: begin
          if (start && block_ready) begin
            state <= S_COPY;
            idx   <= '0;
            ph    <= '0;
          end
        end
        S_COPY: if (go) begin
          ph[0] <= ~ph[0];
          if (ph[0]) begin
            if (idx == (LOG2N+1)'(NO - 1)) begin
              state <= S_BFLY;
              s     <= ($clog2(LOG2N))'(LOG2N - 1);
              j     <= '0;
              ph    <= '0;
            end else begin
              idx <= idx + 1'b1;
            end
          end
        end
        S_BFLY: if (go) begin
          ph <= ph + 1'b1;
          if (ph == 2'd1) begin
            a_re <= ram_rdata[2*W-1:W];
            a_im <= ram_rdata[W-1:0];
          end
          if (ph == 2'd2) begin
            y_re_q <= by_re;
            y_im_q <= by_im;
          end
          if (ph == 2'd3) begin
            j <= j + 1'b1;
            if (&j) begin
              if (s == '0) begin
                state <= S_UNLOAD;
                idx   <= '0;
              end else begin
                s <= s - 1'b1;
              end
            end
          end
        end
        S_UNLOAD: begin
          if (go && idx < (LOG2N+1)'(N)) begin
            pend   <= 1'b1;
            pend_k <= idx[LOG2N-1:0];
            idx    <= idx + 1'b1;
          end
          if (idx == (LOG2N+1)'(N) && !pend) begin
            state <= S_IDLE;
            done  <= 1'b1;
            base  <= ring(base, N);
            // the next block already holds the overlap and the extra samples
            fill  <= (LOG2N+1)'(NO + int'(extra) + (in_valid ? 1 : 0));
            extra <= '0;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
