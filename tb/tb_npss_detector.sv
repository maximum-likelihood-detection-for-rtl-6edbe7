// tb_npss_detector: end-to-end test of the NPSS detector at its full size.
//
// The stimulus is a 240 kHz stream, one sample every 258 clocks (62 MHz),
// of uniform noise; from sample SIG_START on, an NPSS with frequency offset
// F_TRUE * 937.5 Hz repeats every 2,400 samples, starting at sample T0 of each
// sub-frame. The first sub-frame decision sees noise only and must not hit;
// a later decision must hit with f_o_hat = F_TRUE and t_o_hat within 2
// samples of T0. The test also counts the mechanisms of the design (input
// writes stalling the FFT, ping-pong swaps, first writes and combining
// writes of the correlation RAM, evaluations with and without hit) and fails
// if one never occurred, and it checks the real-time budget: the 31
// correlations of a block must finish within one block period (836 samples).
//
// Block, hypothesis and sub-frame sizes follow the original design; the
// signal level, threshold and scaling used here are this testbench's choices.
module tb_npss_detector;
  import npss_ref_pkg::*;

  localparam int  PERIOD    = 258;
  localparam int  T0        = 1234;
  localparam int  F_TRUE    = -3;
  localparam int  SIG_START = 3000;
  localparam real AMP       = 40.0;
  localparam real NAMP      = 250.0;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic signed [11:0] in_re = '0, in_im = '0;
  logic res_valid, hit, done, busy, fft_wait, fft_overflow;
  logic signed [4:0] f_o_hat;
  logic [11:0] t_o_hat;

  npss_detector dut (
    .clk, .rst_n, .in_valid, .in_re, .in_im, .mag_shift(6'd33), .thresh(8'd32),
    .res_valid, .hit, .f_o_hat, .t_o_hat, .done, .busy, .fft_wait, .fft_overflow
  );

  always #1 clk = ~clk;

  int checks = 0, failures = 0;
  int n_stall = 0, n_swap = 0, n_first = 0, n_comb = 0, n_nohit = 0, n_hit = 0, n_sat = 0;
  cplx_t s [189];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // mechanism counters (observed at the block boundaries)
  always @(posedge clk) if (rst_n) begin
    if (in_valid && dut.u_fft.busy) n_stall++;
    if (dut.u_fft.done) n_swap++;
    if (dut.u_acc.v_q &&  dut.u_acc.first_q) n_first++;
    if (dut.u_acc.v_q && !dut.u_acc.first_q) n_comb++;
    if (dut.u_acc.v_q && !dut.u_acc.first_q && dut.u_acc.sum == '1) n_sat++;
  end

  // real-time budget per block: correlations must end within 836 samples
  longint t_blk_start;
  int     blk_cycles_max = 0;
  longint cyc = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (dut.u_ctrl.ifft_start && dut.u_ctrl.hyp == 0) t_blk_start = cyc;
    if (dut.u_ctrl.ifft_done && dut.u_ctrl.hyp == 30 && int'(cyc - t_blk_start) > blk_cycles_max)
      blk_cycles_max = int'(cyc - t_blk_start);
  end

  // decisions
  always @(posedge clk) if (rst_n && res_valid) begin
    $display("decision: hit=%0d f_o_hat=%0d t_o_hat=%0d at sample %0d", hit, f_o_hat, t_o_hat, cyc / PERIOD);
    if (hit) n_hit++; else n_nohit++;
  end

  // stimulus
  initial begin
    int    n, pos;
    cplx_t v, ph;
    for (int k = 0; k < 189; k++) s[k] = npss(k);
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    n = 0;
    while (!done && n < 12000) begin
      repeat (PERIOD - 1) @(posedge clk);
      pos = (n - T0) % 2400;
      if (pos < 0) pos += 2400;
      v = '{unoise(NAMP), unoise(NAMP)};
      if (n >= SIG_START && pos < 189) begin
        ph = cexpj(2.0 * PI * F_TRUE * 937.5 * n / 240000.0);
        ph = cmul(s[pos], ph);
        v.re += AMP * ph.re;
        v.im += AMP * ph.im;
      end
      in_re    <= 12'($rtoi(v.re));
      in_im    <= 12'($rtoi(v.im));
      in_valid <= 1'b1;
      @(posedge clk);
      in_valid <= 1'b0;
      n++;
    end
    repeat (10) @(posedge clk);
    check(done, "detector finished with a hit");
    check(hit, "hit flag");
    check(f_o_hat == 5'(F_TRUE), $sformatf("f_o_hat %0d expected %0d", f_o_hat, F_TRUE));
    check((int'(t_o_hat) - T0 <= 2) && (T0 - int'(t_o_hat) <= 2),
          $sformatf("t_o_hat %0d expected %0d", t_o_hat, T0));
    check(!fft_overflow, "no input overflow");
    check(blk_cycles_max > 0 && blk_cycles_max <= 836 * PERIOD,
          $sformatf("31 correlations in %0d cycles, budget %0d", blk_cycles_max, 836 * PERIOD));
    $display("mechanisms: stall=%0d swap=%0d first=%0d combine=%0d nohit=%0d hit=%0d saturate=%0d",
             n_stall, n_swap, n_first, n_comb, n_nohit, n_hit, n_sat);
    check(n_stall > 0, "input write stalled the FFT");
    check(n_swap > 1, "ping-pong swaps");
    check(n_first > 0, "first writes");
    check(n_comb > 0, "combining writes");
    check(n_nohit > 0, "decision without hit");
    check(n_hit == 1, "exactly one hit decision");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (12000 * PERIOD + 2_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
