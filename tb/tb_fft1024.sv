// tb_fft1024: two overlap-save blocks through the single-port FFT.
//
// Random 12-bit samples arrive one every 200 clocks. Each ready block is
// started at once; the spectrum written on out_* is compared bin by bin with
// a floating-point DFT of the samples the block must contain: samples
// 0..1023, then 836..1859 (188 overlap samples). Errors up to 48 LSB are
// accepted (rounded twiddle products over 10 stages on values up to 2^20).
// Also checked: every bin written once, no overflow, and the transform time
// (start to done) equal to 2*188 + 4*512*10 + 1024 + 3 clocks plus one clock
// per sample that arrived meanwhile.
//
// N = 1,024, N_O = 188 and one butterfly per 4 clocks follow the original
// design; the exact cycle formula is that of this implementation.
module tb_fft1024;
  import npss_ref_pkg::*;
  localparam int N = 1024, NO = 188, PERIOD = 200, NSAMP = 2 * N - NO + 40;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic signed [11:0] in_re = '0, in_im = '0;
  logic block_ready, start, busy, done, out_we, overflow;
  logic [9:0] out_addr;
  logic signed [21:0] out_re, out_im;

  fft1024 dut (.*);
  always #1 clk = ~clk;

  int checks = 0, failures = 0;
  int xr [NSAMP], xi [NSAMP];
  int yr [N], yi [N], wcount [N];
  int blk = 0, nsent = 0, arrivals = 0;
  longint t_start, cyc = 0;

  assign start = block_ready;

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (start && block_ready) begin
      t_start  = cyc;
      arrivals = 0;
      for (int k = 0; k < N; k++) wcount[k] = 0;
    end
    if (busy && in_valid) arrivals++;
    if (out_we) begin
      yr[out_addr] = out_re;
      yi[out_addr] = out_im;
      wcount[out_addr]++;
    end
    if (done) begin
      check_block(blk);
      checks++;
      if (int'(cyc - t_start) != 2 * NO + 4 * 512 * 10 + N + 3 + arrivals) begin
        failures++;
        $display("FAIL block %0d: %0d cycles, expected %0d", blk, cyc - t_start, 2 * NO + 4 * 512 * 10 + N + 3 + arrivals);
      end
      blk++;
    end
  end

  task automatic check_block(int b);
    int off, bad;
    real sr, si, ang;
    off = b * (N - NO);
    bad = 0;
    for (int m = 0; m < N; m++) begin
      sr = 0.0; si = 0.0;
      for (int k = 0; k < N; k++) begin
        ang = -2.0 * PI * ((m * k) % N) / N;
        sr += xr[off + k] * $cos(ang) - xi[off + k] * $sin(ang);
        si += xr[off + k] * $sin(ang) + xi[off + k] * $cos(ang);
      end
      checks++;
      if (wcount[m] != 1 || rabs(yr[m] - sr) > 48.0 || rabs(yi[m] - si) > 48.0) begin
        failures++;
        bad++;
        if (bad < 5) $display("FAIL block %0d bin %0d: (%0d,%0d) expected (%0f,%0f) writes %0d",
                              b, m, yr[m], yi[m], sr, si, wcount[m]);
      end
    end
  endtask

  initial begin
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    for (int n = 0; n < NSAMP; n++) begin
      xr[n] = int'($signed($urandom) % 2048);
      xi[n] = int'($signed($urandom) % 2048);
      repeat (PERIOD - 1) @(posedge clk);
      in_re    <= 12'(xr[n]);
      in_im    <= 12'(xi[n]);
      in_valid <= 1'b1;
      @(posedge clk);
      in_valid <= 1'b0;
    end
    wait (blk == 2);
    repeat (4) @(posedge clk);
    checks++;
    if (overflow) begin failures++; $display("FAIL overflow"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NSAMP * PERIOD + 100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
