// tb_ifft1024_4bank: one correlation pass against a floating-point IDFT.
//
// The testbench stands in for the spectrum buffer and the reference ROM:
// random spectra X[m] (16-bit) and references R[m] (8-bit), each returned one
// clock after its read address. The engine's outputs c[l], l = 0..835, must
// match sum_m P[m] exp(+j*2*pi*m*l/1024) with P[m] = (X[m]*R[m]) >> 6 (integer,
// as in the hardware) within 256 LSB (twiddle rounding on values up to 2^21), arrive in lag order, and `done` must
// follow within the cycle budget of 6,483 clocks per pass (31 passes must fit
// in one 836-sample block at 62 MHz / 240 kHz). Two passes with different
// data run back to back.
//
// One butterfly per clock on four banks follows the original design; the
// 6,483-clock pass time is that of this implementation.
module tb_ifft1024_4bank;
  import npss_ref_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0, busy, done, spec_re, out_valid;
  logic [9:0] spec_raddr, ref_bin, out_lag;
  logic [43:0] spec_rdata;
  logic signed [7:0] ref_re, ref_im;
  logic signed [26:0] out_re, out_im;

  ifft1024_4bank dut (.*);
  always #1 clk = ~clk;

  int checks = 0, failures = 0;
  int xr [1024], xi [1024], rr [1024], ri [1024];
  longint pr [1024], pim [1024];
  int nout, bad;
  longint cyc = 0, t0;

  always @(posedge clk) begin
    cyc++;
    if (spec_re) spec_rdata <= {22'(xr[spec_raddr]), 22'(xi[spec_raddr])};
    ref_re <= 8'(rr[ref_bin]);
    ref_im <= 8'(ri[ref_bin]);
  end

  always @(posedge clk) if (rst_n && out_valid) check_out(int'(out_lag), int'(out_re), int'(out_im));

  task automatic check_out(int lag, int ore, int oim);
    real er, ei, ang;
    er = 0.0; ei = 0.0;
    for (int m = 0; m < 1024; m++) begin
      ang = 2.0 * PI * ((m * lag) % 1024) / 1024.0;
      er += pr[m] * $cos(ang) - pim[m] * $sin(ang);
      ei += pr[m] * $sin(ang) + pim[m] * $cos(ang);
    end
    checks++;
    if (lag != nout || rabs(ore - er) > 256.0 || rabs(oim - ei) > 256.0) begin
      failures++;
      bad++;
      if (bad < 5) $display("FAIL lag %0d (expected lag %0d): (%0d,%0d) expected (%0f,%0f)",
                            lag, nout, ore, oim, er, ei);
    end
    nout++;
  endtask

  initial begin
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    for (int pass = 0; pass < 2; pass++) begin
      for (int m = 0; m < 1024; m++) begin
        xr[m] = int'($signed($urandom) % 32768);
        xi[m] = int'($signed($urandom) % 32768);
        rr[m] = int'($signed($urandom) % 128);
        ri[m] = int'($signed($urandom) % 128);
        pr[m]  = (longint'(xr[m]) * rr[m] - longint'(xi[m]) * ri[m]) >>> 6;
        pim[m] = (longint'(xr[m]) * ri[m] + longint'(xi[m]) * rr[m]) >>> 6;
      end
      nout = 0;
      bad  = 0;
      @(posedge clk);
      start <= 1'b1;
      t0 = cyc;
      @(posedge clk);
      start <= 1'b0;
      @(posedge clk iff done);
      checks++;
      if (nout != 836) begin failures++; $display("FAIL %0d outputs", nout); end
      checks++;
      $display("pass %0d: %0d clocks", pass, cyc - t0);
      if (cyc - t0 > 6483 || 31 * (cyc - t0) > 836 * 258) begin
        failures++;
        $display("FAIL pass took %0d clocks", cyc - t0);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
