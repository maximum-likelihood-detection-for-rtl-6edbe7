// tb_pss_lut: reference spectrum contents and cyclic shift.
// The NPSS is generated independently in floating point, its 1,024-point
// DFT is conjugated and scaled so the largest component is 127. With the
// zero-offset hypothesis (15) every ROM word must be within 1 LSB of it. For
// hypotheses 0, 7 and 30 the output for bin m must equal the reference at
// bin (m - 4*(hyp-15)) mod 1024.
//
// Frequency hypotheses as cyclic shifts by 4 bins follow the original
// design; the 8-bit scaling is this design's choice.
module tb_pss_lut;
  import npss_ref_pkg::*;
  logic clk = 1'b0;
  logic [9:0] bin;
  logic [4:0] hyp;
  logic signed [7:0] ref_re, ref_im;
  int checks = 0, failures = 0;
  real er [1024], ei [1024];

  pss_lut dut (.*);
  always #1 clk = ~clk;

  initial begin
    cplx_t s [189];
    real mx, ang, sr, si;
    int hyps [4] = '{15, 0, 7, 30};
    for (int k = 0; k < 189; k++) s[k] = npss(k);
    mx = 0.0;
    for (int m = 0; m < 1024; m++) begin
      sr = 0.0; si = 0.0;
      for (int k = 0; k < 189; k++) begin
        ang = -2.0 * PI * ((m * k) % 1024) / 1024.0;
        sr += s[k].re * $cos(ang) - s[k].im * $sin(ang);
        si += s[k].re * $sin(ang) + s[k].im * $cos(ang);
      end
      er[m] = sr; ei[m] = -si;
      if (rabs(sr) > mx) mx = rabs(sr);
      if (rabs(si) > mx) mx = rabs(si);
    end
    for (int m = 0; m < 1024; m++) begin
      er[m] = er[m] * 127.0 / mx;
      ei[m] = ei[m] * 127.0 / mx;
    end
    foreach (hyps[h]) begin
      for (int m = 0; m < 1024; m++) begin
        int a;
        @(negedge clk);
        bin = 10'(m);
        hyp = 5'(hyps[h]);
        @(negedge clk);
        a = (m - 4 * (hyps[h] - 15) + 2048) % 1024;
        checks++;
        if (rabs(ref_re - er[a]) > 1.01 || rabs(ref_im - ei[a]) > 1.01) begin
          failures++;
          if (failures < 5) $display("FAIL hyp %0d bin %0d: (%0d,%0d) expected (%0f,%0f)",
                                     hyps[h], m, ref_re, ref_im, er[a], ei[a]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
