// tb_mag_decim: squared magnitude, shift, saturation and max-of-pair.
// Random lag pairs with random shifts; the expected output, computed with
// 64-bit integers, is min(max(|c0|^2, |c1|^2) >> shift, 511) (shift applied
// per value, then saturated, then the maximum), one clock after the odd lag,
// with index lag/2 and the tag of the odd lag.
//
// Decimation by two follows the original design; keeping the larger value of
// a pair and the shift/saturation are this design's choices.
module tb_mag_decim;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic [9:0] in_lag = '0;
  logic signed [26:0] in_re = '0, in_im = '0;
  logic [16:0] in_tag = '0, out_tag;
  logic [5:0] mag_shift = '0;
  logic out_valid;
  logic [8:0] out_idx, out_pow;
  int checks = 0, failures = 0;

  mag_decim dut (.*);
  always #1 clk = ~clk;

  function automatic longint sat(longint p, int sh);
    longint q = p >> sh;
    return (q > 511) ? 511 : q;
  endfunction

  initial begin
    longint p0, p1, e;
    int re0, im0, re1, im1, sh;
    logic [16:0] tg;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 3000; t++) begin
      sh  = 20 + int'($urandom % 30);
      re0 = int'($signed($urandom) >>> (5 + $urandom % 20));
      im0 = int'($signed($urandom) >>> (5 + $urandom % 20));
      re1 = int'($signed($urandom) >>> (5 + $urandom % 20));
      im1 = int'($signed($urandom) >>> (5 + $urandom % 20));
      tg  = 17'($urandom);
      @(negedge clk);
      in_valid = 1'b1; in_lag = 10'(2 * (t % 418)); in_re = 27'(re0); in_im = 27'(im0);
      mag_shift = 6'(sh); in_tag = ~tg;
      @(negedge clk);
      in_lag = 10'(2 * (t % 418) + 1); in_re = 27'(re1); in_im = 27'(im1); in_tag = tg;
      @(negedge clk);
      in_valid = 1'b0;
      p0 = longint'($signed(27'(re0))) * $signed(27'(re0)) + longint'($signed(27'(im0))) * $signed(27'(im0));
      p1 = longint'($signed(27'(re1))) * $signed(27'(re1)) + longint'($signed(27'(im1))) * $signed(27'(im1));
      e  = (sat(p0, sh) > sat(p1, sh)) ? sat(p0, sh) : sat(p1, sh);
      checks++;
      if (!out_valid || longint'(out_pow) != e || out_idx != 9'(t % 418) || out_tag != tg) begin
        failures++;
        if (failures < 5) $display("FAIL t=%0d valid=%0d pow=%0d expected %0d idx=%0d", t, out_valid, out_pow, e, out_idx);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
