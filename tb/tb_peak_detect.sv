// tb_peak_detect: four-largest tracking and decision against a full model.
// Random non-decreasing updates to 60 random (hypothesis, bin) addresses are
// offered one by one; the model keeps all values. Every 25 updates `eval` is
// pulsed: the tracked list must equal the model's four largest values, the
// reported (f_o_hat, t_o_hat) must point to an address holding the largest
// value, and hit must equal (top1 > 0 && 16*top1 >= thresh*top4).
//
// Analysing the four largest values follows the original design; the
// ratio rule checked is this design's own.
module tb_peak_detect;
  logic clk = 1'b0, rst_n = 1'b0;
  logic clear = 1'b0, in_valid = 1'b0, eval = 1'b0;
  logic [4:0] in_hyp = '0;
  logic [10:0] in_bin = '0;
  logic [8:0] in_val = '0;
  logic [7:0] thresh = 8'd32;
  logic res_valid, hit;
  logic signed [4:0] f_o_hat;
  logic [11:0] t_o_hat;
  int checks = 0, failures = 0;

  peak_detect dut (.*);
  always #1 clk = ~clk;

  int ah [60], ab [60], av [60];

  task automatic fail(string s);
    failures++;
    if (failures < 8) $display("FAIL: %s", s);
  endtask

  initial begin
    int srt [60];
    int i, tmp, top1, top4, h, b, v;
    bit ok;
    for (int k = 0; k < 60; k++) begin
      ah[k] = int'($urandom % 31);
      ab[k] = int'($urandom % 1200) + k * 2000;    // distinct addresses
      ab[k] = ab[k] % 1200;
      for (int q = 0; q < k; q++) if (ah[q] == ah[k] && ab[q] == ab[k]) ab[k] = (ab[k] + 1) % 1200;
      av[k] = 0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 2000; t++) begin
      i = int'($urandom % 60);
      v = av[i] + int'($urandom % ((t < 1000) ? 40 : 6));
      if (v > 511) v = 511;
      av[i] = v;
      in_valid = 1'b1; in_hyp = 5'(ah[i]); in_bin = 11'(ab[i]); in_val = 9'(v);
      @(negedge clk);
      in_valid = 1'b0;
      if (t % 25 == 24) begin
        thresh = 8'(16 + 8 * ($urandom % 5));
        eval = 1'b1;
        @(negedge clk);
        eval = 1'b0;
        for (int k = 0; k < 60; k++) srt[k] = av[k];
        srt.rsort();
        top1 = srt[0];
        top4 = srt[3];
        checks++;
        for (int k = 0; k < 4; k++)
          if (int'(dut.top[k].val) != srt[k])
            fail($sformatf("t=%0d entry %0d = %0d, expected %0d", t, k, dut.top[k].val, srt[k]));
        checks++;
        if (!res_valid) fail("res_valid missing");
        checks++;
        h = int'(f_o_hat) + 15;
        b = int'(t_o_hat) / 2;
        ok = 1'b0;
        for (int k = 0; k < 60; k++) if (ah[k] == h && ab[k] == b && av[k] == top1) ok = 1'b1;
        if (!ok || t_o_hat[0]) fail($sformatf("t=%0d argmax (%0d,%0d) does not hold %0d", t, h, b, top1));
        checks++;
        if (hit !== (top1 > 0 && 16 * top1 >= int'(thresh) * top4))
          fail($sformatf("t=%0d hit=%0d top1=%0d top4=%0d thresh=%0d", t, hit, top1, top4, thresh));
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
