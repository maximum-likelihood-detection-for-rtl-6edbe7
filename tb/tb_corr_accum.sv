// tb_corr_accum: read-modify-write combining at full RAM size.
// Several sweeps over random (hypothesis, bin) addresses: a first sweep with
// in_first set writes values, later sweeps add to them. The model is an
// array of the 37,200 sums with saturation at 511; every out_* word must
// agree with it one clock after the write.
//
// RAM size 37,200 x 9 follows the original design; saturation and the
// first-write rule are this design's own choices.
module tb_corr_accum;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, in_first = 1'b0, out_valid;
  logic [4:0] in_hyp = '0, out_hyp;
  logic [10:0] in_bin = '0, out_bin;
  logic [8:0] in_pow = '0, out_sum;
  int checks = 0, failures = 0;
  int model [31][1200];
  bit written [31][1200];

  corr_accum dut (.*);
  always #1 clk = ~clk;

  task automatic put(int h, int b, int p, bit first);
    int e;
    @(negedge clk);
    in_valid = 1'b1; in_hyp = 5'(h); in_bin = 11'(b); in_pow = 9'(p); in_first = first;
    @(negedge clk);
    in_valid = 1'b0;
    e = first ? p : ((model[h][b] + p > 511) ? 511 : model[h][b] + p);
    model[h][b] = e;
    @(negedge clk);
    checks++;
    if (!out_valid || int'(out_sum) != e || int'(out_hyp) != h || int'(out_bin) != b) begin
      failures++;
      if (failures < 5) $display("FAIL (%0d,%0d): sum=%0d expected %0d valid=%0d", h, b, out_sum, e, out_valid);
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // first pass over a subset of hypotheses, all bins of each
    for (int h = 0; h < 31; h += 6)
      for (int b = 0; b < 1200; b += 7) begin
        put(h, b, int'($urandom % 512), 1'b1);
        written[h][b] = 1'b1;
      end
    // combining passes, some reaching saturation
    for (int r = 0; r < 4; r++)
      for (int h = 0; h < 31; h += 6)
        for (int b = 0; b < 1200; b += 7)
          put(h, b, int'($urandom % 200), 1'b0);
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
