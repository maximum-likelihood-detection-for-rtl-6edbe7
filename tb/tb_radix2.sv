// tb_radix2: random butterflies against an exact floating-point model.
// x = a + b must match exactly; y = (a - b) * w must equal the product rounded
// to the nearest integer (ties upward) after removing the 14 fraction bits.
//
// The Q1.14 format and rounding checked are this design's choices.
module tb_radix2;
  localparam int W = 22;
  logic signed [W-1:0] a_re, a_im, b_re, b_im, x_re, x_im, y_re, y_im;
  logic signed [15:0]  w_re, w_im;
  int checks = 0, failures = 0;

  radix2 #(.W(W)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real er, ei;
    for (int t = 0; t < 2000; t++) begin
      a_re = W'($signed($urandom) >>> 12);
      a_im = W'($signed($urandom) >>> 12);
      b_re = W'($signed($urandom) >>> 12);
      b_im = W'($signed($urandom) >>> 12);
      if (t < 4) begin
        w_re = (t == 0) ? 16'sd16384 : 16'sd0;
        w_im = (t == 1) ? -16'sd16384 : (t == 2 ? 16'sd16384 : 16'sd0);
      end else begin
        w_re = 16'($signed($urandom) % 16384);
        w_im = 16'($signed($urandom) % 16384);
      end
      #1;
      er = $floor((real'(a_re - b_re) * w_re - real'(a_im - b_im) * w_im) / 16384.0 + 0.5);
      ei = $floor((real'(a_re - b_re) * w_im + real'(a_im - b_im) * w_re) / 16384.0 + 0.5);
      checks++;
      if (x_re !== W'(a_re + b_re) || x_im !== W'(a_im + b_im) ||
          real'(y_re) != er || real'(y_im) != ei) begin
        failures++;
        if (failures < 10)
          $display("FAIL t=%0d x=(%0d,%0d) y=(%0d,%0d) expected y=(%0f,%0f)", t, x_re, x_im, y_re, y_im, er, ei);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
