// tb_spectrum_buffer: ping-pong use of the two spectrum halves.
// Half 0 is filled with one pattern, then half 1 is filled with another
// while half 0 is read back (same clocks); then the roles swap. Every read
// word must equal the pattern of the half it was read from, one clock after
// the read.
//
// The two 1,024-word spectrum RAMs follow the original design; their use as
// a ping-pong pair is this design's reading of it.
module tb_spectrum_buffer;
  logic clk = 1'b0;
  logic wr_sel, we, rd_sel, re;
  logic [9:0] waddr, raddr;
  logic [43:0] wdata, rdata;
  int checks = 0, failures = 0;

  spectrum_buffer dut (.*);
  always #1 clk = ~clk;

  function automatic logic [43:0] pat(int h, int a);
    return {12'(h * 977 + 3), 22'(a * 12345 + h), 10'(a)};
  endfunction

  task automatic pass(int wh, bit do_read);
    for (int a = 0; a < 1024; a++) begin
      @(negedge clk);
      we     = 1'b1;
      wr_sel = 1'(wh);
      waddr  = 10'(a);
      wdata  = pat(wh, a);
      re     = do_read;
      rd_sel = 1'(1 - wh);
      raddr  = 10'(1023 - a);
      @(negedge clk);
      we = 1'b0;
      re = 1'b0;
      if (do_read) begin
        checks++;
        if (rdata !== pat(1 - wh, 1023 - a)) begin
          failures++;
          if (failures < 5) $display("FAIL read half %0d addr %0d: %h", 1 - wh, 1023 - a, rdata);
        end
      end
    end
  endtask

  initial begin
    we = 0; re = 0; wr_sel = 0; rd_sel = 1; waddr = '0; raddr = '0; wdata = '0;
    @(posedge clk);
    pass(0, 1'b0);
    pass(1, 1'b1);
    pass(0, 1'b1);
    pass(1, 1'b1);
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
