// tb_control_unit: sequencing against behavioural FFT, IFFT and peak models.
// The FFT model always has a block ready and finishes 300 clocks after
// fft_start; the IFFT model finishes 40 clocks after each ifft_start. Checked:
// 31 hypotheses 0..30 per block, each block read from the half the FFT wrote
// (FIFO order), block_pos = (836*b) mod 2400 and lag_base = min(836*b, 2400)
// during block b, eval exactly after the blocks that complete another 2,400
// lags, fft_wait while both halves are full, and that after the fourth
// decision (a hit) done rises and nothing is started any more.
//
// The 31 hypotheses per block and the 2,400-lag sub-frame follow the original
// design; the handshake checked is this design's own.
module tb_control_unit;
  logic clk = 1'b0, rst_n = 1'b0;
  logic fft_block_ready = 1'b1, fft_done = 1'b0, ifft_done = 1'b0;
  logic res_valid = 1'b0, res_hit = 1'b0;
  logic fft_start, wr_sel, ifft_start, rd_sel, eval, done, fft_wait;
  logic [4:0] hyp;
  logic [11:0] block_pos, lag_base;
  int checks = 0, failures = 0;

  control_unit dut (.*);
  always #1 clk = ~clk;

  task automatic fail(string s);
    failures++;
    if (failures < 8) $display("FAIL: %s", s);
  endtask

  // FFT model
  int  fft_timer = -1;
  bit  halves_q [$];
  always @(posedge clk) if (rst_n) begin
    fft_done <= 1'b0;
    if (fft_start) fft_timer <= 300;
    else if (fft_timer > 0) fft_timer <= fft_timer - 1;
    else if (fft_timer == 0) begin
      fft_done  <= 1'b1;
      fft_timer <= -1;
      halves_q.push_back(wr_sel);
    end
  end

  // IFFT model and checks
  int ifft_timer = -1, nblk = 0, nhyp = 0, nevals = 0, nwait = 0, late_starts = 0;
  bit evals_expected [$];
  always @(posedge clk) if (rst_n) begin
    ifft_done <= 1'b0;
    if (fft_wait) nwait++;
    if (done && (fft_start || ifft_start)) late_starts++;
    if (ifft_start) begin
      ifft_timer <= 40;
      checks++;
      if (int'(hyp) != nhyp) fail($sformatf("block %0d: hyp %0d expected %0d", nblk, hyp, nhyp));
      if (hyp == 0) begin
        bit h;
        checks++;
        h = halves_q.pop_front();
        if (rd_sel != h) fail($sformatf("block %0d read half %0d, written half %0d", nblk, rd_sel, h));
        checks++;
        if (int'(block_pos) != (836 * nblk) % 2400 || int'(lag_base) != ((836 * nblk > 2400) ? 2400 : 836 * nblk))
          fail($sformatf("block %0d: block_pos %0d lag_base %0d", nblk, block_pos, lag_base));
      end
    end else if (ifft_timer > 0) ifft_timer <= ifft_timer - 1;
    else if (ifft_timer == 0) begin
      ifft_done  <= 1'b1;
      ifft_timer <= -1;
      if (nhyp == 30) begin
        evals_expected.push_back((836 * (nblk + 1)) / 2400 > (836 * nblk) / 2400);
        nhyp = 0;
        nblk++;
      end else nhyp++;
    end
  end

  // eval check and peak model: the fourth decision is a hit
  int blk_seen = 0;
  always @(posedge clk) if (rst_n) begin
    res_valid <= 1'b0;
    if (eval) begin
      nevals++;
      res_valid <= 1'b1;
      res_hit   <= (nevals == 4);
    end
  end
  // every completed block must produce the expected eval (or none)
  always @(posedge clk) if (rst_n && dut.cstate == 2'd2 && int'(dut.drain_cnt) == 8) begin
    bit e;
    checks++;
    e = evals_expected[blk_seen];
    blk_seen++;
    @(posedge clk);
    if (eval != e) fail($sformatf("block %0d: eval %0d expected %0d", blk_seen - 1, eval, e));
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    wait (done);
    repeat (20000) @(posedge clk);
    checks++;
    if (nevals != 4) fail($sformatf("%0d evaluations", nevals));
    checks++;
    if (nwait == 0) fail("fft_wait never seen");
    checks++;
    if (late_starts != 0) fail("start after done");
    checks++;
    if (nblk != 12) fail($sformatf("%0d blocks before the hit, expected 12", nblk));
    $display("blocks=%0d evals=%0d wait_cycles=%0d", nblk, nevals, nwait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
