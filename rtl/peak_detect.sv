// peak_detect: four-largest tracking and detection decision.
//
// Every value written to the correlation RAM is offered on in_*. The unit
// keeps the four largest values with their hypothesis and timing bin, sorted
// in descending order. A value for a (hypothesis, bin) already in the list
// replaces that entry; since combined values never decrease, the list always
// equals the four largest entries of the whole RAM, without a read-back pass.
//
// At the end of each sub-frame the control unit pulses `eval`. One clock
// later res_valid is high for one clock with
//   hit     = top1 > 0 and 16 * top1 >= thresh * top4
//   f_o_hat = hypothesis of top1 - (NF-1)/2  (units of 4 FFT bins, 937.5 Hz)
//   t_o_hat = 2 * bin of top1                (240 kHz samples in the sub-frame)
// `clear` empties the list. Using the four largest values is the paper's
// choice; the ratio test between the largest and the fourth largest and the
// `thresh` format (1/16 steps) are this design's.
module peak_detect
  import npss_pkg::*;
#(
  parameter int CWD  = npss_pkg::CW,
  parameter int NHYP = npss_pkg::NF
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic              in_valid,
  input  logic [4:0]        in_hyp,
  input  logic [10:0]       in_bin,
  input  logic [CWD-1:0]    in_val,
  input  logic              eval,
  input  logic [7:0]        thresh,
  output logic              res_valid,
  output logic              hit,
  output logic signed [4:0] f_o_hat,
  output logic [11:0]       t_o_hat
);
  typedef struct packed {
    logic           valid;
    logic [CWD-1:0] val;
    logic [4:0]     hyp;
    logic [10:0]    bin;
  } entry_t;

  entry_t top [4];
  entry_t nxt [4];

  always_comb begin
    entry_t rem [4];
    entry_t nw;
    int     m, k, pos;
    nw = '{valid: 1'b1, val: in_val, hyp: in_hyp, bin: in_bin};
    // drop the entry with the same address, if any
    m = 4;
    for (int i = 3; i >= 0; i--)
      if (top[i].valid && top[i].hyp == in_hyp && top[i].bin == in_bin) m = i;
    k = 0;
    for (int i = 0; i < 4; i++) rem[i] = '0;
    for (int i = 0; i < 4; i++)
      if (i != m) begin
        if (k < 4) rem[k] = top[i];
        k++;
      end
    // insertion position: behind all entries that are at least as large
    pos = 0;
    for (int i = 0; i < 4; i++)
      if (rem[i].valid && rem[i].val >= in_val) pos = i + 1;
    for (int i = 0; i < 4; i++) begin
      if (i < pos)       nxt[i] = rem[i];
      else if (i == pos) nxt[i] = nw;
      else               nxt[i] = rem[i-1];
    end
  end

  logic [CWD+3:0] lhs;
  logic [CWD+7:0] rhs;
  assign lhs = {top[0].val, 4'b0000};
  assign rhs = thresh * top[3].val;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 4; i++) top[i] <= '0;
      res_valid <= 1'b0;
      hit       <= 1'b0;
      f_o_hat   <= '0;
      t_o_hat   <= '0;
    end else begin
      res_valid <= 1'b0;
      if (clear) begin
        for (int i = 0; i < 4; i++) top[i] <= '0;
      end else if (in_valid) begin
        for (int i = 0; i < 4; i++) top[i] <= nxt[i];
      end
      if (eval) begin
        res_valid <= 1'b1;
        hit       <= top[0].valid && (top[0].val != '0) && ((CWD+8)'(lhs) >= rhs);
        f_o_hat   <= 5'(signed'({1'b0, top[0].hyp}) - 6'((NHYP - 1) / 2));
        t_o_hat   <= {top[0].bin, 1'b0};
      end
    end
  end
endmodule
