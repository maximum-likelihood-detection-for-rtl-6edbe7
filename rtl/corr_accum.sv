// corr_accum: non-coherent combining in the correlation result RAM.
//
// The RAM holds one CW = 9-bit value per (hypothesis, timing bin):
// NF x NBIN = 31 x 1,200 = 37,200 words (334.8 kbit), at address
// hyp * NBIN + bin. For each decimated power value the unit reads the stored
// sum, adds the new power with saturation at 2^CW - 1 and writes it back
// (read in the clock of in_valid, write in the next; the RAM is single-port).
// When `in_first` is set (the bin is written for the first time in this
// acquisition) the old contents are ignored, so no clearing pass is needed.
// Each written value is also given on out_* for peak detection.
//
// Inputs may arrive at most every second clock (asserted). The RAM size and
// word width are the paper's; the address layout, the saturation and the
// first-write rule are this design's.
module corr_accum
  import npss_pkg::*;
#(
  parameter int NHYP  = npss_pkg::NF,
  parameter int NB    = npss_pkg::NBIN,
  parameter int CWD   = npss_pkg::CW
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [4:0]        in_hyp,
  input  logic [10:0]       in_bin,
  input  logic [CWD-1:0]    in_pow,
  input  logic              in_first,
  output logic              out_valid,
  output logic [4:0]        out_hyp,
  output logic [10:0]       out_bin,
  output logic [CWD-1:0]    out_sum
);
  localparam int DEPTH = NHYP * NB;
  localparam int AW    = $clog2(DEPTH);

  logic              ram_en, ram_we;
  logic [AW-1:0]     ram_addr, addr_q;
  logic [CWD-1:0]    ram_rdata, sum;
  logic              v_q, first_q;
  logic [4:0]        hyp_q;
  logic [10:0]       bin_q;
  logic [CWD-1:0]    pow_q;

  sp_ram #(.DEPTH(DEPTH), .WIDTH(CWD)) u_ram (
    .clk, .en(ram_en), .we(ram_we), .addr(ram_addr), .wdata(sum), .rdata(ram_rdata)
  );

  always_comb begin
    logic [CWD:0] t;
    t   = {1'b0, ram_rdata} + {1'b0, pow_q};
    sum = first_q ? pow_q : (t[CWD] ? '1 : t[CWD-1:0]);
    ram_en   = in_valid || v_q;
    ram_we   = v_q;
    ram_addr = v_q ? addr_q : AW'(int'(in_hyp) * NB + int'(in_bin));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q     <= 1'b0;
      first_q <= 1'b0;
      hyp_q   <= '0;
      bin_q   <= '0;
      pow_q   <= '0;
      addr_q  <= '0;
      out_valid <= 1'b0;
      out_hyp <= '0;
      out_bin <= '0;
      out_sum <= '0;
    end else begin
      v_q       <= in_valid;
      out_valid <= v_q;
      if (in_valid) begin
        first_q <= in_first;
        hyp_q   <= in_hyp;
        bin_q   <= in_bin;
        pow_q   <= in_pow;
        addr_q  <= ram_addr;
      end
      if (v_q) begin
        out_hyp <= hyp_q;
        out_bin <= bin_q;
        out_sum <= sum;
      end
    end
  end

  a_rate: assert property (@(posedge clk) disable iff (!rst_n) in_valid |=> !in_valid)
    else $error("corr_accum: inputs closer than two clocks");
endmodule
