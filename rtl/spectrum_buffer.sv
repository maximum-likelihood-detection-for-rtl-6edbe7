// spectrum_buffer: ping-pong pair of 1,024 x 44-bit single-port RAMs.
//
// The FFT writes the spectrum of the newest overlap-save block into half
// `wr_sel` while the multiplier of the IFFT engine reads the previous
// spectrum from half `rd_sel`, 31 times over. The control unit swaps the
// halves after each block and never selects the same half for both sides
// (an assertion checks this). Read latency is one clock. The two 1,024x44
// RAMs are those of the block diagram; using them as a ping-pong pair is this
// design's reading of it.
//
// Latency, select signals and the assertion are this design's choices.
module spectrum_buffer
  import npss_pkg::*;
#(
  parameter int LOG2N = npss_pkg::LOG2N,
  parameter int W     = npss_pkg::FFT_W
) (
  input  logic               clk,
  input  logic               wr_sel,
  input  logic               we,
  input  logic [LOG2N-1:0]   waddr,
  input  logic [2*W-1:0]     wdata,
  input  logic               rd_sel,
  input  logic               re,
  input  logic [LOG2N-1:0]   raddr,
  output logic [2*W-1:0]     rdata
);
  localparam int N = 1 << LOG2N;
  logic [2*W-1:0] q [2];
  logic           rd_sel_q;

  for (genvar h = 0; h < 2; h++) begin : g_half
    logic wr_h;
    assign wr_h = we && (wr_sel == 1'(h));
    sp_ram #(.DEPTH(N), .WIDTH(2*W)) u_ram (
      .clk,
      .en   (wr_h || (re && rd_sel == 1'(h))),
      .we   (wr_h),
      .addr (wr_h ? waddr : raddr),
      .wdata(wdata),
      .rdata(q[h])
    );
  end

  always_ff @(posedge clk) if (re) rd_sel_q <= rd_sel;
  assign rdata = q[rd_sel_q];

  a_no_collision: assert property (@(posedge clk) (we && re) |-> (wr_sel != rd_sel))
    else $error("spectrum_buffer: read and write on the same half");
endmodule
