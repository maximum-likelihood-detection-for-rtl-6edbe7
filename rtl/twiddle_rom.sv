// twiddle_rom: synchronous ROM of the first half-period of exp(-j*2*pi*e/N).
//
// The table is computed at elaboration from cos/sin (Q1.14, rounded), so no
// data file is needed. Setting `conj` returns the conjugate, which the inverse
// FFT uses. Read latency is one clock: idx at edge t gives w_re/w_im after it.
//
// The original design does not describe its twiddle source; a half-period
// table with 16-bit entries is this design's choice.
module twiddle_rom
  import npss_pkg::*;
#(
  parameter int LOG2N = npss_pkg::LOG2N
) (
  input  logic               clk,
  input  logic [LOG2N-2:0]   idx,
  input  logic               conj,
  output tw_t                w_re,
  output tw_t                w_im
);
  localparam int H = 1 << (LOG2N - 1);
  typedef tw_t tab_t [H];

  function automatic tab_t make_tab(bit im);
    tab_t tab;
    for (int e = 0; e < H; e++) tab[e] = tw_val(e, LOG2N, im);
    return tab;
  endfunction

  localparam tab_t TAB_RE = make_tab(1'b0);
  localparam tab_t TAB_IM = make_tab(1'b1);

  always_ff @(posedge clk) begin
    w_re <= TAB_RE[idx];
    w_im <= conj ? -TAB_IM[idx] : TAB_IM[idx];
  end
endmodule
