// sp_ram: single-port synchronous RAM, one access per clock.
//
// A write (en & we) stores wdata at addr. A read (en & ~we) returns the word
// at addr on rdata after the clock edge; rdata keeps its value on writes and
// idle cycles, so a sequencer stalled by another user of the port still finds
// its last read word. This is the behaviour assumed for every single-port
// memory of the detector (FFT buffer, IFFT banks, spectrum halves, correlation
// RAM).
//
// Single-port memories are the original design's choice; that rdata holds
// its value over writes is this design's own assumption.
module sp_ram #(
  parameter int DEPTH = 1024,
  parameter int WIDTH = 44,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             en,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end
endmodule
