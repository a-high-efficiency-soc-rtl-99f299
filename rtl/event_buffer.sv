// event_buffer: 4-KiB event SRAM (512 words of 64 bits).
//
// Events x[m] loaded from memory through the RoCC port are written here, one
// 64-bit word per event, at the index carried by the memory response tag, so
// loads may return in any order. The trellis sequencer reads one word per
// event; the sample is the low bits of the word. Size (4 KiB for up to 512
// events) follows the published design; one event per 64-bit word is this
// design's reading of that size.
//
// Ports: one write port and one read port, both synchronous; rdata is valid
// the cycle after ren. A simultaneous read and write of the same address
// returns the old word.
module event_buffer
  import dna_pkg::*;
#(
  parameter int DEPTH = M_MAX,
  parameter int W     = EV_W
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [W-1:0]             wdata,
  input  logic                     ren,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [W-1:0]             rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we)  mem[waddr] <= wdata;
    if (ren) rdata <= mem[raddr];
  end
endmodule
