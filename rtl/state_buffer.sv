// state_buffer: 384-B register file for the detected state sequence.
//
// Holds state_path[0:M-1], six bits per state (512 x 6 b = 384 B, as
// published). The traceback unit writes one state per cycle; the sequencer
// then reads eight consecutive states at a time (one 64-bit store, one byte
// per state) to stream the sequence to memory. The read grouping is this
// design's choice.
//
// Ports: synchronous write; combinational group read of states
// 8*rgroup .. 8*rgroup+7.
module state_buffer
  import dna_pkg::*;
#(
  parameter int DEPTH = M_MAX
) (
  input  logic                       clk,
  input  logic                       we,
  input  logic [$clog2(DEPTH)-1:0]   waddr,
  input  logic [ST_W-1:0]            wdata,
  input  logic [$clog2(DEPTH)-4:0]   rgroup,
  output logic [ST_W-1:0]            rdata [8]
);
  logic [ST_W-1:0] rf [DEPTH];

  always_ff @(posedge clk)
    if (we) rf[waddr] <= wdata;

  always_comb
    for (int j = 0; j < 8; j++)
      rdata[j] = rf[{rgroup, 3'(j)}];
endmodule
