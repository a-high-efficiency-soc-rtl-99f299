// pointer_buffer: 32-KiB trellis pointer SRAM in eight banks.
//
// Each event of a chunk produces one row of N = 64 relative trellis pointers,
// one byte each (512 bits). Row m is spread over eight banks of 64 bits
// (pointers 8b..8b+7 in bank b), so a whole row is written and read in one
// cycle. 512 rows x 64 B = 32 KiB, as published; the bank split by pointer
// number is this design's choice. Pointer n sits in bits [8n+7:8n] of the
// row, so a right shift of the row by n bytes leaves pointer n in the low
// byte, which is how the traceback unit selects it.
//
// Ports: one synchronous write port and one synchronous read port; rdata is
// valid the cycle after ren.
module pointer_buffer
  import dna_pkg::*;
#(
  parameter int DEPTH = M_MAX
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [ROW_W-1:0]         wdata,
  input  logic                     ren,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [ROW_W-1:0]         rdata
);
  for (genvar b = 0; b < PB_BANKS; b++) begin : g_bank
    logic [PB_BANK_W-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (we)  mem[waddr] <= wdata[b*PB_BANK_W +: PB_BANK_W];
      if (ren) rdata[b*PB_BANK_W +: PB_BANK_W] <= mem[raddr];
    end
  end
endmodule
