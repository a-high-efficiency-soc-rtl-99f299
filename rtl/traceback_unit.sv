// traceback_unit: hardware pointer chase that turns trellis pointers into the
// detected state sequence.
//
// Starting from minidxN (the best final state, written as state_path[M-1]),
// the unit reads pointer rows m = M-2 down to 0 from the pointer buffer, last
// in first out. From each 64-byte row it selects the pointer of the current
// state by shifting the row right by prev_state bytes. That pointer is
// relative (0..20), so it is turned back into a global state index by the
// same three paths the published traceback hardware uses:
//   stay  : prev_state itself                                 (pointer 0)
//   step  : {0,16,32,48}[l] + prev_state/4  (state prefix)     (pointers 1..4)
//   skip  : {0,1,...,15}*4  + prev_state/16 (prefix/4)         (pointers 5..20)
// and a state multiplexer picks the one the pointer names. The result is
// written to state_path[m] and fed back as the next prev_state. The order of
// the 21 pointers is the one gather_trans uses. A pointer value above 20
// cannot be produced by the trellis constructor; it selects the stay path.
//
// Timing: start (one cycle) writes state_path[M-1] and issues the read of
// row M-2; then one state per cycle, so done pulses M cycles after start
// (one cycle after start when M = 1). The per-iteration latency is this
// design's choice; the source gives no cycle count for traceback.
//
// Lint note: only the low byte of the shifted pointer row is used; that is
// the point of the shift, so the upper bits are unused by design.
module traceback_unit
  import dna_pkg::*;
#(
  parameter int DEPTH = M_MAX
) (
  input  logic                       clk,
  input  logic                       reset,
  input  logic                       start,
  input  logic [ST_W-1:0]            minidx_n,
  input  logic [$clog2(DEPTH):0]     m_len,      // M, 1..DEPTH
  output logic                       busy,
  output logic                       done,
  // pointer buffer read port
  output logic                       pb_ren,
  output logic [$clog2(DEPTH)-1:0]   pb_raddr,
  input  logic [ROW_W-1:0]           pb_rdata,
  // state buffer write port
  output logic                       sb_we,
  output logic [$clog2(DEPTH)-1:0]   sb_waddr,
  output logic [ST_W-1:0]            sb_wdata
);
  localparam int AW = $clog2(DEPTH);

  logic [ST_W-1:0]  prev_state;
  logic [AW-1:0]    m_q;
  logic             active;

  // ---- desired pointer: right shift of the row by prev_state bytes --------
  logic [ROW_W-1:0]  shifted;
  logic [PTR_W-1:0]  desired;
  assign shifted = pb_rdata >> {prev_state, 3'b000};
  assign desired = shifted[PTR_W-1:0];

  // ---- candidate predecessors ----------------------------------------------
  logic [ST_W-1:0] prefix;        // prev_state / 4
  logic [ST_W-1:0] prefix2;       // prev_state / 16
  logic [ST_W-1:0] step_bank [4];
  logic [ST_W-1:0] skip_bank [16];
  logic [ST_W-1:0] next_state;

  assign prefix  = prev_state >> 2;
  assign prefix2 = prefix >> 2;
  always_comb begin
    for (int l = 0; l < 4; l++)
      step_bank[l] = ST_W'(l * (4 ** (K - 1))) + prefix;
    for (int j = 0; j < 16; j++)
      skip_bank[j] = ST_W'(j * (4 ** (K - 2))) + prefix2;
  end

  // ---- state multiplexer -----------------------------------------------------
  always_comb begin
    if (desired == 0)       next_state = prev_state;
    else if (desired <= 4)  next_state = step_bank[2'(desired - 1)];
    else if (desired <= 20) next_state = skip_bank[4'(desired - 5)];
    else                    next_state = prev_state;
  end

  // ---- control: m counts down from M-2 ---------------------------------------
  always_ff @(posedge clk) begin
    if (reset) begin
      active <= 1'b0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        prev_state <= minidx_n;
        m_q        <= AW'(m_len - 2);
        active     <= (m_len >= 2);
        done       <= (m_len < 2);
      end else if (active) begin
        prev_state <= next_state;
        m_q        <= m_q - 1'b1;
        if (m_q == 0) begin
          active <= 1'b0;
          done   <= 1'b1;
        end
      end
    end
  end

  assign busy = active;

  always_comb begin
    pb_ren   = 1'b0;
    pb_raddr = '0;
    sb_we    = 1'b0;
    sb_waddr = '0;
    sb_wdata = '0;
    if (start) begin
      sb_we    = 1'b1;
      sb_waddr = AW'(m_len - 1);
      sb_wdata = minidx_n;
      pb_ren   = (m_len >= 2);
      pb_raddr = AW'(m_len - 2);
    end else if (active) begin
      sb_we    = 1'b1;
      sb_waddr = m_q;
      sb_wdata = next_state;
      pb_ren   = (m_q != 0);
      pb_raddr = m_q - 1'b1;
    end
  end
endmodule
