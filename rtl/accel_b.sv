// accel_b: Viterbi sequence-detection accelerator with trellis construction
// and traceback in hardware (the "AccelB" organisation).
//
// The accelerator sits beside a RISC-V core on its RoCC port. The core sends
// a six-command program (see accel_ctrl); the accelerator then fetches the
// HMM model (tprob, mu, sigma) and up to 512 events through the core's data
// cache, runs the trellis constructor one event every 18 cycles, keeps all
// trellis pointers on chip in the 32-KiB pointer buffer, traces the best
// path back in hardware at one state per cycle, stores the detected state
// sequence (one byte per state) to memory and reports completion on the
// response channel. Keeping the pointers on chip is the point of this
// organisation: a chunk of 512 events produces 32 KiB of pointers, twice the
// size of the core's data cache.
//
// Blocks: accel_ctrl (commands, memory engine, event sequencer), event_buffer
// (4 KiB), trellis_core (gather_trans, 64 x loop3_unit, 64 x post_unit,
// norm_unit), pointer_buffer (32 KiB, 8 banks), traceback_unit and
// state_buffer (384 B).
//
// Ports: the accelerator side of the four RoCC channels (cmd, resp,
// mem.req, mem.resp) as structs from dna_pkg, plus busy. Clock and a
// synchronous active-high reset. Run time for M events, with a memory that
// answers at once: about T+2N+1 cycles until the first event can start, then
// 18*M cycles of trellis construction, M cycles of traceback and ceil(M/8)
// stores.
//
// Lint note: the trellis core's alpha_cur output (its posterior registers,
// brought out for testing) is left unconnected here on purpose.
module accel_b
  import dna_pkg::*;
(
  input  logic        clk,
  input  logic        reset,
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  rocc_cmd_t   cmd,
  output logic        resp_valid,
  input  logic        resp_ready,
  output rocc_resp_t  resp,
  output logic        mem_req_valid,
  input  logic        mem_req_ready,
  output mem_req_t    mem_req,
  input  logic        mem_resp_valid,
  input  mem_resp_t   mem_resp,
  output logic        busy
);
  logic [TP_W-1:0]     tprob [T];
  logic [MU_W-1:0]     mu    [N];
  logic [SIGMA_W-1:0]  sigma [N];

  logic                ev_we, ev_ren;
  logic [8:0]          ev_waddr, ev_raddr;
  logic [EV_W-1:0]     ev_wdata, ev_rdata;

  logic                tc_clear, tc_start, tc_done, tc_busy;
  logic [X_W-1:0]      tc_x;
  logic [PTR_W-1:0]    tc_beta [N];
  logic [ST_W-1:0]     tc_minidx;
  score_t              tc_alpha [N];

  logic                pb_we, pb_ren;
  logic [8:0]          pb_waddr, pb_raddr;
  logic [ROW_W-1:0]    pb_wdata, pb_rdata;

  logic                tb_start, tb_done, tb_busy;
  logic [ST_W-1:0]     tb_minidx;
  logic [9:0]          tb_m_len;

  logic                sb_we;
  logic [8:0]          sb_waddr;
  logic [ST_W-1:0]     sb_wdata;
  logic [5:0]          sb_rgroup;
  logic [ST_W-1:0]     sb_rdata [8];

  accel_ctrl u_ctrl (
    .clk, .reset,
    .cmd_valid, .cmd_ready, .cmd,
    .resp_valid, .resp_ready, .resp,
    .mem_req_valid, .mem_req_ready, .mem_req,
    .mem_resp_valid, .mem_resp,
    .busy,
    .tprob, .mu, .sigma,
    .ev_we, .ev_waddr, .ev_wdata, .ev_ren, .ev_raddr, .ev_rdata,
    .tc_clear, .tc_start, .tc_x, .tc_done,
    .tc_beta, .tc_minidx,
    .pb_we, .pb_waddr, .pb_wdata,
    .tb_start, .tb_minidx, .tb_m_len, .tb_done,
    .sb_rgroup, .sb_rdata
  );

  event_buffer u_event_buffer (
    .clk,
    .we (ev_we), .waddr (ev_waddr), .wdata (ev_wdata),
    .ren (ev_ren), .raddr (ev_raddr), .rdata (ev_rdata)
  );

  trellis_core u_trellis (
    .clk, .reset,
    .clear     (tc_clear),
    .start     (tc_start),
    .x         (tc_x),
    .tprob, .mu, .sigma,
    .busy      (tc_busy),
    .done      (tc_done),
    .beta_row  (tc_beta),
    .minidx_n  (tc_minidx),
    .alpha_cur (tc_alpha)
  );

  pointer_buffer u_pointer_buffer (
    .clk,
    .we (pb_we), .waddr (pb_waddr), .wdata (pb_wdata),
    .ren (pb_ren), .raddr (pb_raddr), .rdata (pb_rdata)
  );

  traceback_unit u_traceback (
    .clk, .reset,
    .start    (tb_start),
    .minidx_n (tb_minidx),
    .m_len    (tb_m_len),
    .busy     (tb_busy),
    .done     (tb_done),
    .pb_ren, .pb_raddr, .pb_rdata,
    .sb_we, .sb_waddr, .sb_wdata
  );

  state_buffer u_state_buffer (
    .clk,
    .we (sb_we), .waddr (sb_waddr), .wdata (sb_wdata),
    .rgroup (sb_rgroup), .rdata (sb_rdata)
  );

  // The trellis core and the traceback unit never run at the same time.
  a_exclusive: assert property (@(posedge clk) disable iff (reset) !(tc_busy && tb_busy));
endmodule
