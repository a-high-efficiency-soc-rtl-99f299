// accel_ctrl: RoCC command decoder, memory engine and event sequencer.
//
// The core programs the accelerator with six RoCC commands (funct7 0..5):
// reset, number of events M, the addresses of tprob[0:T-1], mu[0:N-1] and
// sigma[0:N-1], and finally the event address (rs1) with the result address
// (rs2), which starts the run. That six-step program follows the published
// design; the funct7 numbering, the one-value-per-64-bit-word memory layout
// of model and events and the result format are this design's choices.
//
// A run has four phases:
//   RUN    the memory engine issues T + 2N model loads followed by M event
//          loads. Responses may come back in any order: the tag says what
//          each one is and where it goes (model registers or event buffer,
//          with a valid bit per event). Overlapping with the loads, the event
//          sequencer runs one trellis event every 18 cycles: read x[m] (1),
//          start the trellis core (1), 14 cycles of trellis computation,
//          write the pointer row of event m to row m-1 of the pointer buffer
//          (1, skipped for m = 0) and advance (1). It waits only when event m
//          or the model has not arrived yet.
//   TRACE  the traceback unit runs from minidxN of the last event.
//   STORE  ceil(M/8) 64-bit stores write the state sequence to the result
//          address, one byte per state (state_path[8w+j] in byte j of word
//          w, bytes past M are zero); then the engine waits for every store
//          to be acknowledged.
//   RESP   if the starting command asked for a response (xd), the status
//          word M is returned to register rd. That is the completion signal.
//
// Handshakes: cmd, resp and mem_req are valid/ready; mem_resp has no ready
// (as in RoCC). A pending mem_req keeps its value until accepted. Reset is
// synchronous and active high.
//
// Lint note: only bits 11:0 of an event word carry the sample; the upper
// bits of ev_rdata are ignored by design.
module accel_ctrl
  import dna_pkg::*;
(
  input  logic                clk,
  input  logic                reset,
  // RoCC command / response
  input  logic                cmd_valid,
  output logic                cmd_ready,
  input  rocc_cmd_t           cmd,
  output logic                resp_valid,
  input  logic                resp_ready,
  output rocc_resp_t          resp,
  // RoCC memory port (to the D cache)
  output logic                mem_req_valid,
  input  logic                mem_req_ready,
  output mem_req_t            mem_req,
  input  logic                mem_resp_valid,
  input  mem_resp_t           mem_resp,
  output logic                busy,
  // model registers
  output logic [TP_W-1:0]     tprob [T],
  output logic [MU_W-1:0]     mu    [N],
  output logic [SIGMA_W-1:0]  sigma [N],
  // event buffer
  output logic                ev_we,
  output logic [8:0]          ev_waddr,
  output logic [EV_W-1:0]     ev_wdata,
  output logic                ev_ren,
  output logic [8:0]          ev_raddr,
  input  logic [EV_W-1:0]     ev_rdata,
  // trellis core
  output logic                tc_clear,
  output logic                tc_start,
  output logic [X_W-1:0]      tc_x,
  input  logic                tc_done,
  input  logic [PTR_W-1:0]    tc_beta [N],
  input  logic [ST_W-1:0]     tc_minidx,
  // pointer buffer write port
  output logic                pb_we,
  output logic [8:0]          pb_waddr,
  output logic [ROW_W-1:0]    pb_wdata,
  // traceback unit
  output logic                tb_start,
  output logic [ST_W-1:0]     tb_minidx,
  output logic [9:0]          tb_m_len,
  input  logic                tb_done,
  // state buffer group read
  output logic [5:0]          sb_rgroup,
  input  logic [ST_W-1:0]     sb_rdata [8]
);
  localparam int N_MODEL = T + 2 * N;

  typedef enum logic [2:0] {P_IDLE, P_RUN, P_TRACE, P_STORE, P_WAIT_ST, P_RESP} phase_e;
  typedef enum logic [2:0] {S_RD, S_START, S_BUSY, S_PWR, S_NEXT, S_END} seq_e;

  phase_e phase;
  seq_e   seq;

  // ---- program registers ------------------------------------------------------
  logic [9:0]       m_len;
  logic [PADDR-1:0] a_tprob, a_mu, a_sigma, a_ev, a_out;
  logic [4:0]       rd_q;
  logic             xd_q;

  // ---- memory engine state ------------------------------------------------------
  logic [10:0]      ld_cnt;       // loads issued
  logic [10:0]      ld_total;
  logic [7:0]       model_cnt;    // model words received
  logic [M_MAX-1:0] ev_valid;
  logic [6:0]       st_cnt, st_ack, st_total;

  // ---- sequencer state -----------------------------------------------------------
  logic [9:0]       m_q;

  logic cmd_fire, resp_fire, req_fire;
  assign cmd_ready = (phase == P_IDLE);
  assign cmd_fire  = cmd_valid && cmd_ready;
  assign resp_fire = resp_valid && resp_ready;
  assign req_fire  = mem_req_valid && mem_req_ready;
  assign busy      = (phase != P_IDLE);

  logic [9:0] m_req;
  assign m_req = (cmd.rs1 > XLEN'(M_MAX)) ? 10'(M_MAX) : 10'(cmd.rs1);

  // ---- load / store request generation ----------------------------------------
  logic [10:0] ev_idx_w;
  assign ev_idx_w = ld_cnt - 11'(N_MODEL);

  always_comb begin
    mem_req_valid = 1'b0;
    mem_req       = '0;
    mem_req.size  = 2'd3;
    if (phase == P_RUN && ld_cnt < ld_total) begin
      mem_req_valid = 1'b1;
      mem_req.cmd   = M_XRD;
      if (ld_cnt < 11'(T)) begin
        mem_req.addr = a_tprob + PADDR'({ld_cnt, 3'b000});
        mem_req.tag  = {TAG_TPROB, 9'(ld_cnt)};
      end else if (ld_cnt < 11'(T + N)) begin
        mem_req.addr = a_mu + PADDR'({ld_cnt - 11'(T), 3'b000});
        mem_req.tag  = {TAG_MU, 9'(ld_cnt - 11'(T))};
      end else if (ld_cnt < 11'(N_MODEL)) begin
        mem_req.addr = a_sigma + PADDR'({ld_cnt - 11'(T + N), 3'b000});
        mem_req.tag  = {TAG_SIGMA, 9'(ld_cnt - 11'(T + N))};
      end else begin
        mem_req.addr = a_ev + PADDR'({ev_idx_w, 3'b000});
        mem_req.tag  = {TAG_EVENT, 9'(ev_idx_w)};
      end
    end else if (phase == P_STORE) begin
      mem_req_valid = 1'b1;
      mem_req.cmd   = M_XWR;
      mem_req.addr  = a_out + PADDR'({st_cnt, 3'b000});
      mem_req.tag   = {TAG_STORE, 2'b00, st_cnt};
      for (int j = 0; j < 8; j++)
        if ({st_cnt, 3'(j)} < m_len)
          mem_req.data[8*j +: 8] = 8'(sb_rdata[j]);
    end
  end
  assign sb_rgroup = 6'(st_cnt);

  // ---- memory responses -------------------------------------------------------------
  tag_kind_e  rkind;
  logic [8:0] ridx;
  assign rkind = tag_kind_e'(mem_resp.tag[TAG_W-1 -: 3]);
  assign ridx  = mem_resp.tag[8:0];

  assign ev_we    = mem_resp_valid && mem_resp.has_data && rkind == TAG_EVENT;
  assign ev_waddr = ridx;
  assign ev_wdata = mem_resp.data;

  always_ff @(posedge clk) begin
    if (mem_resp_valid && mem_resp.has_data) begin
      case (rkind)
        TAG_TPROB: tprob[5'(ridx)] <= TP_W'(mem_resp.data);
        TAG_MU:    mu[6'(ridx)]    <= MU_W'(mem_resp.data);
        TAG_SIGMA: sigma[6'(ridx)] <= SIGMA_W'(mem_resp.data);
        default: ;
      endcase
    end
  end

  // ---- event sequencer outputs ----------------------------------------------------
  logic model_ready, ev_ok;
  assign model_ready = (model_cnt == 8'(N_MODEL));
  assign ev_ok       = model_ready && ev_valid[9'(m_q)];

  assign ev_ren   = (phase == P_RUN) && (seq == S_RD) && ev_ok;
  assign ev_raddr = 9'(m_q);
  assign tc_start = (phase == P_RUN) && (seq == S_START);
  assign tc_x     = ev_rdata[X_W-1:0];
  assign tc_clear = cmd_fire && cmd.funct == F_RUN;
  assign pb_we    = (phase == P_RUN) && (seq == S_PWR) && (m_q != 0);
  assign pb_waddr = 9'(m_q - 1'b1);
  always_comb
    for (int n = 0; n < N; n++) pb_wdata[n*PTR_W +: PTR_W] = tc_beta[n];

  assign tb_start  = (phase == P_TRACE) && (seq == S_END);
  assign tb_minidx = tc_minidx;
  assign tb_m_len  = m_len;

  assign resp_valid = (phase == P_RESP) && xd_q;
  assign resp.rd    = rd_q;
  assign resp.data  = XLEN'(m_len);

  // ---- main state machine -------------------------------------------------------------
  always_ff @(posedge clk) begin
    if (reset) begin
      phase     <= P_IDLE;
      seq       <= S_RD;
      m_len     <= '0;
      a_tprob   <= '0;
      a_mu      <= '0;
      a_sigma   <= '0;
      a_ev      <= '0;
      a_out     <= '0;
      rd_q      <= '0;
      xd_q      <= 1'b0;
      ld_cnt    <= '0;
      ld_total  <= '0;
      model_cnt <= '0;
      ev_valid  <= '0;
      st_cnt    <= '0;
      st_ack    <= '0;
      st_total  <= '0;
      m_q       <= '0;
    end else begin
      if (req_fire && phase == P_RUN)   ld_cnt <= ld_cnt + 1'b1;
      if (req_fire && phase == P_STORE) st_cnt <= st_cnt + 1'b1;
      if (mem_resp_valid) begin
        if (mem_resp.has_data && rkind inside {TAG_TPROB, TAG_MU, TAG_SIGMA})
          model_cnt <= model_cnt + 1'b1;
        if (mem_resp.has_data && rkind == TAG_EVENT)
          ev_valid[ridx] <= 1'b1;
        if (!mem_resp.has_data && rkind == TAG_STORE)
          st_ack <= st_ack + 1'b1;
      end

      unique case (phase)
        P_IDLE: if (cmd_fire) begin
          unique case (funct_e'(cmd.funct))
            F_RESET: begin
              m_len   <= '0;
              a_tprob <= '0;
              a_mu    <= '0;
              a_sigma <= '0;
              a_ev    <= '0;
              a_out   <= '0;
            end
            F_SET_M: m_len   <= m_req;
            F_TPROB: a_tprob <= PADDR'(cmd.rs1);
            F_MU:    a_mu    <= PADDR'(cmd.rs1);
            F_SIGMA: a_sigma <= PADDR'(cmd.rs1);
            F_RUN: begin
              a_ev      <= PADDR'(cmd.rs1);
              a_out     <= PADDR'(cmd.rs2);
              rd_q      <= cmd.rd;
              xd_q      <= cmd.xd;
              ld_cnt    <= '0;
              ld_total  <= 11'(N_MODEL) + 11'(m_len);
              model_cnt <= '0;
              ev_valid  <= '0;
              st_cnt    <= '0;
              st_ack    <= '0;
              st_total  <= 7'((m_len + 10'd7) >> 3);
              m_q       <= '0;
              seq       <= S_RD;
              phase     <= (m_len == 0) ? P_RESP : P_RUN;
            end
            default: ;
          endcase
        end

        P_RUN: begin
          unique case (seq)
            S_RD:    if (ev_ok) seq <= S_START;
            S_START: seq <= S_BUSY;
            S_BUSY:  if (tc_done) seq <= S_PWR;
            S_PWR:   seq <= S_NEXT;
            S_NEXT: begin
              if (m_q == m_len - 1'b1) begin
                seq   <= S_END;
                phase <= P_TRACE;
              end else begin
                m_q <= m_q + 1'b1;
                seq <= S_RD;
              end
            end
            default: seq <= S_RD;
          endcase
        end

        P_TRACE: begin
          // S_END: start pulse issued this cycle; S_BUSY: wait for the unit
          if (seq == S_END) seq <= S_BUSY;
          else if (tb_done) phase <= P_STORE;
        end

        P_STORE: if (req_fire && st_cnt == st_total - 1'b1) phase <= P_WAIT_ST;

        P_WAIT_ST: if (st_ack == st_total) phase <= P_RESP;

        P_RESP: if (!xd_q || resp_fire) phase <= P_IDLE;

        default: phase <= P_IDLE;
      endcase
    end
  end

  // ---- handshake rules ------------------------------------------------------------------
  a_req_stable: assert property (@(posedge clk) disable iff (reset)
    mem_req_valid && !mem_req_ready |=> mem_req_valid && $stable(mem_req));
  a_resp_stable: assert property (@(posedge clk) disable iff (reset)
    resp_valid && !resp_ready |=> resp_valid && $stable(resp));
  a_no_start_busy: assert property (@(posedge clk) disable iff (reset)
    tc_start |-> seq == S_START);
endmodule
