// tb_accel_b: end-to-end test of the sequence-detection accelerator.
//
// Plays the core: sends the six-command program over RoCC and serves the
// memory port with a behavioural memory that adds random latency, reorders
// responses and applies backpressure. For each chunk the detected state
// sequence stored to memory is compared word by word with a behavioural
// Viterbi reference (trellis construction and traceback) computed from the
// same synthetic model and events. The accelerator is used at its full,
// published size (N = 64, T = 21, up to M = 512 events per chunk); chunks of
// 512, 37, 1, 2 and again 512 events run back to back, with reset commands
// in between. The last, undisturbed 512-event chunk is timed from the start
// command to the response and must beat 77 cycles per event, the published
// system rate of 2.6 Mevents/s at 200 MHz.
//
// The 18-cycle event period and the six-command program follow the
// published design; the memory layout, the command numbering and the
// synthetic model are this design's choices.
//
// Timing checks: every trellis event that did not have to wait for its
// input takes exactly 18 cycles from one start to the next, and traceback of
// M events takes M cycles. Mechanisms that must each occur at least once:
// loading overlapped with computation, a sequencer stall on a missing event,
// reordered memory responses, memory backpressure, a held response, stay,
// step and skip pointers in traceback, a non-zero normalisation, a partly
// filled last result word, a one-event chunk and the reset command.
module tb_accel_b;
  import dna_pkg::*;
  import viterbi_ref_pkg::*;

  localparam longint A_TPROB = 64'h0000;
  localparam longint A_MU    = 64'h0100;
  localparam longint A_SIGMA = 64'h0400;
  localparam longint A_EV    = 64'h0800;
  localparam longint A_OUT   = 64'h2000;

  logic clk = 1'b0;
  logic reset = 1'b1;
  always #5 clk = ~clk;

  logic       cmd_valid = 1'b0, cmd_ready;
  rocc_cmd_t  cmd;
  logic       resp_valid, resp_ready = 1'b0;
  rocc_resp_t resp;
  logic       mem_req_valid, mem_req_ready, mem_req_ready_m;
  mem_req_t   mem_req;
  logic       mem_resp_valid;
  mem_resp_t  mem_resp;
  logic       busy;
  logic       hold_mem = 1'b0;

  accel_b dut (
    .clk, .reset,
    .cmd_valid, .cmd_ready, .cmd,
    .resp_valid, .resp_ready, .resp,
    .mem_req_valid, .mem_req_ready, .mem_req,
    .mem_resp_valid, .mem_resp,
    .busy
  );

  assign mem_req_ready = mem_req_ready_m && !hold_mem;

  rocc_mem_model #(.WORDS(2048), .MAX_LAT(6), .BP_PCT(20)) u_mem (
    .clk, .reset,
    .req_valid  (mem_req_valid && !hold_mem),
    .req_ready  (mem_req_ready_m),
    .req        (mem_req),
    .resp_valid (mem_resp_valid),
    .resp       (mem_resp)
  );

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ---- mechanism counters -------------------------------------------------------
  int ev_overlap = 0, ev_stall = 0, tb_stay = 0, tb_step = 0, tb_skip = 0;
  int norm_nonzero = 0, resp_held = 0, partial_word = 0, one_event = 0, reset_cmds = 0;
  int period_ok = 0, period_bad = 0;
  int since_start = -1;
  bit waited = 0;

  always @(posedge clk) if (!reset) begin
    // overlap: a trellis event starts while loads are still being issued
    if (dut.tc_start && dut.u_ctrl.ld_cnt < dut.u_ctrl.ld_total) ev_overlap++;
    // stall: sequencer waiting on an event in the middle of a chunk
    if (dut.u_ctrl.phase == dut.u_ctrl.P_RUN && dut.u_ctrl.seq == dut.u_ctrl.S_RD &&
        !dut.u_ctrl.ev_ok) begin
      waited = 1;
      if (dut.u_ctrl.m_q != 0) ev_stall++;
    end
    if (dut.u_trellis.norm_valid && dut.u_trellis.minprob != 0) norm_nonzero++;
    if (dut.u_traceback.active) begin
      if (dut.u_traceback.desired == 0) tb_stay++;
      else if (dut.u_traceback.desired <= 4) tb_step++;
      else tb_skip++;
    end
    if (resp_valid && !resp_ready) resp_held++;
    // event period
    if (dut.tc_start) begin
      if (since_start > 0 && !waited) begin
        if (since_start == 18) period_ok++;
        else begin
          period_bad++;
          $display("FAIL: event period %0d cycles", since_start);
        end
      end
      since_start = 1;
      waited = 0;
    end else if (since_start > 0) since_start++;
    if (dut.u_ctrl.phase != dut.u_ctrl.P_RUN) since_start = -1;
  end

  // traceback duration
  longint tb_t0;
  int     tb_cycles;
  always @(posedge clk) begin
    if (dut.tb_start) tb_t0 = cyc;
    if (dut.tb_done)  tb_cycles = int'(cyc - tb_t0);
  end

  // ---- command driver -------------------------------------------------------------
  task automatic send(input funct_e f, input longint rs1, input longint rs2, input bit xd);
    cmd.funct = f; cmd.rs1 = rs1; cmd.rs2 = rs2; cmd.rd = 5'd10; cmd.xd = xd;
    cmd_valid = 1'b1;
    do @(posedge clk); while (!cmd_ready);
    #1 cmd_valid = 1'b0;
  endtask

  int unsigned last_run_cycles;

  task automatic run_chunk(input int M, input int noise, input bit hold_mid, input bit slow_resp);
    workload w = new;
    viterbi  v = new;
    int      wait_cnt;
    longint t0;
    w.make_model();
    w.make_events(M, noise);
    for (int t = 0; t < NT; t++) u_mem.mem[(A_TPROB >> 3) + t] = 64'(w.tprob[t]);
    for (int n = 0; n < NS; n++) u_mem.mem[(A_MU >> 3) + n]    = 64'(w.mu[n]);
    for (int n = 0; n < NS; n++) u_mem.mem[(A_SIGMA >> 3) + n] = 64'(w.sigma[n]);
    for (int m = 0; m < M; m++)  u_mem.mem[(A_EV >> 3) + m]    = {$urandom, 20'h0, 12'(w.x[m])};
    for (int i = 0; i < 65; i++) u_mem.mem[(A_OUT >> 3) + i]   = '1;
    v.run(M, w.x, w.tprob, w.mu, w.sigma);

    send(F_SET_M, M, 0, 0);
    send(F_TPROB, A_TPROB, 0, 0);
    send(F_MU, A_MU, 0, 0);
    send(F_SIGMA, A_SIGMA, 0, 0);
    send(F_RUN, A_EV, A_OUT, 1);
    t0 = cyc;
    if (hold_mid) begin
      wait (dut.u_ctrl.ev_valid[10]);
      @(posedge clk) hold_mem = 1'b1;
      repeat (600) @(posedge clk);
      hold_mem = 1'b0;
    end
    wait_cnt = 0;
    while (!resp_valid) @(posedge clk);
    last_run_cycles = int'(cyc - t0);
    $display("chunk M=%0d: %0d cycles from run command to response", M, last_run_cycles);
    if (slow_resp) repeat (3) @(posedge clk);
    #1 resp_ready = 1'b1;
    @(posedge clk);
    check(resp.rd == 5'd10 && resp.data == 64'(M), $sformatf("response rd=%0d data=%0d", resp.rd, resp.data));
    #1 resp_ready = 1'b0;
    @(posedge clk);
    check(!busy, "idle after response");

    // compare stored state bytes with the reference path
    for (int wd = 0; wd < (M + 7) / 8; wd++) begin
      logic [63:0] got, exp;
      got = u_mem.mem[(A_OUT >> 3) + wd];
      exp = '0;
      for (int j = 0; j < 8; j++)
        if (8 * wd + j < M) exp[8*j +: 8] = 8'(v.path[8 * wd + j]);
      check(got == exp, $sformatf("M=%0d word %0d got %h exp %h", M, wd, got, exp));
    end
    check(u_mem.mem[(A_OUT >> 3) + (M + 7) / 8] == '1, "no store past the result");
    check(tb_cycles == M, $sformatf("traceback took %0d cycles for M=%0d", tb_cycles, M));
    if (M % 8 != 0) partial_word++;
    if (M == 1) one_event++;
    begin
      int agree = 0;
      for (int m = 0; m < M; m++) if (v.path[m] == w.truth[m]) agree++;
      $display("chunk M=%0d: %0d of %0d states equal to the simulated truth", M, agree, M);
    end
  endtask

  initial begin
    repeat (4) @(posedge clk);
    #1 reset = 1'b0;
    @(posedge clk);
    send(F_RESET, 0, 0, 0);
    reset_cmds++;
    run_chunk(512, 60, 1, 1);
    run_chunk(37, 150, 0, 0);
    send(F_RESET, 0, 0, 0);
    reset_cmds++;
    run_chunk(1, 60, 0, 0);
    run_chunk(2, 60, 0, 0);
    // an undisturbed 512-event chunk: the whole run must beat 2.6 Mevents/s
    // at 200 MHz, i.e. 77 cycles per event
    run_chunk(512, 60, 0, 0);
    check(last_run_cycles < 77 * 512, $sformatf("512 events in %0d cycles", last_run_cycles));

    check(period_bad == 0 && period_ok > 500, $sformatf("18-cycle events: %0d ok, %0d wrong", period_ok, period_bad));
    $display("mechanisms: overlap=%0d stall=%0d reorder=%0d backpressure=%0d resp_held=%0d",
             ev_overlap, ev_stall, u_mem.n_reordered, u_mem.n_backpressure, resp_held);
    $display("            stay=%0d step=%0d skip=%0d norm=%0d partial_word=%0d one_event=%0d reset=%0d",
             tb_stay, tb_step, tb_skip, norm_nonzero, partial_word, one_event, reset_cmds);
    check(ev_overlap > 0, "loading overlapped with trellis construction");
    check(ev_stall > 0, "sequencer stalled on a missing event");
    check(u_mem.n_reordered > 0, "memory responses reordered");
    check(u_mem.n_backpressure > 0, "memory backpressure");
    check(resp_held > 0, "response held by the core");
    check(tb_stay > 0, "stay pointer traced");
    check(tb_step > 0, "step pointer traced");
    check(tb_skip > 0, "skip pointer traced");
    check(norm_nonzero > 0, "normalisation subtracted a non-zero minimum");
    check(partial_word > 0, "partly filled last result word");
    check(one_event > 0, "one-event chunk");
    check(reset_cmds > 0, "reset command");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (150000) @(posedge clk);
    $display("phase=%0d seq=%0d m=%0d ld=%0d/%0d model=%0d busy=%0d", dut.u_ctrl.phase, dut.u_ctrl.seq, dut.u_ctrl.m_q, dut.u_ctrl.ld_cnt, dut.u_ctrl.ld_total, dut.u_ctrl.model_cnt, busy);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
