// tb_accel_ctrl: checks the command decoder, memory engine and sequencer on
// their own.
//
// The datapath around the controller is replaced by simple stand-ins: an
// event buffer array, a trellis stand-in that answers 14 cycles after each
// start with a pointer row and a minidxN derived from the event sample, a
// traceback stand-in that finishes M cycles after its start, and a state
// array for the store phase. The memory is the behavioural RoCC memory with
// random latency, reordering and backpressure. Checks: the model registers
// receive tprob, mu and sigma; events reach the trellis in order with the
// right sample; each pointer row goes to row m-1 and only for m > 0; the
// traceback starts from the last event's minidxN with the right M; the
// stored words pack the states one byte each with zero padding; the
// response carries rd and M; non-waiting events take 18 cycles.
module tb_accel_ctrl;
  import dna_pkg::*;

  logic clk = 1'b0, reset = 1'b1;
  always #5 clk = ~clk;

  logic cmd_valid = 0, cmd_ready, resp_valid, resp_ready = 1, busy;
  rocc_cmd_t cmd;
  rocc_resp_t resp;
  logic mem_req_valid, mem_req_ready, mem_resp_valid;
  mem_req_t mem_req;
  mem_resp_t mem_resp;
  logic [TP_W-1:0] tprob [T];
  logic [MU_W-1:0] mu [N];
  logic [SIGMA_W-1:0] sigma [N];
  logic ev_we, ev_ren, tc_clear, tc_start, tc_done = 0, pb_we, tb_start, tb_done = 0;
  logic [8:0] ev_waddr, ev_raddr, pb_waddr;
  logic [63:0] ev_wdata, ev_rdata;
  logic [X_W-1:0] tc_x;
  logic [PTR_W-1:0] tc_beta [N];
  logic [5:0] tc_minidx, tb_minidx, sb_rgroup;
  logic [ROW_W-1:0] pb_wdata;
  logic [9:0] tb_m_len;
  logic [5:0] sb_rdata [8];

  accel_ctrl dut (.*);

  rocc_mem_model #(.WORDS(2048), .MAX_LAT(5), .BP_PCT(25)) u_mem (
    .clk, .reset, .req_valid (mem_req_valid), .req_ready (mem_req_ready), .req (mem_req),
    .resp_valid (mem_resp_valid), .resp (mem_resp));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // ---- stand-ins ----------------------------------------------------------------
  logic [63:0] evmem [512];
  always_ff @(posedge clk) begin
    if (ev_we)  evmem[ev_waddr] <= ev_wdata;
    if (ev_ren) ev_rdata <= evmem[ev_raddr];
  end

  int      tc_cnt = -1;
  int      ev_seen = 0;
  int      xs [512];
  logic [X_W-1:0] x_cur;
  always @(posedge clk) begin
    tc_done <= 1'b0;
    if (tc_start) begin tc_cnt = 0; x_cur = tc_x; xs[ev_seen] = int'(tc_x); ev_seen++; end
    else if (tc_cnt >= 0) begin
      tc_cnt++;
      if (tc_cnt == 13) begin
        tc_done <= 1'b1;
        for (int n = 0; n < N; n++) tc_beta[n] <= PTR_W'((int'(x_cur) + n) % 21);
        tc_minidx <= 6'(x_cur % 64);
        tc_cnt = -1;
      end
    end
  end

  int pb_writes = 0;
  always @(posedge clk) if (pb_we) begin
    pb_writes++;
    check(int'(pb_waddr) == ev_seen - 2, $sformatf("pointer row address %0d after event %0d", pb_waddr, ev_seen - 1));
    for (int n = 0; n < N; n++)
      if (pb_wdata[8*n +: 8] != 8'((int'(x_cur) + n) % 21)) begin
        check(0, $sformatf("pointer row content, event %0d", ev_seen - 1));
        break;
      end
  end

  int tb_cnt = -1, tb_len;
  int tb_starts = 0;
  logic [5:0] st [512];
  always @(posedge clk) begin
    tb_done <= 1'b0;
    if (tb_start) begin
      tb_len = int'(tb_m_len); tb_starts++;
      if (tb_len == 1) tb_done <= 1'b1; else tb_cnt = 0;
    end
    else if (tb_cnt >= 0) begin
      tb_cnt++;
      if (tb_cnt == tb_len - 1) begin tb_done <= 1'b1; tb_cnt = -1; end
    end
  end
  always_comb for (int j = 0; j < 8; j++) sb_rdata[j] = st[{sb_rgroup, 3'(j)}];

  // event period
  int since = -1, period_ok = 0, period_bad = 0;
  bit waited = 0;
  always @(posedge clk) if (!reset) begin
    if (dut.phase == dut.P_RUN && dut.seq == dut.S_RD && !dut.ev_ok) waited = 1;
    if (tc_start) begin
      if (since > 0 && !waited) begin if (since == 18) period_ok++; else period_bad++; end
      since = 1; waited = 0;
    end else if (since > 0) since++;
    if (dut.phase != dut.P_RUN) since = -1;
    if (!busy) check(!mem_req_valid, "no memory request while idle");
  end

  task automatic send(input funct_e f, input longint rs1, input longint rs2, input bit xd);
    cmd.funct = f; cmd.rs1 = rs1; cmd.rs2 = rs2; cmd.rd = 5'd7; cmd.xd = xd;
    cmd_valid = 1'b1;
    do @(posedge clk); while (!cmd_ready);
    #1 cmd_valid = 1'b0;
  endtask

  task automatic run(input int M);
    int tp [T], mv [N], sv [N], xv [512];
    for (int t = 0; t < T; t++) begin tp[t] = $urandom_range(0, 65535); u_mem.mem[16'h000 + t] = {$urandom, 16'h0, 16'(tp[t])}; end
    for (int n = 0; n < N; n++) begin mv[n] = $urandom_range(0, 4095); u_mem.mem[16'h020 + n] = 64'(mv[n]); end
    for (int n = 0; n < N; n++) begin sv[n] = $urandom_range(0, 65535); u_mem.mem[16'h080 + n] = 64'(sv[n]); end
    for (int m = 0; m < M; m++) begin xv[m] = $urandom_range(0, 4095); u_mem.mem[16'h100 + m] = {$urandom, 20'h0, 12'(xv[m])}; end
    for (int i = 0; i < 65; i++) u_mem.mem[16'h400 + i] = '1;
    for (int i = 0; i < 512; i++) st[i] = 6'($urandom);
    ev_seen = 0; pb_writes = 0; tb_starts = 0;
    send(F_RESET, 0, 0, 0);
    send(F_SET_M, M, 0, 0);
    send(F_TPROB, 64'h0000, 0, 0);
    send(F_MU, 64'h0100, 0, 0);
    send(F_SIGMA, 64'h0400, 0, 0);
    send(F_RUN, 64'h0800, 64'h2000, 1);
    while (!(resp_valid && resp_ready)) @(posedge clk);
    check(resp.rd == 5'd7 && resp.data == 64'(M), "response");
    @(posedge clk);
    #1;
    check(!busy, "idle after response");
    for (int t = 0; t < T; t++) check(tprob[t] == TP_W'(tp[t]), $sformatf("tprob[%0d]", t));
    for (int n = 0; n < N; n++) check(mu[n] == MU_W'(mv[n]) && sigma[n] == SIGMA_W'(sv[n]), $sformatf("mu/sigma[%0d]", n));
    check(ev_seen == M, $sformatf("%0d events started, exp %0d", ev_seen, M));
    for (int m = 0; m < M; m++) check(xs[m] == xv[m], $sformatf("event %0d sample", m));
    check(pb_writes == M - 1, $sformatf("%0d pointer rows written for M=%0d", pb_writes, M));
    check(tb_starts == 1, "one traceback start");
    for (int w = 0; w < (M + 7) / 8; w++) begin
      logic [63:0] e;
      e = '0;
      for (int j = 0; j < 8; j++) if (8 * w + j < M) e[8*j +: 8] = 8'(st[8*w+j]);
      check(u_mem.mem[16'h400 + w] == e, $sformatf("result word %0d", w));
    end
    check(u_mem.mem[16'h400 + (M + 7) / 8] == '1, "nothing stored past the result");
  endtask

  // traceback start values
  always @(posedge clk) if (tb_start) begin
    check(tb_minidx == 6'(x_cur % 64), "traceback starts from the last minidxN");
    check(tb_m_len == dut.m_len, "traceback length");
  end

  initial begin
    repeat (3) @(negedge clk);
    reset = 1'b0;
    run(20); run(9); run(1); run(512);
    check(period_bad == 0 && period_ok > 400, $sformatf("18-cycle events %0d ok %0d wrong", period_ok, period_bad));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    $display("FAIL: watchdog phase=%0d seq=%0d m=%0d ev_seen=%0d ld=%0d", dut.phase, dut.seq, dut.m_q, ev_seen, dut.ld_cnt);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
