// tb_chunked_decoding: accuracy of chunked detection, run on the accelerator.
//
// A long event stream (L = 1024 events) is too long for one run of the
// accelerator, which holds at most 512 events. The core therefore cuts it
// into chunks of M events, runs the accelerator on each chunk and splices
// the detected state sequences back together. This testbench plays that
// core for chunk sizes 512 and 32 at three noise levels, on one synthetic
// 3-mer model. For every chunk the six-command program is sent again with
// the event address advanced by the chunk's offset.
//
// Checks:
//   * every stored result word equals the software Viterbi reference run on
//     the same chunk (the hardware must match the software exactly);
//   * at the lowest noise level, the spliced output with chunks of 32 agrees
//     with the true state walk for more than 90 % of the events (the
//     published claim for chunk size 32 is "above 90 %" accuracy).
// It prints, per noise level, the agreement with the truth of the unchunked
// software decoder and of the spliced hardware output for both chunk sizes.
//
// The chunked use and the chunk sizes follow the published evaluation; the
// event generator, its noise levels and the accuracy measure (agreement of
// detected and true k-mer states) are this testbench's own.
module tb_chunked_decoding;
  import dna_pkg::*;
  import viterbi_ref_pkg::*;

  localparam int     L       = 1024;
  localparam longint A_TPROB = 64'h0000;
  localparam longint A_MU    = 64'h0100;
  localparam longint A_SIGMA = 64'h0400;
  localparam longint A_EV    = 64'h0800;
  localparam longint A_OUT   = 64'h2C00;

  logic clk = 1'b0;
  logic reset = 1'b1;
  always #5 clk = ~clk;

  logic       cmd_valid = 1'b0, cmd_ready;
  rocc_cmd_t  cmd;
  logic       resp_valid, resp_ready = 1'b0;
  rocc_resp_t resp;
  logic       mem_req_valid, mem_req_ready;
  mem_req_t   mem_req;
  logic       mem_resp_valid;
  mem_resp_t  mem_resp;
  logic       busy;

  accel_b dut (
    .clk, .reset,
    .cmd_valid, .cmd_ready, .cmd,
    .resp_valid, .resp_ready, .resp,
    .mem_req_valid, .mem_req_ready, .mem_req,
    .mem_resp_valid, .mem_resp,
    .busy
  );

  rocc_mem_model #(.WORDS(2048), .MAX_LAT(4), .BP_PCT(10)) u_mem (
    .clk, .reset,
    .req_valid  (mem_req_valid),
    .req_ready  (mem_req_ready),
    .req        (mem_req),
    .resp_valid (mem_resp_valid),
    .resp       (mem_resp)
  );

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  task automatic send(input funct_e f, input longint rs1, input longint rs2, input bit xd);
    cmd.funct = f; cmd.rs1 = rs1; cmd.rs2 = rs2; cmd.rd = 5'd10; cmd.xd = xd;
    cmd_valid = 1'b1;
    do @(posedge clk); while (!cmd_ready);
    #1 cmd_valid = 1'b0;
  endtask

  // Runs the accelerator on events [off, off+M) and returns the detected
  // states in det[off +: M]; checks them against the software reference.
  task automatic run_chunk(input workload w, input int off, input int M, inout int det []);
    viterbi v = new;
    int     xc [];
    xc = new[M];
    for (int m = 0; m < M; m++) xc[m] = w.x[off + m];
    v.run(M, xc, w.tprob, w.mu, w.sigma);

    send(F_RESET, 0, 0, 0);
    send(F_SET_M, M, 0, 0);
    send(F_TPROB, A_TPROB, 0, 0);
    send(F_MU, A_MU, 0, 0);
    send(F_SIGMA, A_SIGMA, 0, 0);
    send(F_RUN, A_EV + 8 * off, A_OUT + off, 1);
    while (!resp_valid) @(posedge clk);
    #1 resp_ready = 1'b1;
    @(posedge clk);
    check(resp.data == 64'(M), $sformatf("response data %0d for M=%0d", resp.data, M));
    #1 resp_ready = 1'b0;

    // chunk offsets are multiples of 8, so the result starts on a word
    for (int m = 0; m < M; m++) begin
      logic [63:0] wd;
      wd = u_mem.mem[((A_OUT + off) >> 3) + m / 8];
      det[off + m] = int'(wd[8 * (m % 8) +: 8]);
      check(det[off + m] == v.path[m],
            $sformatf("chunk at %0d (M=%0d) state %0d: got %0d exp %0d", off, M, m, det[off + m], v.path[m]));
    end
  endtask

  initial begin
    workload w = new;
    int      noise_lv [3] = '{20, 60, 100};
    w.make_model();

    repeat (4) @(posedge clk);
    #1 reset = 1'b0;
    @(posedge clk);
    for (int t = 0; t < NT; t++) u_mem.mem[(A_TPROB >> 3) + t] = 64'(w.tprob[t]);
    for (int n = 0; n < NS; n++) u_mem.mem[(A_MU >> 3) + n]    = 64'(w.mu[n]);
    for (int n = 0; n < NS; n++) u_mem.mem[(A_SIGMA >> 3) + n] = 64'(w.sigma[n]);

    foreach (noise_lv[i]) begin
      viterbi full;
      int     det512 [], det32 [];
      int     ok_full, ok512, ok32;
      full = new;
      ok_full = 0; ok512 = 0; ok32 = 0;
      det512 = new[L];
      det32  = new[L];
      w.make_events(L, noise_lv[i]);
      for (int m = 0; m < L; m++) u_mem.mem[(A_EV >> 3) + m] = 64'(w.x[m]);
      full.run(L, w.x, w.tprob, w.mu, w.sigma);

      for (int off = 0; off < L; off += 512) run_chunk(w, off, 512, det512);
      for (int off = 0; off < L; off += 32)  run_chunk(w, off, 32, det32);

      for (int m = 0; m < L; m++) begin
        if (full.path[m] == w.truth[m]) ok_full++;
        if (det512[m]    == w.truth[m]) ok512++;
        if (det32[m]     == w.truth[m]) ok32++;
      end
      $display("noise +-%0d: agreement with truth  unchunked %0.1f%%  chunks of 512 %0.1f%%  chunks of 32 %0.1f%%",
               noise_lv[i], 100.0 * ok_full / L, 100.0 * ok512 / L, 100.0 * ok32 / L);
      if (i == 0) check(ok32 * 10 > L * 9, $sformatf("chunk-32 accuracy %0d of %0d", ok32, L));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
