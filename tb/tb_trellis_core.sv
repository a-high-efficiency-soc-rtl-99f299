// tb_trellis_core: checks the trellis construction engine event by event.
//
// Loads a synthetic model, clears the posteriors and runs 40 events with a
// start every 18 cycles. After each event it compares the 64 relative
// pointers, minidxN and all 64 normalised posteriors with the behavioural
// Viterbi reference, and checks that done comes 14 cycles after start.
module tb_trellis_core;
  import dna_pkg::*;
  import viterbi_ref_pkg::*;

  localparam int M = 40;

  logic clk = 1'b0, reset = 1'b1;
  always #5 clk = ~clk;
  logic clear = 1'b0, start = 1'b0, busy, done;
  logic [X_W-1:0] x;
  logic [TP_W-1:0] tprob [T];
  logic [MU_W-1:0] mu [N];
  logic [SIGMA_W-1:0] sigma [N];
  logic [PTR_W-1:0] beta_row [N];
  logic [ST_W-1:0] minidx_n;
  score_t alpha_cur [N];

  trellis_core dut (.clk, .reset, .clear, .start, .x, .tprob, .mu, .sigma,
                    .busy, .done, .beta_row, .minidx_n, .alpha_cur);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // single-event reference step on the reference's own posteriors
  longint ra [N];

  initial begin
    workload w = new;
    int p [21];
    w.make_model();
    w.make_events(M, 100);
    for (int t = 0; t < T; t++) tprob[t] = TP_W'(w.tprob[t]);
    for (int n = 0; n < N; n++) begin mu[n] = MU_W'(w.mu[n]); sigma[n] = SIGMA_W'(w.sigma[n]); end
    for (int n = 0; n < N; n++) ra[n] = 0;
    repeat (2) @(negedge clk);
    reset = 1'b0;
    clear = 1'b1;
    @(negedge clk) clear = 1'b0;
    for (int m = 0; m < M; m++) begin
      longint ap [N]; int bp [N]; longint mn; int mi; int lat;
      for (int n = 0; n < N; n++) begin
        longint best; int bi;
        preds(n, p);
        best = ra[p[0]] + w.tprob[0]; bi = 0;
        for (int t = 1; t < T; t++)
          if (ra[p[t]] + w.tprob[t] < best) begin best = ra[p[t]] + w.tprob[t]; bi = t; end
        bp[n] = bi;
        ap[n] = best + longint'(w.x[m] - w.mu[n]) * longint'(w.x[m] - w.mu[n]) - w.sigma[n];
      end
      mn = ap[0]; mi = 0;
      for (int n = 1; n < N; n++) if (ap[n] < mn) begin mn = ap[n]; mi = n; end
      for (int n = 0; n < N; n++) ra[n] = ap[n] - mn;

      x = X_W'(w.x[m]);
      start = 1'b1;
      @(negedge clk) start = 1'b0;
      x = '0;
      lat = 1;
      while (!done && lat < 40) begin @(negedge clk); lat++; end
      check(lat == 14, $sformatf("event %0d done after %0d cycles", m, lat));
      check(minidx_n == ST_W'(mi), $sformatf("event %0d minidxN %0d exp %0d", m, minidx_n, mi));
      for (int n = 0; n < N; n++) begin
        check(beta_row[n] == PTR_W'(bp[n]), $sformatf("event %0d beta[%0d]=%0d exp %0d", m, n, beta_row[n], bp[n]));
        check(alpha_cur[n] == score_t'(ra[n]), $sformatf("event %0d alpha[%0d]", m, n));
      end
      repeat (3) @(negedge clk);   // rest of the 18-cycle event slot
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
