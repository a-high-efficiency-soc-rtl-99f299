// tb_gather_trans: checks the posterior store and predecessor routing.
//
// Loads random posteriors and compares every one of the 64 x 21 bundle
// entries with the predecessor lists of the behavioural reference, which
// finds predecessors by k-mer overlap. Also checks that clear zeroes the
// store, that nothing changes without load, and the paper's examples
// (ACG steps to CGT: 6 -> 27; ACG skips to GAC: 6 -> 33).
module tb_gather_trans;
  import dna_pkg::*;
  import viterbi_ref_pkg::preds;

  logic   clk = 1'b0;
  always #5 clk = ~clk;
  logic   clear = 1'b0, load = 1'b0;
  score_t alpha_in [N];
  score_t alpha_cur [N];
  score_t bundle [N][T];

  gather_trans dut (.clk, .clear, .load, .alpha_in, .alpha_cur, .bundle);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    int p [21];
    bit found;
    @(negedge clk) clear = 1'b1;
    @(negedge clk) clear = 1'b0;
    for (int n = 0; n < N; n++) check(alpha_cur[n] == 0, "cleared");
    for (int round = 0; round < 3; round++) begin
      for (int n = 0; n < N; n++) alpha_in[n] = score_t'($urandom);
      load = 1'b1;
      @(negedge clk) load = 1'b0;
      for (int n = 0; n < N; n++) begin
        preds(n, p);
        for (int t = 0; t < T; t++)
          check(bundle[n][t] == alpha_in[p[t]], $sformatf("n=%0d t=%0d", n, t));
      end
      // no load: contents hold
      for (int n = 0; n < N; n++) alpha_in[n] = '0;
      @(negedge clk);
      check(bundle[27][0] != 0 || alpha_cur[27] == 0, "hold without load");
    end
    // paper examples: 6 is a step predecessor of 27 and a skip predecessor of 33
    found = 0;
    for (int t = 1; t <= 4; t++) if (bundle[27][t] == alpha_cur[6]) found = 1;
    check(found, "ACG steps to CGT");
    found = 0;
    for (int t = 5; t < T; t++) if (bundle[33][t] == alpha_cur[6]) found = 1;
    check(found, "ACG skips to GAC");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
