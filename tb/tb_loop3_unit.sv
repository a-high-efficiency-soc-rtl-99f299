// tb_loop3_unit: checks the trans adders and the FindMinT tree.
//
// Streams a new random set of 21 posteriors and transition terms every
// cycle (the unit is fully pipelined) and checks, six cycles later, the
// minimum of alpha + tprob and the first index that reaches it. Some sets
// are built with ties and with the minimum at the last input (the one that
// passes through the odd end of each tree level).
module tb_loop3_unit;
  import dna_pkg::*;

  logic   clk = 1'b0, reset = 1'b1;
  always #5 clk = ~clk;
  logic   in_valid = 1'b0;
  score_t alpha_in [T];
  logic [TP_W-1:0] tprob [T];
  logic   out_valid;
  score_t trans_min;
  logic [REL_W-1:0] rel_ptr;

  loop3_unit dut (.clk, .reset, .in_valid, .alpha_in, .tprob, .out_valid, .trans_min, .rel_ptr);

  int checks = 0, failures = 0;
  longint exp_min [$];
  int     exp_idx [$];
  int     exp_cyc [$];
  int     cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (out_valid && !reset) begin
    checks++;
    if (exp_min.size() == 0 || trans_min != score_t'(exp_min[0]) || rel_ptr != REL_W'(exp_idx[0]) ||
        cyc - exp_cyc[0] != 6) begin
      failures++;
      if (failures < 20) $display("FAIL: got %0d/%0d at %0d, exp %0d/%0d from %0d", trans_min, rel_ptr, cyc, exp_min.size() ? exp_min[0] : 0, exp_min.size() ? exp_idx[0] : 0, exp_min.size() ? exp_cyc[0] : 0);
    end
    if (exp_min.size() > 0) begin
      void'(exp_min.pop_front()); void'(exp_idx.pop_front()); void'(exp_cyc.pop_front());
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    reset = 1'b0;
    for (int s = 0; s < 200; s++) begin
      longint best; int bi;
      for (int t = 0; t < T; t++) begin
        alpha_in[t] = score_t'($urandom_range(0, 100000));
        tprob[t]    = TP_W'($urandom);
      end
      if (s % 5 == 1) for (int t = 0; t < T; t++) begin alpha_in[t] = 100; tprob[t] = 7; end  // all tie
      if (s % 5 == 2) begin alpha_in[T-1] = 0; tprob[T-1] = 0; end                           // last wins
      if (s % 5 == 3) begin alpha_in[4] = 3; tprob[4] = 0; alpha_in[12] = 1; tprob[12] = 2; end // tie 4/12
      best = longint'(alpha_in[0]) + tprob[0]; bi = 0;
      for (int t = 1; t < T; t++)
        if (longint'(alpha_in[t]) + tprob[t] < best) begin best = longint'(alpha_in[t]) + tprob[t]; bi = t; end
      exp_min.push_back(best); exp_idx.push_back(bi); exp_cyc.push_back(cyc);
      in_valid = (s % 7 != 6);   // some idle cycles
      if (!in_valid) begin void'(exp_min.pop_back()); void'(exp_idx.pop_back()); void'(exp_cyc.pop_back()); end
      @(negedge clk);
    end
    in_valid = 1'b0;
    repeat (10) @(negedge clk);
    checks++;
    if (exp_min.size() != 0) begin failures++; $display("FAIL: %0d results missing", exp_min.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
