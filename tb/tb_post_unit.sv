// tb_post_unit: checks the posterior update alpha' = trans - sigma + (x-mu)^2.
//
// Drives x, mu and sigma with in_valid and the winning trans term six cycles
// later, as the trellis core does, and checks the result and that it
// appears one cycle after trans_valid (seven cycles after the event).
// Includes x below and above mu, the extremes of the 12-bit range and
// negative trans terms.
module tb_post_unit;
  import dna_pkg::*;

  logic clk = 1'b0, reset = 1'b1;
  always #5 clk = ~clk;
  logic in_valid = 1'b0, trans_valid = 1'b0, out_valid;
  logic [X_W-1:0] x;
  logic [MU_W-1:0] mu;
  logic [SIGMA_W-1:0] sigma;
  score_t trans_min, alpha_p;

  post_unit dut (.clk, .reset, .in_valid, .x, .mu, .sigma, .trans_valid, .trans_min, .out_valid, .alpha_p);

  int checks = 0, failures = 0;

  initial begin
    repeat (2) @(negedge clk);
    reset = 1'b0;
    for (int s = 0; s < 100; s++) begin
      longint exp;
      int xv, mv, sv, tv;
      xv = $urandom_range(0, 4095); mv = $urandom_range(0, 4095);
      sv = $urandom_range(0, 65535); tv = int'($urandom_range(0, 2000000)) - 1000000;
      if (s == 0) begin xv = 4095; mv = 0; sv = 0; end
      if (s == 1) begin xv = 0; mv = 4095; sv = 65535; end
      exp = longint'(tv) - sv + longint'(xv - mv) * longint'(xv - mv);
      x = X_W'(xv); mu = MU_W'(mv); sigma = SIGMA_W'(sv);
      in_valid = 1'b1;
      @(negedge clk) in_valid = 1'b0;
      x = '0; mu = '0; sigma = '0;
      repeat (5) @(negedge clk);
      trans_min = score_t'(tv);
      trans_valid = 1'b1;
      @(negedge clk) trans_valid = 1'b0;
      trans_min = '0;
      checks++;
      if (!out_valid || alpha_p != score_t'(exp)) begin
        failures++;
        if (failures < 20) $display("FAIL: x=%0d mu=%0d s=%0d t=%0d got %0d exp %0d v=%0d", xv, mv, sv, tv, alpha_p, exp, out_valid);
      end
      @(negedge clk);
      checks++;
      if (out_valid || alpha_p != score_t'(exp)) begin failures++; $display("FAIL: result not held"); end
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
