// tb_norm_unit: checks FindMinN and the normalisation loop.
//
// Holds 64 random signed posteriors, pulses in_valid and checks that six
// cycles later out_valid rises with the minimum, the first index holding it,
// and alpha_out[n] = alpha'[n] - minimum for every n. Cases include ties,
// the minimum at index 0 and at index 63, and negative scores.
module tb_norm_unit;
  import dna_pkg::*;

  logic clk = 1'b0, reset = 1'b1;
  always #5 clk = ~clk;
  logic in_valid = 1'b0, out_valid;
  score_t alpha_p [N], alpha_out [N], minprob;
  logic [5:0] minidx_n;

  norm_unit dut (.clk, .reset, .in_valid, .alpha_p, .out_valid, .alpha_out, .minprob, .minidx_n);

  int checks = 0, failures = 0;

  initial begin
    repeat (2) @(negedge clk);
    reset = 1'b0;
    for (int s = 0; s < 60; s++) begin
      longint mn; int mi; int lat;
      for (int n = 0; n < N; n++) alpha_p[n] = score_t'(int'($urandom_range(0, 2000000)) - 1000000);
      if (s % 4 == 1) begin alpha_p[17] = -2000000; alpha_p[40] = -2000000; end
      if (s % 4 == 2) alpha_p[63] = -3000000;
      if (s % 4 == 3) alpha_p[0]  = -3000000;
      mn = alpha_p[0]; mi = 0;
      for (int n = 1; n < N; n++) if (alpha_p[n] < mn) begin mn = alpha_p[n]; mi = n; end
      in_valid = 1'b1;
      @(negedge clk) in_valid = 1'b0;
      lat = 1;
      while (!out_valid && lat < 20) begin @(negedge clk); lat++; end
      checks++;
      if (lat != 6) begin failures++; $display("FAIL: latency %0d", lat); end
      checks++;
      if (minprob != score_t'(mn) || minidx_n != 6'(mi)) begin
        failures++; $display("FAIL: min %0d@%0d exp %0d@%0d", minprob, minidx_n, mn, mi);
      end
      for (int n = 0; n < N; n++) begin
        checks++;
        if (alpha_out[n] != score_t'(longint'(alpha_p[n]) - mn)) begin
          failures++; if (failures < 20) $display("FAIL: alpha_out[%0d]", n);
        end
      end
      @(negedge clk);
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
