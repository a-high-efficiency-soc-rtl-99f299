// gather_trans: posterior store and hardwired redistribution network.
//
// Holds the N normalised posteriors alpha_{m-1}[0:N-1] of the previous event
// and presents, for every state n, the T = 21 posteriors of the states that
// may precede it: t = 0 is the stay transition (state n itself), t = 1..4
// the step transitions l*4^(k-1) + floor(n/4) with l = t-1, and t = 5..20 the
// skip transitions L*4^(k-2) + floor(n/16) with L = t-5. Because the routing
// is fixed, the network is only wiring. The predecessor formulas follow the
// published step/skip relations; the order of t within the bundle is this
// design's choice and must match the traceback unit, which undoes it.
//
// Interface and timing: clear (a new chunk) sets every posterior to zero,
// i.e. all states are equally likely before the first event; load writes
// alpha_in. Both take effect on the next clock edge. The bundles are
// combinational from the registers.
module gather_trans
  import dna_pkg::*;
(
  input  logic   clk,
  input  logic   clear,
  input  logic   load,
  input  score_t alpha_in  [N],
  output score_t alpha_cur [N],
  output score_t bundle    [N][T]
);
  score_t alpha_q [N];

  always_ff @(posedge clk) begin
    if (clear)     for (int n = 0; n < N; n++) alpha_q[n] <= '0;
    else if (load) alpha_q <= alpha_in;
  end

  assign alpha_cur = alpha_q;

  for (genvar n = 0; n < N; n++) begin : g_state
    for (genvar t = 0; t < T; t++) begin : g_trans
      assign bundle[n][t] = alpha_q[pred_state(ST_W'(n), t)];
    end
  end
endmodule
