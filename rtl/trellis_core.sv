// trellis_core: trellis construction engine (one Viterbi event per start).
//
// Loops (2), (3) and (4) of the trellis construction algorithm are fully
// unrolled: gather_trans hands each of N loop3_unit instances the T
// posteriors of its predecessors, each loop3_unit adds the transition terms
// and finds the best predecessor (a relative pointer 0..20), N post_unit
// instances add the emission term of the current event x[m], and norm_unit
// finds the most likely state and subtracts its score from all N posteriors,
// which are written back into gather_trans for the next event. Only the
// event loop (1) is sequential; it is driven from outside, one start per
// event.
//
// Timing, counted from the start cycle (cycle 0): the trans adders register
// at edge 1, FindMinT finishes at edge 6, alpha' is registered at edge 7
// (seven cycles of loop (3) + Post, as published), FindMinN finishes at edge
// 13 and the normalised posteriors are stored at edge 14 (seven cycles of
// normalisation). done is high in cycle 14; beta_row and minidx_n then hold
// until the next event. The sequencer adds four handshake cycles around
// this, giving the published 18 cycles per event.
//
// clear sets alpha_{-1} to all zeros before the first event of a chunk (the
// initial posteriors are not specified in the source and are this design's
// choice). The pointers produced by the first event of a chunk point before
// the chunk and are ignored by the sequencer.
//
// Lint note: minprob and the valid bits of Post units 1..63 are not read;
// all 64 Post units run in lockstep, so unit 0's valid stands for all.
module trellis_core
  import dna_pkg::*;
(
  input  logic               clk,
  input  logic               reset,
  input  logic               clear,
  input  logic               start,
  input  logic [X_W-1:0]     x,
  input  logic [TP_W-1:0]    tprob [T],
  input  logic [MU_W-1:0]    mu    [N],
  input  logic [SIGMA_W-1:0] sigma [N],
  output logic               busy,
  output logic               done,
  output logic [PTR_W-1:0]   beta_row [N],   // beta[0:N-1][m-1], one byte each
  output logic [ST_W-1:0]    minidx_n,
  output score_t             alpha_cur [N]   // alpha_m after done (observation)
);
  score_t            bundle    [N][T];
  score_t            alpha_p   [N];
  score_t            alpha_nrm [N];
  score_t            minprob;
  logic [ST_W-1:0]   minidx_w;
  logic [N-1:0]      l3_valid, post_valid;
  score_t            trans_min [N];
  logic [REL_W-1:0]  rel_ptr   [N];
  logic              norm_valid;

  gather_trans u_gather (
    .clk,
    .clear,
    .load      (norm_valid),
    .alpha_in  (alpha_nrm),
    .alpha_cur,
    .bundle
  );

  for (genvar n = 0; n < N; n++) begin : g_state
    loop3_unit u_loop3 (
      .clk, .reset,
      .in_valid  (start),
      .alpha_in  (bundle[n]),
      .tprob,
      .out_valid (l3_valid[n]),
      .trans_min (trans_min[n]),
      .rel_ptr   (rel_ptr[n])
    );
    post_unit u_post (
      .clk, .reset,
      .in_valid    (start),
      .x,
      .mu          (mu[n]),
      .sigma       (sigma[n]),
      .trans_valid (l3_valid[n]),
      .trans_min   (trans_min[n]),
      .out_valid   (post_valid[n]),
      .alpha_p     (alpha_p[n])
    );
    always_ff @(posedge clk)
      if (l3_valid[n]) beta_row[n] <= PTR_W'(rel_ptr[n]);
  end

  norm_unit u_norm (
    .clk, .reset,
    .in_valid  (post_valid[0]),
    .alpha_p,
    .out_valid (norm_valid),
    .alpha_out (alpha_nrm),
    .minprob,
    .minidx_n  (minidx_w)
  );

  always_ff @(posedge clk) begin
    if (norm_valid) minidx_n <= minidx_w;
  end

  always_ff @(posedge clk) begin
    if (reset) begin
      done <= 1'b0;
      busy <= 1'b0;
    end else begin
      done <= norm_valid;
      if (start)           busy <= 1'b1;
      else if (norm_valid) busy <= 1'b0;
    end
  end
endmodule
