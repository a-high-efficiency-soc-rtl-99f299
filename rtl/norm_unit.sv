// norm_unit: FindMinN and the unrolled normalisation loop (4).
//
// A six-level pipelined comparator tree (the same organisation as FindMinT)
// finds minprob = min_n alpha'_m[n] and its index minidxN, the most likely
// state of the current event. The N subtractors then give the normalised
// posteriors alpha_m[n] = alpha'_m[n] - minprob, which keep the scores from
// growing without bound from one event to the next.
//
// Interface and timing: alpha_p must be valid when in_valid pulses and stay
// unchanged until out_valid (the Post registers hold it). out_valid pulses
// $clog2(N) = 6 cycles after in_valid; alpha_out is combinational from the
// held inputs and the registered minimum, and is meant to be written into
// the posterior registers of gather_trans on that cycle's clock edge, which
// makes the seventh normalisation cycle.
module norm_unit
  import dna_pkg::*;
#(
  parameter int NS = N
) (
  input  logic                     clk,
  input  logic                     reset,
  input  logic                     in_valid,
  input  score_t                   alpha_p   [NS],
  output logic                     out_valid,
  output score_t                   alpha_out [NS],
  output score_t                   minprob,
  output logic [$clog2(NS)-1:0]    minidx_n
);
  findmin_tree #(.NUM(NS), .DW(A_W), .IW($clog2(NS))) u_findmin_n (
    .clk, .reset,
    .in_valid,
    .in_val   (alpha_p),
    .out_valid,
    .out_min  (minprob),
    .out_idx  (minidx_n)
  );

  always_comb
    for (int n = 0; n < NS; n++)
      alpha_out[n] = alpha_p[n] - minprob;
endmodule
