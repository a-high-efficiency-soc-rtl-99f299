// loop3_unit: one unrolled "trans loop" of the trellis constructor
// (the loop (3) datapath of one state n, including its FindMinT tree).
//
// T adders form trans[t] = alpha_{m-1}[pred_t(n)] + tprob[t] and register the
// results (one cycle). A pipelined comparator tree of $clog2(T) levels
// (five for T = 21) then finds the smallest trans term and its position t,
// which is the relative trellis pointer beta[n][m-1] in 0..T-1. The
// structure - adder bank, register, comparator levels C1..C5 carrying the
// index 0..20 beside each value - follows the published FindMinT design.
// The tie rule (lowest t wins) and the number formats are this design's.
//
// Timing: out_valid follows in_valid by 1 + $clog2(T) = 6 cycles. The unit
// is fully pipelined.
module loop3_unit
  import dna_pkg::*;
#(
  parameter int NT = T
) (
  input  logic                 clk,
  input  logic                 reset,
  input  logic                 in_valid,
  input  score_t               alpha_in [NT],   // alpha_{m-1} of the NT predecessors
  input  logic [TP_W-1:0]      tprob    [NT],   // -log transition probabilities
  output logic                 out_valid,
  output score_t               trans_min,       // trans[n][minidxT]
  output logic [REL_W-1:0]     rel_ptr          // minidxT, relative pointer
);
  score_t trans_q [NT];
  logic   vld_q;

  always_ff @(posedge clk) begin
    for (int t = 0; t < NT; t++)
      trans_q[t] <= alpha_in[t] + score_t'({1'b0, tprob[t]});
  end
  always_ff @(posedge clk) begin
    if (reset) vld_q <= 1'b0;
    else       vld_q <= in_valid;
  end

  localparam int IW = $clog2(NT);
  logic [IW-1:0] idx;

  findmin_tree #(.NUM(NT), .DW(A_W), .IW(IW)) u_findmin_t (
    .clk, .reset,
    .in_valid (vld_q),
    .in_val   (trans_q),
    .out_valid,
    .out_min  (trans_min),
    .out_idx  (idx)
  );

  assign rel_ptr = REL_W'(idx);
endmodule
