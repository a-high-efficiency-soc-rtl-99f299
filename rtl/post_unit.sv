// post_unit: posterior update of one state (the Post[n] block).
//
// Computes alpha'_m[n] = trans[n][minidxT] - sigma[n] + (x[m] - mu[n])^2.
// Stage 1 registers the difference x - mu, stage 2 registers the squared
// difference less sigma, and the result waits there until the winning trans
// term arrives from the FindMinT tree running in parallel; the final sum is
// then registered. The formula and the three-register structure follow the
// published Post design. The published block diagram draws sigma entering an
// adder while the equation subtracts it; this design follows the equation.
//
// Interface and timing: x, mu and sigma are sampled with in_valid; trans_min
// is sampled with trans_valid, which must come at least two cycles after
// in_valid (in the trellis it comes six cycles after, so alpha' is ready
// seven cycles after the event enters). out_valid pulses one cycle after
// trans_valid; alpha_p then holds until the next trans_valid.
module post_unit
  import dna_pkg::*;
(
  input  logic                clk,
  input  logic                reset,
  input  logic                in_valid,
  input  logic [X_W-1:0]      x,
  input  logic [MU_W-1:0]     mu,
  input  logic [SIGMA_W-1:0]  sigma,
  input  logic                trans_valid,
  input  score_t              trans_min,
  output logic                out_valid,
  output score_t              alpha_p
);
  localparam int D_W = ((X_W > MU_W) ? X_W : MU_W) + 1;

  logic signed [D_W-1:0]     diff_q;
  logic [SIGMA_W-1:0]        sigma_q;
  logic                      v1_q;
  score_t                    emis_q;    // (x - mu)^2 - sigma

  always_ff @(posedge clk) begin
    if (in_valid) begin
      diff_q  <= $signed({1'b0, x}) - $signed({1'b0, mu});
      sigma_q <= sigma;
    end
    if (v1_q)
      emis_q <= score_t'(diff_q * diff_q) - score_t'({1'b0, sigma_q});
    if (trans_valid)
      alpha_p <= trans_min + emis_q;
  end

  always_ff @(posedge clk) begin
    if (reset) begin
      v1_q      <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      v1_q      <= in_valid;
      out_valid <= trans_valid;
    end
  end
endmodule
