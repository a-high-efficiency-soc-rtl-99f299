// findmin_tree: pipelined argmin over NUM signed values.
//
// A parallel reduction tree of comparator banks with one register stage per
// level, so the result appears $clog2(NUM) cycles after the inputs. Level s
// pairs neighbouring survivors (2i, 2i+1); an odd survivor at the end of a
// level is passed straight through its register. Each value travels with its
// input index (0..NUM-1), so the output gives both the minimum and where it
// came from. On a tie the lower index wins, which makes the result equal to a
// first-minimum search.
//
// With NUM = 21 this is the FindMinT tree (levels of 10, 5, 3, 1 and 1
// comparators), with NUM = 64 the six-level FindMinN tree.
//
// Interface: in_valid/in_val/in_... sampled every cycle; out_valid is in_valid
// delayed by LAT = $clog2(NUM) cycles. Fully pipelined: a new set may enter
// every cycle.
module findmin_tree #(
  parameter int NUM  = 21,
  parameter int DW   = 32,
  parameter int IW   = (NUM > 1) ? $clog2(NUM) : 1
) (
  input  logic                 clk,
  input  logic                 reset,
  input  logic                 in_valid,
  input  logic signed [DW-1:0] in_val [NUM],
  output logic                 out_valid,
  output logic signed [DW-1:0] out_min,
  output logic [IW-1:0]        out_idx
);
  localparam int LAT = $clog2(NUM);

  // survivors entering level s
  function automatic int count_at(int s);
    int c = NUM;
    for (int i = 0; i < s; i++) c = (c + 1) / 2;
    return c;
  endfunction

  logic signed [DW-1:0] val [LAT+1][NUM];
  logic [IW-1:0]        idx [LAT+1][NUM];
  logic [LAT:0]         vld;

  always_comb begin
    for (int i = 0; i < NUM; i++) begin
      val[0][i] = in_val[i];
      idx[0][i] = IW'(i);
    end
    vld[0] = in_valid;
  end

  for (genvar s = 0; s < LAT; s++) begin : g_level
    localparam int CNT = count_at(s);
    localparam int NXT = (CNT + 1) / 2;
    always_ff @(posedge clk) begin
      for (int i = 0; i < NXT; i++) begin
        if (2 * i + 1 < CNT && val[s][2*i+1] < val[s][2*i]) begin
          val[s+1][i] <= val[s][2*i+1];
          idx[s+1][i] <= idx[s][2*i+1];
        end else begin
          val[s+1][i] <= val[s][2*i];
          idx[s+1][i] <= idx[s][2*i];
        end
      end
    end
    always_ff @(posedge clk) begin
      if (reset) vld[s+1] <= 1'b0;
      else       vld[s+1] <= vld[s];
    end
  end

  assign out_valid = vld[LAT];
  assign out_min   = val[LAT][0];
  assign out_idx   = idx[LAT][0];
endmodule
