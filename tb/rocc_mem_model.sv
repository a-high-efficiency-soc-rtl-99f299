// rocc_mem_model: behavioural stand-in for the core's data cache on the
// accelerator's RoCC memory port (not synthesizable).
//
// A word-addressed 64-bit memory of WORDS words starting at byte address 0.
// Requests are accepted when a random ready is high (backpressure when
// BP_PCT > 0). Each request is answered after a random latency of 1..MAX_LAT
// cycles, at most one response per cycle and oldest-due first, so responses
// to loads may overtake each other. Stores write the memory when accepted
// and are acknowledged with has_data = 0, loads return the word with
// has_data = 1. Counters report backpressure and reordering.
module rocc_mem_model
  import dna_pkg::*;
#(
  parameter int WORDS   = 4096,
  parameter int MAX_LAT = 6,
  parameter int BP_PCT  = 20
) (
  input  logic      clk,
  input  logic      reset,
  input  logic      req_valid,
  output logic      req_ready,
  input  mem_req_t  req,
  output logic      resp_valid,
  output mem_resp_t resp
);
  typedef struct {
    longint    due;
    longint    seq;
    mem_resp_t r;
  } pend_t;

  logic [63:0] mem [WORDS];
  pend_t       q [$];
  longint      now = 0;
  longint      seq_in = 0;
  longint      last_seq = -1;
  int          n_backpressure = 0;
  int          n_reordered = 0;
  int          n_loads = 0;
  int          n_stores = 0;

  always_ff @(posedge clk) begin
    now <= now + 1;
    if (reset) req_ready <= 1'b0;
    else       req_ready <= ($urandom_range(0, 99) >= BP_PCT);
  end

  always @(posedge clk) begin
    resp_valid <= 1'b0;
    if (!reset) begin
      if (req_valid && !req_ready) n_backpressure++;
      if (req_valid && req_ready) begin
        pend_t p;
        p.due = now + longint'($urandom_range(1, MAX_LAT));
        p.seq = seq_in++;
        p.r.tag = req.tag;
        if (req.cmd == M_XWR) begin
          mem[(req.addr >> 3) % WORDS] <= req.data;
          p.r.has_data = 1'b0;
          p.r.data = '0;
          n_stores++;
        end else begin
          p.r.has_data = 1'b1;
          p.r.data = mem[(req.addr >> 3) % WORDS];
          n_loads++;
        end
        q.push_back(p);
      end
      begin
        int best;
        best = -1;
        foreach (q[i])
          if (q[i].due <= now && (best < 0 || q[i].due < q[best].due)) best = i;
        if (best >= 0) begin
          resp_valid <= 1'b1;
          resp <= q[best].r;
          if (q[best].seq < last_seq) n_reordered++;
          last_seq = q[best].seq;
          q.delete(best);
        end
      end
    end
  end
endmodule
