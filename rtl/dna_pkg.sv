// dna_pkg: types and constants shared by the sequence-detection accelerator.
//
// The accelerator computes Viterbi trellis construction and traceback for a
// nanopore k-mer hidden Markov model. Sizes that follow the published design:
// k = 3 (so N = 4^k = 64 states), T = 21 predecessor transitions per state
// (1 stay, 4 step, 16 skip), chunks of at most M = 512 events, a 4-KiB event
// buffer, a 32-KiB pointer buffer in 8 banks, a 384-B state buffer and a RoCC
// link with 64-bit data and 40-bit addresses. Number formats (event, model
// and posterior widths), the command encoding and the memory tag layout are
// this design's own choices; they are collected here so they can be changed
// in one place.
//
// Lint note: pred_state computes in 32-bit int and keeps the low six bits.
package dna_pkg;

  // ---- algorithm sizes -------------------------------------------------
  localparam int K      = 3;             // k-mer length
  localparam int N      = 4 ** K;        // states per trellis column
  localparam int T      = 21;            // transitions into each state
  localparam int M_MAX  = 512;           // longest event chunk
  localparam int REL_W  = 5;             // relative pointer 0..20
  localparam int PTR_W  = 8;             // a pointer is stored as one byte
  localparam int ST_W   = 6;             // global state index 0..63

  // ---- number formats (own choice) --------------------------------------
  localparam int X_W     = 12;           // event sample, unsigned
  localparam int MU_W    = 12;           // model mean, unsigned, same scale as x
  localparam int SIGMA_W = 16;           // model sigma term, unsigned
  localparam int TP_W    = 16;           // -log transition probability, unsigned
  localparam int A_W     = 32;           // log posterior, two's complement

  typedef logic signed [A_W-1:0] score_t;

  // ---- buffers ------------------------------------------------------------
  localparam int EV_W       = 64;        // one event per 64-bit word: 512 x 8 B = 4 KiB
  localparam int PB_BANKS   = 8;         // pointer buffer banks
  localparam int ROW_W      = N * PTR_W;           // one trellis column of pointers
  localparam int PB_BANK_W  = ROW_W / PB_BANKS;    // 64 bits: 8 pointers per bank

  // ---- RoCC link ----------------------------------------------------------
  localparam int XLEN   = 64;
  localparam int PADDR  = 40;
  localparam int TAG_W  = 12;            // {kind[2:0], index[8:0]}

  typedef enum logic [2:0] {
    TAG_TPROB = 3'd0,
    TAG_MU    = 3'd1,
    TAG_SIGMA = 3'd2,
    TAG_EVENT = 3'd3,
    TAG_STORE = 3'd4
  } tag_kind_e;

  // funct7 values of the six-command accelerator program
  typedef enum logic [6:0] {
    F_RESET     = 7'd0,   // 1) accelerator reset
    F_SET_M     = 7'd1,   // 2) rs1 = number of events M
    F_TPROB     = 7'd2,   // 3) rs1 = address of tprob[0:T-1]
    F_MU        = 7'd3,   // 4) rs1 = address of mu[0:N-1]
    F_SIGMA     = 7'd4,   // 5) rs1 = address of sigma[0:N-1]
    F_RUN       = 7'd5    // 6) rs1 = address of x[0], rs2 = result address; starts
  } funct_e;

  localparam logic [4:0] M_XRD = 5'd0;   // memory load
  localparam logic [4:0] M_XWR = 5'd1;   // memory store

  typedef struct packed {
    logic [6:0]      funct;
    logic [4:0]      rd;
    logic            xd;      // core waits for a response
    logic [XLEN-1:0] rs1;
    logic [XLEN-1:0] rs2;
  } rocc_cmd_t;

  typedef struct packed {
    logic [4:0]      rd;
    logic [XLEN-1:0] data;
  } rocc_resp_t;

  typedef struct packed {
    logic [PADDR-1:0] addr;
    logic [TAG_W-1:0] tag;
    logic [4:0]       cmd;    // M_XRD or M_XWR
    logic [1:0]       size;   // log2 bytes, always 3 (64 bits)
    logic [XLEN-1:0]  data;   // store data
  } mem_req_t;

  typedef struct packed {
    logic [TAG_W-1:0] tag;
    logic             has_data;
    logic [XLEN-1:0]  data;
  } mem_resp_t;

  // Global index of the t-th predecessor of state n (eqs. for stay, step,
  // skip): t = 0 stay, t = 1..4 step with l = t-1, t = 5..20 skip with L = t-5.
  function automatic logic [ST_W-1:0] pred_state(input logic [ST_W-1:0] n, input int t);
    int v, nn;
    nn = int'(n);
    if (t == 0)      v = nn;
    else if (t <= 4) v = (t - 1) * (4 ** (K - 1)) + nn / 4;
    else             v = (t - 5) * (4 ** (K - 2)) + nn / 16;
    return ST_W'(v);
  endfunction

endpackage
