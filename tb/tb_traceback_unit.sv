// tb_traceback_unit: checks the hardware pointer chase.
//
// A behavioural pointer buffer (one-cycle read) is filled with random rows
// of relative pointers 0..20; the unit is started from a random minidxN and
// the states it writes are compared with a reference traceback that turns
// relative pointers into states by k-mer overlap. Chunk lengths 1, 2, 3, 100
// and 512; the duration must be M cycles. The run must use stay, step and
// skip pointers, and every state address must be written exactly once.
module tb_traceback_unit;
  import dna_pkg::*;
  import viterbi_ref_pkg::preds;

  logic clk = 1'b0, reset = 1'b1;
  always #5 clk = ~clk;
  logic start = 1'b0, busy, done;
  logic [5:0] minidx_n;
  logic [9:0] m_len;
  logic pb_ren, sb_we;
  logic [8:0] pb_raddr, sb_waddr;
  logic [ROW_W-1:0] pb_rdata;
  logic [5:0] sb_wdata;

  traceback_unit dut (.clk, .reset, .start, .minidx_n, .m_len, .busy, .done,
                      .pb_ren, .pb_raddr, .pb_rdata, .sb_we, .sb_waddr, .sb_wdata);

  logic [ROW_W-1:0] rows [512];
  logic [5:0]       got [512];
  int               wcount [512];
  always_ff @(posedge clk) if (pb_ren) pb_rdata <= rows[pb_raddr];
  always @(posedge clk) if (sb_we && !reset) begin got[sb_waddr] = sb_wdata; wcount[sb_waddr]++; end

  int checks = 0, failures = 0;
  int n_stay = 0, n_step = 0, n_skip = 0;

  task automatic run(input int M);
    int path [512];
    int p [21];
    int cycles;
    for (int a = 0; a < 512; a++) begin
      for (int n = 0; n < N; n++) rows[a][8*n +: 8] = 8'($urandom_range(0, 20));
      wcount[a] = 0;
    end
    path[M-1] = $urandom_range(0, 63);
    for (int m = M - 2; m >= 0; m--) begin
      int r;
      r = rows[m][8*path[m+1] +: 8];
      preds(path[m+1], p);
      path[m] = p[r];
      if (r == 0) n_stay++; else if (r <= 4) n_step++; else n_skip++;
    end
    minidx_n = 6'(path[M-1]);
    m_len = 10'(M);
    start = 1'b1;
    @(negedge clk) start = 1'b0;
    cycles = 1;
    while (!done && cycles < 1000) begin @(negedge clk); cycles++; end
    checks++;
    if (cycles != M) begin failures++; $display("FAIL: M=%0d took %0d cycles", M, cycles); end
    for (int m = 0; m < M; m++) begin
      checks++;
      if (got[m] != 6'(path[m]) || wcount[m] != 1) begin
        failures++;
        if (failures < 20) $display("FAIL: M=%0d state %0d got %0d exp %0d (%0d writes)", M, m, got[m], path[m], wcount[m]);
      end
    end
    for (int m = M; m < 512; m++) begin
      checks++;
      if (wcount[m] != 0) begin failures++; $display("FAIL: write past M at %0d", m); end
    end
    @(negedge clk);
  endtask

  initial begin
    repeat (2) @(negedge clk);
    reset = 1'b0;
    @(negedge clk);
    run(1); run(2); run(3); run(100); run(512);
    checks++;
    if (n_stay == 0 || n_step == 0 || n_skip == 0) begin failures++; $display("FAIL: pointer kinds not all used"); end
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
