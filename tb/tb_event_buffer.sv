// tb_event_buffer: checks the 4-KiB event SRAM.
//
// Writes all 512 words in a shuffled order (as out-of-order memory responses
// would), reads them back in order, checks the one-cycle read latency, that
// a read without ren keeps the last data, and that a read of the address
// being written returns the old word.
module tb_event_buffer;
  import dna_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic we = 0, ren = 0;
  logic [8:0] waddr, raddr;
  logic [63:0] wdata, rdata;
  logic [63:0] ref_mem [512];

  event_buffer dut (.clk, .we, .waddr, .wdata, .ren, .raddr, .rdata);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    int order [512];
    foreach (order[i]) order[i] = i;
    order.shuffle();
    @(negedge clk);
    foreach (order[i]) begin
      we = 1; waddr = 9'(order[i]); wdata = {$urandom, $urandom};
      ref_mem[order[i]] = wdata;
      @(negedge clk);
    end
    we = 0;
    for (int a = 0; a < 512; a++) begin
      ren = 1; raddr = 9'(a);
      @(negedge clk);
      check(rdata == ref_mem[a], $sformatf("word %0d", a));
    end
    ren = 0; raddr = 0;
    @(negedge clk);
    check(rdata == ref_mem[511], "hold without ren");
    // read during write of the same address
    ren = 1; raddr = 9'd5; we = 1; waddr = 9'd5; wdata = ~ref_mem[5];
    @(negedge clk);
    check(rdata == ref_mem[5], "read-during-write returns old word");
    we = 0;
    @(negedge clk);
    check(rdata == ~ref_mem[5], "new word after write");
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
