// tb_pointer_buffer: checks the 8-bank 32-KiB pointer SRAM.
//
// Writes 512 random 64-byte rows, reads them back last in first out (as the
// traceback does) and checks every byte, so each bank and every pointer
// position is exercised; checks that pointer n can be picked out by shifting
// the row right by n bytes.
module tb_pointer_buffer;
  import dna_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic we = 0, ren = 0;
  logic [8:0] waddr, raddr;
  logic [ROW_W-1:0] wdata, rdata;
  logic [ROW_W-1:0] ref_mem [512];

  pointer_buffer dut (.clk, .we, .waddr, .wdata, .ren, .raddr, .rdata);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    @(negedge clk);
    for (int a = 0; a < 512; a++) begin
      for (int n = 0; n < N; n++) wdata[8*n +: 8] = 8'($urandom_range(0, 20));
      ref_mem[a] = wdata;
      we = 1; waddr = 9'(a);
      @(negedge clk);
    end
    we = 0;
    for (int a = 511; a >= 0; a--) begin
      ren = 1; raddr = 9'(a);
      @(negedge clk);
      for (int b = 0; b < PB_BANKS; b++)
        check(rdata[64*b +: 64] == ref_mem[a][64*b +: 64], $sformatf("row %0d bank %0d", a, b));
      begin
        int n;
        logic [ROW_W-1:0] sh;
        n  = $urandom_range(0, 63);
        sh = rdata >> (8 * n);
        check(sh[7:0] == ref_mem[a][8*n +: 8], "byte select by shift");
      end
    end
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
