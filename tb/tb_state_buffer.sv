// tb_state_buffer: checks the 384-B state register file.
//
// Writes 512 random 6-bit states from the top address down (the order the
// traceback produces them) and reads them back eight at a time through the
// group read port.
module tb_state_buffer;
  import dna_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic we = 0;
  logic [8:0] waddr;
  logic [5:0] wdata;
  logic [5:0] rgroup;
  logic [5:0] rdata [8];
  logic [5:0] ref_rf [512];

  state_buffer dut (.clk, .we, .waddr, .wdata, .rgroup, .rdata);

  int checks = 0, failures = 0;

  initial begin
    @(negedge clk);
    for (int a = 511; a >= 0; a--) begin
      we = 1; waddr = 9'(a); wdata = 6'($urandom);
      ref_rf[a] = wdata;
      @(negedge clk);
    end
    we = 0;
    for (int g = 0; g < 64; g++) begin
      rgroup = 6'(g);
      #1;
      for (int j = 0; j < 8; j++) begin
        checks++;
        if (rdata[j] != ref_rf[8*g+j]) begin
          failures++; if (failures < 20) $display("FAIL: state %0d", 8*g+j);
        end
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
