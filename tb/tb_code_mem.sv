// tb_code_mem: loads 256 words through the write port, then reads them back through all
// 60 read ports at once, each port at a different address in the same cycle.
module tb_code_mem;
  import empa_pkg::*;

  logic clk = 1'b0, we = 1'b0;
  pc_t waddr = '0;
  word_t wdata = '0;
  pc_t   [59:0] raddr;
  word_t [59:0] rdata;
  int checks = 0, failures = 0;

  code_mem dut (.*);
  always #5 clk = ~clk;

  function automatic word_t pat(int a); return word_t'(32'h9E37_79B9 * (a + 1)); endfunction

  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    raddr = '0;
    for (int a = 0; a < 256; a++) begin
      @(negedge clk); we = 1'b1; waddr = pc_t'(a); wdata = pat(a);
    end
    @(negedge clk); we = 1'b0;
    for (int round = 0; round < 5; round++) begin
      for (int p = 0; p < 60; p++) raddr[p] = pc_t'(p * 7 + round * 31);
      #1;
      for (int p = 0; p < 60; p++) begin
        checks++;
        if (rdata[p] != pat((p * 7 + round * 31) % 256)) begin
          failures++; $display("FAIL: port %0d round %0d", p, round);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
