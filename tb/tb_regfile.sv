// tb_regfile: random single-register writes and bulk (masked) writes against a reference
// array kept in the testbench, including collisions where the bulk write must win; reset
// must clear all registers.
module tb_regfile;
  import empa_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, we = 1'b0;
  logic [2:0] waddr = '0;
  word_t wdata = '0;
  rmask_t bulk_mask = '0;
  regvec_t bulk_values = '0, regs;
  word_t model [8];
  int checks = 0, failures = 0;

  regfile dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 8; r++) model[r] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      for (int r = 0; r < 8; r++) begin
        checks++;
        if (regs[r] != model[r]) begin failures++; $display("FAIL: r%0d step %0d", r, i); end
      end
      we = $urandom_range(0, 1) == 1;
      waddr = 3'($urandom_range(0, 7));
      wdata = $urandom;
      bulk_mask = ($urandom_range(0, 3) == 0) ? 8'($urandom) : '0;
      for (int r = 0; r < 8; r++) bulk_values[r] = $urandom;
      for (int r = 0; r < 8; r++) begin
        if (bulk_mask[r]) model[r] = bulk_values[r];
        else if (we && int'(waddr) == r) model[r] = wdata;
      end
    end
    @(negedge clk); we = 0; bulk_mask = '0;
    rst_n = 1'b0; #1;
    checks++;
    if (regs != '0) begin failures++; $display("FAIL: reset"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
