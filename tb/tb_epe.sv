// tb_epe: runs the processing element on a small program held in the testbench, with a
// register array modelled here from its write port. Program: r1 = 4, loop r2 += r1,
// r1 -= 1 until zero (r2 = 10), r3 = r2 - 3 (7), then a meta-instruction. Checks the
// results, that 'meta' rises exactly at the meta-instruction with the word in meta_instr,
// that the element stays suspended (PC frozen, no writes) until meta_done, that it then
// continues at the next address (or at the jump target of a taken resource test), and the cycle count of the loop (one instruction per
// cycle, one more to enter the suspended state). A core that is stopped must sleep and not write.
module tb_epe;
  import empa_pkg::*;
  import empa_asm_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, stop = 1'b0, meta_done = 1'b0, jump = 1'b0;
  pc_t start_pc = 8'd16, pc, jump_pc = 8'd0;
  word_t instr, meta_instr, rf_wdata;
  regvec_t regs;
  logic awake, meta, rf_we;
  logic [2:0] rf_waddr;
  word_t mem [256];
  int checks = 0, failures = 0;

  epe dut (.*);
  always #5 clk = ~clk;
  assign instr = mem[pc];
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) regs <= '0;
    else if (rf_we) regs[rf_waddr] <= rf_wdata;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (1000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, n;
    for (int a = 0; a < 256; a++) mem[a] = '0;
    mem[16] = LI(1, 4);
    mem[17] = LI(2, 0);
    mem[18] = ADD(2, 2, 1);
    mem[19] = ADDI(1, 1, -1);
    mem[20] = BNZ(1, 18);
    mem[21] = SUB(3, 2, 1);           // r1 is 0 here
    mem[22] = ADDI(3, 3, -3);
    mem[23] = QCLONE(8'h0C);
    mem[24] = LI(4, 99);
    mem[25] = QAVAIL(2, 30);
    mem[30] = LI(5, 7);
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(!awake, "asleep after reset");
    start = 1'b1; @(negedge clk); start = 1'b0;
    n = 0;
    while (!meta && n < 100) begin @(negedge clk); n++; end
    // 2 + 3*4 + 2 instructions before the meta-instruction, one per cycle, plus one to suspend
    check(n == 17, $sformatf("cycles to meta %0d, expected 17", n));
    check(pc == 8'd23 && meta_instr == QCLONE(8'h0C), "meta-instruction held");
    check(regs[2] == 10 && regs[3] == 7 && regs[1] == 0, "loop results");
    repeat (5) begin
      @(negedge clk);
      check(meta && pc == 8'd23 && !rf_we, "suspended while Meta");
    end
    meta_done = 1'b1; @(negedge clk); meta_done = 1'b0;
    check(!meta && pc == 8'd24, "resumes at next address");
    @(negedge clk);
    check(regs[4] == 99, "executes after resume");
    @(negedge clk);
    check(meta && pc == 8'd25, "resource test suspends");
    meta_done = 1'b1; jump = 1'b1; jump_pc = 8'd30; @(negedge clk);
    meta_done = 1'b0; jump = 1'b0;
    check(!meta && pc == 8'd30, "redirected resume at jump target");
    @(negedge clk);
    check(regs[5] == 7, "executes at jump target");
    stop = 1'b1; @(negedge clk); stop = 1'b0;
    check(!awake, "asleep after stop");
    repeat (3) @(negedge clk);
    check(!rf_we && !awake, "no activity while asleep");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
