// tb_empa_core: one core (ID 2 of 4) with a code memory modelled in the testbench and the
// processor's commands driven by hand. The core is started at 10 with r1 = 3, r2 = 4; it
// computes r3 = r1 + r2, raises a QCREATE (checked on push / req), resumes after ADDCHILD,
// then raises QTERM, which shows Wait while the processor holds it back. A child's RETURN
// fills the FromChild latches without touching the registers, and STOP puts the core back
// to sleep. Expected values are worked out from the program.
module tb_empa_core;
  import empa_pkg::*;
  import empa_asm_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, wait_i = 1'b0;
  pc_t pc, code_offset;
  word_t instr;
  proc_cmd_t cmd = '0;
  logic push, awake, waiting, mode_excl, has_parent;
  meta_t req;
  regvec_t regs, from_child;
  logic [3:0] children_mask, prealloc_mask;
  rmask_t from_child_valid, for_parent;
  core_id_t parent_id;
  word_t mem [256];
  int checks = 0, failures = 0;

  empa_core #(.NCORES(4), .ID(2)) dut (.*);
  always #5 clk = ~clk;
  assign instr = mem[pc];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic send(input cmd_e op, input int other, input rmask_t m, input rmask_t rm);
    @(negedge clk);
    cmd = '0; cmd.op = op; cmd.target = 8'd2; cmd.other = core_id_t'(other);
    cmd.mask = m; cmd.ret_mask = rm; cmd.offset = 8'd10;
    for (int r = 0; r < 8; r++) cmd.values[r] = 32'(r + 1);
    @(negedge clk); cmd = '0;
  endtask

  initial begin
    repeat (1000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n;
    for (int a = 0; a < 256; a++) mem[a] = '0;
    mem[10] = ADD(3, 1, 2);
    mem[11] = QCREATE(8'h08, 8'h10, 40);
    mem[12] = ADDI(3, 3, 1);
    mem[13] = QTERM();
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(!awake, "asleep in the pool");
    send(CMD_START, 1, 8'b0000_0110, 8'b0000_1000);   // r1 = 2, r2 = 3 from cmd.values
    check(awake && parent_id == 1 && has_parent && for_parent == 8'h08 && code_offset == 10, "started");
    n = 0;
    while (!push && n < 20) begin @(negedge clk); n++; end
    check(push && req.op == OP_QCREATE && req.mask_a == 8'h08 && req.offset == 8'd40, "QCREATE posted");
    check(regs[3] == 32'd5, $sformatf("r3 = %0d, expected 5", regs[3]));
    repeat (3) @(negedge clk);
    check(pc == 8'd11, "suspended on the meta-instruction");
    send(CMD_ADDCHILD, 3, 0, 0);
    check(children_mask == 4'b1000, "child recorded");
    n = 0;
    while (!push && n < 20) begin @(negedge clk); n++; end
    check(push && req.op == OP_QTERM && regs[3] == 32'd6, "QTERM posted after resuming");
    wait_i = 1'b1; @(negedge clk);
    check(waiting, "Wait shown");
    send(CMD_RETURN, 3, 8'b0001_0000, 0);
    check(children_mask == 0 && from_child_valid == 8'h10 && from_child[4] == 32'd5 && regs[4] == 0,
          "child result latched, registers untouched");
    wait_i = 1'b0;
    send(CMD_STOP, 0, 0, 0);
    check(!awake, "back to sleep");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
