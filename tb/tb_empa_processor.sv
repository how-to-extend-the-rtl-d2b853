// tb_empa_processor: the processor layer on a 2 x 2 grid, with the cores' side played by
// the testbench. Root start; a QCREATE from the root (expect START to another core with
// the root's masked registers, then ADDCHILD to the root); a QTERM from the root that must
// be held back with Wait while the child lives; the child's QTERM (expect RETURN of the
// child's masked registers to the root, then STOP); then the root's QTERM goes through
// and root_done delivers the root's masked registers. Also a QCLONE and a QWAIT, whose
// commands must follow within a cycle, a resource test (QAVAIL) taken and not taken, and checks that a core is never handed out twice.
module tb_empa_processor;
  import empa_pkg::*;

  localparam int N = 4;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic busy, root_done;
  regvec_t root_regs, start_regs;
  logic [1:0] core_state [N];
  logic  [N-1:0] push = '0, mode_excl = '0, has_parent = '0, wait_o;
  meta_t [N-1:0] req = '0;
  regvec_t regs [N];
  logic [N-1:0] children [N];
  pc_t [N-1:0] code_offset = '0;
  core_id_t [N-1:0] parent_id = '0;
  rmask_t [N-1:0] for_parent = '0;
  proc_cmd_t cmd;
  int checks = 0, failures = 0;

  empa_processor #(.NCOLS(2), .NROWS(2)) dut (
    .clk, .rst_n, .start, .start_offset(8'd5), .start_regs, .start_mask(8'h03),
    .start_ret_mask(8'h0C), .busy, .root_done, .root_regs, .denied('0), .core_state,
    .push, .req, .regs, .children, .mode_excl, .code_offset, .parent_id, .has_parent,
    .for_parent, .cmd, .wait_o);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic post(input int c, input opcode_e op, input rmask_t a, input rmask_t b);
    @(negedge clk);
    push = '0; push[c] = 1'b1;
    req[c] = '0; req[c].op = op; req[c].mask_a = a; req[c].mask_b = b; req[c].offset = 8'd20;
    @(negedge clk); push = '0;
  endtask

  // wait for a command of the given kind, return it and the cycles waited
  task automatic expect_cmd(input cmd_e op, output proc_cmd_t got, output int n);
    n = 0;
    while (cmd.op != op && n < 50) begin @(negedge clk); n++; end
    got = cmd;
    check(cmd.op == op, $sformatf("command %0d seen", op));
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    proc_cmd_t g;
    int n, root, child;
    for (int c = 0; c < N; c++) begin
      children[c] = '0;
      for (int r = 0; r < 8; r++) regs[c][r] = 32'(100 * c + r);
    end
    for (int r = 0; r < 8; r++) start_regs[r] = 32'(1000 + r);
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk); start = 1'b1; @(negedge clk); start = 1'b0;
    expect_cmd(CMD_START, g, n);
    root = int'(g.target);
    check(g.other == g.target && g.offset == 8'd5 && g.mask == 8'h03 && g.ret_mask == 8'h0C &&
          g.values[1] == 32'd1001, "root START");
    for_parent[root] = g.ret_mask;
    @(negedge clk);
    check(core_state[root] == 2'd1, "root core allocated");
    // root hires a child
    post(root, OP_QCREATE, 8'h06, 8'h30);
    expect_cmd(CMD_START, g, n);
    child = int'(g.target);
    check(child != root && int'(g.other) == root && g.mask == 8'h06 && g.ret_mask == 8'h30 &&
          g.offset == 8'd20 && g.values[2] == regs[root][2], "child START with parent registers");
    has_parent[child] = 1'b1; parent_id[child] = core_id_t'(root); for_parent[child] = 8'h30;
    @(negedge clk);
    check(cmd.op == CMD_ADDCHILD && int'(cmd.target) == root && int'(cmd.other) == child, "ADDCHILD to parent");
    children[root][child] = 1'b1;
    // root tries to terminate: held back
    post(root, OP_QTERM, 0, 0);
    repeat (5) begin
      @(negedge clk);
      check(wait_o[root] && cmd.op == CMD_NONE, "root termination held back with Wait");
    end
    // a QCLONE from the child is served although the root's QTERM ranks higher
    post(child, OP_QCLONE, 8'h01, 0);
    check(cmd.op == CMD_CLONE && int'(cmd.target) == child && cmd.mask == 8'h01, "clone served at once");
    // child terminates
    post(child, OP_QTERM, 0, 0);
    expect_cmd(CMD_RETURN, g, n);
    check(int'(g.target) == root && int'(g.other) == child && g.mask == 8'h30 &&
          g.values[4] == regs[child][4], "RETURN of child registers to parent latches");
    children[root][child] = 1'b0;
    @(negedge clk);
    check(cmd.op == CMD_STOP && int'(cmd.target) == child, "child STOP");
    @(negedge clk);
    check(core_state[child] == 2'd0, "child back in the pool");
    expect_cmd(CMD_STOP, g, n);
    check(int'(g.target) == root, "root STOP");
    check(root_regs[2] == regs[root][2] && root_regs[3] == regs[root][3] && root_regs[1] == 0,
          "root registers delivered");
    // a QWAIT with no children is acknowledged at once
    post(root, OP_QWAIT, 0, 0);
    check(cmd.op == CMD_ACK && int'(cmd.target) == root, "QWAIT acknowledged");
    // resource tests: 4 cores are free now
    post(root, OP_QAVAIL, 0, 8'd4);
    check(cmd.op == CMD_ACK && cmd.jump && cmd.offset == 8'd20, "QAVAIL 4 taken");
    post(root, OP_QAVAIL, 0, 8'd5);
    check(cmd.op == CMD_ACK && !cmd.jump, "QAVAIL 5 not taken");
    repeat (2) @(negedge clk);
    check(!busy, "idle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && root_done) check(1'b1, "root_done pulse");
endmodule
