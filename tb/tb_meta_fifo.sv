// tb_meta_fifo: eight slots. Pushes requests of different kinds at different times and
// checks the selection against the rule computed here: highest priority first
// (terminate > wait/clone > create), then oldest, then lowest core; unservable entries are
// skipped and stay queued; popped entries leave.
module tb_meta_fifo;
  import empa_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, pop = 1'b0;
  logic [7:0] push = '0, servable = '1, slot_valid;
  meta_t [7:0] req = '0, slot;
  core_id_t pop_idx = '0, sel_idx;
  logic sel_valid;
  int checks = 0, failures = 0;

  meta_fifo #(.NCORES(8)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic put(input int c, input opcode_e op);
    @(negedge clk);
    push = '0; push[c] = 1'b1; req[c].op = op; req[c].offset = pc_t'(c);
    @(negedge clk); push = '0;
  endtask

  task automatic take(input int c);
    @(negedge clk); pop = 1'b1; pop_idx = core_id_t'(c);
    @(negedge clk); pop = 1'b0;
  endtask

  initial begin
    repeat (1000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    #1 check(!sel_valid, "empty");
    put(6, OP_QCREATE);
    put(2, OP_QCREATE);
    put(4, OP_QWAIT);
    #1 check(sel_valid && sel_idx == 4, "wait beats older creates");
    put(7, OP_QTERM);
    #1 check(sel_idx == 7, "terminate beats all");
    check(slot_valid == 8'b1101_0100 && slot[6].offset == 6, "slots hold requests");
    servable = 8'b0110_1111;      // terminate of 7 and wait of 4 blocked... 4 servable
    servable[4] = 1'b0; #1;
    check(sel_idx == 6, "oldest servable create when others blocked");
    servable = '1;
    take(7); take(4);
    #1 check(sel_idx == 6, "oldest create first");
    take(6);
    #1 check(sel_idx == 2, "then the next");
    servable = '0; #1;
    check(!sel_valid && slot_valid[2], "nothing servable, entry kept");
    servable = '1; take(2);
    #1 check(!sel_valid && slot_valid == 0, "empty again");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
