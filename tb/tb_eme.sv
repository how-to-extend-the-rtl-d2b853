// tb_eme: drives the morphing element through two meta-instructions. Checks the single
// push pulse one cycle after Meta rises, the decoded request (op, masks, offset) against
// the encoder, that Wait is reflected only while a request is outstanding, that meta_done
// follows ack in the same cycle, and that a stop abandons an outstanding request.
module tb_eme;
  import empa_pkg::*;
  import empa_asm_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, meta = 1'b0, wait_i = 1'b0, ack = 1'b0, stop = 1'b0;
  word_t meta_instr = '0;
  logic push, waiting, meta_done;
  meta_t req;
  int checks = 0, failures = 0, pushes = 0;

  eme dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && push) pushes++;

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
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    wait_i = 1'b1; @(negedge clk);
    check(!waiting, "no Wait without a request");
    wait_i = 1'b0;
    meta = 1'b1; meta_instr = QCREATE(8'h06, 8'h08, 8'd40);
    @(negedge clk);
    check(push, "push one cycle after Meta");
    check(req.op == OP_QCREATE && req.mask_a == 8'h06 && req.mask_b == 8'h08 && req.offset == 8'd40, "request decoded");
    @(negedge clk);
    check(!push, "push is a single pulse");
    wait_i = 1'b1; #1;
    check(waiting, "Wait reflected");
    repeat (3) @(negedge clk);
    check(pushes == 1, "no re-push while waiting");
    wait_i = 1'b0; ack = 1'b1; #1;
    check(meta_done, "meta_done with ack");
    @(negedge clk); ack = 1'b0; meta = 1'b0; #1;
    check(!meta_done, "meta_done is a single pulse");
    @(negedge clk);
    meta = 1'b1; meta_instr = QTERM();
    @(negedge clk);
    check(push && req.op == OP_QTERM, "second request pushed");
    stop = 1'b1; @(negedge clk); stop = 1'b0; meta = 1'b0;
    wait_i = 1'b1; #1;
    check(!waiting && !meta_done, "stop abandons the request");
    @(negedge clk); wait_i = 1'b0;
    check(pushes == 2, "two pushes in all");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
