// tb_eicb: sends the inter-core block (ID 5 of 8 cores) each processor command and checks
// its registers against values written here: START loads offset, return mask, parent and
// the operands (bulk write of the masked registers); ADDCHILD / PREALLOC / RETURN keep the
// children and preallocated masks; RETURN fills only the masked FromChild latches; CLONE
// writes back only latched, requested registers; commands for other IDs are ignored; ack
// is raised for exactly the commands that finish a meta-instruction.
module tb_eicb;
  import empa_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  proc_cmd_t cmd = '0;
  logic start, stop, ack, jump, mode_excl, has_parent;
  pc_t start_pc, code_offset, jump_pc;
  rmask_t rf_bulk_mask, from_child_valid, for_parent;
  regvec_t rf_bulk_values, from_parent, from_child;
  logic [7:0] children_mask, prealloc_mask;
  core_id_t parent_id;
  int checks = 0, failures = 0;

  eicb #(.NCORES(8), .ID(5)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic send(input cmd_e op, input int target, input int other, input rmask_t m,
                      input rmask_t rm, input regvec_t v);
    @(negedge clk);
    cmd = '0; cmd.op = op; cmd.target = core_id_t'(target); cmd.other = core_id_t'(other);
    cmd.mask = m; cmd.ret_mask = rm; cmd.values = v; cmd.offset = 8'd77; cmd.excl = 1'b1;
  endtask

  initial begin
    repeat (1000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    regvec_t v1, v2;
    for (int r = 0; r < 8; r++) begin v1[r] = 32'h100 + r; v2[r] = 32'h200 + r; end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    send(CMD_START, 5, 2, 8'b0000_0110, 8'b1000_0000, v1); #1;
    check(start && start_pc == 8'd77 && !ack, "start decoded");
    check(rf_bulk_mask == 8'b0000_0110 && rf_bulk_values[1] == 32'h101, "operands to registers");
    send(CMD_START, 4, 2, 8'hFF, 8'h00, v2); #1;
    check(!start && rf_bulk_mask == 0, "other core's command ignored");
    check(code_offset == 8'd77 && for_parent == 8'b1000_0000 && parent_id == 2 && has_parent && mode_excl,
          "START registers");
    check(from_parent[1] == 32'h101 && from_parent[2] == 32'h102 && from_parent[3] == 0, "FromParent latch");
    send(CMD_ADDCHILD, 5, 3, 0, 0, v1); #1;
    check(ack, "ack on ADDCHILD");
    send(CMD_PREALLOC, 5, 6, 0, 0, v1); #1;
    check(ack, "ack on PREALLOC");
    send(CMD_ADDCHILD, 5, 6, 0, 0, v1); #1;
    check(children_mask == 8'b0000_1000 && prealloc_mask == 8'b0100_0000, "masks after ADDCHILD/PREALLOC");
    send(CMD_RETURN, 5, 3, 8'b0011_0000, 0, v2); #1;
    check(!ack, "no ack on RETURN");
    check(children_mask == 8'b0100_1000 && prealloc_mask == 8'b0, "preallocated core became a child");
    send(CMD_NONE, 0, 0, 0, 0, v1); #1;
    check(children_mask == 8'b0100_0000, "child 3 returned");
    check(from_child_valid == 8'b0011_0000 && from_child[4] == 32'h204 && from_child[5] == 32'h205,
          "FromChild latches");
    send(CMD_CLONE, 5, 0, 8'b0001_0001, 0, v1); #1;
    check(ack && rf_bulk_mask == 8'b0001_0000 && rf_bulk_values[4] == 32'h204, "clone only latched registers");
    send(CMD_RETURN, 5, 6, 8'b0000_0001, 0, v1);
    send(CMD_STOP, 5, 0, 0, 0, v1); #1;
    check(stop && ack, "stop decoded");
    check(from_child_valid == 8'b0010_0001 && children_mask == 0, "latch valid after clone and return");
    send(CMD_NONE, 0, 0, 0, 0, v1); #1;
    check(!has_parent && !mode_excl, "released");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
