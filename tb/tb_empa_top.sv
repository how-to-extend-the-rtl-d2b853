// tb_empa_top: end-to-end test of the EMPA processor on a 3 x 2 grid with cores 2, 4 and 5
// denied, so that only three cores can be hired and the pool runs dry.
//
// Loads the reference program of empa_asm_pkg, starts the root QT and checks the registers
// it returns against values computed here from the program's arithmetic. It also counts
// how often each mechanism happened and fails if one never did: hiring, termination,
// Wait for lack of a free core, termination held back by live children, QWAIT stall,
// exclusive (critical-section) creation held back, cloning from the latches, use of a
// preallocated core, multi-hop transfers, hiring in the requester's own cluster, resource
// tests (QAVAIL) both taken and falling through. A
// denied core must never wake up, and no core may be awake after the root returns.
module tb_empa_top;
  import empa_pkg::*;
  import empa_asm_pkg::*;

  localparam int NC = 3, NR = 2, N = NC * NR;

  logic clk = 1'b0, rst_n = 1'b0;
  logic load_we = 1'b0;
  pc_t load_addr = '0;
  word_t load_data = '0;
  logic start = 1'b0;
  regvec_t start_regs = '0;
  logic busy, root_done;
  regvec_t root_regs;
  logic [N-1:0] denied = 6'b110100;
  logic [1:0] core_state [N];
  logic [N-1:0] core_awake, core_waiting;

  empa_top #(.NCOLS(NC), .NROWS(NR)) dut (
    .clk, .rst_n, .load_we, .load_addr, .load_data, .start, .start_offset('0),
    .start_regs, .start_mask('0), .start_ret_mask(ROOT_RET), .busy, .root_done, .root_regs,
    .denied, .core_state, .core_awake, .core_waiting);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cycles = 0;
  int n_create = 0, n_term = 0, n_nocore = 0, n_termblk = 0, n_qwait = 0, n_mutex = 0,
      n_clone = 0, n_prealloc_use = 0, n_multihop = 0, n_local = 0, n_denied_awake = 0,
      n_avail_taken = 0, n_avail_fell = 0;
  logic done_seen = 1'b0;
  int done_cycle = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // mechanism counters
  always @(posedge clk) if (rst_n) begin
    cycles <= cycles + 1;
    for (int c = 0; c < N; c++) begin
      if (dut.u_proc.wait_o[c]) begin
        case (dut.u_proc.slot[c].op)
          OP_QCREATE, OP_QPREAL: n_nocore++;
          OP_QCREATX: if (dut.u_proc.any_free) n_mutex++; else n_nocore++;
          OP_QTERM: n_termblk++;
          OP_QWAIT: n_qwait++;
          default: ;
        endcase
      end
      if (denied[c] && core_awake[c]) n_denied_awake++;
    end
    case (dut.u_proc.cmd.op)
      CMD_START: if (dut.u_proc.cmd.other != dut.u_proc.cmd.target) n_create++;
      CMD_STOP:  n_term++;
      CMD_CLONE: n_clone++;
      CMD_ACK:   if (dut.u_proc.slot[dut.u_proc.cmd.target].op == OP_QAVAIL) begin
                   if (dut.u_proc.cmd.jump) n_avail_taken++; else n_avail_fell++;
                 end
      default: ;
    endcase
    if (dut.u_proc.take && core_state[dut.u_proc.grant_id] == 2'd2) n_prealloc_use++;
    if (int'(dut.u_proc.state) == 1 && dut.u_proc.cnt != 0) n_multihop++;
    if (dut.u_proc.take && dut.u_proc.grant_local && int'(dut.u_proc.state) == 0 &&
        !dut.u_proc.root_pending) n_local++;
    if (root_done) begin
      done_seen  <= 1'b1;
      done_cycle <= cycles;
    end
  end

  // watchdog
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int a = 0; a < PROG_LEN; a++) begin
      @(negedge clk);
      load_we = 1'b1; load_addr = pc_t'(a); load_data = prog(a);
    end
    @(negedge clk); load_we = 1'b0;
    check(core_awake == '0, "all cores asleep before start");
    @(negedge clk); start = 1'b1;
    @(negedge clk); start = 1'b0;
    wait (done_seen);
    repeat (5) @(posedge clk);
    check(root_regs[3] == 32'd12, $sformatf("r3 = %0d, expected 12", root_regs[3]));
    check(root_regs[4] == 32'd15, $sformatf("r4 = %0d, expected 15", root_regs[4]));
    check(root_regs[5] == 32'd24, $sformatf("r5 = %0d, expected 24", root_regs[5]));
    check(root_regs[6] == 32'd27, $sformatf("r6 = %0d, expected 27", root_regs[6]));
    check(root_regs[1] == 32'd0 && root_regs[2] == 32'd0, "registers outside the return mask not returned");
    check(core_awake == '0, "all cores back in the pool");
    check(!busy, "processor idle");
    check(n_denied_awake == 0, "denied core never hired");
    check(n_create == 6, $sformatf("hirings %0d, expected 6", n_create));
    check(n_term == 7, $sformatf("terminations %0d, expected 7", n_term));
    check(n_nocore > 0, "Wait for a free core happened");
    check(n_termblk > 0, "termination held back by live children happened");
    check(n_qwait > 0, "QWAIT stall happened");
    check(n_mutex > 0, "exclusive creation held back happened");
    check(n_clone == 2, $sformatf("clones %0d, expected 2", n_clone));
    check(n_avail_taken == 1 && n_avail_fell == 1,
          $sformatf("resource tests taken %0d / fell through %0d, expected 1 / 1", n_avail_taken, n_avail_fell));
    check(n_prealloc_use == 1, $sformatf("preallocated core used %0d times, expected 1", n_prealloc_use));
    check(n_multihop > 0, "multi-hop transfer happened");
    check(n_local > 0, "hiring within the requester's cluster happened");
    $display("mechanisms: create=%0d term=%0d nocore_wait=%0d term_blocked=%0d qwait=%0d mutex=%0d clone=%0d prealloc=%0d multihop=%0d local=%0d avail=%0d/%0d cycles=%0d",
             n_create, n_term, n_nocore, n_termblk, n_qwait, n_mutex, n_clone, n_prealloc_use, n_multihop, n_local, n_avail_taken, n_avail_fell, done_cycle);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
