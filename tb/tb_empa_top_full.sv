// tb_empa_top_full: the reference program of empa_asm_pkg on the processor at its default
// size (10 x 6 = 60 cores), with cores 0 and 17 denied. Checks the root's returned
// registers (12, 15, 24, 27, worked out from the program), that the denied cores never
// wake, that six children were hired and that every core is back in the pool at the end.
module tb_empa_top_full;
  import empa_pkg::*;
  import empa_asm_pkg::*;

  localparam int N = 60;

  logic clk = 1'b0, rst_n = 1'b0;
  logic load_we = 1'b0;
  pc_t load_addr = '0;
  word_t load_data = '0;
  logic start = 1'b0;
  logic busy, root_done;
  regvec_t root_regs;
  logic [N-1:0] denied;
  logic [1:0] core_state [N];
  logic [N-1:0] core_awake, core_waiting;

  empa_top dut (
    .clk, .rst_n, .load_we, .load_addr, .load_data, .start, .start_offset('0),
    .start_regs('0), .start_mask('0), .start_ret_mask(ROOT_RET), .busy, .root_done, .root_regs,
    .denied, .core_state, .core_awake, .core_waiting);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_create = 0, n_denied_awake = 0;
  logic done_seen = 1'b0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    denied = '0;
    denied[0]  = 1'b1;
    denied[17] = 1'b1;
  end

  always @(posedge clk) if (rst_n) begin
    if (dut.u_proc.cmd.op == CMD_START && dut.u_proc.cmd.other != dut.u_proc.cmd.target) n_create++;
    if ((core_awake & denied) != '0) n_denied_awake++;
    if (root_done) done_seen <= 1'b1;
  end

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
    @(negedge clk); start = 1'b1;
    @(negedge clk); start = 1'b0;
    wait (done_seen);
    repeat (5) @(posedge clk);
    check(root_regs[3] == 32'd12, "r3 == 12");
    check(root_regs[4] == 32'd15, "r4 == 15");
    check(root_regs[5] == 32'd24, "r5 == 24");
    check(root_regs[6] == 32'd27, "r6 == 27");
    check(core_awake == '0, "all cores back in the pool");
    check(!busy, "processor idle");
    check(n_denied_awake == 0, "denied cores never hired");
    check(n_create == 6, $sformatf("hirings %0d, expected 6", n_create));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
