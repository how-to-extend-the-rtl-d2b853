// tb_proc_status: core pool of a 3 x 2 grid (cores 0..5 at (0,0) (0,2) (1,1) (1,3) (2,0)
// (2,2), see empa_top). Cores 0, 1, 2 form the cluster of head (0,0); 3 and 5 belong to
// the cluster of head (2,4); 4 to that of head (3,-1).
// Checks: proposals prefer the requester's cluster, then lowest ID; denied cores are never
// proposed and show Denied; reserve/take/free update the states; a preallocated core is
// proposed to its owner only; freeing an owner releases its preallocated cores; any_free
// drops when the pool is empty.
module tb_proc_status;
  import empa_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [5:0] denied = '0, owned_by_any;
  core_id_t requester = '0, grant_id, free_id = '0;
  logic use_prealloc = 1'b0, grant_valid, grant_local, take = 1'b0, reserve = 1'b0, free = 1'b0, any_free;
  logic [8:0] free_count;
  logic [1:0] state [6];
  int checks = 0, failures = 0;

  proc_status #(.NCORES(6), .NROWS(2)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic pulse(input int which);   // 0 take, 1 reserve, 2 free
    @(negedge clk);
    take = (which == 0); reserve = (which == 1); free = (which == 2);
    @(negedge clk);
    take = 0; reserve = 0; free = 0;
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
    requester = 5; #1;
    check(grant_valid && grant_id == 3 && grant_local, "core of requester 5's cluster");
    requester = 4; denied = 6'b010000; #1;
    check(grant_valid && grant_id == 0 && !grant_local, "lowest free core when cluster has none");
    denied = '0;
    requester = 1; #1;
    check(grant_id == 0 && grant_local, "same cluster as requester 1");
    denied = 6'b000001; #1;
    check(grant_id != 0 && state[0] == 2'd3, "denied core skipped and reported");
    requester = 0; pulse(0);     // core 0 denied: requester 0 gets core 1 (same cluster)
    check(state[1] == 2'd1, "core 1 allocated");
    requester = 1; pulse(1);     // preallocate a core for 1
    check(state[2] == 2'd2 && owned_by_any[1], "core 2 preallocated to 1");
    requester = 4; use_prealloc = 1; #1;
    check(grant_id == 4, "preallocated core not offered to others");
    requester = 1; #1;
    check(grant_id == 2, "preallocated core offered to owner");
    pulse(0);
    check(state[2] == 2'd1 && !owned_by_any[1], "preallocated core hired");
    use_prealloc = 0;
    requester = 1; pulse(1);
    check(state[3] == 2'd2, "core 3 preallocated to 1");
    requester = 2; pulse(0); pulse(0);
    check(state[4] == 2'd1 && state[5] == 2'd1 && !any_free, "pool empty");
    free_id = 1; pulse(2);
    check(state[1] == 2'd0 && state[3] == 2'd0, "owner freed with its preallocated core");
    check(any_free, "free cores again");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
