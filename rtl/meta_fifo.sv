// meta_fifo: the processor's priority-ordered queue of meta-instructions.
//
// Cores write meta-instructions without authorization (push, one cycle); since a core has
// at most one active meta-instruction, the queue holds one slot per core and can never
// overflow. Each slot records its arrival time. The queue offers the processor the entry
// of highest priority (terminate > wait/clone > create/preallocate, see empa_pkg::meta_prio)
// among those the processor marks servable; equal priorities go oldest first, then lowest
// core ID. Entries that are not servable stay queued (their cores see 'Wait'). The
// processor removes an entry with pop / pop_idx when it has finished executing it.
// Selection is combinational; push and pop act at the clock edge.
// Ordering by priority follows the architecture; the one-slot-per-core organisation, the
// age tie-break and skipping unservable entries are this design's choices.
module meta_fifo
  import empa_pkg::*;
#(
  parameter int unsigned NCORES = 60
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic  [NCORES-1:0]  push,
  input  meta_t [NCORES-1:0]  req,
  input  logic  [NCORES-1:0]  servable,
  input  logic                pop,
  input  core_id_t            pop_idx,
  output logic  [NCORES-1:0]  slot_valid,
  output meta_t [NCORES-1:0]  slot,
  output logic                sel_valid,
  output core_id_t            sel_idx
);

  logic [15:0] now;
  logic [15:0] stamp [NCORES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now        <= '0;
      slot_valid <= '0;
      slot       <= '0;
      for (int c = 0; c < int'(NCORES); c++) stamp[c] <= '0;
    end else begin
      now <= now + 1'b1;
      for (int c = 0; c < int'(NCORES); c++) begin
        if (push[c]) begin
          slot_valid[c] <= 1'b1;
          slot[c]       <= req[c];
          stamp[c]      <= now;
        end else if (pop && pop_idx == core_id_t'(c)) begin
          slot_valid[c] <= 1'b0;
        end
      end
    end
  end

  always_comb begin
    logic [1:0]  best_p;
    logic [15:0] best_age;
    sel_valid = 1'b0;
    sel_idx   = '0;
    best_p    = '0;
    best_age  = '0;
    for (int c = 0; c < int'(NCORES); c++) begin
      if (slot_valid[c] && servable[c]) begin
        if (!sel_valid || meta_prio(slot[c].op) > best_p ||
            (meta_prio(slot[c].op) == best_p && (now - stamp[c]) > best_age)) begin
          sel_valid = 1'b1;
          sel_idx   = core_id_t'(c);
          best_p    = meta_prio(slot[c].op);
          best_age  = now - stamp[c];
        end
      end
    end
  end

  // a core has at most one active meta-instruction
  for (genvar c = 0; c < int'(NCORES); c++) begin : g_chk
    a_one_per_core: assert property (@(posedge clk) disable iff (!rst_n)
                                     push[c] |-> !slot_valid[c]);
  end

endmodule
