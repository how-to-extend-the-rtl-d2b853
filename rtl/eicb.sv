// eicb: EMPA inter-core block of one core, its parent/child bookkeeping.
//
// It decodes the processor's broadcast command bus (commands whose target is this core's
// ID) and keeps the registers of the parent-child relation:
//   mode            QT runs as a guarded (exclusive) critical section
//   children_mask   one bit per core ID currently hired by this core as a child
//   prealloc_mask   one bit per core ID preallocated to this core
//   from_parent     operands received at hiring (also loaded into the register file)
//   from_child      latch storage for registers returned by terminating children,
//                   with a valid bit per register; copied to the register file only on an
//                   explicit clone, so a child can never overwrite a live register
//   for_parent      mask of registers to send back to the parent at termination
//   code_offset     code fragment this QT was started at
//   parent_id / has_parent   the hiring core (root QT has none)
// jump / jump_pc redirect the resuming core (resource test taken).
// Outputs start/stop/ack drive the processing and morphing elements; rf_bulk_* writes the
// register file (operands at start, latched values at clone). Commands act at the next edge;
// start, stop, ack and the bulk write are combinational from the command.
// The register names follow the architecture's inter-core block; their widths, the
// command set and clearing the latch valid bits on clone are this design's choices.
module eicb
  import empa_pkg::*;
#(
  parameter int unsigned NCORES = 60,
  parameter int unsigned ID     = 0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  proc_cmd_t         cmd,
  output logic              start,
  output pc_t               start_pc,
  output logic              stop,
  output logic              ack,
  output logic              jump,
  output pc_t               jump_pc,
  output rmask_t            rf_bulk_mask,
  output regvec_t           rf_bulk_values,
  output logic              mode_excl,
  output logic [NCORES-1:0] children_mask,
  output logic [NCORES-1:0] prealloc_mask,
  output regvec_t           from_parent,
  output regvec_t           from_child,
  output rmask_t            from_child_valid,
  output rmask_t            for_parent,
  output pc_t               code_offset,
  output core_id_t          parent_id,
  output logic              has_parent
);

  logic mine;
  assign mine = (cmd.op != CMD_NONE) && (cmd.target == core_id_t'(ID));

  always_comb begin
    start          = mine && cmd.op == CMD_START;
    start_pc       = cmd.offset;
    stop           = mine && cmd.op == CMD_STOP;
    ack            = mine && (cmd.op inside {CMD_ADDCHILD, CMD_STOP, CMD_CLONE, CMD_ACK, CMD_PREALLOC});
    jump           = mine && cmd.op == CMD_ACK && cmd.jump;
    jump_pc        = cmd.offset;
    rf_bulk_mask   = '0;
    rf_bulk_values = cmd.values;
    if (mine && cmd.op == CMD_START) begin
      rf_bulk_mask = cmd.mask;
    end else if (mine && cmd.op == CMD_CLONE) begin
      rf_bulk_mask   = cmd.mask & from_child_valid;
      rf_bulk_values = from_child;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode_excl        <= 1'b0;
      children_mask    <= '0;
      prealloc_mask    <= '0;
      from_parent      <= '0;
      from_child       <= '0;
      from_child_valid <= '0;
      for_parent       <= '0;
      code_offset      <= '0;
      parent_id        <= '0;
      has_parent       <= 1'b0;
    end else if (mine) begin
      case (cmd.op)
        CMD_START: begin
          mode_excl        <= cmd.excl;
          code_offset      <= cmd.offset;
          for_parent       <= cmd.ret_mask;
          parent_id        <= cmd.other;
          has_parent       <= (cmd.other != core_id_t'(ID));
          from_child_valid <= '0;
          for (int r = 0; r < int'(NREGS); r++)
            from_parent[r] <= cmd.mask[r] ? cmd.values[r] : '0;
        end
        CMD_ADDCHILD: begin
          children_mask[cmd.other] <= 1'b1;
          prealloc_mask[cmd.other] <= 1'b0;
        end
        CMD_PREALLOC: prealloc_mask[cmd.other] <= 1'b1;
        CMD_RETURN: begin
          children_mask[cmd.other] <= 1'b0;
          for (int r = 0; r < int'(NREGS); r++)
            if (cmd.mask[r]) from_child[r] <= cmd.values[r];
          from_child_valid <= from_child_valid | cmd.mask;
        end
        CMD_CLONE: from_child_valid <= from_child_valid & ~cmd.mask;
        CMD_STOP: begin
          mode_excl     <= 1'b0;
          prealloc_mask <= '0;
          has_parent    <= 1'b0;
        end
        default: ;
      endcase
    end
  end

  // a core terminates only when all its children have returned
  a_no_orphans: assert property (@(posedge clk) disable iff (!rst_n)
                                 stop |-> children_mask == '0);

endmodule
