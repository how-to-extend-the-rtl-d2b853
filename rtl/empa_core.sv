// empa_core: one EMPA core: processing element (epe), morphing element (eme), inter-core
// block (eicb) and register file (regfile).
//
// The core fetches through its own code-memory port (pc / instr). A meta-instruction stops
// the processing element, the morphing element posts it to the processor (push / req) and
// the core resumes when the processor acknowledges it through the command bus. The
// processor reads the whole register file (regs) and the inter-core block state to move
// register contents between cores. 'awake' is low while the core sleeps in the core pool.
// A root QT is started with other == its own ID, which marks it as having no parent.
// Composition follows the architecture's core diagram; the message-based communicating
// element is not part of this RTL (register transfers travel over the command bus).
module empa_core
  import empa_pkg::*;
#(
  parameter int unsigned NCORES = 60,
  parameter int unsigned ID     = 0
) (
  input  logic              clk,
  input  logic              rst_n,
  output pc_t               pc,
  input  word_t             instr,
  input  proc_cmd_t         cmd,
  input  logic              wait_i,
  output logic              push,
  output meta_t             req,
  output logic              awake,
  output logic              waiting,
  output regvec_t           regs,
  output logic              mode_excl,
  output logic [NCORES-1:0] children_mask,
  output logic [NCORES-1:0] prealloc_mask,
  output regvec_t           from_child,
  output rmask_t            from_child_valid,
  output rmask_t            for_parent,
  output pc_t               code_offset,
  output core_id_t          parent_id,
  output logic              has_parent
);

  logic    start, stop, ack, meta, meta_done, rf_we, jump;
  pc_t     start_pc, jump_pc;
  word_t   meta_instr, rf_wdata;
  logic [$clog2(NREGS)-1:0] rf_waddr;
  rmask_t  bulk_mask;
  regvec_t bulk_values, from_parent;

  epe u_epe (
    .clk, .rst_n, .start, .start_pc, .stop, .meta_done, .jump, .jump_pc, .instr, .regs,
    .pc, .awake, .meta, .meta_instr, .rf_we, .rf_waddr, .rf_wdata);

  eme u_eme (
    .clk, .rst_n, .meta, .meta_instr, .wait_i, .ack, .stop,
    .push, .req, .waiting, .meta_done);

  eicb #(.NCORES(NCORES), .ID(ID)) u_eicb (
    .clk, .rst_n, .cmd, .start, .start_pc, .stop, .ack, .jump, .jump_pc,
    .rf_bulk_mask(bulk_mask), .rf_bulk_values(bulk_values),
    .mode_excl, .children_mask, .prealloc_mask, .from_parent, .from_child,
    .from_child_valid, .for_parent, .code_offset, .parent_id, .has_parent);

  regfile u_rf (
    .clk, .rst_n, .we(rf_we), .waddr(rf_waddr), .wdata(rf_wdata),
    .bulk_mask, .bulk_values, .regs);

endmodule
