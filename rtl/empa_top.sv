// empa_top: an EMPA (Explicitly Many-Processor Approach) processor.
//
// NCOLS x NROWS cores (default 10 x 6, the grid of the reference cluster layout) sit on a
// logically hexagonal grid; core ID c is at column x = c / NROWS, y = 2*(c % NROWS) + x%2.
// Each core runs one quasi-thread (QT) at a time and sleeps in the core pool otherwise. All
// cores fetch from one multi-port code memory, loaded through load_*. The processor layer
// (empa_processor) executes the meta-instructions the cores raise: it hires child cores,
// passes register contents parent -> child at hiring and child -> parent latches at
// termination, and returns cores to the pool.
// Operation: load the program, pulse 'start' with the root QT's offset and registers; the
// root QT runs, may hire children (which may hire their own), and root_done pulses with the
// root's returned registers (root_regs) when it executes QTERM. 'denied' keeps cores from
// being hired; core_state / core_awake / core_waiting show the pool.
// The message-based communicating element, storage manager, cluster storage and the
// inter-cluster / inter-processor buses are not part of this RTL.
module empa_top
  import empa_pkg::*;
#(
  parameter int unsigned NCOLS = 10,
  parameter int unsigned NROWS = 6
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // program load
  input  logic                         load_we,
  input  pc_t                          load_addr,
  input  word_t                        load_data,
  // root QT
  input  logic                         start,
  input  pc_t                          start_offset,
  input  regvec_t                      start_regs,
  input  rmask_t                       start_mask,
  input  rmask_t                       start_ret_mask,
  output logic                         busy,
  output logic                         root_done,
  output regvec_t                      root_regs,
  // core pool
  input  logic [NCOLS*NROWS-1:0]       denied,
  output logic [1:0]                   core_state   [NCOLS*NROWS],
  output logic [NCOLS*NROWS-1:0]       core_awake,
  output logic [NCOLS*NROWS-1:0]       core_waiting
);

  localparam int unsigned NCORES = NCOLS * NROWS;

  pc_t     [NCORES-1:0] pc;
  word_t   [NCORES-1:0] instr;
  logic    [NCORES-1:0] push, wait_c, mode_excl, has_parent;
  meta_t   [NCORES-1:0] req;
  regvec_t              regs     [NCORES];
  logic    [NCORES-1:0] children [NCORES];
  logic    [NCORES-1:0] prealloc [NCORES];
  regvec_t              from_child [NCORES];
  rmask_t  [NCORES-1:0] fc_valid, for_parent;
  pc_t     [NCORES-1:0] code_offset;
  core_id_t [NCORES-1:0] parent_id;
  proc_cmd_t            cmd;

  code_mem #(.NPORTS(NCORES)) u_mem (
    .clk, .we(load_we), .waddr(load_addr), .wdata(load_data), .raddr(pc), .rdata(instr));

  for (genvar c = 0; c < int'(NCORES); c++) begin : g_core
    empa_core #(.NCORES(NCORES), .ID(c)) u_core (
      .clk, .rst_n, .pc(pc[c]), .instr(instr[c]), .cmd, .wait_i(wait_c[c]),
      .push(push[c]), .req(req[c]), .awake(core_awake[c]), .waiting(core_waiting[c]),
      .regs(regs[c]), .mode_excl(mode_excl[c]), .children_mask(children[c]),
      .prealloc_mask(prealloc[c]), .from_child(from_child[c]),
      .from_child_valid(fc_valid[c]), .for_parent(for_parent[c]),
      .code_offset(code_offset[c]), .parent_id(parent_id[c]), .has_parent(has_parent[c]));
  end

  empa_processor #(.NCOLS(NCOLS), .NROWS(NROWS)) u_proc (
    .clk, .rst_n, .start, .start_offset, .start_regs, .start_mask, .start_ret_mask,
    .busy, .root_done, .root_regs, .denied, .core_state,
    .push, .req, .regs, .children, .mode_excl, .code_offset, .parent_id, .has_parent,
    .for_parent, .cmd, .wait_o(wait_c));

endmodule
