// empa_processor: the processor layer that manages the cores ("Processor" with its Meta
// FIFO and Proc Status).
//
// It computes no payload; it hires, links and releases cores. Meta-instructions posted by
// the cores wait in the Meta FIFO; each cycle the processor decides which of them it could
// serve now and, when idle, executes the highest-priority one:
//   QCREATE / QCREATX  hire a core (preallocated to the parent, else in the parent's
//                      cluster, else any free one), wait the transfer time, start it at
//                      the code offset with the masked parent registers (CMD_START), then
//                      record it in the parent's children mask and release the parent
//                      (CMD_ADDCHILD). QCREATX is held back while another QT runs the same
//                      code offset in exclusive mode (a guarded critical section).
//   QTERM              only when the core has no live children: wait the transfer time,
//                      write the requested registers into the parent's FromChild latches
//                      (CMD_RETURN), then put the core back in the pool (CMD_STOP). A root
//                      QT (no parent) delivers its registers on root_regs / root_done.
//   QWAIT              release the core once its children mask is empty (CMD_ACK).
//   QCLONE             copy latched child results into the register file (CMD_CLONE).
//   QPREAL             reserve a core for the requester (CMD_PREALLOC).
//   QAVAIL n, off      resource test: resume at 'off' if at least n cores are free now,
//                      else at the next instruction (CMD_ACK with jump).
// A queued request that cannot be served raises that core's 'Wait' line. Terminating
// outranks creating. The transfer time is the hop count msg_route gives between the two
// cores' addresses (at least one cycle), modelling location-dependent message time.
// 'start' launches the root QT on a free core with start_regs/start_mask, returning the
// registers in start_ret_mask. Commands go out one per cycle on the broadcast bus 'cmd'.
// Ordering rules, the Wait behaviour and the latch-based return follow the architecture;
// the command protocol, transfer-time model and serial one-at-a-time execution are this
// design's choices.
module empa_processor
  import empa_pkg::*;
#(
  parameter int unsigned NCOLS  = 10,
  parameter int unsigned NROWS  = 6,
  parameter int unsigned NCORES = NCOLS * NROWS
) (
  input  logic                clk,
  input  logic                rst_n,
  // root QT
  input  logic                start,
  input  pc_t                 start_offset,
  input  regvec_t             start_regs,
  input  rmask_t              start_mask,
  input  rmask_t              start_ret_mask,
  output logic                busy,
  output logic                root_done,
  output regvec_t             root_regs,
  // core pool
  input  logic  [NCORES-1:0]  denied,
  output logic  [1:0]         core_state [NCORES],
  // from the cores
  input  logic  [NCORES-1:0]  push,
  input  meta_t [NCORES-1:0]  req,
  input  regvec_t             regs       [NCORES],
  input  logic  [NCORES-1:0]  children   [NCORES],
  input  logic  [NCORES-1:0]  mode_excl,
  input  pc_t   [NCORES-1:0]  code_offset,
  input  core_id_t [NCORES-1:0] parent_id,
  input  logic  [NCORES-1:0]  has_parent,
  input  rmask_t [NCORES-1:0] for_parent,
  // to the cores
  output proc_cmd_t           cmd,
  output logic  [NCORES-1:0]  wait_o
);

  typedef enum logic [2:0] {P_IDLE, P_XFER, P_CMD1, P_CMD2} pstate_e;
  pstate_e  state;
  core_id_t cur, other;
  meta_t    cur_m;
  logic [3:0] cnt;
  logic     root_pending;
  pc_t      root_off;
  regvec_t  root_vals;
  rmask_t   root_mask, root_ret;

  // ---------------- Meta FIFO ----------------
  logic  [NCORES-1:0] slot_valid, servable;
  meta_t [NCORES-1:0] slot;
  logic     sel_valid, pop;
  core_id_t sel_idx, pop_idx;
  assign pop_idx = (state == P_IDLE) ? sel_idx : cur;

  meta_fifo #(.NCORES(NCORES)) u_fifo (
    .clk, .rst_n, .push, .req, .servable, .pop, .pop_idx,
    .slot_valid, .slot, .sel_valid, .sel_idx);

  // ---------------- core pool ----------------
  core_id_t pool_req;
  logic     use_pre, grant_valid, grant_local, take, reserve, free, any_free;
  core_id_t grant_id, free_id;
  logic [NCORES-1:0] owned_by_any;
  logic [CORE_ID_W:0] free_count;

  proc_status #(.NCORES(NCORES), .NROWS(NROWS)) u_pool (
    .clk, .rst_n, .denied, .requester(pool_req), .use_prealloc(use_pre),
    .grant_valid, .grant_id, .grant_local, .take, .reserve, .free, .free_id,
    .any_free, .free_count, .owned_by_any, .state(core_state));

  // ---------------- addresses and transfer time ----------------
  core_addr_t addr [NCORES];
  for (genvar c = 0; c < int'(NCORES); c++) begin : g_addr
    localparam int X = c / int'(NROWS);
    localparam int Y = 2 * (c % int'(NROWS)) + (X % 2);
    core_addr_t unused_d;
    coord_t     ux, uy;
    logic       uh, ue;
    assign unused_d = '0;
    hex_addr #(.NCOLS(NCOLS), .NROWS(NROWS)) u_a (
      .enc_proc('0), .enc_x(coord_t'(X)), .enc_y(coord_t'(Y)), .enc_addr(addr[c]),
      .enc_is_head(uh), .dec_addr(unused_d), .dec_x(ux), .dec_y(uy), .dec_exists(ue));
  end

  core_id_t   rt_a, rt_b;
  logic [2:0] route, next_dir;
  logic [3:0] hops;
  msg_route #(.NCOLS(NCOLS), .NROWS(NROWS)) u_route (
    .src_addr(addr[rt_a]), .dst_addr(addr[rt_b]), .route, .next_dir, .hops);

  // ---------------- servability of queued requests ----------------
  always_comb begin
    for (int c = 0; c < int'(NCORES); c++) begin
      logic excl_busy;
      excl_busy = 1'b0;
      for (int k = 0; k < int'(NCORES); k++)
        if (core_state[k] == 2'd1 && mode_excl[k] && code_offset[k] == slot[c].offset)
          excl_busy = 1'b1;
      case (slot[c].op)
        OP_QTERM, OP_QWAIT: servable[c] = (children[c] == '0);
        OP_QCREATE:         servable[c] = any_free || owned_by_any[c];
        OP_QCREATX:         servable[c] = (any_free || owned_by_any[c]) && !excl_busy;
        OP_QPREAL:          servable[c] = any_free;
        default:            servable[c] = 1'b1;
      endcase
      wait_o[c] = slot_valid[c] && !servable[c];
    end
  end

  // ---------------- executor ----------------
  logic is_create, is_term;
  assign is_create = (cur_m.op == OP_QCREATE) || (cur_m.op == OP_QCREATX);
  assign is_term   = (cur_m.op == OP_QTERM);

  always_comb begin
    // pool request: the root start, or the FIFO head while idle
    pool_req = (state == P_IDLE && !root_pending) ? sel_idx : cur;
    use_pre  = (state == P_IDLE && !root_pending && sel_valid &&
                (slot[sel_idx].op inside {OP_QCREATE, OP_QCREATX}));
    take     = 1'b0;
    reserve  = 1'b0;
    free     = 1'b0;
    free_id  = cur;
    pop      = 1'b0;
    rt_a     = cur;
    rt_b     = other;
    cmd      = '0;
    if (state == P_IDLE && root_pending) begin
      if (grant_valid) begin
        take        = 1'b1;
        cmd.op      = CMD_START;
        cmd.target  = grant_id;
        cmd.other   = grant_id;          // no parent
        cmd.offset  = root_off;
        cmd.values  = root_vals;
        cmd.mask    = root_mask;
        cmd.ret_mask = root_ret;
      end
    end else if (state == P_IDLE && sel_valid) begin
      case (slot[sel_idx].op)
        OP_QCREATE, OP_QCREATX: take = 1'b1;
        OP_QWAIT: begin
          cmd.op = CMD_ACK; cmd.target = sel_idx; pop = 1'b1;
        end
        OP_QAVAIL: begin
          cmd.op = CMD_ACK; cmd.target = sel_idx; pop = 1'b1;
          cmd.jump   = (free_count >= (CORE_ID_W+1)'(slot[sel_idx].mask_b));
          cmd.offset = slot[sel_idx].offset;
        end
        OP_QCLONE: begin
          cmd.op = CMD_CLONE; cmd.target = sel_idx; cmd.mask = slot[sel_idx].mask_a; pop = 1'b1;
        end
        OP_QPREAL: begin
          reserve = 1'b1;
          cmd.op = CMD_PREALLOC; cmd.target = sel_idx; cmd.other = grant_id; pop = 1'b1;
        end
        default: ;
      endcase
      free_id = sel_idx;
    end else if (state == P_CMD1) begin
      if (is_create) begin
        cmd.op       = CMD_START;
        cmd.target   = other;
        cmd.other    = cur;
        cmd.offset   = cur_m.offset;
        cmd.values   = regs[cur];
        cmd.mask     = cur_m.mask_a;
        cmd.ret_mask = cur_m.mask_b;
        cmd.excl     = (cur_m.op == OP_QCREATX);
      end else if (is_term && has_parent[cur]) begin
        cmd.op     = CMD_RETURN;
        cmd.target = other;
        cmd.other  = cur;
        cmd.mask   = for_parent[cur];
        cmd.values = regs[cur];
      end
    end else if (state == P_CMD2) begin
      pop = 1'b1;
      if (is_create) begin
        cmd.op = CMD_ADDCHILD; cmd.target = cur; cmd.other = other;
      end else begin
        cmd.op = CMD_STOP; cmd.target = cur;
        free   = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= P_IDLE;
      cur          <= '0;
      other        <= '0;
      cur_m        <= '0;
      cnt          <= '0;
      root_pending <= 1'b0;
      root_off     <= '0;
      root_vals    <= '0;
      root_mask    <= '0;
      root_ret     <= '0;
      root_done    <= 1'b0;
      root_regs    <= '0;
    end else begin
      root_done <= 1'b0;
      if (start && !root_pending) begin
        root_pending <= 1'b1;
        root_off     <= start_offset;
        root_vals    <= start_regs;
        root_mask    <= start_mask;
        root_ret     <= start_ret_mask;
      end
      case (state)
        P_IDLE: begin
          if (root_pending) begin
            if (grant_valid) root_pending <= 1'b0;
          end else if (sel_valid) begin
            cur   <= sel_idx;
            cur_m <= slot[sel_idx];
            case (slot[sel_idx].op)
              OP_QCREATE, OP_QCREATX: begin
                other <= grant_id;
                state <= P_XFER;
                cnt   <= '0;
              end
              OP_QTERM: begin
                other <= parent_id[sel_idx];
                state <= has_parent[sel_idx] ? P_XFER : P_CMD2;
                cnt   <= '0;
                if (!has_parent[sel_idx]) begin
                  root_done <= 1'b1;
                  for (int r = 0; r < int'(NREGS); r++)
                    root_regs[r] <= for_parent[sel_idx][r] ? regs[sel_idx][r] : '0;
                end
              end
              default: ;   // one-cycle operations, popped below via cur
            endcase
          end
        end
        P_XFER: begin
          // transfer time between the two cores: hops cycles (at least one)
          cnt <= cnt + 1'b1;
          if (cnt + 1'b1 >= hops) state <= P_CMD1;
        end
        P_CMD1: state <= P_CMD2;
        P_CMD2: state <= P_IDLE;
        default: state <= P_IDLE;
      endcase
    end
  end

  assign busy = (state != P_IDLE) || root_pending || (slot_valid != '0);

endmodule
