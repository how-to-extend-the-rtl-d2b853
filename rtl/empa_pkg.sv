// empa_pkg: types and constants shared by the EMPA processor RTL.
//
// Address layout (processor / cluster / proxy / neighbor, 6+6+3+3 bits) follows the
// hierarchical cluster addressing of the EMPA architecture. The cluster field is split here
// into two signed 3-bit lattice coordinates (i, j) of the cluster head; that split, the
// register file size, the instruction encoding and the processor-to-core command set are
// choices of this implementation, not given by the architecture description.
//
// Hexagonal grid: core (x, y) has y of the same parity as x; its six neighbours are
// (x, y+-2) and (x+-1, y+-1). Cluster heads lie where (2x - y) mod 7 == 0, and for any core
// (2x - y) mod 7 is the direction code (1..6) in which it lies from its own head, 0 for the
// head itself. Direction codes: 1:(+1,+1) 2:(0,-2) 3:(+1,-1) 4:(-1,+1) 5:(0,+2) 6:(-1,-1).
// Cluster head of lattice coordinate (i, j) is at i*(2,4) + j*(3,-1).
package empa_pkg;

  // ---- hierarchical core address ----
  localparam int unsigned PROC_W    = 6;
  localparam int unsigned CLUSTER_W = 6;
  localparam int unsigned PROXY_W   = 3;
  localparam int unsigned NEIGH_W   = 3;
  localparam int unsigned ADDR_W    = PROC_W + CLUSTER_W + PROXY_W + NEIGH_W;  // 18

  typedef struct packed {
    logic [PROC_W-1:0]    proc;
    logic [CLUSTER_W-1:0] cluster;   // {i[2:0], j[2:0]}, two's complement each
    logic [PROXY_W-1:0]   proxy;     // 0: none, 1..6: direction of the r=1 proxy member
    logic [NEIGH_W-1:0]   neigh;     // 0: the head (or the proxy itself), 1..6: direction
  } core_addr_t;

  // logical grid coordinate, signed
  localparam int unsigned COORD_W = 8;
  typedef logic signed [COORD_W-1:0] coord_t;

  // direction offsets of the hexagonal grid
  function automatic coord_t dir_dx(input logic [2:0] d);
    case (d)
      3'd1, 3'd3: return  coord_t'(1);
      3'd4, 3'd6: return -coord_t'(1);
      default:    return  coord_t'(0);
    endcase
  endfunction

  function automatic coord_t dir_dy(input logic [2:0] d);
    case (d)
      3'd1, 3'd4: return  coord_t'(1);
      3'd3, 3'd6: return -coord_t'(1);
      3'd2:       return -coord_t'(2);
      3'd5:       return  coord_t'(2);
      default:    return  coord_t'(0);
    endcase
  endfunction

  // hexagonal distance between two grid points (axial q = x, r = (y - x) / 2)
  function automatic int hex_dist(input coord_t dx, input coord_t dy);
    int dq, dr, ds;
    dq = int'(dx);
    dr = (int'(dy) - int'(dx)) / 2;
    ds = dq + dr;
    if (dq < 0) dq = -dq;
    if (dr < 0) dr = -dr;
    if (ds < 0) ds = -ds;
    return (dq + dr + ds) / 2;
  endfunction

  // ---- registers ----
  localparam int unsigned NREGS = 8;
  localparam int unsigned XLEN  = 32;
  typedef logic [XLEN-1:0]  word_t;
  typedef logic [NREGS-1:0] rmask_t;
  typedef word_t [NREGS-1:0] regvec_t;

  // ---- cores and code ----
  localparam int unsigned CORE_ID_W = 8;    // up to 256 cores per processor
  localparam int unsigned CODE_AW   = 8;    // 256-word code memory
  typedef logic [CORE_ID_W-1:0] core_id_t;
  typedef logic [CODE_AW-1:0]   pc_t;

  // ---- instruction set ----
  // conventional: [31:28] op, [27:25] rd, [24:22] rs, [21:19] rt, [15:0] imm
  // meta:         [31:28] op, [27:20] mask A, [19:12] mask B, [11:0] code offset
  typedef enum logic [3:0] {
    OP_NOP     = 4'h0,
    OP_LI      = 4'h1,   // rd = sext(imm)
    OP_ADDI    = 4'h2,   // rd = rs + sext(imm)
    OP_ADD     = 4'h3,   // rd = rs + rt
    OP_SUB     = 4'h4,   // rd = rs - rt
    OP_BNZ     = 4'h5,   // if (rs != 0) pc = imm
    OP_QCREATE = 4'h8,   // hire a child at offset; A: registers sent, B: registers returned
    OP_QCREATX = 4'h9,   // as QCREATE, but delayed while another QT runs the same offset
    OP_QTERM   = 4'hA,   // end of code fragment: return masked registers, back to the pool
    OP_QWAIT   = 4'hB,   // suspend until all children have terminated
    OP_QCLONE  = 4'hC,   // copy latched child results (mask A) into the register file
    OP_QPREAL  = 4'hD,   // preallocate one core for later QCREATEs of this core
    OP_QAVAIL  = 4'hE    // if at least mask B cores are free, continue at offset, else at PC+1
  } opcode_e;

  function automatic logic is_meta(input word_t ins);
    return ins[31];
  endfunction

  typedef struct packed {
    opcode_e  op;
    rmask_t   mask_a;
    rmask_t   mask_b;
    pc_t      offset;
  } meta_t;

  function automatic meta_t decode_meta(input word_t ins);
    meta_t m;
    m.op     = opcode_e'(ins[31:28]);
    m.mask_a = ins[27:20];
    m.mask_b = ins[19:12];
    m.offset = ins[CODE_AW-1:0];
    return m;
  endfunction

  // priority of a meta-instruction in the Meta FIFO (higher wins): terminating a QT
  // ranks above creating one.
  function automatic logic [1:0] meta_prio(input opcode_e op);
    case (op)
      OP_QTERM:                       return 2'd3;
      OP_QWAIT, OP_QCLONE, OP_QAVAIL: return 2'd2;
      default:                        return 2'd1;   // creation and preallocation
    endcase
  endfunction

  // ---- processor-to-core command (one broadcast per cycle) ----
  typedef enum logic [2:0] {
    CMD_NONE     = 3'd0,
    CMD_START    = 3'd1,  // wake up: pc = offset, regs[mask] = values, parent = other
    CMD_ADDCHILD = 3'd2,  // children mask |= bit(other), preallocated mask &= ~bit(other), ack
    CMD_RETURN   = 3'd3,  // FromChild latches[mask] = values, children mask &= ~bit(other)
    CMD_STOP     = 3'd4,  // back to the core pool (sleep), ack
    CMD_CLONE    = 3'd5,  // regs[mask] = FromChild latches[mask], ack
    CMD_ACK      = 3'd6,  // meta-instruction done, clear Meta; with jump: continue at offset
    CMD_PREALLOC = 3'd7   // preallocated mask |= bit(other), ack
  } cmd_e;

  typedef struct packed {
    cmd_e     op;
    core_id_t target;
    core_id_t other;
    rmask_t   mask;      // CMD_START: registers loaded; CMD_RETURN / CMD_CLONE: latches
    rmask_t   ret_mask;  // CMD_START: registers to send back at termination
    logic     excl;      // CMD_START: QT runs in exclusive (critical section) mode
    logic     jump;      // CMD_ACK: resume at offset instead of PC+1
    pc_t      offset;
    regvec_t  values;
  } proc_cmd_t;

endpackage
