// epe: EMPA processing element, the conventional part of a core.
//
// It fetches the instruction at its PC from its code-memory port, and executes a
// conventional instruction in one cycle (a small register ALU: LI, ADDI, ADD, SUB, BNZ,
// NOP). When the fetched word is a meta-instruction (bit 31 set) it holds the word in
// meta_instr, raises 'meta' and suspends until the morphing element pulses meta_done;
// then it continues at PC+1, or at jump_pc when the processor redirects it (a resource
// test that passed). A core in the pool sleeps (no fetch, no writes); 'start' wakes
// it at start_pc, 'stop' puts it back to sleep. start/stop take precedence over execution.
// The fetch-execute / suspend-on-Meta behaviour follows the architecture; the instruction
// set and single-cycle timing are this design's, since none is given.
module epe
  import empa_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    start,
  input  pc_t     start_pc,
  input  logic    stop,
  input  logic    meta_done,
  input  logic    jump,
  input  pc_t     jump_pc,
  input  word_t   instr,
  input  regvec_t regs,
  output pc_t     pc,
  output logic    awake,
  output logic    meta,
  output word_t   meta_instr,
  output logic    rf_we,
  output logic [$clog2(NREGS)-1:0] rf_waddr,
  output word_t   rf_wdata
);

  typedef enum logic [1:0] {E_SLEEP, E_RUN, E_META} estate_e;
  estate_e state;

  opcode_e op;
  logic [2:0] rd, rs, rt;
  word_t imm;
  assign op  = opcode_e'(instr[31:28]);
  assign rd  = instr[27:25];
  assign rs  = instr[24:22];
  assign rt  = instr[21:19];
  assign imm = {{(XLEN-16){instr[15]}}, instr[15:0]};

  assign awake = (state != E_SLEEP);
  assign meta  = (state == E_META);

  // ALU and register write
  always_comb begin
    rf_we    = 1'b0;
    rf_waddr = rd;
    rf_wdata = '0;
    if (state == E_RUN && !start && !stop && !is_meta(instr)) begin
      case (op)
        OP_LI:   begin rf_we = 1'b1; rf_wdata = imm; end
        OP_ADDI: begin rf_we = 1'b1; rf_wdata = regs[rs] + imm; end
        OP_ADD:  begin rf_we = 1'b1; rf_wdata = regs[rs] + regs[rt]; end
        OP_SUB:  begin rf_we = 1'b1; rf_wdata = regs[rs] - regs[rt]; end
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= E_SLEEP;
      pc         <= '0;
      meta_instr <= '0;
    end else if (stop) begin
      state <= E_SLEEP;
    end else if (start) begin
      state <= E_RUN;
      pc    <= start_pc;
    end else begin
      case (state)
        E_RUN: begin
          if (is_meta(instr)) begin
            state      <= E_META;
            meta_instr <= instr;
          end else if (op == OP_BNZ && regs[rs] != '0) begin
            pc <= imm[CODE_AW-1:0];
          end else begin
            pc <= pc + 1'b1;
          end
        end
        E_META: begin
          if (meta_done) begin
            state <= E_RUN;
            pc    <= jump ? jump_pc : pc + 1'b1;
          end
        end
        default: ;
      endcase
    end
  end

endmodule
