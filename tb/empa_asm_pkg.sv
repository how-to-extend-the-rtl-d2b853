// empa_asm_pkg: instruction encoders for the EMPA testbenches, and the reference program
// shared by the end-to-end testbenches.
//
// Reference program (root QT at 0, r1 = 5, r2 = 7 set by the root itself):
//   root : resource tests (one that fails and falls through, one that passes and skips an
//          early exit); preallocate a core; hire SUMF (r3 = r1 + r2), LOOPF (r4 = r1 + ... + 1) and
//          NEST; wait for them; clone r3, r4, r5; hire CRIT twice in exclusive mode
//          (the second is held back until the first ends); r6 = r3 + r4; terminate, which
//          is itself held back until both CRIT children are gone.
//   NEST : hires SUMF as a grandchild, waits, clones r3, r5 = r3 + r3, terminates.
//   CRIT : counts r7 down from 10, terminates.
// Expected results returned by the root: r3 = 12, r4 = 15, r5 = 24, r6 = 27.
package empa_asm_pkg;
  import empa_pkg::*;

  function automatic word_t enc_c(opcode_e op, int rd, int rs, int rt, int imm);
    return {op, 3'(rd), 3'(rs), 3'(rt), 3'b000, 16'(imm)};
  endfunction
  function automatic word_t enc_m(opcode_e op, rmask_t a, rmask_t b, int off);
    return {op, a, b, 4'b0000, 8'(off)};
  endfunction
  function automatic word_t LI  (int rd, int imm)         ; return enc_c(OP_LI, rd, 0, 0, imm); endfunction
  function automatic word_t ADDI(int rd, int rs, int imm) ; return enc_c(OP_ADDI, rd, rs, 0, imm); endfunction
  function automatic word_t ADD (int rd, int rs, int rt)  ; return enc_c(OP_ADD, rd, rs, rt, 0); endfunction
  function automatic word_t SUB (int rd, int rs, int rt)  ; return enc_c(OP_SUB, rd, rs, rt, 0); endfunction
  function automatic word_t BNZ (int rs, int target)      ; return enc_c(OP_BNZ, 0, rs, 0, target); endfunction
  function automatic word_t QCREATE(rmask_t a, rmask_t b, int off); return enc_m(OP_QCREATE, a, b, off); endfunction
  function automatic word_t QCREATX(rmask_t a, rmask_t b, int off); return enc_m(OP_QCREATX, a, b, off); endfunction
  function automatic word_t QTERM ()          ; return enc_m(OP_QTERM, '0, '0, 0); endfunction
  function automatic word_t QWAIT ()          ; return enc_m(OP_QWAIT, '0, '0, 0); endfunction
  function automatic word_t QCLONE(rmask_t a) ; return enc_m(OP_QCLONE, a, '0, 0); endfunction
  function automatic word_t QPREAL()          ; return enc_m(OP_QPREAL, '0, '0, 0); endfunction
  function automatic word_t QAVAIL(int n, int off); return enc_m(OP_QAVAIL, '0, 8'(n), off); endfunction

  localparam int SUMF = 32, LOOPF = 40, NEST = 48, CRIT = 64;
  localparam int PROG_LEN = 80;
  localparam rmask_t ROOT_RET = 8'b0111_1000;   // r3..r6

  function automatic word_t prog(int a);
    case (a)
      0:  return QAVAIL(255, 20);   // resource test that cannot pass: falls through
      1:  return QAVAIL(1, 3);      // passes: skips the early exit
      2:  return QTERM();
      3:  return LI(1, 5);
      4:  return LI(2, 7);
      5:  return QPREAL();
      6:  return QCREATE(8'b0000_0110, 8'b0000_1000, SUMF);
      7:  return QCREATE(8'b0000_0010, 8'b0001_0000, LOOPF);
      8:  return QCREATE(8'b0000_0110, 8'b0010_0000, NEST);
      9:  return QWAIT();
      10: return QCLONE(8'b0011_1000);
      11: return QCREATX(8'b0000_1000, 8'b0000_0000, CRIT);
      12: return QCREATX(8'b0000_1000, 8'b0000_0000, CRIT);
      13: return ADD(6, 3, 4);
      14: return QTERM();
      20: return QTERM();
      SUMF:      return ADD(3, 1, 2);
      SUMF + 1:  return QTERM();
      LOOPF:     return LI(4, 0);
      LOOPF + 1: return ADD(4, 4, 1);
      LOOPF + 2: return ADDI(1, 1, -1);
      LOOPF + 3: return BNZ(1, LOOPF + 1);
      LOOPF + 4: return QTERM();
      NEST:      return QCREATE(8'b0000_0110, 8'b0000_1000, SUMF);
      NEST + 1:  return QWAIT();
      NEST + 2:  return QCLONE(8'b0000_1000);
      NEST + 3:  return ADD(5, 3, 3);
      NEST + 4:  return QTERM();
      CRIT:      return LI(7, 10);
      CRIT + 1:  return ADDI(7, 7, -1);
      CRIT + 2:  return BNZ(7, CRIT + 1);
      CRIT + 3:  return QTERM();
      default:   return '0;   // NOP
    endcase
  endfunction
endpackage
