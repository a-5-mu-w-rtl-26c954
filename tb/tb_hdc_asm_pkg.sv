// tb_hdc_asm_pkg -- microcode assembler functions for the testbenches.
// Each function returns one 26-bit instruction word in the format of
// hdc_pkg (NISC: bit 25 = 0; CISC: bit 25 = 1, opcode in bits 24:22).
package tb_hdc_asm_pkg;
  import hdc_pkg::*;

  function automatic instr_t nisc(encsel_e encsel, bit smen, bit smsel, bit mxen, bit mxinv,
                                  bit mxsel, enc_op_e op, bit bnden, bit bndrst, bit wben,
                                  int ridx, int widx);
    nisc_t n;
    n.encsel = {1'b0, encsel};
    n.smen = smen; n.smsel = smsel; n.mxen = mxen; n.mxinv = mxinv; n.mxsel = mxsel;
    n.op = op; n.bnden = bnden; n.bndrst = bndrst; n.wben = wben;
    n.ridx = IDX_W'(ridx); n.widx = IDX_W'(widx);
    return instr_t'(n);
  endfunction

  function automatic instr_t cisc(cisc_op_e op, logic [21:0] operand);
    return {1'b1, op, operand};
  endfunction

  function automatic instr_t am_search(int max_idx);
    return cisc(CI_SEARCH, 22'(max_idx));
  endfunction
  function automatic instr_t mix(mix_src_e src, int nbits, int imm);
    return cisc(CI_MIX, {src, 4'(nbits - 1), 16'(imm)});
  endfunction
  function automatic instr_t intr(int dist_thr, int idx_thr);
    return cisc(CI_INTR, {16'(dist_thr), 6'(idx_thr)});
  endfunction
  function automatic instr_t hwloop(int count, int end_addr);
    return cisc(CI_LOOP, {2'b00, 10'(count), 10'(end_addr)});
  endfunction
  function automatic instr_t jmp(int addr);
    return cisc(CI_JMP, 22'(addr));
  endfunction
  function automatic instr_t pidx_op(int op);
    return cisc(CI_PIDX, 22'(op));
  endfunction
  function automatic instr_t smreg(int v);
    return cisc(CI_SMREG, 22'(v));
  endfunction
  function automatic instr_t nop();
    return cisc(CI_NOP, '0);
  endfunction
endpackage
