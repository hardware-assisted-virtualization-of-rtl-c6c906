// tb_asm_pkg: helpers that build NeuISA instruction words for the testbenches.
// Each function returns one VLIW instruction; slots not named are nops.
package tb_asm_pkg;
  import neu_pkg::*;

  function automatic instr_t i_nop();
    instr_t i;
    i = '0;
    return i;
  endfunction

  function automatic instr_t i_misc(misc_op_e op, int rd, int rs, int imm);
    instr_t i;
    i = '0;
    i.misc.op  = op;
    i.misc.rd  = REG_W'(rd);
    i.misc.rs  = REG_W'(rs);
    i.misc.imm = 16'(imm);
    return i;
  endfunction

  function automatic instr_t with_me(instr_t i, me_op_e op, int vreg);
    instr_t o;
    o = i;
    o.me.op   = op;
    o.me.vreg = 5'(vreg);
    return o;
  endfunction

  function automatic instr_t with_ve(instr_t i, int slot, ve_op_e op, int vd, int arg);
    instr_t o;
    o = i;
    o.ve[slot].op  = op;
    o.ve[slot].vd  = 5'(vd);
    o.ve[slot].arg = SRAM_VA_W'(arg);
    return o;
  endfunction
endpackage
