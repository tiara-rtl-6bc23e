// tiara_tb_pkg: instruction assembler helpers for the testbenches.
//
// Each function returns one 64-bit Tiara instruction word in the format of
// tiara_pkg::instr_t, so test programs read like assembly listings.
package tiara_tb_pkg;
  import tiara_pkg::*;

  function automatic logic [63:0] mk(opcode_e op, int rd, int rs1, int rs2, int rs3,
                                     int func, bit ui, int aux, logic [31:0] imm);
    instr_t i;
    i.opcode  = op;
    i.rd      = REG_W'(rd);
    i.rs1     = REG_W'(rs1);
    i.rs2     = REG_W'(rs2);
    i.rs3     = REG_W'(rs3);
    i.func    = 4'(func);
    i.use_imm = ui;
    i.aux     = 7'(aux);
    i.imm     = imm;
    return i;
  endfunction

  // rd = mem[rs1 + off]
  function automatic logic [63:0] i_load(int rd, int rs1, int off = 0);
    return mk(OP_LOAD, rd, rs1, 0, 0, 0, 0, 0, off);
  endfunction
  // mem[rs1 + off] = rs2
  function automatic logic [63:0] i_store(int rs1, int rs2, int off = 0);
    return mk(OP_STORE, 0, rs1, rs2, 0, 0, 0, 0, off);
  endfunction
  // rd = old; if old == rcmp: mem = rnew
  function automatic logic [63:0] i_cas(int rd, int ra, int rcmp, int rnew);
    return mk(OP_CAS, rd, ra, rcmp, rnew, 0, 0, 0, 0);
  endfunction
  // rd = old; if old == rcmp: mem = old + radd
  function automatic logic [63:0] i_caa(int rd, int ra, int rcmp, int radd);
    return mk(OP_CAA, rd, ra, rcmp, radd, 0, 0, 0, 0);
  endfunction
  // async copy of len bytes from address in rsrc to address in rdst
  function automatic logic [63:0] i_memcpy(int rdst, int rsrc, int len);
    return mk(OP_MEMCPY, 0, rdst, rsrc, 0, 0, 1, 0, len);
  endfunction
  function automatic logic [63:0] i_memcpy_r(int rdst, int rsrc, int rlen);
    return mk(OP_MEMCPY, 0, rdst, rsrc, rlen, 0, 0, 0, 0);
  endfunction
  // if cond(rs1, imm16) skip 'off' instructions
  function automatic logic [63:0] i_jumpi(jcond_e c, int rs1, int cmp, int off);
    return mk(OP_JUMP, 0, rs1, 0, 0, c, 1, 0, {16'(off), 16'(cmp)});
  endfunction
  function automatic logic [63:0] i_jumpr(jcond_e c, int rs1, int rs2, int off);
    return mk(OP_JUMP, 0, rs1, rs2, 0, c, 0, 0, {16'(off), 16'd0});
  endfunction
  // repeat next n instructions m times
  function automatic logic [63:0] i_loopi(int m, int n);
    return mk(OP_LOOP, 0, 0, 0, 0, 0, 1, n, m);
  endfunction
  function automatic logic [63:0] i_loopr(int rm, int n);
    return mk(OP_LOOP, 0, rm, 0, 0, 0, 0, n, 0);
  endfunction
  function automatic logic [63:0] i_wait(int thr);
    return mk(OP_WAIT, 0, 0, 0, 0, 0, 1, 0, thr);
  endfunction
  function automatic logic [63:0] i_ret(int rs1, int status = 0);
    return mk(OP_RET, 0, rs1, 0, 0, 0, 0, status, 0);
  endfunction
  function automatic logic [63:0] i_reti(int val, int status = 0);
    return mk(OP_RET, 0, 0, 0, 0, 0, 1, status, val);
  endfunction
  function automatic logic [63:0] i_alu(alu_op_e op, int rd, int rs1, int rs2);
    return mk(OP_COMPUTE, rd, rs1, rs2, 0, op, 0, 0, 0);
  endfunction
  function automatic logic [63:0] i_alui(alu_op_e op, int rd, int rs1, int imm);
    return mk(OP_COMPUTE, rd, rs1, 0, 0, op, 1, 0, imm);
  endfunction

  function automatic logic [63:0] uaddr(int host, int region, longint offs);
    return {8'(host), 8'(region), 48'(offs)};
  endfunction
endpackage
