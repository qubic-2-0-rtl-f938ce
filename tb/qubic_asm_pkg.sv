// qubic_asm_pkg: instruction builders for the testbenches.
//
// A tiny assembler in SystemVerilog functions: each function returns one
// 128-bit instruction word in the encoding of qubic_pkg::instr_t, so a
// testbench can write a program as a list of calls.
package qubic_asm_pkg;
  import qubic_pkg::*;

  function automatic pulse_cmd_t mkcmd(elem_e elem, int amp, int phase, int freq,
                                       int len, int addr);
    pulse_cmd_t c;
    c = '0;
    c.elem = elem; c.amp = 16'(amp); c.phase = 17'(phase); c.freq = 9'(freq);
    c.env_len = 12'(len); c.env_addr = 12'(addr);
    return c;
  endfunction

  function automatic instr_t base(opcode_e op);
    instr_t i;
    i = '0;
    i.op = op;
    return i;
  endfunction

  function automatic instr_t i_pulse(pulse_cmd_t c, int t);
    instr_t i = base(OP_PULSE);
    i.body = {c, 32'(t)};
    return i;
  endfunction

  // rd <= rs1 (op) imm           (imm_sel = 1)
  function automatic instr_t i_alui(int rd, int rs1, alu_op_e op, int imm);
    instr_t i = base(OP_REG_ALU);
    i.rd = 4'(rd); i.rs1 = 4'(rs1); i.alu_op = op; i.imm_sel = 1'b1; i.body[31:0] = 32'(imm);
    return i;
  endfunction

  // rd <= rs1 (op) rs2
  function automatic instr_t i_alur(int rd, int rs1, alu_op_e op, int rs2);
    instr_t i = base(OP_REG_ALU);
    i.rd = 4'(rd); i.rs1 = 4'(rs1); i.rs2 = 4'(rs2); i.alu_op = op;
    return i;
  endfunction

  function automatic instr_t i_jump(int addr);
    instr_t i = base(OP_JUMP_I);
    i.body[47:32] = 16'(addr);
    return i;
  endfunction

  // if (rs1 op imm) goto addr
  function automatic instr_t i_jcond(int rs1, alu_op_e op, int imm, int addr);
    instr_t i = base(OP_JUMP_COND);
    i.rs1 = 4'(rs1); i.alu_op = op; i.imm_sel = 1'b1;
    i.body[31:0] = 32'(imm); i.body[47:32] = 16'(addr);
    return i;
  endfunction

  // pc <= rs1 + imm
  function automatic instr_t i_jalu(int rs1, int imm);
    instr_t i = base(OP_JUMP_ALU);
    i.rs1 = 4'(rs1); i.alu_op = ALU_ADD; i.imm_sel = 1'b1; i.body[31:0] = 32'(imm);
    return i;
  endfunction

  // qclk <= qclk + imm
  function automatic instr_t i_incq(int imm);
    instr_t i = base(OP_INC_QCLK);
    i.rs1 = 4'd0; i.alu_op = ALU_ADD; i.imm_sel = 1'b1; i.body[31:0] = 32'(imm);
    return i;
  endfunction

  function automatic instr_t i_idle(int t);
    instr_t i = base(OP_IDLE);
    i.body[31:0] = 32'(t);
    return i;
  endfunction

  function automatic instr_t i_regfproc(int rd, int fid);
    instr_t i = base(OP_REG_FPROC);
    i.rd = 4'(rd); i.body[55:48] = 8'(fid);
    return i;
  endfunction

  // if (fproc(fid) op imm) goto addr
  function automatic instr_t i_jfproc(int fid, alu_op_e op, int imm, int addr);
    instr_t i = base(OP_JUMP_FPROC);
    i.alu_op = op; i.imm_sel = 1'b1; i.body[31:0] = 32'(imm);
    i.body[47:32] = 16'(addr); i.body[55:48] = 8'(fid);
    return i;
  endfunction

  function automatic instr_t i_sync(int mask);
    instr_t i = base(OP_SYNC);
    i.body[31:0] = 32'(mask);
    return i;
  endfunction

  function automatic instr_t i_done();
    return base(OP_DONE);
  endfunction

  // reference model of the carrier table: cos(2*pi*idx/1024) in Q1.15
  function automatic int ref_cos(int idx);
    real x;
    x = $cos(6.283185307179586 * (idx & 1023) / 1024.0) * 32767.0;
    return $rtoi(x >= 0.0 ? x + 0.5 : x - 0.5);
  endfunction

  // carrier of sample k at time t: returns {cos, sin}
  function automatic void ref_carrier(longint fword, longint phase, longint t, int spc, int k,
                                      output int c, output int s);
    longint th;
    int idx;
    th  = (fword * (spc * t + k) + (phase << 15)) & 64'hFFFF_FFFF;
    idx = int'(th >> 22);
    c = ref_cos(idx);
    s = ref_cos(idx - 256);
  endfunction
endpackage
