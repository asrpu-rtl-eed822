// rv_asm_pkg: instruction encoders for testbench programs: the RV32I instructions the
// PE implements and the vector extension of asrpu_pkg (custom-0 opcode, funct3 =
// vector function). Branch and jump offsets are byte offsets from the instruction.
package rv_asm_pkg;
  import asrpu_pkg::*;

  function automatic logic [31:0] r_type(logic [6:0] f7, logic [4:0] rs2, logic [4:0] rs1,
                                         logic [2:0] f3, logic [4:0] rd, logic [6:0] opc);
    return {f7, rs2, rs1, f3, rd, opc};
  endfunction
  function automatic logic [31:0] i_type(int imm, logic [4:0] rs1, logic [2:0] f3,
                                         logic [4:0] rd, logic [6:0] opc);
    return {12'(imm), rs1, f3, rd, opc};
  endfunction
  function automatic logic [31:0] addi(int rd, int rs1, int imm);
    return i_type(imm, 5'(rs1), 3'b000, 5'(rd), 7'b0010011);
  endfunction
  function automatic logic [31:0] andi(int rd, int rs1, int imm);
    return i_type(imm, 5'(rs1), 3'b111, 5'(rd), 7'b0010011);
  endfunction
  function automatic logic [31:0] slli(int rd, int rs1, int sh);
    return i_type(sh & 31, 5'(rs1), 3'b001, 5'(rd), 7'b0010011);
  endfunction
  function automatic logic [31:0] add(int rd, int rs1, int rs2);
    return r_type(7'b0, 5'(rs2), 5'(rs1), 3'b000, 5'(rd), 7'b0110011);
  endfunction
  function automatic logic [31:0] sub(int rd, int rs1, int rs2);
    return r_type(7'b0100000, 5'(rs2), 5'(rs1), 3'b000, 5'(rd), 7'b0110011);
  endfunction
  function automatic logic [31:0] sra(int rd, int rs1, int rs2);
    return r_type(7'b0100000, 5'(rs2), 5'(rs1), 3'b101, 5'(rd), 7'b0110011);
  endfunction
  function automatic logic [31:0] lui(int rd, logic [19:0] imm20);
    return {imm20, 5'(rd), 7'b0110111};
  endfunction
  function automatic logic [31:0] load(int f3, int rd, int rs1, int imm);
    return i_type(imm, 5'(rs1), 3'(f3), 5'(rd), 7'b0000011);
  endfunction
  function automatic logic [31:0] lw(int rd, int rs1, int imm);
    return load(2, rd, rs1, imm);
  endfunction
  function automatic logic [31:0] sw(int rs2, int rs1, int imm);
    logic [11:0] i = 12'(imm);
    return {i[11:5], 5'(rs2), 5'(rs1), 3'b010, i[4:0], 7'b0100011};
  endfunction
  function automatic logic [31:0] branch(int f3, int rs1, int rs2, int off);
    logic [12:0] i = 13'(off);
    return {i[12], i[10:5], 5'(rs2), 5'(rs1), 3'(f3), i[4:1], i[11], 7'b1100011};
  endfunction
  function automatic logic [31:0] beq(int rs1, int rs2, int off);  return branch(0, rs1, rs2, off); endfunction
  function automatic logic [31:0] bne(int rs1, int rs2, int off);  return branch(1, rs1, rs2, off); endfunction
  function automatic logic [31:0] blt(int rs1, int rs2, int off);  return branch(4, rs1, rs2, off); endfunction
  function automatic logic [31:0] bge(int rs1, int rs2, int off);  return branch(5, rs1, rs2, off); endfunction
  function automatic logic [31:0] jal(int rd, int off);
    logic [20:0] i = 21'(off);
    return {i[20], i[10:1], i[11], i[19:12], 5'(rd), 7'b1101111};
  endfunction
  function automatic logic [31:0] ecall();
    return 32'h0000_0073;
  endfunction
  function automatic logic [31:0] vop(vfunct_e f, int rd, int rs1, int rs2);
    return r_type(7'b0, 5'(rs2), 5'(rs1), f, 5'(rd), OPC_CUSTOM0);
  endfunction
  function automatic logic [31:0] vld(int vd, int rs1);          return vop(VF_LD, vd, rs1, 0); endfunction
  function automatic logic [31:0] vst(int vs, int rs1);          return vop(VF_ST, 0, rs1, vs); endfunction
  function automatic logic [31:0] vmac(int rd, int va, int vb);  return vop(VF_MAC, rd, va, vb); endfunction
  function automatic logic [31:0] vmul(int vd, int va, int vb);  return vop(VF_MUL, vd, va, vb); endfunction
  function automatic logic [31:0] vadd(int vd, int va, int vb);  return vop(VF_ADD, vd, va, vb); endfunction
  function automatic logic [31:0] vacum(int rd, int rs1, int vb); return vop(VF_ACUM, rd, rs1, vb); endfunction
  function automatic logic [31:0] i2f(int rd, int rs1);          return vop(VF_I2F, rd, rs1, 0); endfunction
  // li for any 32-bit value: lui + addi (two instructions)
  function automatic logic [31:0] li_hi(int rd, logic [31:0] v);
    return lui(rd, 20'((v + 32'h800) >> 12));
  endfunction
  function automatic logic [31:0] li_lo(int rd, logic [31:0] v);
    return addi(rd, rd, int'({{20{v[11]}}, v[11:0]}));
  endfunction
endpackage
