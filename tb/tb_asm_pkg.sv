// tb_asm_pkg: instruction encoders for writing HISQ test programs in
// SystemVerilog. Each function returns one 32-bit instruction word in the
// encoding defined in hisq_pkg (RV32I plus the HISQ custom opcodes).
// Branch and jump offsets are in bytes, relative to the instruction itself,
// as in RISC-V assembly.
package tb_asm_pkg;
  import hisq_pkg::*;

  function automatic logic [31:0] enc_i(logic [6:0] opc, logic [2:0] f3, int rd, int rs1, int imm);
    return {12'(imm), 5'(rs1), f3, 5'(rd), opc};
  endfunction
  function automatic logic [31:0] enc_r(logic [6:0] f7, logic [2:0] f3, int rd, int rs1, int rs2);
    return {f7, 5'(rs2), 5'(rs1), f3, 5'(rd), OPC_OP};
  endfunction

  function automatic logic [31:0] addi(int rd, int rs1, int imm); return enc_i(OPC_OPIMM, 3'b000, rd, rs1, imm); endfunction
  function automatic logic [31:0] andi(int rd, int rs1, int imm); return enc_i(OPC_OPIMM, 3'b111, rd, rs1, imm); endfunction
  function automatic logic [31:0] slli(int rd, int rs1, int sh);  return enc_i(OPC_OPIMM, 3'b001, rd, rs1, sh); endfunction
  function automatic logic [31:0] srai(int rd, int rs1, int sh);  return enc_i(OPC_OPIMM, 3'b101, rd, rs1, 32'h400 | sh); endfunction
  function automatic logic [31:0] add (int rd, int rs1, int rs2); return enc_r(7'h00, 3'b000, rd, rs1, rs2); endfunction
  function automatic logic [31:0] sub (int rd, int rs1, int rs2); return enc_r(7'h20, 3'b000, rd, rs1, rs2); endfunction
  function automatic logic [31:0] xor_(int rd, int rs1, int rs2); return enc_r(7'h00, 3'b100, rd, rs1, rs2); endfunction
  function automatic logic [31:0] slt (int rd, int rs1, int rs2); return enc_r(7'h00, 3'b010, rd, rs1, rs2); endfunction
  function automatic logic [31:0] lui (int rd, int imm20);       return {20'(imm20), 5'(rd), OPC_LUI}; endfunction
  function automatic logic [31:0] lw  (int rd, int rs1, int imm); return enc_i(OPC_LOAD, 3'b010, rd, rs1, imm); endfunction
  function automatic logic [31:0] lb  (int rd, int rs1, int imm); return enc_i(OPC_LOAD, 3'b000, rd, rs1, imm); endfunction
  function automatic logic [31:0] lhu (int rd, int rs1, int imm); return enc_i(OPC_LOAD, 3'b101, rd, rs1, imm); endfunction
  function automatic logic [31:0] sw  (int rs2, int rs1, int imm);
    logic [11:0] i; i = 12'(imm);
    return {i[11:5], 5'(rs2), 5'(rs1), 3'b010, i[4:0], OPC_STORE};
  endfunction
  function automatic logic [31:0] sb  (int rs2, int rs1, int imm);
    logic [11:0] i; i = 12'(imm);
    return {i[11:5], 5'(rs2), 5'(rs1), 3'b000, i[4:0], OPC_STORE};
  endfunction
  function automatic logic [31:0] branch(logic [2:0] f3, int rs1, int rs2, int off);
    logic [12:0] o; o = 13'(off);
    return {o[12], o[10:5], 5'(rs2), 5'(rs1), f3, o[4:1], o[11], OPC_BRANCH};
  endfunction
  function automatic logic [31:0] beq(int rs1, int rs2, int off); return branch(3'b000, rs1, rs2, off); endfunction
  function automatic logic [31:0] bne(int rs1, int rs2, int off); return branch(3'b001, rs1, rs2, off); endfunction
  function automatic logic [31:0] blt(int rs1, int rs2, int off); return branch(3'b100, rs1, rs2, off); endfunction
  function automatic logic [31:0] jal(int rd, int off);
    logic [20:0] o; o = 21'(off);
    return {o[20], o[10:1], o[11], o[19:12], 5'(rd), OPC_JAL};
  endfunction
  function automatic logic [31:0] jalr(int rd, int rs1, int imm); return enc_i(OPC_JALR, 3'b000, rd, rs1, imm); endfunction

  // HISQ extension
  function automatic logic [31:0] waiti(int n);         return enc_i(OPC_HISQ, F3_WAITI, 0, 0, n); endfunction
  function automatic logic [31:0] waitr(int rs1);       return enc_i(OPC_HISQ, F3_WAITR, 0, rs1, 0); endfunction
  function automatic logic [31:0] sync(int tgt);        return enc_i(OPC_HISQ, F3_SYNC, 0, 0, tgt); endfunction
  function automatic logic [31:0] send(int rs1, int rs2); return {7'b0, 5'(rs2), 5'(rs1), F3_SEND, 5'b0, OPC_HISQ}; endfunction
  function automatic logic [31:0] recv(int rd, int src);  return enc_i(OPC_HISQ, F3_RECV, rd, 0, src); endfunction
  function automatic logic [31:0] cw_ii(int port, int cw); return {17'(cw), 3'b000, 5'(port), OPC_CW}; endfunction
  function automatic logic [31:0] cw_ir(int port, int rs1); return {12'b0, 5'(rs1), 3'b001, 5'(port), OPC_CW}; endfunction
  function automatic logic [31:0] cw_ri(int rs1, int cw);   return {12'(cw), 5'(rs1), 3'b010, 5'b0, OPC_CW}; endfunction
  function automatic logic [31:0] cw_rr(int rs1, int rs2);  return {7'b0, 5'(rs2), 5'(rs1), 3'b011, 5'b0, OPC_CW}; endfunction
  function automatic logic [31:0] halt();                   return jal(0, 0); endfunction
endpackage
