// pia_asm_pkg: instruction encoders for the IMPLY processing-in-array ISA,
// used by the testbenches to build programs. Each function returns one
// 32-bit instruction word; "ab" arguments are address-bank slots.
// cfg() packs an address configuration {col A, col B, start row, num rows,
// stride}.
package pia_asm_pkg;
  import pia_pkg::*;

  function automatic logic [31:0] cfg(int ca, int cb, int row, int nrows, int stride);
    return {ca[3:0], cb[3:0], row[8:0], nrows[8:0], stride[5:0]};
  endfunction

  function automatic logic [31:0] enc_r(logic [6:0] f7, int ab, logic [2:0] f3, logic [6:0] opc);
    return {f7, 5'd0, ab[4:0], f3, 5'd0, opc};
  endfunction
  function automatic logic [31:0] enc_i(int imm, int ab, logic [2:0] f3, int rd, logic [6:0] opc);
    return {imm[11:0], ab[4:0], f3, rd[4:0], opc};
  endfunction
  function automatic logic [31:0] enc_u(int imm20, int ab, logic [6:0] opc);
    return {imm20[19:0], ab[4:0], opc};
  endfunction
  function automatic logic [31:0] enc_b(int off, int ab2, int ab1, logic [2:0] f3);
    logic [12:0] o;
    o = off[12:0];
    return {o[12], o[10:5], ab2[4:0], ab1[4:0], f3, o[4:1], o[11], OPC_BRANCH};
  endfunction
  function automatic logic [31:0] enc_j(int off, int ab);
    logic [20:0] o;
    o = off[20:0];
    return {o[20], o[10:1], o[11], o[19:12], ab[4:0], OPC_JAL};
  endfunction

  // R-type in-array operations: the result replaces B (shifts: A).
  function automatic logic [31:0] i_add (int ab); return enc_r(7'h00, ab, 3'b000, OPC_OP); endfunction
  function automatic logic [31:0] i_sub (int ab); return enc_r(7'h20, ab, 3'b000, OPC_OP); endfunction
  function automatic logic [31:0] i_sll (int ab); return enc_r(7'h00, ab, 3'b001, OPC_OP); endfunction
  function automatic logic [31:0] i_slt (int ab); return enc_r(7'h00, ab, 3'b010, OPC_OP); endfunction
  function automatic logic [31:0] i_sltu(int ab); return enc_r(7'h00, ab, 3'b011, OPC_OP); endfunction
  function automatic logic [31:0] i_xor (int ab); return enc_r(7'h00, ab, 3'b100, OPC_OP); endfunction
  function automatic logic [31:0] i_srl (int ab); return enc_r(7'h00, ab, 3'b101, OPC_OP); endfunction
  function automatic logic [31:0] i_sra (int ab); return enc_r(7'h20, ab, 3'b101, OPC_OP); endfunction
  function automatic logic [31:0] i_or  (int ab); return enc_r(7'h00, ab, 3'b110, OPC_OP); endfunction
  function automatic logic [31:0] i_and (int ab); return enc_r(7'h00, ab, 3'b111, OPC_OP); endfunction

  function automatic logic [31:0] i_addi (int ab, int imm); return enc_i(imm, ab, 3'b000, 0, OPC_OPIMM); endfunction
  function automatic logic [31:0] i_slti (int ab, int imm); return enc_i(imm, ab, 3'b010, 0, OPC_OPIMM); endfunction
  function automatic logic [31:0] i_sltiu(int ab, int imm); return enc_i(imm, ab, 3'b011, 0, OPC_OPIMM); endfunction
  function automatic logic [31:0] i_xori (int ab, int imm); return enc_i(imm, ab, 3'b100, 0, OPC_OPIMM); endfunction
  function automatic logic [31:0] i_ori  (int ab, int imm); return enc_i(imm, ab, 3'b110, 0, OPC_OPIMM); endfunction
  function automatic logic [31:0] i_andi (int ab, int imm); return enc_i(imm, ab, 3'b111, 0, OPC_OPIMM); endfunction
  function automatic logic [31:0] i_slli (int ab, int sh);  return enc_i(sh & 31, ab, 3'b001, 0, OPC_OPIMM); endfunction
  function automatic logic [31:0] i_srli (int ab, int sh);  return enc_i(sh & 31, ab, 3'b101, 0, OPC_OPIMM); endfunction
  function automatic logic [31:0] i_srai (int ab, int sh);  return enc_i((sh & 31) | 32'h400, ab, 3'b101, 0, OPC_OPIMM); endfunction

  function automatic logic [31:0] i_lui  (int ab, int imm20); return enc_u(imm20, ab, OPC_LUI); endfunction
  function automatic logic [31:0] i_auipc(int ab, int imm20); return enc_u(imm20, ab, OPC_AUIPC); endfunction
  function automatic logic [31:0] i_li   (int ab, int imm12); return enc_i(imm12, ab, F3_LI, 0, OPC_CUST0); endfunction
  function automatic logic [31:0] i_mv   (int ab);            return enc_i(0, ab, F3_MV, 0, OPC_CUST0); endfunction
  function automatic logic [31:0] i_la   (int slot, int ab);  return enc_i(0, ab, F3_LA, slot, OPC_CUST0); endfunction
  function automatic logic [31:0] i_lai  (int slot, int imm12); return enc_i(imm12, 0, F3_LAI, slot, OPC_CUST0); endfunction
  function automatic logic [31:0] i_laui (int slot, int imm20); return enc_u(imm20, slot, OPC_LAUI); endfunction
  function automatic logic [31:0] i_lio  (int ab); return enc_r(7'h00, ab, F3_LIO, OPC_CUST2); endfunction
  function automatic logic [31:0] i_sio  (int ab); return enc_r(7'h00, ab, F3_SIO, OPC_CUST2); endfunction
  function automatic logic [31:0] i_nxt  ();       return enc_r(7'h00, 0, F3_NXT, OPC_CUST2); endfunction

  function automatic logic [31:0] i_beq (int a1, int a2, int off); return enc_b(off, a2, a1, 3'b000); endfunction
  function automatic logic [31:0] i_bne (int a1, int a2, int off); return enc_b(off, a2, a1, 3'b001); endfunction
  function automatic logic [31:0] i_blt (int a1, int a2, int off); return enc_b(off, a2, a1, 3'b100); endfunction
  function automatic logic [31:0] i_bge (int a1, int a2, int off); return enc_b(off, a2, a1, 3'b101); endfunction
  function automatic logic [31:0] i_bltu(int a1, int a2, int off); return enc_b(off, a2, a1, 3'b110); endfunction
  function automatic logic [31:0] i_bgeu(int a1, int a2, int off); return enc_b(off, a2, a1, 3'b111); endfunction
  function automatic logic [31:0] i_jal (int ab, int off); return enc_j(off, ab); endfunction
  function automatic logic [31:0] i_jalr(int ret_ab, int base_ab, int imm); return enc_i(imm, base_ab, 3'b000, ret_ab, OPC_JALR); endfunction

  function automatic logic [31:0] i_wfi();    return INSN_WFI;    endfunction
  function automatic logic [31:0] i_mret();   return INSN_MRET;   endfunction
  function automatic logic [31:0] i_ebreak(); return INSN_EBREAK; endfunction

endpackage
