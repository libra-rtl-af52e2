// tb_libra_asm: instruction encoders used by the testbenches.
//
// Builds RV32I words and the Libra extension words (lo.br, tlo.br, lo.call)
// directly from their field layout, independently of the decoder RTL:
//   prefix bits [1:0]: 11 standard, 01 lo.br / lo.call true,
//                      10 tlo.br / lo.call false;
//   lo.br  operand field F = {offT[3:0], offF[3:0], bbc-1[3:0]}
//   tlo.br operand field F = {offT[2:0], offF[2:0], bbc-1[2:0], nslices-1[2:0]}
//   with F[11:5] in instr[31:25] and F[4:0] in instr[11:7].
package tb_libra_asm;

  localparam logic [2:0] F3_BEQ = 3'b000;
  localparam logic [2:0] F3_BNE = 3'b001;
  localparam logic [2:0] F3_BLT = 3'b100;

  function automatic logic [31:0] enc_i(logic [6:0] opc, logic [2:0] f3,
                                        logic [4:0] rd, logic [4:0] rs1,
                                        logic [11:0] imm);
    return {imm, rs1, f3, rd, opc};
  endfunction

  function automatic logic [31:0] enc_addi(logic [4:0] rd, logic [4:0] rs1, logic [11:0] imm);
    return enc_i(7'b0010011, 3'b000, rd, rs1, imm);
  endfunction

  function automatic logic [31:0] enc_add(logic [4:0] rd, logic [4:0] rs1, logic [4:0] rs2);
    return {7'b0000000, rs2, rs1, 3'b000, rd, 7'b0110011};
  endfunction

  function automatic logic [31:0] enc_sub(logic [4:0] rd, logic [4:0] rs1, logic [4:0] rs2);
    return {7'b0100000, rs2, rs1, 3'b000, rd, 7'b0110011};
  endfunction

  function automatic logic [31:0] enc_andi(logic [4:0] rd, logic [4:0] rs1, logic [11:0] imm);
    return enc_i(7'b0010011, 3'b111, rd, rs1, imm);
  endfunction

  function automatic logic [31:0] enc_slli(logic [4:0] rd, logic [4:0] rs1, logic [4:0] sh);
    return enc_i(7'b0010011, 3'b001, rd, rs1, {7'b0, sh});
  endfunction

  function automatic logic [31:0] enc_srli(logic [4:0] rd, logic [4:0] rs1, logic [4:0] sh);
    return enc_i(7'b0010011, 3'b101, rd, rs1, {7'b0, sh});
  endfunction

  // RV32M multiply (low 32 bits)
  function automatic logic [31:0] enc_mul(logic [4:0] rd, logic [4:0] rs1, logic [4:0] rs2);
    return {7'b0000001, rs2, rs1, 3'b000, rd, 7'b0110011};
  endfunction

  // csrrw rd, csr, rs1
  function automatic logic [31:0] enc_csrrw(logic [4:0] rd, logic [11:0] csr, logic [4:0] rs1);
    return {csr, rs1, 3'b001, rd, 7'b1110011};
  endfunction

  function automatic logic [31:0] enc_nop();
    return enc_addi(5'd0, 5'd0, 12'd0);
  endfunction

  function automatic logic [31:0] enc_br(logic [2:0] f3, logic [4:0] rs1, logic [4:0] rs2,
                                         logic [12:0] imm);
    return {imm[12], imm[10:5], rs2, rs1, f3, imm[4:1], imm[11], 7'b1100011};
  endfunction

  function automatic logic [31:0] enc_fld(logic [11:0] f, logic [2:0] f3, logic [4:0] rs1,
                                          logic [4:0] rs2, logic [1:0] pfx);
    return {f[11:5], rs2, rs1, f3, f[4:0], 5'b11000, pfx};
  endfunction

  // lo.br c,offT:offF:bbc with condition (f3 rs1,rs2)
  function automatic logic [31:0] enc_lobr(logic [2:0] f3, logic [4:0] rs1, logic [4:0] rs2,
                                           int offt, int offf, int bbc);
    logic [11:0] f;
    f = {4'(offt), 4'(offf), 4'(bbc - 1)};
    return enc_fld(f, f3, rs1, rs2, 2'b01);
  endfunction

  // lo.j = lo.br zero,0:0:1 (return to normal execution at the next slice)
  function automatic logic [31:0] enc_loj();
    return enc_lobr(F3_BEQ, 5'd0, 5'd0, 0, 0, 1);
  endfunction

  function automatic logic [31:0] enc_tlobr(logic [2:0] f3, logic [4:0] rs1, logic [4:0] rs2,
                                            int offt, int offf, int bbc, int nslices);
    logic [11:0] f;
    f = {3'(offt), 3'(offf), 3'(bbc - 1), 3'(nslices - 1)};
    return enc_fld(f, f3, rs1, rs2, 2'b10);
  endfunction

  function automatic logic [31:0] enc_jal(logic [4:0] rd, logic [20:0] imm);
    return {imm[20], imm[10:1], imm[11], imm[19:12], rd, 7'b1101111};
  endfunction

  // lo.call b,l : jal ra with prefix 01 (b = true) or 10 (b = false)
  function automatic logic [31:0] enc_locall(bit real_fn, logic [20:0] imm);
    return {imm[20], imm[10:1], imm[11], imm[19:12], 5'd1, 5'b11011,
            real_fn ? 2'b01 : 2'b10};
  endfunction

  function automatic logic [31:0] enc_jalr(logic [4:0] rd, logic [4:0] rs1, logic [11:0] imm);
    return enc_i(7'b1100111, 3'b000, rd, rs1, imm);
  endfunction

  function automatic logic [31:0] enc_ret();
    return enc_jalr(5'd0, 5'd1, 12'd0);
  endfunction

endpackage
