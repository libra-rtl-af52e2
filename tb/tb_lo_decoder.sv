// tb_lo_decoder: self-checking test of lo_decoder.
//
// Encodes random lo.br, tlo.br, lo.call, branch, jal, jalr, call and return
// words (and mret and CSR accesses) with the independent encoders of tb_libra_asm and checks the kind and
// every operand the decoder reports (offsets, block count, slice count,
// displacement, register fields). A watchdog ends the run if it stalls.
module tb_lo_decoder;
  import libra_pkg::*;
  import tb_libra_asm::*;

  logic [31:0] instr;
  dec_t        dec;
  int          checks = 0, failures = 0;

  lo_decoder dut (.instr_i(instr), .dec_o(dec));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s: instr=%h kind=%0d", what, instr, dec.kind);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ot, of, bb, ns;
    logic [12:0] bimm;
    logic [20:0] jimm;
    logic [4:0]  r1, r2;
    for (int i = 0; i < 200; i++) begin
      ot = $urandom_range(0, 15); of = $urandom_range(0, 15); bb = $urandom_range(1, 16);
      r1 = 5'($urandom); r2 = 5'($urandom);
      instr = enc_lobr(F3_BNE, r1, r2, ot, of, bb); #1;
      check(dec.kind == K_LOBR, "lo.br kind");
      check(int'(dec.off_t) == ot && int'(dec.off_f) == of, "lo.br offsets");
      check(int'(dec.bbc) == bb, "lo.br bbc");
      check(dec.rs1 == r1 && dec.rs2 == r2 && dec.funct3 == F3_BNE, "lo.br condition");

      ot = $urandom_range(0, 7); of = $urandom_range(0, 7); bb = $urandom_range(1, 8);
      ns = $urandom_range(1, 8);
      instr = enc_tlobr(F3_BEQ, r1, r2, ot, of, bb, ns); #1;
      check(dec.kind == K_TLOBR, "tlo.br kind");
      check(int'(dec.off_t) == ot && int'(dec.off_f) == of && int'(dec.bbc) == bb,
            "tlo.br operands");
      check(int'(dec.nslices) == ns, "tlo.br slice count");

      bimm = {13'($urandom)} & ~13'd1;
      instr = enc_br(F3_BLT, r1, r2, bimm); #1;
      check(dec.kind == K_BR, "branch kind");
      check(dec.imm == {{19{bimm[12]}}, bimm}, "branch displacement");

      jimm = {21'($urandom)} & ~21'd1;
      instr = enc_locall(1'b1, jimm); #1;
      check(dec.kind == K_LOCALL && dec.call_real, "lo.call true");
      check(dec.imm == {{11{jimm[20]}}, jimm}, "lo.call target");
      instr = enc_locall(1'b0, jimm); #1;
      check(dec.kind == K_LOCALL && !dec.call_real, "lo.call false");
      instr = enc_jal(5'd1, jimm); #1;
      check(dec.kind == K_CALL && dec.imm == {{11{jimm[20]}}, jimm}, "call");
      instr = enc_jal(5'd0, jimm); #1;
      check(dec.kind == K_JAL, "jal");
    end
    instr = enc_ret(); #1;
    check(dec.kind == K_RET, "ret");
    instr = enc_jalr(5'd1, 5'd5, 12'd8); #1;
    check(dec.kind == K_ICALL && dec.imm == 32'd8, "indirect call");
    instr = enc_jalr(5'd0, 5'd5, 12'd0); #1;
    check(dec.kind == K_JALR, "indirect jump");
    instr = 32'h3020_0073; #1;
    check(dec.kind == K_XRET, "mret");
    instr = enc_csrrw(5'd7, CSR_LIBRA_CTX, 5'd8); #1;
    check(dec.kind == K_CTXCSR, "Libra context CSR access");
    instr = enc_csrrw(5'd7, 12'h340, 5'd8); #1;
    check(dec.kind == K_OTHER, "other CSR access");
    instr = 32'h0000_0073; #1;
    check(dec.kind == K_OTHER, "ecall is not a Libra control transfer");
    instr = enc_add(5'd3, 5'd4, 5'd5); #1;
    check(dec.kind == K_OTHER, "add is not control");
    instr = enc_addi(5'd3, 5'd4, 12'd1) & ~32'd3; #1;
    check(dec.kind == K_ILLEGAL, "16-bit encodings rejected");
    instr = enc_loj(); #1;
    check(dec.kind == K_LOBR && dec.bbc == 1 && dec.off_t == 0 && dec.off_f == 0, "lo.j");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
