// lo_decoder: classifies a 32-bit instruction for the Libra frontend.
//
// The decoder recognises the Libra instructions -- the level-offset branch
// lo.br c,offT:offF:bbc, the terminating level-offset branch tlo.br, which also
// carries the number of slices of the next level, and the level-offset call
// lo.call b,l -- next to the ordinary RV32I control transfers that change the
// Libra context (calls push a fresh context, returns pop one). Everything else
// is K_OTHER and only advances the PC by one slice.
//
// The paper fixes what the instructions mean, their operand ranges (16 basic
// blocks per level, 8 for a terminating level) and that the two prefix bits of
// the 32-bit encoding select the variant; the exact bit positions of the
// operands, and using the JAL opcode for lo.call, are this design's choices
// (see libra_pkg). Calls are recognised by rd = x1 (ra), returns as
// jalr x0,0(x1), following the RISC-V calling convention. mret is reported
// as K_XRET: leaving a trap handler restores the interrupted Libra context.
// Any CSR instruction (csrrw/csrrs/csrrc and immediate forms) on the Libra
// context CSR is K_CTXCSR, which the frontend executes serialised.
//
// Interface: instr_i in, dec_o out. Purely combinational, no clock.
module lo_decoder
  import libra_pkg::*;
(
  input  logic [31:0] instr_i,
  output dec_t        dec_o
);

  logic [1:0]  pfx;
  logic [4:0]  opc;
  logic [11:0] fld;     // B-type immediate bits reused for level offsets
  logic [31:0] imm_b, imm_j, imm_i;

  assign pfx   = instr_i[1:0];
  assign opc   = instr_i[6:2];
  assign fld   = {instr_i[31:25], instr_i[11:7]};
  assign imm_b = {{20{instr_i[31]}}, instr_i[7], instr_i[30:25], instr_i[11:8], 1'b0};
  assign imm_j = {{12{instr_i[31]}}, instr_i[19:12], instr_i[20], instr_i[30:21], 1'b0};
  assign imm_i = {{20{instr_i[31]}}, instr_i[31:20]};

  always_comb begin
    dec_o           = '0;
    dec_o.kind      = K_OTHER;
    dec_o.funct3    = instr_i[14:12];
    dec_o.rs1       = instr_i[19:15];
    dec_o.rs2       = instr_i[24:20];
    dec_o.rd        = instr_i[11:7];
    dec_o.bbc       = BBC_W'(1);
    unique case (pfx)
      PFX_STD: begin
        unique case (opc)
          OPC_BRANCH: begin
            dec_o.kind = K_BR;
            dec_o.imm  = imm_b;
          end
          OPC_JAL: begin
            dec_o.kind = (instr_i[11:7] == 5'd1) ? K_CALL : K_JAL;
            dec_o.imm  = imm_j;
          end
          OPC_JALR: begin
            dec_o.imm = imm_i;
            if (instr_i[11:7] == 5'd1)
              dec_o.kind = K_ICALL;
            else if (instr_i[11:7] == 5'd0 && instr_i[19:15] == 5'd1 && imm_i == '0)
              dec_o.kind = K_RET;
            else
              dec_o.kind = K_JALR;
          end
          OPC_SYSTEM: begin
            if (instr_i == MRET_WORD)
              dec_o.kind = K_XRET;
            else if (instr_i[14:12] != 3'b000 && instr_i[31:20] == CSR_LIBRA_CTX)
              dec_o.kind = K_CTXCSR;
          end
          default: dec_o.kind = K_OTHER;
        endcase
      end
      PFX_LO: begin
        unique case (opc)
          OPC_BRANCH: begin
            dec_o.kind  = K_LOBR;
            dec_o.off_t = fld[11:8];
            dec_o.off_f = fld[7:4];
            dec_o.bbc   = BBC_W'(fld[3:0]) + BBC_W'(1);
          end
          OPC_JAL: begin
            dec_o.kind      = K_LOCALL;
            dec_o.imm       = imm_j;
            dec_o.call_real = 1'b1;
          end
          default: dec_o.kind = K_ILLEGAL;
        endcase
      end
      PFX_TLO: begin
        unique case (opc)
          OPC_BRANCH: begin
            dec_o.kind    = K_TLOBR;
            dec_o.off_t   = OFF_W'(fld[11:9]);
            dec_o.off_f   = OFF_W'(fld[8:6]);
            dec_o.bbc     = BBC_W'(fld[5:3]) + BBC_W'(1);
            dec_o.nslices = REM_W'(fld[2:0]) + REM_W'(1);
          end
          OPC_JAL: begin
            dec_o.kind      = K_LOCALL;
            dec_o.imm       = imm_j;
            dec_o.call_real = 1'b0;
          end
          default: dec_o.kind = K_ILLEGAL;
        endcase
      end
      default: dec_o.kind = K_ILLEGAL;  // 16-bit encodings are not supported
    endcase
  end

endmodule
