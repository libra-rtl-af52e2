// tb_libra_frontend: end-to-end test of the Libra frontend at its default
// parameters.
//
// The testbench plays the rest of the core: an instruction memory with a
// fixed two-cycle line latency, a branch target buffer that learns from the
// frontend's updates, and an in-order backend that executes a small RV32I
// subset (addi, add, sub, branches, jal, jalr) from an issue queue, resolves
// branches after BR_LAT cycles and drops its queue on a flush.
//
// The program strings together folded regions in the style of the paper's
// examples:
//   part 1  two-way folded branch (lo.br secret,0:1:2 ... lo.j) with a public
//           ordinary branch inside the region (predictor off, stall);
//   part 2  nested folded branch, levels of 2 and 4 blocks, one 4-block slice
//           spanning two cache lines;
//   part 3  the same with tlo.br, so the last level ends without lo.j;
//   part 4  lo.call of a function folded with its dummy, real on one side
//           and dummy on the other, with a nested folded branch inside. The
//           function is not a leaf: it saves the caller's context through
//           the Libra context CSR (and clears it), makes a level-offset call
//           of its own, and restores the context before returning;
//   part 5  a public loop that trains the predictor (correct predictions
//           and mispredictions with flush), then an ordinary call and return.
// In part 2 an interrupt is raised while the inner folded level runs; the
// handler (at word 128) counts in x15 and returns with mret, which must
// restore the interrupted context so the region completes correctly.
// It runs for the four combinations of a secret a0 and a public a1, checks
// the architectural results against values worked out by hand, and checks
// the security property Libra is built for: with the public input fixed,
// the instruction-memory requests (address and cycle), the predictor
// lookups, the sequence of slice addresses and the total cycle count are the
// same whatever the secret. Each mechanism is counted and must occur.
// An instruction-level reference model of the Libra rules (no slices, no
// timing) runs the same program; the executed PC sequence and the final
// registers of each run must equal it. The memory and backend timing are
// this testbench's choices; the rules the model encodes follow the paper,
// with the CSR and trap handling as this design defines them.
module tb_libra_frontend;
  import libra_pkg::*;
  import tb_libra_asm::*;

  localparam int LINE_BYTES = 32;
  localparam int MEM_WORDS  = 256;
  localparam int MEM_LAT    = 2;
  localparam int BR_LAT     = 3;
  localparam int END_W      = 71;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // DUT signals
  logic                    mem_req_valid, mem_req_ready, mem_resp_valid;
  logic [31:0]             mem_req_addr;
  logic [LINE_BYTES*8-1:0] mem_resp_data;
  logic                    bp_lookup_valid, bp_hit, bp_update_valid, bp_update_taken;
  logic [31:0]             bp_lookup_pc, bp_target, bp_update_pc, bp_update_target;
  logic                    issue_valid, issue_ready;
  logic [31:0]             issue_pc, issue_instr, issue_link;
  ikind_e                  issue_kind;
  logic                    resolve_valid, resolve_taken, flush;
  logic [31:0]             resolve_target;
  logic                    csr_we;
  logic [31:0]             csr_wdata, csr_rdata;
  libra_ctx_t              ctx, ctx_prev;
  logic                    ctx_ovf, folded, lob_stall, bp_suppressed;
  logic                    irq, irq_ack;
  logic [31:0]             irq_epc;
  localparam int           TRAP_W = 128;

  libra_frontend dut (
    .clk_i(clk), .rst_ni(rst_n),
    .mem_req_valid_o(mem_req_valid), .mem_req_addr_o(mem_req_addr),
    .mem_req_ready_i(mem_req_ready), .mem_resp_valid_i(mem_resp_valid),
    .mem_resp_data_i(mem_resp_data),
    .bp_lookup_valid_o(bp_lookup_valid), .bp_lookup_pc_o(bp_lookup_pc),
    .bp_hit_i(bp_hit), .bp_target_i(bp_target),
    .bp_update_valid_o(bp_update_valid), .bp_update_pc_o(bp_update_pc),
    .bp_update_taken_o(bp_update_taken), .bp_update_target_o(bp_update_target),
    .issue_valid_o(issue_valid), .issue_ready_i(issue_ready), .issue_pc_o(issue_pc),
    .issue_instr_o(issue_instr), .issue_kind_o(issue_kind), .issue_link_o(issue_link),
    .resolve_valid_i(resolve_valid), .resolve_taken_i(resolve_taken),
    .resolve_target_i(resolve_target), .flush_o(flush),
    .irq_i(irq), .trap_vec_i(32'(TRAP_W * 4)), .irq_ack_o(irq_ack), .irq_epc_o(irq_epc),
    .csr_we_i(csr_we), .csr_wdata_i(csr_wdata), .csr_rdata_o(csr_rdata), .ctx_o(ctx), .ctx_prev_o(ctx_prev),
    .ctx_overflow_o(ctx_ovf), .folded_o(folded), .lob_stall_o(lob_stall),
    .bp_suppressed_o(bp_suppressed)
  );

  int checks = 0, failures = 0;
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // ------------------------------------------------------------ program
  logic [31:0] imem [MEM_WORDS];

  function automatic logic [20:0] jd(int from_w, int to_w);
    return 21'((to_w - from_w) * 4);
  endfunction

  task automatic load_program();
    for (int i = 0; i < MEM_WORDS; i++) imem[i] = enc_nop();
    // part 1: two-way folded branch with a public branch inside
    imem[0]  = enc_addi(5'd19, 5'd0, 12'd3);            // s3 = 3
    imem[1]  = enc_addi(5'd20, 5'd0, 12'd5);            // s4 = 5
    imem[2]  = enc_addi(5'd18, 5'd0, 12'd7);            // s2 = 7
    imem[3]  = enc_lobr(F3_BNE, 5'd10, 5'd0, 0, 1, 2);  // lo.br secret,0:1:2
    imem[4]  = enc_add(5'd9, 5'd18, 5'd19);             //   t: add s1,s2,s3
    imem[5]  = enc_add(5'd18, 5'd19, 5'd20);            //   f: add s2,s3,s4
    imem[6]  = enc_br(F3_BEQ, 5'd0, 5'd0, 13'd12);      //   t: public beq -> slice 9
    imem[7]  = enc_br(F3_BEQ, 5'd0, 5'd0, 13'd12);      //   f: same displacement
    imem[9]  = enc_loj();
    imem[10] = enc_loj();
    imem[11] = enc_jal(5'd0, jd(11, 18));
    // part 2: nested folded branch (levels 2 and 4)
    imem[18] = enc_addi(5'd5, 5'd0, 12'd100);           // r = 100
    imem[19] = enc_lobr(F3_BNE, 5'd10, 5'd0, 0, 1, 2);  // lo.br secret,0:1:2
    imem[20] = enc_lobr(F3_BNE, 5'd11, 5'd0, 0, 1, 4);  //   lo.br c,0:1:4
    imem[21] = enc_lobr(F3_BNE, 5'd11, 5'd0, 2, 3, 4);  //   lo.br c,2:3:4
    imem[22] = enc_addi(5'd5, 5'd5, 12'd4);             //     tt
    imem[23] = enc_addi(5'd5, 5'd5, 12'd8);             //     tf
    imem[24] = enc_addi(5'd5, 5'd5, -12'sd4);           //     ft
    imem[25] = enc_addi(5'd5, 5'd5, -12'sd8);           //     ff
    for (int i = 26; i < 30; i++) imem[i] = enc_loj();
    imem[30] = enc_jal(5'd0, jd(30, 32));
    // part 3: terminating level-offset branch
    imem[32] = enc_addi(5'd6, 5'd0, 12'd50);
    imem[33] = enc_lobr(F3_BNE, 5'd10, 5'd0, 0, 1, 2);
    imem[34] = enc_tlobr(F3_BNE, 5'd11, 5'd0, 0, 1, 4, 1);
    imem[35] = enc_tlobr(F3_BNE, 5'd11, 5'd0, 2, 3, 4, 1);
    imem[36] = enc_addi(5'd6, 5'd6, 12'd1);
    imem[37] = enc_addi(5'd6, 5'd6, 12'd2);
    imem[38] = enc_addi(5'd6, 5'd6, 12'd3);
    imem[39] = enc_addi(5'd6, 5'd6, 12'd4);
    imem[40] = enc_jal(5'd0, jd(40, 48));
    // part 4: level-offset call of a folded function
    imem[48] = enc_lobr(F3_BNE, 5'd10, 5'd0, 0, 1, 2);
    imem[49] = enc_locall(1'b1, jd(49, 92));            // t: real function
    imem[50] = enc_locall(1'b0, jd(50, 92));            // f: dummy function
    imem[51] = enc_loj();
    imem[52] = enc_loj();
    imem[53] = enc_jal(5'd0, jd(53, 64));
    // folded function ffoo: real part at offset 0, dummy at offset 1
    imem[92]  = enc_addi(5'd29, 5'd1, 12'd0);           // non-leaf: keep ra
    imem[93]  = enc_addi(5'd29, 5'd1, 12'd0);
    imem[94]  = enc_csrrw(5'd28, CSR_LIBRA_CTX, 5'd0);  // save caller context, clear
    imem[95]  = enc_csrrw(5'd28, CSR_LIBRA_CTX, 5'd0);
    imem[96]  = enc_addi(5'd7, 5'd7, 12'd1);            // i0
    imem[97]  = enc_addi(5'd0, 5'd7, 12'd1);            // i0' (dummy)
    imem[98]  = enc_lobr(F3_BNE, 5'd11, 5'd0, 0, 1, 4);
    imem[99]  = enc_lobr(F3_BNE, 5'd11, 5'd0, 2, 3, 4);
    imem[100] = enc_addi(5'd7, 5'd7, 12'd16);           // i1
    imem[101] = enc_addi(5'd7, 5'd7, 12'd32);           // i3
    imem[102] = enc_addi(5'd0, 5'd7, 12'd16);
    imem[103] = enc_addi(5'd0, 5'd7, 12'd32);
    imem[104] = enc_addi(5'd7, 5'd7, 12'd64);           // i2
    imem[105] = enc_addi(5'd7, 5'd7, 12'd128);          // i4
    imem[106] = enc_addi(5'd0, 5'd7, 12'd64);
    imem[107] = enc_addi(5'd0, 5'd7, 12'd128);
    imem[108] = enc_lobr(F3_BEQ, 5'd0, 5'd0, 0, 0, 2);  // real blocks -> offset 0
    imem[109] = enc_lobr(F3_BEQ, 5'd0, 5'd0, 0, 0, 2);
    imem[110] = enc_lobr(F3_BEQ, 5'd0, 5'd0, 1, 1, 2);  // dummy blocks -> offset 1
    imem[111] = enc_lobr(F3_BEQ, 5'd0, 5'd0, 1, 1, 2);
    imem[112] = enc_locall(1'b1, jd(112, 124));         // real half calls g
    imem[113] = enc_locall(1'b0, jd(113, 124));         // dummy half calls g's dummy
    imem[114] = enc_csrrw(5'd0, CSR_LIBRA_CTX, 5'd28);  // restore caller context
    imem[115] = enc_csrrw(5'd0, CSR_LIBRA_CTX, 5'd28);
    imem[116] = enc_addi(5'd1, 5'd29, 12'd0);
    imem[117] = enc_addi(5'd1, 5'd29, 12'd0);
    imem[118] = enc_ret();
    imem[119] = enc_ret();
    // folded leaf function g
    imem[124] = enc_addi(5'd7, 5'd7, 12'd256);
    imem[125] = enc_addi(5'd0, 5'd7, 12'd256);
    imem[126] = enc_ret();
    imem[127] = enc_ret();
    // part 5: public loop (predictor) and an ordinary call
    imem[64] = enc_addi(5'd8, 5'd0, 12'd0);
    imem[65] = enc_addi(5'd12, 5'd0, 12'd6);
    imem[66] = enc_addi(5'd8, 5'd8, 12'd3);
    imem[67] = enc_addi(5'd12, 5'd12, -12'sd1);
    imem[68] = enc_br(F3_BNE, 5'd12, 5'd0, -13'sd8);
    imem[69] = enc_jal(5'd1, jd(69, 122));
    imem[70] = enc_addi(5'd14, 5'd0, 12'd1);
    imem[END_W] = enc_jal(5'd0, 21'd0);
    imem[122] = enc_addi(5'd13, 5'd13, 12'd9);
    imem[123] = enc_ret();
    // interrupt handler
    imem[TRAP_W]     = enc_addi(5'd15, 5'd15, 12'd1);
    imem[TRAP_W + 1] = MRET_WORD;
  endtask

  // ---------------------------------------------------- instruction memory
  int          cycle;
  int          resp_due;
  logic [31:0] resp_addr;
  assign mem_req_ready = 1'b1;
  always @(posedge clk) begin
    mem_resp_valid <= 1'b0;
    if (!rst_n) resp_due <= -1;
    else begin
      if (mem_req_valid && mem_req_ready) begin
        resp_due  <= cycle + MEM_LAT;
        resp_addr <= mem_req_addr;
      end
      if (resp_due == cycle) begin
        for (int w = 0; w < LINE_BYTES / 4; w++)
          mem_resp_data[32*w +: 32] <= imem[(resp_addr / 4 + w) % MEM_WORDS];
        mem_resp_valid <= 1'b1;
        resp_due       <= -1;
      end
    end
  end

  // ---------------------------------------------------- branch target buffer
  logic [31:0] btb [logic [31:0]];
  assign bp_hit    = bp_lookup_valid && btb.exists(bp_lookup_pc);
  assign bp_target = bp_hit ? btb[bp_lookup_pc] : 32'h0;
  always @(posedge clk) begin
    if (rst_n && bp_update_valid) begin
      if (bp_update_taken) btb[bp_update_pc] = bp_update_target;
      else if (btb.exists(bp_update_pc)) btb.delete(bp_update_pc);
    end
  end

  // ------------------------------------------------------------ backend
  typedef struct { logic [31:0] pc, instr, link; ikind_e kind; } ent_t;
  ent_t        q[$];
  logic [31:0] regs [32];
  logic [31:0] mepc;
  int          busy;
  assign issue_ready = (q.size() < 8);

  function automatic bit cond_true(logic [2:0] f3, logic [31:0] a, logic [31:0] b);
    case (f3)
      3'b000: return a == b;
      3'b001: return a != b;
      3'b100: return $signed(a) < $signed(b);
      3'b101: return $signed(a) >= $signed(b);
      3'b110: return a < b;
      default: return a >= b;
    endcase
  endfunction

  // executed (not flushed) instructions, in order
  logic [31:0] commit[$];
  function automatic void commit_pop();
    commit.push_back(q[0].pc);
    void'(q.pop_front());
  endfunction

  task automatic wr(logic [4:0] rd, logic [31:0] v);
    if (rd != 0) regs[rd] = v;
  endtask

  always @(posedge clk) begin
    resolve_valid <= 1'b0;
    csr_we        <= 1'b0;
    if (!rst_n) begin
      q.delete();
      busy = 0;
    end else if (flush) begin
      q.delete();
      busy = 0;
    end else begin
      if (irq_ack) mepc = irq_epc;
      if (q.size() > 0) begin
        ent_t e;
        logic [4:0] rd, rs1, rs2;
        logic [31:0] a, b, imm_i;
        e   = q[0];
        rd  = e.instr[11:7]; rs1 = e.instr[19:15]; rs2 = e.instr[24:20];
        a   = regs[rs1]; b = regs[rs2];
        imm_i = {{20{e.instr[31]}}, e.instr[31:20]};
        case (e.kind)
          K_OTHER: begin
            if (e.instr[6:0] == 7'b0010011) wr(rd, a + imm_i);
            else if (e.instr[6:0] == 7'b0110011) wr(rd, e.instr[30] ? a - b : a + b);
            commit_pop();
          end
          K_CTXCSR: begin
            // serialising: the frontend waits, so the context read is exact
            resolve_valid <= 1'b1;
            resolve_taken <= 1'b0;
            csr_we        <= 1'b1;
            csr_wdata     <= a;
            wr(rd, csr_rdata);
            commit_pop();
          end
          K_JAL, K_CALL, K_LOCALL: begin
            wr(rd, e.link);
            commit_pop();
          end
          K_BR, K_LOBR, K_TLOBR, K_JALR, K_ICALL, K_RET, K_XRET: begin
            if (busy == BR_LAT - 1) begin
              resolve_valid  <= 1'b1;
              resolve_taken  <= cond_true(e.instr[14:12], a, b);
              resolve_target <= (e.kind == K_XRET) ? mepc : (a + imm_i) & ~32'd1;
              if (e.kind inside {K_JALR, K_ICALL, K_RET}) wr(rd, e.link);
              commit_pop();
              busy = 0;
            end else busy++;
          end
          default: begin
            failures++;
            $display("FAIL illegal instruction %h at %h", e.instr, e.pc);
            commit_pop();
          end
        endcase
      end
      if (issue_valid && issue_ready)
        q.push_back('{pc: issue_pc, instr: issue_instr, link: issue_link, kind: issue_kind});
    end
  end

  // --------------------------------------------------------------- traces
  string tr_mem, tr_bp, tr_slice;
  int    n_lobr, n_tlobr, n_tlo_exit, n_locall_real, n_locall_dummy, n_call, n_pop,
         n_stall, n_multiline, n_pred_taken, n_flush, n_suppressed, n_fold_br, n_push,
         n_irq, n_irq_folded, n_xret, n_ovf, n_csr;
  bit    irq_fired;
  int    irq_ack_cycle, irq_lat_max;
  libra_ctx_t irq_ctx;
  int    lob_issue_cycle, lob_lat_max;
  bit    done;
  int    end_cycle;

  always @(posedge clk) begin
    if (!rst_n) begin
      cycle <= 0;
      irq   <= 1'b0;
      irq_fired = 0;
    end else begin
      cycle <= cycle + 1;
      if (irq_ack) begin
        irq <= 1'b0;
        n_irq++;
        irq_ack_cycle = cycle;
        irq_ctx = ctx;
        if (ctx_folded(ctx)) n_irq_folded++;
      end
      if (ctx_ovf) n_ovf++;
      if (mem_req_valid && mem_req_ready) tr_mem = {tr_mem, $sformatf("%0d:%h ", cycle, mem_req_addr)};
      if (bp_lookup_valid) tr_bp = {tr_bp, $sformatf("%0d:%h ", cycle, bp_lookup_pc)};
      if (lob_stall) n_stall++;
      if (flush) n_flush++;
      if (bp_suppressed && issue_valid && issue_ready) n_suppressed++;
      if (ctx.rem == REM_W'(1) && issue_valid && issue_ready) n_tlo_exit++;
      if (issue_valid && issue_ready) begin
        logic [31:0] sa;
        sa = issue_pc - 32'(ctx.off) * 4;
        tr_slice = {tr_slice, $sformatf("%0d:%h ", cycle, sa)};
        // raise the interrupt inside the inner level of part 2
        if (sa == 32'(22 * 4) && !irq_fired) begin
          irq <= 1'b1;
          irq_fired = 1;
        end
        if (issue_pc == 32'(TRAP_W * 4) && cycle - irq_ack_cycle > irq_lat_max)
          irq_lat_max = cycle - irq_ack_cycle;
        if (issue_pc == 32'(TRAP_W * 4) && irq_ctx != ctx_prev) begin
          failures++;
          $display("FAIL interrupted context not saved by the trap");
        end
        if (ctx.bbc > 1 && (sa / LINE_BYTES) != ((sa + 32'(ctx.bbc) * 4 - 1) / LINE_BYTES))
          n_multiline++;
        if (lob_issue_cycle >= 0) begin
          if (cycle - lob_issue_cycle > lob_lat_max) lob_lat_max = cycle - lob_issue_cycle;
          lob_issue_cycle = -1;
        end
        case (issue_kind)
          K_LOBR:   begin n_lobr++;  lob_issue_cycle = cycle; end
          K_TLOBR:  begin n_tlobr++; lob_issue_cycle = cycle; end
          K_LOCALL: begin
            if (issue_instr[1:0] == 2'b01) n_locall_real++; else n_locall_dummy++;
            n_push++;
          end
          K_CALL:   begin n_call++; n_push++; end
          K_RET:    n_pop++;
          K_XRET:   n_xret++;
          K_CTXCSR: n_csr++;
          K_BR:     if (folded) n_fold_br++; else if (bp_hit) n_pred_taken++;
          default: ;
        endcase
        if (issue_pc == END_W * 4 && !done) begin
          done = 1;
          end_cycle = cycle;
        end
      end
    end
  end

  // ------------------------------------------------------ reference model
  // Instruction-level model of the Libra semantics, written from the rules
  // (PC and context stack only: no slices, no timing, no speculation). It
  // runs the same program from the same registers and gives the sequence of
  // executed PCs and the final registers. The interrupt is taken before the
  // same dynamic instruction as in the frontend run (irq_at).
  logic [31:0] ref_pcs[$];
  logic [31:0] ref_regs [32];

  task automatic ref_run(logic [31:0] r0 [32], int irq_at);
    logic [31:0] pc, ins, a, b, imm, mepc_r, link;
    libra_ctx_t  cur, prev, nxt;
    dec_t        d;
    int          n;
    ref_regs = r0;
    ref_pcs.delete();
    pc = 0; cur = CTX_INIT; prev = CTX_INIT; mepc_r = 0; n = 0;
    while (pc != END_W * 4 && n < 5000) begin
      if (n == irq_at) begin           // trap entry
        mepc_r = pc; prev = cur; cur = CTX_INIT; pc = TRAP_W * 4;
      end
      ins = imem[pc / 4];
      d   = ref_decode(ins);
      ref_pcs.push_back(pc);
      n++;
      a = ref_regs[ins[19:15]]; b = ref_regs[ins[24:20]];
      // sequential successor: same offset in the next slice; a terminating
      // level returns to (1,0) after its last slice
      nxt = cur;
      if (cur.rem == 1) nxt = CTX_INIT;
      else if (cur.rem != 0) nxt.rem = cur.rem - 1;
      link = pc - 32'(cur.off) * 4 + 32'(cur.bbc) * 4 + 32'(nxt.off) * 4;
      case (d.kind)
        K_LOBR, K_TLOBR: begin
          nxt = '{bbc: d.bbc, off: cond_true(ins[14:12], a, b) ? d.off_t : d.off_f,
                  rem: (d.kind == K_TLOBR) ? d.nslices : '0};
          pc  = pc - 32'(cur.off) * 4 + 32'(cur.bbc) * 4 + 32'(nxt.off) * 4;
          cur = nxt;
        end
        K_BR: begin
          pc  = cond_true(ins[14:12], a, b) ? pc + d.imm - 32'(cur.off) * 4 + 32'(nxt.off) * 4 : link;
          cur = nxt;
        end
        K_JAL: begin pc = pc + d.imm; cur = nxt; end
        K_CALL: begin
          rwr(ins[11:7], link);
          prev = nxt; cur = CTX_INIT; pc = pc + d.imm;
        end
        K_LOCALL: begin
          rwr(ins[11:7], link);
          prev = nxt; cur = '{bbc: 2, off: d.call_real ? 0 : 1, rem: 0};
          pc = pc + d.imm + 32'(cur.off) * 4;
        end
        K_RET:  begin pc = a & ~32'd1; cur = prev; prev = CTX_INIT; end
        K_XRET: begin pc = mepc_r;     cur = prev; prev = CTX_INIT; end
        K_CTXCSR: begin
          rwr(ins[11:7], ctx_to_csr(prev));
          prev = csr_to_ctx(a);
          pc = link; cur = nxt;
        end
        default: begin
          imm = {{20{ins[31]}}, ins[31:20]};
          if (ins[6:0] == 7'b0010011) rwr(ins[11:7], a + imm);
          else if (ins[6:0] == 7'b0110011) rwr(ins[11:7], ins[30] ? a - b : a + b);
          pc = link; cur = nxt;
        end
      endcase
    end
  endtask

  function automatic void rwr(logic [4:0] rd, logic [31:0] v);
    if (rd != 0) ref_regs[rd] = v;
  endfunction

  // decode for the reference model, straight from the field layout
  function automatic dec_t ref_decode(logic [31:0] ins);
    dec_t d;
    logic [11:0] f;
    d = '0; d.kind = K_OTHER; d.bbc = 1;
    f = {ins[31:25], ins[11:7]};
    if (ins[1:0] == 2'b01 && ins[6:2] == 5'b11000) begin
      d.kind = K_LOBR; d.off_t = f[11:8]; d.off_f = f[7:4]; d.bbc = BBC_W'(f[3:0]) + 1;
    end else if (ins[1:0] == 2'b10 && ins[6:2] == 5'b11000) begin
      d.kind = K_TLOBR; d.off_t = OFF_W'(f[11:9]); d.off_f = OFF_W'(f[8:6]);
      d.bbc = BBC_W'(f[5:3]) + 1; d.nslices = REM_W'(f[2:0]) + 1;
    end else if (ins[1:0] != 2'b11 && ins[6:2] == 5'b11011) begin
      d.kind = K_LOCALL; d.call_real = (ins[1:0] == 2'b01);
    end else if (ins[6:2] == 5'b11000) d.kind = K_BR;
    else if (ins[6:2] == 5'b11011) d.kind = (ins[11:7] == 1) ? K_CALL : K_JAL;
    else if (ins == 32'h3020_0073) d.kind = K_XRET;
    else if (ins[6:2] == 5'b11001 && ins[11:7] == 0 && ins[19:15] == 1) d.kind = K_RET;
    else if (ins[6:0] == 7'b1110011 && ins[31:20] == 12'h7C0) d.kind = K_CTXCSR;
    if (ins[6:2] == 5'b11000) d.imm = {{20{ins[31]}}, ins[7], ins[30:25], ins[11:8], 1'b0};
    if (ins[6:2] == 5'b11011) d.imm = {{12{ins[31]}}, ins[19:12], ins[20], ins[30:21], 1'b0};
    return d;
  endfunction

  // ------------------------------------------------------------ watchdog
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ runs
  int n_ref_instr;
  task automatic run(bit secret, bit pub, output string m, output string b,
                     output string s, output int cyc);
    logic [31:0] r0 [32];
    int irq_at, n_mism;
    rst_n = 0;
    load_program();
    btb.delete();
    for (int i = 0; i < 32; i++) regs[i] = 0;
    regs[10] = secret ? 32'd1 : 32'd0;   // a0: secret
    regs[11] = pub ? 32'd1 : 32'd0;      // a1: public
    tr_mem = ""; tr_bp = ""; tr_slice = "";
    done = 0; lob_issue_cycle = -1;
    commit.delete();
    r0 = regs;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    while (!done) @(posedge clk);
    repeat (20) @(posedge clk);
    m = tr_mem; b = tr_bp; s = tr_slice; cyc = end_cycle;
    // against the instruction-level reference
    irq_at = -1;
    foreach (commit[i]) if (commit[i] == TRAP_W * 4 && irq_at < 0) irq_at = i;
    while (commit.size() > 0 && commit[commit.size() - 1] == END_W * 4) void'(commit.pop_back());
    ref_run(r0, irq_at);
    check(irq_at > 0, "interrupt position found");
    check(commit.size() == ref_pcs.size(), $sformatf("executed %0d instructions, reference %0d",
          commit.size(), ref_pcs.size()));
    n_mism = 0;
    foreach (ref_pcs[i]) if (i < commit.size() && commit[i] != ref_pcs[i]) n_mism++;
    check(n_mism == 0, "executed PC sequence equals the reference semantics");
    n_mism = 0;
    for (int i = 1; i < 32; i++) if (regs[i] != ref_regs[i]) n_mism++;
    check(n_mism == 0, "registers equal the reference semantics");
    n_ref_instr += ref_pcs.size();
    // architectural results, worked out by hand from the source program
    check(regs[9]  == (secret ? 32'd10 : 32'd0), "part 1: s1");
    check(regs[18] == (secret ? 32'd7 : 32'd8), "part 1: s2");
    check(regs[5]  == (secret ? (pub ? 32'd104 : 32'd108) : (pub ? 32'd96 : 32'd92)),
          "part 2: nested folded branch");
    check(regs[6]  == 32'd50 + (secret ? (pub ? 32'd1 : 32'd2) : (pub ? 32'd3 : 32'd4)),
          "part 3: terminating level-offset branch");
    check(regs[7]  == (secret ? (pub ? 32'd337 : 32'd417) : 32'd0), "part 4: folded function");
    check(regs[28] == ctx_to_csr('{bbc: BBC_W'(2), off: secret ? OFF_W'(0) : OFF_W'(1), rem: '0}),
          "part 4: caller context saved through the CSR");
    check(regs[8]  == 32'd18 && regs[12] == 32'd0, "part 5: loop");
    check(regs[13] == 32'd9 && regs[14] == 32'd1, "part 5: call and return");
    check(regs[1]  == 32'd70 * 4, "part 5: return address");
    check(ctx == CTX_INIT && ctx_prev == CTX_INIT, "context back to (1,0)");
    check(regs[15] == 32'd1, "interrupt handler ran once");
  endtask

  initial begin
    string m0, b0, s0, m1, b1, s1;
    int    c0, c1;
    {n_lobr, n_tlobr, n_tlo_exit, n_locall_real, n_locall_dummy, n_call, n_pop,
     n_stall, n_multiline, n_pred_taken, n_flush, n_suppressed, n_fold_br, n_push,
     n_irq, n_irq_folded, n_xret, n_ovf, n_csr} = '0;
    lob_lat_max = 0; irq_lat_max = 0;
    for (int p = 0; p < 2; p++) begin
      run(1'b0, p[0], m0, b0, s0, c0);
      run(1'b1, p[0], m1, b1, s1, c1);
      $display("public=%0d: %0d cycles (secret 0) / %0d cycles (secret 1)", p, c0, c1);
      check(c0 == c1, "execution time independent of the secret");
      check(m0 == m1, "instruction-memory requests independent of the secret");
      check(b0 == b1, "predictor lookups independent of the secret");
      check(s0 == s1, "slice trace independent of the secret");
    end
    // lo.br penalty: a few cycles -- draining older instructions, the branch
    // latency and, at worst, the fetch of a two-line slice
    check(lob_lat_max > 0 && lob_lat_max <= BR_LAT + 2 * (MEM_LAT + 3) + 3,
          "lo.br stall is a few cycles");
    $display("events: lo.br=%0d tlo.br=%0d tlo-exit=%0d lo.call real/dummy=%0d/%0d call=%0d ret=%0d",
             n_lobr, n_tlobr, n_tlo_exit, n_locall_real, n_locall_dummy, n_call, n_pop);
    $display("        stall cycles=%0d multi-line slices=%0d predicted taken=%0d flushes=%0d",
             n_stall, n_multiline, n_pred_taken, n_flush);
    $display("        predictor blocked=%0d folded public branches=%0d max lo.br gap=%0d",
             n_suppressed, n_fold_br, lob_lat_max);
    $display("        interrupts=%0d (in folded code %0d) mret=%0d handler entry=%0d cycles context CSR=%0d",
             n_irq, n_irq_folded, n_xret, irq_lat_max, n_csr);
    check(n_lobr > 0, "lo.br happened");
    check(n_tlobr > 0 && n_tlo_exit > 0, "tlo.br and its implicit exit happened");
    check(n_locall_real > 0 && n_locall_dummy > 0, "lo.call real and dummy happened");
    check(n_call > 0 && n_push > 0 && n_pop > 0, "context push and pop happened");
    check(n_stall > 0, "lo.br stall happened");
    check(n_multiline > 0, "multi-line slice fetch happened");
    check(n_pred_taken > 0, "prediction used outside folded regions");
    check(n_flush > 0, "misprediction flush happened");
    check(n_suppressed > 0 && n_fold_br > 0, "predictor disabled in folded regions");
    check(n_irq == 4 && n_irq_folded == 4 && n_xret == 4,
          "interrupt taken in folded code and returned from");
    check(n_ovf == 0, "no context-stack overflow");
    check(n_csr == 8, "context saved and restored by the non-leaf folded function");
    // entering the handler costs at most the line request already out plus
    // the handler's own line, never the rest of the interrupted slice
    check(irq_lat_max > 0 && irq_lat_max <= 2 * (MEM_LAT + 3), "handler entered after two line fetches");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
