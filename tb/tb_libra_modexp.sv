// tb_libra_modexp: workload test -- modular exponentiation by square and
// multiply, the classic secret-dependent branch, run through the Libra
// frontend at its default parameters.
//
// r = b^e mod 2^16 over the 8 bits of a secret exponent e (a0). The program
// exists in two builds, selected by the jump at word 0:
//   folded (word 16)  the conditional multiply is a terminating level of two
//                     blocks, real (mul/slli/srli into r) and dummy (the same
//                     instructions writing x0), entered with tlo.br on the
//                     exponent bit, so no closing lo.br is needed; the loop
//                     branch around it is public and predicted;
//   leaky  (word 64)  the same computation with an ordinary beq that skips
//                     the multiply when the bit is 0.
// The rest of the core is modelled as in tb_libra_frontend: instruction
// memory with a fixed line latency, a learning branch target buffer, and an
// in-order backend (here with mul and shifts) that resolves branches after
// BR_LAT cycles and drops its queue on a flush.
//
// Checks: the result for several exponents and bases; for the folded build,
// identical instruction-memory requests, predictor lookups, slice trace and
// cycle count across exponents; for the leaky build, that the cycle count
// does depend on the exponent (so the comparison can see a leak). The cycle
// overhead of the folded build is printed.
module tb_libra_modexp;
  import libra_pkg::*;
  import tb_libra_asm::*;

  localparam int LINE_BYTES = 32;
  localparam int MEM_WORDS  = 128;
  localparam int MEM_LAT    = 2;
  localparam int BR_LAT     = 3;
  localparam int FOLD_W     = 16;
  localparam int LEAK_W     = 64;
  localparam int END_F      = FOLD_W + 16;
  localparam int END_L      = LEAK_W + 13;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

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
  libra_ctx_t              ctx, ctx_prev;
  logic                    ctx_ovf, folded, lob_stall, bp_suppressed, irq_ack;
  logic [31:0]             irq_epc;

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
    .irq_i(1'b0), .trap_vec_i(32'h0), .irq_ack_o(irq_ack), .irq_epc_o(irq_epc),
    .csr_we_i(1'b0), .csr_wdata_i(32'h0), .csr_rdata_o(), .ctx_o(ctx), .ctx_prev_o(ctx_prev),
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

  task automatic load_program(bit leaky);
    int f, l;
    f = FOLD_W; l = LEAK_W;
    for (int i = 0; i < MEM_WORDS; i++) imem[i] = enc_nop();
    imem[0] = enc_jal(5'd0, leaky ? jd(0, l) : jd(0, f));
    // folded build: x5 = r, x11 = b, x10 = e, x12 = bits left
    imem[f + 0]  = enc_addi(5'd5, 5'd0, 12'd1);
    imem[f + 1]  = enc_addi(5'd12, 5'd0, 12'd8);
    imem[f + 2]  = enc_andi(5'd6, 5'd10, 12'd1);                  // loop: bit
    imem[f + 3]  = enc_tlobr(F3_BNE, 5'd6, 5'd0, 0, 1, 2, 3);     // tlo.br bit,0:1:2, 3 slices
    imem[f + 4]  = enc_mul(5'd5, 5'd5, 5'd11);                    //   real: r = r*b
    imem[f + 5]  = enc_mul(5'd0, 5'd5, 5'd11);                    //   dummy
    imem[f + 6]  = enc_slli(5'd5, 5'd5, 5'd16);
    imem[f + 7]  = enc_slli(5'd0, 5'd5, 5'd16);
    imem[f + 8]  = enc_srli(5'd5, 5'd5, 5'd16);                   //   r mod 2^16
    imem[f + 9]  = enc_srli(5'd0, 5'd5, 5'd16);
    imem[f + 10] = enc_mul(5'd11, 5'd11, 5'd11);                  // b = b*b mod 2^16
    imem[f + 11] = enc_slli(5'd11, 5'd11, 5'd16);
    imem[f + 12] = enc_srli(5'd11, 5'd11, 5'd16);
    imem[f + 13] = enc_srli(5'd10, 5'd10, 5'd1);
    imem[f + 14] = enc_addi(5'd12, 5'd12, -12'sd1);
    imem[f + 15] = enc_br(F3_BNE, 5'd12, 5'd0, 13'((f + 2 - (f + 15)) * 4));
    imem[END_F]  = enc_jal(5'd0, 21'd0);
    // leaky build
    imem[l + 0]  = enc_addi(5'd5, 5'd0, 12'd1);
    imem[l + 1]  = enc_addi(5'd12, 5'd0, 12'd8);
    imem[l + 2]  = enc_andi(5'd6, 5'd10, 12'd1);
    imem[l + 3]  = enc_br(F3_BEQ, 5'd6, 5'd0, 13'd16);            // skip the multiply
    imem[l + 4]  = enc_mul(5'd5, 5'd5, 5'd11);
    imem[l + 5]  = enc_slli(5'd5, 5'd5, 5'd16);
    imem[l + 6]  = enc_srli(5'd5, 5'd5, 5'd16);
    imem[l + 7]  = enc_mul(5'd11, 5'd11, 5'd11);
    imem[l + 8]  = enc_slli(5'd11, 5'd11, 5'd16);
    imem[l + 9]  = enc_srli(5'd11, 5'd11, 5'd16);
    imem[l + 10] = enc_srli(5'd10, 5'd10, 5'd1);
    imem[l + 11] = enc_addi(5'd12, 5'd12, -12'sd1);
    imem[l + 12] = enc_br(F3_BNE, 5'd12, 5'd0, 13'((l + 2 - (l + 12)) * 4));
    imem[END_L]  = enc_jal(5'd0, 21'd0);
  endtask

  function automatic logic [31:0] modexp_ref(logic [31:0] b, logic [7:0] e);
    logic [31:0] r;
    r = 1;
    for (int i = 0; i < 8; i++) begin
      if (e[i]) r = (r * b) & 32'hffff;
      b = (b * b) & 32'hffff;
    end
    return r;
  endfunction

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

  function automatic logic [31:0] alu(logic [31:0] ins, logic [31:0] a, logic [31:0] b);
    logic [31:0] imm;
    imm = {{20{ins[31]}}, ins[31:20]};
    if (ins[6:0] == 7'b0010011) begin
      case (ins[14:12])
        3'b000:  return a + imm;
        3'b111:  return a & imm;
        3'b001:  return a << ins[24:20];
        3'b101:  return a >> ins[24:20];
        default: return 32'hx;
      endcase
    end
    if (ins[31:25] == 7'b0000001) return a * b;
    return ins[30] ? a - b : a + b;
  endfunction

  always @(posedge clk) begin
    resolve_valid <= 1'b0;
    if (!rst_n || flush) begin
      q.delete();
      busy = 0;
    end else begin
      if (q.size() > 0) begin
        ent_t e;
        logic [31:0] a, b;
        e = q[0];
        a = regs[e.instr[19:15]]; b = regs[e.instr[24:20]];
        case (e.kind)
          K_OTHER: begin
            if (e.instr[11:7] != 0) regs[e.instr[11:7]] = alu(e.instr, a, b);
            void'(q.pop_front());
          end
          K_JAL: void'(q.pop_front());
          K_BR, K_TLOBR: begin
            if (busy == BR_LAT - 1) begin
              resolve_valid  <= 1'b1;
              resolve_taken  <= cond_true(e.instr[14:12], a, b);
              resolve_target <= 32'h0;
              void'(q.pop_front());
              busy = 0;
            end else busy++;
          end
          default: begin
            failures++;
            $display("FAIL unexpected instruction %h at %h", e.instr, e.pc);
            void'(q.pop_front());
          end
        endcase
      end
      if (issue_valid && issue_ready)
        q.push_back('{pc: issue_pc, instr: issue_instr, link: issue_link, kind: issue_kind});
    end
  end

  // --------------------------------------------------------------- traces
  string tr_mem, tr_bp, tr_slice;
  int    n_tlobr, n_pred, n_flush, end_cycle;
  bit    done;
  int    end_w;

  always @(posedge clk) begin
    if (!rst_n) cycle <= 0;
    else begin
      cycle <= cycle + 1;
      if (mem_req_valid && mem_req_ready) tr_mem = {tr_mem, $sformatf("%0d:%h ", cycle, mem_req_addr)};
      if (bp_lookup_valid) tr_bp = {tr_bp, $sformatf("%0d:%h ", cycle, bp_lookup_pc)};
      if (flush) n_flush++;
      if (issue_valid && issue_ready) begin
        tr_slice = {tr_slice, $sformatf("%0d:%h ", cycle, issue_pc - 32'(ctx.off) * 4)};
        if (issue_kind == K_TLOBR) n_tlobr++;
        if (issue_kind == K_BR && bp_hit) n_pred++;
        if (issue_pc == 32'(end_w * 4) && !done) begin
          done = 1;
          end_cycle = cycle;
        end
      end
    end
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(bit leaky, logic [7:0] e, logic [31:0] b, output string m,
                     output string bp, output string s, output int cyc);
    rst_n = 0;
    load_program(leaky);
    btb.delete();
    for (int i = 0; i < 32; i++) regs[i] = 0;
    regs[10] = {24'h0, e};
    regs[11] = b;
    tr_mem = ""; tr_bp = ""; tr_slice = "";
    done = 0; end_w = leaky ? END_L : END_F;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    while (!done) @(posedge clk);
    repeat (20) @(posedge clk);
    m = tr_mem; bp = tr_bp; s = tr_slice; cyc = end_cycle;
    check(regs[5] == modexp_ref(b, e), $sformatf("%s result for b=%0d e=%h: %0d",
          leaky ? "leaky" : "folded", b, e, regs[5]));
    check(ctx == CTX_INIT, "context back to (1,0)");
  endtask

  initial begin
    static logic [7:0]  exps [4] = '{8'h00, 8'hff, 8'ha5, 8'h3c};
    static logic [31:0] bases [2] = '{32'd7, 32'd12345};
    string m0, b0, s0, m1, b1, s1;
    int    c0, c1, cl_min, cl_max, cf;
    n_tlobr = 0; n_pred = 0; n_flush = 0;
    cl_min = 1 << 30; cl_max = 0; cf = 0;
    foreach (bases[j]) begin
      run(1'b0, exps[0], bases[j], m0, b0, s0, c0);
      cf = c0;
      for (int i = 1; i < 4; i++) begin
        run(1'b0, exps[i], bases[j], m1, b1, s1, c1);
        check(c1 == c0, "folded: cycle count independent of the exponent");
        check(m1 == m0, "folded: instruction-memory requests independent of the exponent");
        check(b1 == b0, "folded: predictor lookups independent of the exponent");
        check(s1 == s0, "folded: slice trace independent of the exponent");
      end
      for (int i = 0; i < 4; i++) begin
        run(1'b1, exps[i], bases[j], m1, b1, s1, c1);
        if (c1 < cl_min) cl_min = c1;
        if (c1 > cl_max) cl_max = c1;
      end
    end
    $display("folded: %0d cycles for every exponent; leaky: %0d..%0d cycles", cf, cl_min, cl_max);
    $display("tlo.br=%0d predicted loop branches=%0d flushes=%0d", n_tlobr, n_pred, n_flush);
    check(cl_max > cl_min, "leaky build: cycle count depends on the exponent");
    check(n_tlobr == 8 * 8, "one tlo.br per exponent bit in every folded run");
    check(n_pred > 0 && n_flush > 0, "public loop branch predicted, exit mispredicted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
