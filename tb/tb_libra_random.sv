// tb_libra_random: random folded programs against an instruction-level model
// of the Libra rules, through the frontend at its default parameters.
//
// Each program is a chain of regions. A region is a little straight-line
// code followed by a chain of one to three folded levels: every block of a
// level ends with its own lo.br (random condition, random taken and
// not-taken offsets) into the next level, and the last level either closes
// with lo.j in every block or is a terminating level entered with tlo.br,
// which ends on its own. Block counts are drawn from 2..16 (2..8 for a
// terminating level), so slices of up to 16 words and three cache lines
// occur, at every alignment. Block bodies are random addi/add/sub on x5..x9;
// the conditions read those and the secrets x10, x11.
// Now and then a body row, or the straight-line code, is a row of lo.call
// (real or dummy, drawn per block) of one function folded with its dummy:
// two blocks of one to three slices ending in ret, so calls are made from
// levels of every width, including terminating ones, and must come back to
// the caller's context. In levels that are not terminating, a row may also
// be an ordinary branch on the public input x12 in every block, all to the
// same target slice k = 1..2 slices further on, as the folding rules ask of
// public branches kept inside a folded region.
// One interrupt per run arrives at a random cycle (the same for every
// secret); the handler counts in x15 and returns with mret. The cycle and
// slice at which it is taken are part of the compared trace.
//
// Each program runs with N_SEC random secret pairs. Checks per run: the
// final registers equal those of the instruction-level model below (written
// from the rules only: PC = slice + 4*off, next slice = slice + 4*bbc, the
// branch picks the offset, a terminating level counts its slices down) and
// the context is back at (1,0). Per program: instruction-memory requests,
// slice trace and cycle count identical for every secret. The backend and
// memory are modelled as in tb_libra_modexp. Mechanisms counted: lo.br,
// tlo.br, terminating-level exits, lo.call and ret, slices over two and
// three lines.
// The rules the model encodes and the level structure of the programs
// follow the published folding scheme; the random generator, the 3-bit
// slice count of tlo.br and the encodings are this design's.
module tb_libra_random;
  import libra_pkg::*;
  import tb_libra_asm::*;

  localparam int LINE_BYTES = 32;
  localparam int MEM_WORDS  = 1024;
  localparam int MEM_LAT    = 2;
  localparam int BR_LAT     = 3;
  localparam int N_PROG     = 40;   // random programs
  localparam int N_SEC      = 4;    // secret inputs per program
  localparam int N_REG      = 4;    // regions per program
  localparam int FUNC_W     = 960;  // the folded function (real + dummy)
  localparam int TRAP_W     = 1000; // interrupt handler

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                    mem_req_valid, mem_req_ready, mem_resp_valid;
  logic [31:0]             mem_req_addr;
  logic [LINE_BYTES*8-1:0] mem_resp_data;
  logic                    bp_lookup_valid, bp_hit, bp_update_valid, bp_update_taken;
  logic [31:0]             bp_lookup_pc, bp_target, bp_update_pc, bp_update_target;
  logic                    irq;
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
    .irq_i(irq), .trap_vec_i(32'(TRAP_W * 4)), .irq_ack_o(irq_ack), .irq_epc_o(irq_epc),
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
  int          end_w;
  int          n_gen_tlo, n_gen_2l, n_gen_3l, n_gen_max, n_gen_call, n_gen_pub;
  logic [31:0] pub;   // public input x12, fixed per program

  function automatic logic [4:0] rsrc();
    logic [4:0] r;
    r = 5'($urandom_range(4, 11));
    return (r == 4) ? 5'd0 : r;
  endfunction

  function automatic logic [20:0] jd(int from_w, int to_w);
    return 21'((to_w - from_w) * 4);
  endfunction

  function automatic logic [31:0] rand_alu();
    logic [4:0] rd;
    rd = 5'($urandom_range(5, 9));
    case ($urandom_range(0, 2))
      0:       return enc_add(rd, rsrc(), rsrc());
      1:       return enc_sub(rd, rsrc(), rsrc());
      default: return enc_addi(rd, rsrc(), 12'($urandom));
    endcase
  endfunction

  function automatic logic [2:0] rand_f3();
    logic [2:0] t [6] = '{F3_BEQ, F3_BNE, 3'b100, 3'b101, 3'b110, 3'b111};
    return t[$urandom_range(0, 5)];
  endfunction

  // number of cache lines a slice of n words at word address w touches
  function automatic int lines_of(int w, int n);
    return (w * 4 + n * 4 - 1) / LINE_BYTES - (w * 4) / LINE_BYTES + 1;
  endfunction

  task automatic gen_program();
    int w, depth, bbc_prev, bbc, ns, nl;
    bit tlo;
    for (int i = 0; i < MEM_WORDS; i++) imem[i] = enc_nop();
    w = 0;
    for (int r = 0; r < N_REG; r++) begin
      repeat ($urandom_range(0, 3)) begin imem[w] = rand_alu(); w++; end
      if ($urandom_range(0, 3) == 0) begin
        imem[w] = enc_locall(1'($urandom_range(0, 1)), jd(w, FUNC_W));
        w++;
      end
      depth = $urandom_range(1, 3);
      tlo   = 1'($urandom_range(0, 1));
      bbc_prev = 1;
      for (int lv = 1; lv <= depth; lv++) begin
        bit last_tlo;
        last_tlo = tlo && lv == depth;
        bbc = last_tlo ? $urandom_range(2, 8) : $urandom_range(2, 16);
        ns  = last_tlo ? $urandom_range(1, 8) : $urandom_range(1, 3);
        if (last_tlo) n_gen_tlo++;
        if (bbc > n_gen_max) n_gen_max = bbc;
        // the entering row: one branch per block of the previous level
        for (int b = 0; b < bbc_prev; b++) begin
          int ot, of;
          ot = $urandom_range(0, bbc - 1);
          of = $urandom_range(0, bbc - 1);
          imem[w] = last_tlo ? enc_tlobr(rand_f3(), rsrc(), rsrc(), ot, of, bbc, ns)
                             : enc_lobr(rand_f3(), rsrc(), rsrc(), ot, of, bbc);
          w++;
        end
        for (int row = 0; row < ns; row++) begin
          nl = lines_of(w, bbc);
          if (nl == 2) n_gen_2l++;
          if (nl >= 3) n_gen_3l++;
          if ($urandom_range(0, 5) == 0) begin
            // a row of level-offset calls, real or dummy per block
            n_gen_call++;
            for (int b = 0; b < bbc; b++) begin
              imem[w] = enc_locall(1'($urandom_range(0, 1)), jd(w, FUNC_W));
              w++;
            end
          end else if (!last_tlo && $urandom_range(0, 5) == 0) begin
            // a public branch in every block, all to the same target slice,
            // skipping k slices of the level when taken
            int k;
            logic [2:0] f3;
            k  = $urandom_range(1, 2);
            f3 = rand_f3();
            n_gen_pub++;
            for (int b = 0; b < bbc; b++) begin
              imem[w] = enc_br(f3, 5'd12, 5'd0, 13'((k + 1) * bbc * 4));
              w++;
            end
            repeat (k) for (int b = 0; b < bbc; b++) begin imem[w] = rand_alu(); w++; end
          end else
            for (int b = 0; b < bbc; b++) begin imem[w] = rand_alu(); w++; end
        end
        bbc_prev = bbc;
      end
      if (!tlo) for (int b = 0; b < bbc_prev; b++) begin imem[w] = enc_loj(); w++; end
    end
    end_w   = w;
    imem[w] = enc_jal(5'd0, 21'd0);
    // the function folded with its dummy: two blocks, then ret in both
    w = FUNC_W;
    repeat ($urandom_range(1, 3)) begin imem[w] = rand_alu(); imem[w + 1] = rand_alu(); w += 2; end
    imem[w] = enc_ret(); imem[w + 1] = enc_ret();
    imem[TRAP_W]     = enc_addi(5'd15, 5'd15, 12'd1);
    imem[TRAP_W + 1] = MRET_WORD;
    if (end_w >= FUNC_W) begin failures++; $display("FAIL program too long"); end
  endtask

  // ------------------------------------------------------ reference model
  logic [31:0] ref_regs [32];

  task automatic ref_run(logic [31:0] r0 [32]);
    logic [31:0] pc, ins, a, b;
    libra_ctx_t  cur, nxt, prev;
    logic [11:0] f;
    bit          c;
    int          n;
    ref_regs = r0;
    pc = 0; cur = CTX_INIT; prev = CTX_INIT; n = 0;
    while (pc != 32'(end_w * 4) && n < 100000) begin
      ins = imem[pc / 4];
      n++;
      a = ref_regs[ins[19:15]]; b = ref_regs[ins[24:20]];
      f = {ins[31:25], ins[11:7]};
      nxt = cur;
      if (cur.rem == 1) nxt = CTX_INIT;
      else if (cur.rem != 0) nxt.rem = cur.rem - 1;
      if (ins[6:0] == 7'b1100001) begin            // lo.br
        c = cond_true(ins[14:12], a, b);
        nxt = '{bbc: BBC_W'(f[3:0]) + 1, off: c ? f[11:8] : f[7:4], rem: '0};
      end else if (ins[6:0] == 7'b1100010) begin   // tlo.br
        c = cond_true(ins[14:12], a, b);
        nxt = '{bbc: BBC_W'(f[5:3]) + 1, off: OFF_W'(c ? f[11:9] : f[8:6]),
                rem: REM_W'(f[2:0]) + 1};
      end else if (ins[6:2] == 5'b11011 && ins[1:0] != 2'b11) begin   // lo.call
        ref_regs[1] = pc - 32'(cur.off) * 4 + 32'(cur.bbc) * 4 + 32'(nxt.off) * 4;
        prev = nxt;
        cur  = '{bbc: 2, off: (ins[1:0] == 2'b01) ? 0 : 1, rem: 0};
        pc   = pc + {{12{ins[31]}}, ins[19:12], ins[20], ins[30:21], 1'b0} + 32'(cur.off) * 4;
        continue;
      end else if (ins[6:0] == 7'b1100011) begin   // public branch
        if (cond_true(ins[14:12], a, b))
          pc = pc + {{20{ins[31]}}, ins[7], ins[30:25], ins[11:8], 1'b0};
        else
          pc = pc + 32'(cur.bbc) * 4;
        continue;
      end else if (ins == enc_ret()) begin
        pc = ref_regs[1] & ~32'd1; cur = prev; prev = CTX_INIT;
        continue;
      end else if (ins[11:7] != 0) begin
        if (ins[6:0] == 7'b0010011) ref_regs[ins[11:7]] = a + {{20{ins[31]}}, ins[31:20]};
        else ref_regs[ins[11:7]] = ins[30] ? a - b : a + b;
      end
      pc  = pc - 32'(cur.off) * 4 + 32'(cur.bbc) * 4 + 32'(nxt.off) * 4;
      cur = nxt;
    end
    if (n >= 100000) begin failures++; $display("FAIL reference model did not end"); end
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
  int          busy;
  logic [31:0] mepc;
  always @(posedge clk) if (irq_ack) mepc <= irq_epc;
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
          K_LOCALL: begin
            regs[1] = e.link;
            void'(q.pop_front());
          end
          K_BR, K_LOBR, K_TLOBR, K_RET, K_XRET: begin
            if (busy == BR_LAT - 1) begin
              resolve_valid  <= 1'b1;
              resolve_taken  <= cond_true(e.instr[14:12], a, b);
              resolve_target <= (e.kind == K_XRET) ? mepc : a & ~32'd1;
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

  // ------------------------------------------------------------ interrupt
  // One interrupt per run, raised at cycle irq_cycle and held until it is
  // taken. With only two context levels an interrupt inside a called
  // function would discard the caller's context, so the line is masked
  // while the lower level is in use (whether it is does not depend on the
  // secrets: every block of a row makes the same call).
  int irq_cycle, n_ack;
  bit irq_pend;
  assign irq = irq_pend && ctx_prev == CTX_INIT;
  always @(posedge clk) begin
    if (!rst_n) begin irq_pend <= 1'b0; n_ack <= 0; end
    else begin
      if (cycle == irq_cycle) irq_pend <= 1'b1;
      if (irq_ack) begin irq_pend <= 1'b0; n_ack <= n_ack + 1; end
    end
  end

  // --------------------------------------------------------------- traces
  string tr_mem, tr_slice;
  int    n_lobr, n_tlobr, n_texit, n_locall, n_ret, n_pubf, n_irq, n_irq_fold, end_cycle;
  bit    done;

  always @(posedge clk) begin
    if (!rst_n) cycle <= 0;
    else begin
      cycle <= cycle + 1;
      if (mem_req_valid && mem_req_ready) tr_mem = {tr_mem, $sformatf("%0d:%h ", cycle, mem_req_addr)};
      if (bp_lookup_valid) begin failures++; $display("FAIL predictor lookup in straight-line code"); end
      if (irq_ack) begin
        // the slice only: the offset in irq_epc is secret by nature
        tr_slice = {tr_slice, $sformatf("irq%0d:%h ", cycle, irq_epc - 32'(ctx.off) * 4)};
        if (ctx_folded(ctx)) n_irq_fold++;
      end
      if (issue_valid && issue_ready) begin
        tr_slice = {tr_slice, $sformatf("%0d:%h ", cycle, issue_pc - 32'(ctx.off) * 4)};
        if (issue_kind == K_LOBR) n_lobr++;
        if (issue_kind == K_TLOBR) n_tlobr++;
        if (issue_kind == K_LOCALL) n_locall++;
        if (issue_kind == K_RET) n_ret++;
        if (issue_kind == K_BR && ctx_folded(ctx)) n_pubf++;
        if (ctx.rem == 1) n_texit++;
        if (issue_pc == 32'(end_w * 4) && !done) begin
          done = 1;
          end_cycle = cycle;
        end
      end
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(logic [31:0] s0, logic [31:0] s1, output string m, output string s,
                     output int cyc);
    logic [31:0] r0 [32];
    int          n_bad;
    rst_n = 0;
    btb.delete();
    for (int i = 0; i < 32; i++) regs[i] = 0;
    regs[10] = s0;
    regs[11] = s1;
    regs[12] = pub;
    r0 = regs;
    tr_mem = ""; tr_slice = "";
    done = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    while (!done) @(posedge clk);
    repeat (20) @(posedge clk);
    m = tr_mem; s = tr_slice; cyc = end_cycle;
    ref_run(r0);
    ref_regs[15] = 32'(n_ack);
    n_irq += n_ack;
    n_bad = 0;
    for (int i = 1; i < 32; i++) if (regs[i] != ref_regs[i]) n_bad++;
    check(n_bad == 0, $sformatf("registers equal the reference (%0d differ)", n_bad));
    check(ctx == CTX_INIT, "context back to (1,0)");
  endtask

  initial begin
    string m0, s0, m1, s1;
    int    c0, c1;
    n_lobr = 0; n_tlobr = 0; n_texit = 0; n_locall = 0; n_ret = 0; n_pubf = 0; n_irq = 0; n_irq_fold = 0;
    n_gen_call = 0; n_gen_pub = 0; n_gen_tlo = 0; n_gen_2l = 0; n_gen_3l = 0; n_gen_max = 0;
    void'($urandom(32'd20250613));
    for (int p = 0; p < N_PROG; p++) begin
      gen_program();
      pub = $urandom;
      irq_cycle = $urandom_range(5, 250);
      run($urandom, $urandom, m0, s0, c0);
      for (int k = 1; k < N_SEC; k++) begin
        run($urandom, $urandom, m1, s1, c1);
        check(c1 == c0, $sformatf("program %0d: cycle count independent of the secrets", p));
        check(m1 == m0, $sformatf("program %0d: instruction-memory requests independent of the secrets", p));
        check(s1 == s0, $sformatf("program %0d: slice trace independent of the secrets", p));
      end
    end
    $display("%0d programs x %0d secrets: lo.br=%0d tlo.br=%0d terminating exits=%0d lo.call=%0d ret=%0d",
             N_PROG, N_SEC, n_lobr, n_tlobr, n_texit, n_locall, n_ret);
    $display("public branches in folded levels=%0d interrupts=%0d (in folded code %0d)",
             n_pubf, n_irq, n_irq_fold);
    $display("generated: terminating levels=%0d two-line slice rows=%0d three-line rows=%0d widest level=%0d",
             n_gen_tlo, n_gen_2l, n_gen_3l, n_gen_max);
    check(n_lobr > 0 && n_tlobr > 0 && n_texit > 0, "lo.br, tlo.br and terminating exits all occurred");
    check(n_gen_2l > 0 && n_gen_3l > 0, "slices over two and over three lines occurred");
    check(n_gen_max == 16, "a level of 16 blocks occurred");
    check(n_locall > 0 && n_ret == n_locall, "level-offset calls occurred, each returned");
    check(n_pubf > 0, "public branches inside folded levels occurred");
    check(n_irq_fold > 0, "interrupts taken in folded code");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
