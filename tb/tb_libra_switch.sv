// tb_libra_switch: workload test -- a four-way switch on secret data, run
// through the Libra frontend at its default parameters.
//
// A secret word a0 is consumed two bits at a time; for each pair s the
// accumulator x5 is updated by one of four cases:
//   s=0: r = r + 6     s=1: r = 2r + 1     s=2: r = 3r - 1     s=3: r = 100 - r
// The program exists in two builds, selected by the jump at word 0:
//   folded (word 16)  the switch is two nested levels: lo.br on bit 1 enters
//                     a level of two blocks, each of which holds a tlo.br on
//                     bit 0 into the same terminating level of four blocks
//                     (the four case bodies, two slices each). After the last
//                     slice the context returns to (1,0) on its own;
//   leaky  (word 64)  the usual compare-and-branch chain with a jump table
//                     fall-through, whose length depends on s.
// The rest of the core is modelled as in tb_libra_modexp.
//
// Checks: the result for several secrets; for the folded build, identical
// instruction-memory requests, predictor lookups, slice trace and cycle
// count across secrets, one lo.br and one tlo.br per switch, and the
// predictor kept off inside the switch; for the leaky build, that the cycle
// count depends on the secret.
// The published evaluation has a switch benchmark but not its source; this
// program and its case bodies are this testbench's own, built from the
// published instructions (lo.br, tlo.br) and folding scheme.
module tb_libra_switch;
  import libra_pkg::*;
  import tb_libra_asm::*;

  localparam int LINE_BYTES = 32;
  localparam int MEM_WORDS  = 128;
  localparam int MEM_LAT    = 2;
  localparam int BR_LAT     = 3;
  localparam int FOLD_W     = 16;
  localparam int LEAK_W     = 64;
  localparam int END_F      = FOLD_W + 17;
  localparam int END_L      = LEAK_W + 24;

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
    // folded build: x5 = r, x10 = secret, x11 = 3, x13 = pairs left
    imem[f + 0]  = enc_addi(5'd13, 5'd0, 12'd8);
    imem[f + 1]  = enc_andi(5'd7, 5'd10, 12'd2);                  // loop: bit 1
    imem[f + 2]  = enc_andi(5'd8, 5'd10, 12'd1);                  // bit 0
    imem[f + 3]  = enc_lobr(F3_BNE, 5'd7, 5'd0, 1, 0, 2);         // lo.br b1,1:0:2
    imem[f + 4]  = enc_tlobr(F3_BNE, 5'd8, 5'd0, 1, 0, 4, 2);     //   b1=0: tlo.br b0,1:0:4
    imem[f + 5]  = enc_tlobr(F3_BNE, 5'd8, 5'd0, 3, 2, 4, 2);     //   b1=1: tlo.br b0,3:2:4
    imem[f + 6]  = enc_addi(5'd5, 5'd5, 12'd3);                   //     s=0
    imem[f + 7]  = enc_slli(5'd5, 5'd5, 5'd1);                    //     s=1
    imem[f + 8]  = enc_mul(5'd5, 5'd5, 5'd11);                    //     s=2
    imem[f + 9]  = enc_sub(5'd5, 5'd0, 5'd5);                     //     s=3
    imem[f + 10] = enc_addi(5'd5, 5'd5, 12'd3);
    imem[f + 11] = enc_addi(5'd5, 5'd5, 12'd1);
    imem[f + 12] = enc_addi(5'd5, 5'd5, -12'sd1);
    imem[f + 13] = enc_addi(5'd5, 5'd5, 12'd100);
    imem[f + 14] = enc_srli(5'd10, 5'd10, 5'd2);                  // back at (1,0)
    imem[f + 15] = enc_addi(5'd13, 5'd13, -12'sd1);
    imem[f + 16] = enc_br(F3_BNE, 5'd13, 5'd0, 13'((f + 1 - (f + 16)) * 4));
    imem[END_F]  = enc_jal(5'd0, 21'd0);
    // leaky build
    imem[l + 0]  = enc_addi(5'd13, 5'd0, 12'd8);
    imem[l + 1]  = enc_andi(5'd6, 5'd10, 12'd3);                  // loop: s
    imem[l + 2]  = enc_br(F3_BEQ, 5'd6, 5'd0, 13'((l + 9 - (l + 2)) * 4));
    imem[l + 3]  = enc_addi(5'd7, 5'd0, 12'd1);
    imem[l + 4]  = enc_br(F3_BEQ, 5'd6, 5'd7, 13'((l + 12 - (l + 4)) * 4));
    imem[l + 5]  = enc_addi(5'd7, 5'd0, 12'd2);
    imem[l + 6]  = enc_br(F3_BEQ, 5'd6, 5'd7, 13'((l + 15 - (l + 6)) * 4));
    imem[l + 7]  = enc_sub(5'd5, 5'd0, 5'd5);                     // s=3
    imem[l + 8]  = enc_jal(5'd0, jd(l + 8, l + 18));
    imem[l + 18] = enc_addi(5'd5, 5'd5, 12'd100);
    imem[l + 19] = enc_jal(5'd0, jd(l + 19, l + 21));
    imem[l + 9]  = enc_addi(5'd5, 5'd5, 12'd3);                   // s=0
    imem[l + 10] = enc_addi(5'd5, 5'd5, 12'd3);
    imem[l + 11] = enc_jal(5'd0, jd(l + 11, l + 21));
    imem[l + 12] = enc_slli(5'd5, 5'd5, 5'd1);                    // s=1
    imem[l + 13] = enc_addi(5'd5, 5'd5, 12'd1);
    imem[l + 14] = enc_jal(5'd0, jd(l + 14, l + 21));
    imem[l + 15] = enc_mul(5'd5, 5'd5, 5'd11);                    // s=2
    imem[l + 16] = enc_addi(5'd5, 5'd5, -12'sd1);
    imem[l + 17] = enc_jal(5'd0, jd(l + 17, l + 21));
    imem[l + 20] = enc_nop();
    imem[l + 21] = enc_srli(5'd10, 5'd10, 5'd2);
    imem[l + 22] = enc_addi(5'd13, 5'd13, -12'sd1);
    imem[l + 23] = enc_br(F3_BNE, 5'd13, 5'd0, 13'((l + 1 - (l + 23)) * 4));
    imem[END_L]  = enc_jal(5'd0, 21'd0);
  endtask

  function automatic logic [31:0] switch_ref(logic [15:0] sec);
    logic [31:0] r;
    r = 0;
    for (int i = 0; i < 8; i++) begin
      case (sec[2*i +: 2])
        2'd0: r = r + 6;
        2'd1: r = 2 * r + 1;
        2'd2: r = 3 * r - 1;
        default: r = 100 - r;
      endcase
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
          K_BR, K_LOBR, K_TLOBR: begin
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
  int    n_tlobr, n_lobr, n_pred, n_flush, n_supp_sw, end_cycle;
  bit    done;
  int    end_w;

  always @(posedge clk) begin
    if (!rst_n) cycle <= 0;
    else begin
      cycle <= cycle + 1;
      if (mem_req_valid && mem_req_ready) tr_mem = {tr_mem, $sformatf("%0d:%h ", cycle, mem_req_addr)};
      if (bp_lookup_valid) tr_bp = {tr_bp, $sformatf("%0d:%h ", cycle, bp_lookup_pc)};
      if (flush) n_flush++;
      if (bp_suppressed) n_supp_sw++;
      if (issue_valid && issue_ready) begin
        tr_slice = {tr_slice, $sformatf("%0d:%h ", cycle, issue_pc - 32'(ctx.off) * 4)};
        if (issue_kind == K_TLOBR) n_tlobr++;
        if (issue_kind == K_LOBR) n_lobr++;
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

  task automatic run(bit leaky, logic [15:0] sec, output string m,
                     output string bp, output string s, output int cyc);
    rst_n = 0;
    load_program(leaky);
    btb.delete();
    for (int i = 0; i < 32; i++) regs[i] = 0;
    regs[10] = {16'h0, sec};
    regs[11] = 32'd3;
    tr_mem = ""; tr_bp = ""; tr_slice = "";
    done = 0; end_w = leaky ? END_L : END_F;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    while (!done) @(posedge clk);
    repeat (20) @(posedge clk);
    m = tr_mem; bp = tr_bp; s = tr_slice; cyc = end_cycle;
    check(regs[5] == switch_ref(sec), $sformatf("%s result for secret %h: %0d, expected %0d",
          leaky ? "leaky" : "folded", sec, regs[5], switch_ref(sec)));
    check(ctx == CTX_INIT, "context back to (1,0)");
  endtask

  initial begin
    static logic [15:0] secs [5] = '{16'h0000, 16'hffff, 16'h5555, 16'haaaa, 16'h1b6c};
    string m0, b0, s0, m1, b1, s1;
    int    c0, c1, cl_min, cl_max, n_supp_fold;
    n_tlobr = 0; n_lobr = 0; n_pred = 0; n_flush = 0; n_supp_sw = 0;
    cl_min = 1 << 30; cl_max = 0;
    run(1'b0, secs[0], m0, b0, s0, c0);
    for (int i = 1; i < 5; i++) begin
      run(1'b0, secs[i], m1, b1, s1, c1);
      check(c1 == c0, "folded: cycle count independent of the secret");
      check(m1 == m0, "folded: instruction-memory requests independent of the secret");
      check(b1 == b0, "folded: predictor lookups independent of the secret");
      check(s1 == s0, "folded: slice trace independent of the secret");
    end
    n_supp_fold = n_supp_sw;
    for (int i = 0; i < 5; i++) begin
      run(1'b1, secs[i], m1, b1, s1, c1);
      if (c1 < cl_min) cl_min = c1;
      if (c1 > cl_max) cl_max = c1;
    end
    $display("folded: %0d cycles for every secret; leaky: %0d..%0d cycles", c0, cl_min, cl_max);
    $display("lo.br=%0d tlo.br=%0d predicted branches=%0d flushes=%0d predictor-off cycles=%0d",
             n_lobr, n_tlobr, n_pred, n_flush, n_supp_fold);
    check(cl_max > cl_min, "leaky build: cycle count depends on the secret");
    check(n_lobr == 5 * 8 && n_tlobr == 5 * 8, "one lo.br and one tlo.br per switch");
    check(n_supp_fold > 0, "predictor kept off inside the folded switch");
    check(n_supp_sw == n_supp_fold, "predictor never kept off in the leaky build");
    check(n_pred > 0 && n_flush > 0, "public loop branch predicted, exit mispredicted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
