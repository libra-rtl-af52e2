// tb_slice_nav: self-checking test of the folded-layout next-PC arithmetic.
//
// For random slice addresses, contexts and instructions the testbench
// recomputes, in instruction units as in the Libra semantics
// (slice_addr = pc - off, next_slice = slice_addr + bbc), the PC, the
// sequential successor (including the terminating-level countdown), both
// level-offset-branch successors, the direct target and the level-offset
// call successor, and compares them with the block's outputs.
module tb_slice_nav;
  import libra_pkg::*;
  import tb_libra_asm::*;

  logic [31:0] slice, pc, seq_slice, seq_pc, lob_slice, tgt_pc, tgt_slice, call_slice;
  libra_ctx_t  ctx, seq_ctx, lob_t, lob_f, call_ctx;
  logic [31:0] instr;
  dec_t        dec;
  int          checks = 0, failures = 0;

  lo_decoder u_dec (.instr_i(instr), .dec_o(dec));
  slice_nav dut (
    .slice_addr_i(slice), .ctx_i(ctx), .dec_i(dec), .pc_o(pc),
    .seq_slice_o(seq_slice), .seq_ctx_o(seq_ctx), .seq_pc_o(seq_pc),
    .lob_slice_o(lob_slice), .lob_ctx_t_o(lob_t), .lob_ctx_f_o(lob_f),
    .tgt_pc_o(tgt_pc), .tgt_slice_o(tgt_slice),
    .call_slice_o(call_slice), .call_ctx_o(call_ctx)
  );

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s slice=%h ctx=%p", what, slice, ctx); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned s_w, bbc, off, rem, e_off, e_rem, e_bbc, ot, of, nb, ns;
    logic [12:0] bimm;
    logic [20:0] jimm;
    for (int i = 0; i < 500; i++) begin
      s_w = $urandom_range(0, 32'h3fff_0000);       // slice address in words
      bbc = $urandom_range(1, 16); off = $urandom_range(0, bbc - 1);
      rem = ($urandom_range(0, 2) == 0) ? $urandom_range(1, 8) : 0;
      slice = s_w * 4;
      ctx   = '{bbc: BBC_W'(bbc), off: OFF_W'(off), rem: REM_W'(rem)};

      // ordinary instruction: same offset in the next slice
      instr = enc_add(5'd1, 5'd2, 5'd3); #1;
      check(pc == (s_w + off) * 4, "pc = slice + off");
      check(seq_slice == (s_w + bbc) * 4, "next_slice = slice + bbc");
      if (rem == 1) begin e_bbc = 1; e_off = 0; e_rem = 0; end
      else begin e_bbc = bbc; e_off = off; e_rem = (rem == 0) ? 0 : rem - 1; end
      check(int'(seq_ctx.bbc) == e_bbc && int'(seq_ctx.off) == e_off && int'(seq_ctx.rem) == e_rem,
            "sequential context");
      check(seq_pc == (s_w + bbc + e_off) * 4, "sequential pc");

      // level-offset branch
      nb = $urandom_range(1, 16); ot = $urandom_range(0, nb - 1); of = $urandom_range(0, nb - 1);
      instr = enc_lobr(F3_BNE, 5'd10, 5'd0, ot, of, nb); #1;
      check(lob_slice == (s_w + bbc) * 4, "lo.br next slice");
      check(lob_t == '{bbc: BBC_W'(nb), off: OFF_W'(ot), rem: '0}, "lo.br true context");
      check(lob_f == '{bbc: BBC_W'(nb), off: OFF_W'(of), rem: '0}, "lo.br false context");

      // terminating level-offset branch
      nb = $urandom_range(1, 8); ot = $urandom_range(0, nb - 1); of = $urandom_range(0, nb - 1);
      ns = $urandom_range(1, 8);
      instr = enc_tlobr(F3_BEQ, 5'd11, 5'd0, ot, of, nb, ns); #1;
      check(lob_t == '{bbc: BBC_W'(nb), off: OFF_W'(ot), rem: REM_W'(ns)}, "tlo.br true context");
      check(lob_f == '{bbc: BBC_W'(nb), off: OFF_W'(of), rem: REM_W'(ns)}, "tlo.br false context");

      // ordinary branch target keeps the offset
      bimm = 13'($urandom_range(0, 1000) * 4);
      instr = enc_br(F3_BEQ, 5'd1, 5'd2, bimm); #1;
      check(tgt_pc == (s_w + off) * 4 + 32'(bimm), "branch target");
      check(tgt_slice == (s_w + off) * 4 + 32'(bimm) - e_off * 4, "branch target slice");

      // level-offset call: slice l, offset 0 (real) or 1 (dummy), bbc 2
      jimm = 21'($urandom_range(0, 10000) * 4);
      instr = enc_locall(1'b1, jimm); #1;
      check(call_slice == (s_w + off) * 4 + 32'(jimm), "lo.call slice");
      check(call_ctx == '{bbc: BBC_W'(2), off: '0, rem: '0}, "lo.call true context");
      instr = enc_locall(1'b0, jimm); #1;
      check(call_ctx == '{bbc: BBC_W'(2), off: OFF_W'(1), rem: '0}, "lo.call false context");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
