// libra_frontend: instruction frontend of a RISC-V core extended for Libra.
//
// Libra lets a program keep balanced secret-dependent branches without
// leaking their outcome through PC-indexed hardware. Software folds each
// balanced region so that the i-th instructions of all basic blocks of one
// level sit next to each other (a "slice"); the frontend then walks the
// region slice by slice, executing in each slice only the instruction at the
// current level offset. This module owns the PC and implements that walk:
//
//  * slice_addr_q and the Libra context (bbc, off, rem) in libra_ctx_stack
//    define the PC = slice_addr + 4*off. slice_nav computes the successors.
//  * slice_fetch_unit brings in every cache line of the current slice in a
//    fixed order before any instruction of it issues, so instruction-memory
//    traffic depends on the slice, never on the offset.
//  * lo.br / tlo.br issue and then stall the frontend until the backend
//    resolves the condition. The next slice does not depend on the outcome,
//    so it is fetched during the stall; the outcome only picks the offset.
//  * lo.call jumps to a function folded with its dummy and selects the real
//    (offset 0) or dummy (offset 1) part; calls push and returns pop the
//    two-level context stack.
//  * bp_gate switches the branch predictor off inside folded regions; there
//    ordinary (public) branches also stall until resolved. Outside, branches
//    follow the prediction and a misprediction flushes the backend.
//
// Backend interface (the out-of-order core itself is not part of this RTL):
//  * issue_*: one instruction per cycle, valid/ready. issue_link_o is the
//    return address a call writes to rd (the PC of the next slice at the same
//    offset, pc + 4*bbc).
//  * resolve_*: the backend reports, in program order, the outcome of each
//    conditional branch (taken) and the target of each jalr. At most one
//    control transfer is unresolved at any time, so no tag is needed.
//  * flush_o: one-cycle pulse after a mispredicted branch; the backend drops
//    every instruction issued after that branch.
// Instruction-memory interface: see slice_fetch_unit. Predictor interface:
// see bp_gate; the predictor answers a lookup in the same cycle.
// Context save/restore (csr_*): software that nests calls deeper than the two
// hardware levels saves the caller context with a CSR instruction on
// CSR_LIBRA_CTX. Such an instruction is serialising: the frontend issues it
// and stalls until the backend resolves it, so the backend reads csr_rdata_o
// (the caller context in register format) when it executes the instruction
// and, in the same cycle as the resolution, writes with csr_we_i/csr_wdata_i.
// No other stack operation can then be pending, so the access is exact.
// Traps: while irq_i is high the frontend enters the handler at trap_vec_i at
// the next instruction boundary (nothing unresolved, slice entered). It pulses
// irq_ack_o with irq_epc_o, the PC of the instruction that has not issued yet,
// which the backend keeps as the return address; the interrupted context is
// pushed like a call's and the handler runs unfolded. mret (resolved with that
// address as its target) pops it, exactly like ret.
//
// What follows the paper: the folded-layout semantics, the two-level context
// stack (also used by traps), tlo.br, slice-granular fetch, the disabled
// predictor and the stall after a level-offset branch. This design's own
// choices: the encoding, the line buffer, the one-unresolved-branch rule, the
// trap entry point, the context CSR and its serialisation, the handshakes and
// reset.
module libra_frontend
  import libra_pkg::*;
#(
  parameter logic [XLEN-1:0] RESET_PC   = 32'h0000_0000,
  parameter int unsigned     LINE_BYTES = 32
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  // instruction memory / cache (line requests)
  output logic                    mem_req_valid_o,
  output logic [XLEN-1:0]         mem_req_addr_o,
  input  logic                    mem_req_ready_i,
  input  logic                    mem_resp_valid_i,
  input  logic [LINE_BYTES*8-1:0] mem_resp_data_i,
  // branch target predictor
  output logic                    bp_lookup_valid_o,
  output logic [XLEN-1:0]         bp_lookup_pc_o,
  input  logic                    bp_hit_i,
  input  logic [XLEN-1:0]         bp_target_i,
  output logic                    bp_update_valid_o,
  output logic [XLEN-1:0]         bp_update_pc_o,
  output logic                    bp_update_taken_o,
  output logic [XLEN-1:0]         bp_update_target_o,
  // issue to the backend
  output logic                    issue_valid_o,
  input  logic                    issue_ready_i,
  output logic [XLEN-1:0]         issue_pc_o,
  output logic [31:0]             issue_instr_o,
  output ikind_e                  issue_kind_o,
  output logic [XLEN-1:0]         issue_link_o,
  // resolution from the backend
  input  logic                    resolve_valid_i,
  input  logic                    resolve_taken_i,
  input  logic [XLEN-1:0]         resolve_target_i,
  output logic                    flush_o,
  // interrupts / traps
  input  logic                    irq_i,
  input  logic [XLEN-1:0]         trap_vec_i,
  output logic                    irq_ack_o,
  output logic [XLEN-1:0]         irq_epc_o,
  // Libra context save/restore
  input  logic                    csr_we_i,
  input  logic [XLEN-1:0]         csr_wdata_i,
  output logic [XLEN-1:0]         csr_rdata_o,
  output libra_ctx_t              ctx_o,
  output libra_ctx_t              ctx_prev_o,
  output logic                    ctx_overflow_o,
  // status
  output logic                    folded_o,
  output logic                    lob_stall_o,
  output logic                    bp_suppressed_o
);

  // ------------------------------------------------------------------ state
  logic [XLEN-1:0] slice_q;       // address of the current slice
  logic            start_q;       // a new slice has just been entered

  // a blocking control transfer waits for its resolution
  logic            wait_q;
  ikind_e          wkind_q;
  logic [BBC_W-1:0] w_bbc_q;      // size of the slice fetched during a lo.br wait
  libra_ctx_t      w_ctx_t_q, w_ctx_f_q, w_seq_ctx_q;
  logic [XLEN-1:0] w_tgt_slice_q, w_seq_slice_q;

  // an ordinary branch issued on a prediction, not yet resolved
  logic            spec_q;
  logic [XLEN-1:0] spec_followed_q, spec_taken_pc_q, spec_nt_pc_q, spec_pc_q;

  // ------------------------------------------------------------ submodules
  libra_ctx_t ctx, ctx_prev;
  logic       st_set, st_push, st_pop;
  libra_ctx_t st_set_ctx, st_push_save, st_push_new;

  libra_ctx_stack u_stack (
    .clk_i, .rst_ni,
    .set_i(st_set), .set_ctx_i(st_set_ctx),
    .push_i(st_push), .push_save_i(st_push_save), .push_new_i(st_push_new),
    .pop_i(st_pop),
    .csr_we_i, .csr_wdata_i(csr_to_ctx(csr_wdata_i)),
    .cur_o(ctx), .prev_o(ctx_prev), .overflow_o(ctx_overflow_o)
  );

  logic [XLEN-1:0] pc;
  logic [31:0]     instr;
  dec_t            dec;

  lo_decoder u_dec (.instr_i(instr), .dec_o(dec));

  logic [XLEN-1:0] seq_slice, seq_pc, lob_slice, tgt_pc, tgt_slice, call_slice;
  libra_ctx_t      seq_ctx, lob_ctx_t, lob_ctx_f, call_ctx;

  slice_nav u_nav (
    .slice_addr_i(slice_q), .ctx_i(ctx), .dec_i(dec),
    .pc_o(pc),
    .seq_slice_o(seq_slice), .seq_ctx_o(seq_ctx), .seq_pc_o(seq_pc),
    .lob_slice_o(lob_slice), .lob_ctx_t_o(lob_ctx_t), .lob_ctx_f_o(lob_ctx_f),
    .tgt_pc_o(tgt_pc), .tgt_slice_o(tgt_slice),
    .call_slice_o(call_slice), .call_ctx_o(call_ctx)
  );

  logic [BBC_W-1:0] f_nwords;
  logic             f_ready;

  assign f_nwords = (wait_q && wkind_q inside {K_LOBR, K_TLOBR}) ? w_bbc_q : ctx.bbc;

  slice_fetch_unit #(.LINE_BYTES(LINE_BYTES), .MAX_WORDS(MAX_BBC)) u_fetch (
    .clk_i, .rst_ni,
    .start_i(start_q), .fold_i(f_nwords > BBC_W'(1)),
    .base_i(slice_q), .nwords_i(f_nwords), .ready_o(f_ready),
    .rd_addr_i(pc), .rd_instr_o(instr),
    .mem_req_valid_o, .mem_req_addr_o, .mem_req_ready_i,
    .mem_resp_valid_i, .mem_resp_data_i
  );

  logic            folded;
  logic            can_issue, fire, irq_take;
  logic            pred_taken;
  logic [XLEN-1:0] pred_target;
  logic            upd_valid;

  assign folded = ctx_folded(ctx);

  bp_gate u_bpg (
    .req_i(can_issue), .kind_i(dec.kind), .folded_i(folded), .pc_i(pc),
    .pred_taken_o(pred_taken), .pred_target_o(pred_target),
    .suppressed_o(bp_suppressed_o),
    .bp_lookup_valid_o, .bp_lookup_pc_o, .bp_hit_i, .bp_target_i,
    .upd_valid_i(upd_valid), .upd_allowed_i(spec_q),
    .bp_update_valid_o
  );

  // ----------------------------------------------------------------- issue
  // Issue needs the whole slice buffered, nothing blocking outstanding, and
  // at most one unresolved predicted branch (further control transfers wait).
  // A trap is taken only at a clean boundary: the PC then names exactly the
  // instruction to resume, and its context is the current one.
  assign irq_take  = irq_i && !start_q && !wait_q && !spec_q && !resolve_valid_i;
  assign can_issue = f_ready && !start_q && !wait_q && !resolve_valid_i && !irq_take &&
                     !(spec_q && dec.kind != K_OTHER);
  assign fire      = can_issue && issue_ready_i;

  assign issue_valid_o = can_issue;
  assign issue_pc_o    = pc;
  assign issue_instr_o = instr;
  assign issue_kind_o  = dec.kind;
  assign issue_link_o  = seq_pc;
  assign irq_ack_o     = irq_take;
  assign irq_epc_o     = pc;

  // ------------------------------------------------------------ resolution
  logic            spec_correct;
  logic [XLEN-1:0] spec_right_pc;

  assign spec_right_pc = resolve_taken_i ? spec_taken_pc_q : spec_nt_pc_q;
  assign spec_correct  = (spec_right_pc == spec_followed_q);
  assign upd_valid     = spec_q && resolve_valid_i;
  assign flush_o       = spec_q && resolve_valid_i && !spec_correct;

  assign bp_update_pc_o     = spec_pc_q;
  assign bp_update_taken_o  = resolve_taken_i;
  assign bp_update_target_o = spec_taken_pc_q;

  // --------------------------------------------------- context stack control
  always_comb begin
    st_set       = 1'b0;
    st_set_ctx   = ctx;
    st_push      = 1'b0;
    st_push_save = seq_ctx;
    st_push_new  = CTX_INIT;
    st_pop       = 1'b0;
    if (fire) begin
      unique case (dec.kind)
        K_CALL:   st_push = 1'b1;
        K_LOCALL: begin st_push = 1'b1; st_push_new = call_ctx; end
        K_LOBR, K_TLOBR, K_JALR, K_ICALL, K_RET, K_XRET, K_CTXCSR: ;  // wait for resolution
        K_BR: if (folded) ; else begin st_set = 1'b1; st_set_ctx = seq_ctx; end
        default: begin st_set = 1'b1; st_set_ctx = seq_ctx; end
      endcase
    end else if (wait_q && resolve_valid_i) begin
      unique case (wkind_q)
        K_LOBR, K_TLOBR: begin
          st_set     = 1'b1;
          st_set_ctx = resolve_taken_i ? w_ctx_t_q : w_ctx_f_q;
        end
        K_ICALL: begin st_push = 1'b1; st_push_save = w_seq_ctx_q; end
        K_RET, K_XRET: st_pop = 1'b1;
        default: begin st_set = 1'b1; st_set_ctx = w_seq_ctx_q; end
      endcase
    end else if (irq_take) begin
      st_push      = 1'b1;
      st_push_save = ctx;
    end
  end

  // ------------------------------------------------------------ sequencing
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      slice_q         <= RESET_PC;
      start_q         <= 1'b1;
      wait_q          <= 1'b0;
      wkind_q         <= K_OTHER;
      w_bbc_q         <= BBC_W'(1);
      w_ctx_t_q       <= CTX_INIT;
      w_ctx_f_q       <= CTX_INIT;
      w_seq_ctx_q     <= CTX_INIT;
      w_tgt_slice_q   <= '0;
      w_seq_slice_q   <= '0;
      spec_q          <= 1'b0;
      spec_followed_q <= '0;
      spec_taken_pc_q <= '0;
      spec_nt_pc_q    <= '0;
      spec_pc_q       <= '0;
    end else begin
      start_q <= 1'b0;
      if (fire) begin
        unique case (dec.kind)
          K_BR: begin
            if (folded) begin
              // predictor off: stall until the condition is known
              wait_q        <= 1'b1;
              wkind_q       <= K_BR;
              w_tgt_slice_q <= tgt_slice;
              w_seq_slice_q <= seq_slice;
              w_seq_ctx_q   <= seq_ctx;
            end else begin
              spec_q          <= 1'b1;
              spec_pc_q       <= pc;
              spec_taken_pc_q <= tgt_pc;
              spec_nt_pc_q    <= seq_slice;
              spec_followed_q <= pred_taken ? pred_target : seq_slice;
              slice_q         <= pred_taken ? pred_target : seq_slice;
              start_q         <= 1'b1;
            end
          end
          K_LOBR, K_TLOBR: begin
            // the next slice is known now; only the offset waits
            wait_q    <= 1'b1;
            wkind_q   <= dec.kind;
            w_bbc_q   <= dec.bbc;
            w_ctx_t_q <= lob_ctx_t;
            w_ctx_f_q <= lob_ctx_f;
            slice_q   <= lob_slice;
            start_q   <= 1'b1;
          end
          K_JALR, K_ICALL, K_RET, K_XRET, K_CTXCSR: begin
            wait_q        <= 1'b1;
            wkind_q       <= dec.kind;
            w_seq_ctx_q   <= seq_ctx;
            w_seq_slice_q <= seq_slice;
          end
          K_JAL:    begin slice_q <= tgt_slice;  start_q <= 1'b1; end
          K_CALL:   begin slice_q <= tgt_pc;     start_q <= 1'b1; end
          K_LOCALL: begin slice_q <= call_slice; start_q <= 1'b1; end
          default:  begin slice_q <= seq_slice;  start_q <= 1'b1; end
        endcase
      end else if (wait_q && resolve_valid_i) begin
        wait_q <= 1'b0;
        unique case (wkind_q)
          K_LOBR, K_TLOBR: ;  // slice already fetched, the offset is set
          K_BR: begin
            slice_q <= resolve_taken_i ? w_tgt_slice_q : w_seq_slice_q;
            start_q <= 1'b1;
          end
          K_RET, K_XRET: begin
            slice_q <= resolve_target_i - XLEN'({ctx_prev.off, 2'b00});
            start_q <= 1'b1;
          end
          K_ICALL: begin
            slice_q <= resolve_target_i;
            start_q <= 1'b1;
          end
          K_CTXCSR: begin
            slice_q <= w_seq_slice_q;
            start_q <= 1'b1;
          end
          default: begin  // K_JALR keeps the offset
            slice_q <= resolve_target_i - XLEN'({w_seq_ctx_q.off, 2'b00});
            start_q <= 1'b1;
          end
        endcase
      end else if (spec_q && resolve_valid_i) begin
        spec_q <= 1'b0;
        if (!spec_correct) begin
          slice_q <= spec_right_pc;
          start_q <= 1'b1;
        end
      end else if (irq_take) begin
        slice_q <= trap_vec_i;
        start_q <= 1'b1;
      end
    end
  end

  assign ctx_o       = ctx;
  assign ctx_prev_o  = ctx_prev;
  assign csr_rdata_o = ctx_to_csr(ctx_prev);
  assign folded_o    = folded;
  assign lob_stall_o = wait_q && (wkind_q inside {K_LOBR, K_TLOBR});

  // ------------------------------------------------------------ assertions
  // The backend resolves only what is outstanding.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   resolve_valid_i |-> (wait_q || spec_q));
  // The context CSR is written only while its instruction is being resolved.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   csr_we_i |-> (wait_q && wkind_q == K_CTXCSR && resolve_valid_i));
  // Blocking waits and predicted branches never overlap.
  assert property (@(posedge clk_i) disable iff (!rst_ni) !(wait_q && spec_q));
  // Issue is valid/ready: a presented instruction stays until taken.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   issue_valid_o && !issue_ready_i && !resolve_valid_i |=> issue_valid_o);

endmodule
