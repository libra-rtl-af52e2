// slice_nav: next-PC arithmetic of Libra's folded layout.
//
// The frontend keeps the address of the current slice (slice_addr) and the
// Libra context; the PC is slice_addr + 4*off. This block computes, from them
// and the decoded instruction at the PC, every candidate successor:
//
//  * sequential: next_slice = slice_addr + 4*bbc, same offset. In a terminating
//    level (rem != 0) the count of slices left is decremented, and after the
//    last slice the context returns to (1,0): control falls through to the
//    region's exit, which the terminating level-offset branch makes possible
//    without one lo.br per block of the last level.
//  * level-offset branch: the next slice is next_slice and its size is the
//    branch's bbc; the new offset is offT or offF. Both candidate contexts are
//    produced, so the outcome only selects one of them.
//  * direct target: pc + imm for branches and jumps, and the slice address
//    that keeps the (advanced) offset, target - 4*off.
//  * level-offset call: jumps to the folded function l, slice l, context
//    (2, 0) for the real part or (2, 1) for the dummy part, which puts the PC
//    at l + 4*off.
//
// The formulas are those of the paper's semantics (slice_addr = pc - off,
// next_slice = slice_addr + bbc, in instruction units; here in bytes with
// 4-byte instructions). The `rem` handling is this design's implementation
// of tlo.br, whose encoding the paper describes but not its mechanism.
//
// Purely combinational.
module slice_nav
  import libra_pkg::*;
(
  input  logic [XLEN-1:0] slice_addr_i,
  input  libra_ctx_t      ctx_i,
  input  dec_t            dec_i,
  output logic [XLEN-1:0] pc_o,
  // sequential successor (also the return address of calls)
  output logic [XLEN-1:0] seq_slice_o,
  output libra_ctx_t      seq_ctx_o,
  output logic [XLEN-1:0] seq_pc_o,
  // level-offset branch successors
  output logic [XLEN-1:0] lob_slice_o,
  output libra_ctx_t      lob_ctx_t_o,
  output libra_ctx_t      lob_ctx_f_o,
  // direct target of a branch or jump
  output logic [XLEN-1:0] tgt_pc_o,
  output logic [XLEN-1:0] tgt_slice_o,
  // level-offset call
  output logic [XLEN-1:0] call_slice_o,
  output libra_ctx_t      call_ctx_o
);

  logic [XLEN-1:0] next_slice;

  assign pc_o       = slice_addr_i + XLEN'({ctx_i.off, 2'b00});
  assign next_slice = slice_addr_i + XLEN'({ctx_i.bbc, 2'b00});

  always_comb begin
    seq_slice_o = next_slice;
    seq_ctx_o   = ctx_i;
    if (ctx_i.rem == REM_W'(1))
      seq_ctx_o = CTX_INIT;             // last slice of a terminating level
    else if (ctx_i.rem != '0)
      seq_ctx_o.rem = ctx_i.rem - REM_W'(1);
  end
  assign seq_pc_o = seq_slice_o + XLEN'({seq_ctx_o.off, 2'b00});

  always_comb begin
    lob_ctx_t_o     = '{bbc: dec_i.bbc, off: dec_i.off_t, rem: '0};
    lob_ctx_f_o     = '{bbc: dec_i.bbc, off: dec_i.off_f, rem: '0};
    if (dec_i.kind == K_TLOBR) begin
      lob_ctx_t_o.rem = dec_i.nslices;
      lob_ctx_f_o.rem = dec_i.nslices;
    end
  end
  assign lob_slice_o = next_slice;

  assign tgt_pc_o    = pc_o + dec_i.imm;
  assign tgt_slice_o = tgt_pc_o - XLEN'({seq_ctx_o.off, 2'b00});

  assign call_slice_o = tgt_pc_o;
  assign call_ctx_o   = '{bbc: BBC_W'(2), off: dec_i.call_real ? '0 : OFF_W'(1), rem: '0};

endmodule
