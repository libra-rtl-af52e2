// libra_ctx_stack: the two-level hardware stack of Libra contexts.
//
// The stack holds the current context (bbc, off, rem) that steers the PC and
// the caller's context. A call pushes: the caller's context, already advanced
// past the calling slice, moves to the lower level and the callee's context
// becomes current ((1,0) for an ordinary call, (2,b?0:1) for lo.call). Trap
// entry pushes the interrupted context the same way. A return (ret or mret)
// pops: the saved caller context becomes current again and the lower
// level falls back to the initial context (1,0). Level-offset branches only
// overwrite the current context (set_i).
//
// The paper specifies the two levels; deeper nesting and recursion are left
// to software, which saves and restores the caller context itself. For that
// the lower level is readable and writable through a register-style port
// (csr_*); that port, and the `overflow_o` sticky flag raised when a push
// discards a lower level that was not the initial context, are this
// design's own choices.
//
// Timing: all updates take effect at the next rising clock edge; the outputs
// are registers. Priority: pop > push > set; csr_we_i writes the lower level
// only when no push or pop happens in the same cycle. Reset gives (1,0) in
// both levels.
module libra_ctx_stack
  import libra_pkg::*;
(
  input  logic       clk_i,
  input  logic       rst_ni,
  input  logic       set_i,        // overwrite the current context
  input  libra_ctx_t set_ctx_i,
  input  logic       push_i,       // call
  input  libra_ctx_t push_save_i,  // caller context to save
  input  libra_ctx_t push_new_i,   // callee context
  input  logic       pop_i,        // return
  input  logic       csr_we_i,     // software restores a saved context
  input  libra_ctx_t csr_wdata_i,
  output libra_ctx_t cur_o,
  output libra_ctx_t prev_o,
  output logic       overflow_o
);

  libra_ctx_t cur_q, prev_q;
  logic       ovf_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cur_q  <= CTX_INIT;
      prev_q <= CTX_INIT;
      ovf_q  <= 1'b0;
    end else if (pop_i) begin
      cur_q  <= prev_q;
      prev_q <= CTX_INIT;
    end else if (push_i) begin
      cur_q  <= push_new_i;
      prev_q <= push_save_i;
      if (ctx_folded(prev_q)) ovf_q <= 1'b1;
    end else begin
      if (set_i)    cur_q  <= set_ctx_i;
      if (csr_we_i) prev_q <= csr_wdata_i;
    end
  end

  assign cur_o      = cur_q;
  assign prev_o     = prev_q;
  assign overflow_o = ovf_q;

  // One stack operation per cycle.
  assert property (@(posedge clk_i) disable iff (!rst_ni) !(push_i && pop_i));

endmodule
