// tb_libra_ctx_stack: self-checking test of the two-level context stack.
//
// Drives random sequences of set, push, pop and save/restore writes and
// compares both levels and the overflow flag with a reference model kept in
// the testbench after every clock edge. A watchdog bounds the run.
module tb_libra_ctx_stack;
  import libra_pkg::*;

  logic       clk = 0, rst_n = 0;
  logic       set, push, pop, csr_we;
  libra_ctx_t set_ctx, push_save, push_new, csr_wdata, cur, prev;
  logic       ovf;
  int         checks = 0, failures = 0;

  libra_ctx_stack dut (
    .clk_i(clk), .rst_ni(rst_n), .set_i(set), .set_ctx_i(set_ctx),
    .push_i(push), .push_save_i(push_save), .push_new_i(push_new), .pop_i(pop),
    .csr_we_i(csr_we), .csr_wdata_i(csr_wdata),
    .cur_o(cur), .prev_o(prev), .overflow_o(ovf)
  );

  always #5 clk = ~clk;

  function automatic libra_ctx_t rnd_ctx();
    libra_ctx_t c;
    c.bbc = BBC_W'($urandom_range(1, 16));
    c.off = OFF_W'($urandom_range(0, int'(c.bbc) - 1));
    c.rem = REM_W'($urandom_range(0, 8));
    return c;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    libra_ctx_t m_cur, m_prev;
    bit m_ovf;
    int op;
    {set, push, pop, csr_we} = '0;
    set_ctx = CTX_INIT; push_save = CTX_INIT; push_new = CTX_INIT; csr_wdata = CTX_INIT;
    repeat (2) @(posedge clk);
    rst_n = 1;
    m_cur = CTX_INIT; m_prev = CTX_INIT; m_ovf = 0;
    @(negedge clk);
    checks++; if (cur != CTX_INIT || prev != CTX_INIT || ovf) begin failures++; $display("FAIL reset"); end
    for (int i = 0; i < 1000; i++) begin
      op = $urandom_range(0, 4);
      set = (op == 0); push = (op == 1); pop = (op == 2); csr_we = (op == 3) || (op == 0 && $urandom_range(0,1) == 1);
      set_ctx = rnd_ctx(); push_save = rnd_ctx(); push_new = rnd_ctx(); csr_wdata = rnd_ctx();
      // reference model
      if (pop) begin m_cur = m_prev; m_prev = CTX_INIT; end
      else if (push) begin
        if (m_prev != CTX_INIT) m_ovf = 1;
        m_cur = push_new; m_prev = push_save;
      end else begin
        if (set) m_cur = set_ctx;
        if (csr_we) m_prev = csr_wdata;
      end
      @(negedge clk);
      checks++;
      if (cur != m_cur || prev != m_prev || ovf != m_ovf) begin
        failures++;
        $display("FAIL step %0d op %0d: cur=%p exp=%p prev=%p exp=%p ovf=%0d exp=%0d",
                 i, op, cur, m_cur, prev, m_prev, ovf, m_ovf);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
