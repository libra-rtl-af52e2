// tb_slice_fetch_unit: self-checking test of the slice-granular fetch unit.
//
// An instruction-cache model answers line requests after a random delay with
// contents computed from the address. The test checks that
//  * in folded mode every line of the slice is requested, once, in ascending
//    order, also when some of them are already buffered, and that the
//    sequence is the same for every offset that will later be read;
//  * every instruction of a ready slice reads back correctly;
//  * in normal mode a buffered line is reused without a request and a
//    missing line is fetched on demand;
//  * an unfolded slice started in the middle of a folded sequence (a trap)
//    abandons the sequence: at most the request already out completes.
module tb_slice_fetch_unit;
  import libra_pkg::*;

  localparam int LINE_BYTES = 32;
  localparam int LB = 5;

  logic        clk = 0, rst_n = 0;
  logic        start, fold, ready;
  logic [31:0] base, rd_addr, rd_instr;
  logic [4:0]  nwords;
  logic        req_valid, req_ready, resp_valid;
  logic [31:0] req_addr;
  logic [LINE_BYTES*8-1:0] resp_data;
  int          checks = 0, failures = 0;

  slice_fetch_unit dut (
    .clk_i(clk), .rst_ni(rst_n), .start_i(start), .fold_i(fold), .base_i(base),
    .nwords_i(nwords), .ready_o(ready), .rd_addr_i(rd_addr), .rd_instr_o(rd_instr),
    .mem_req_valid_o(req_valid), .mem_req_addr_o(req_addr), .mem_req_ready_i(req_ready),
    .mem_resp_valid_i(resp_valid), .mem_resp_data_i(resp_data)
  );

  always #5 clk = ~clk;

  function automatic logic [31:0] word_at(logic [31:0] a);
    return (a * 32'h9e37_79b9) ^ 32'h5a5a_0000 ^ a;
  endfunction

  // instruction-cache model with a random response delay
  logic [31:0] log_addr [$];
  initial begin
    req_ready = 0; resp_valid = 0; resp_data = '0;
    forever begin
      @(posedge clk);
      if (req_valid && rst_n) begin
        logic [31:0] a;
        a = req_addr;
        req_ready <= 1;
        @(posedge clk);
        req_ready <= 0;
        log_addr.push_back(a);
        repeat ($urandom_range(0, 4)) @(posedge clk);
        for (int w = 0; w < LINE_BYTES / 4; w++) resp_data[32*w +: 32] <= word_at(a + 32'(4 * w));
        resp_valid <= 1;
        @(posedge clk);
        resp_valid <= 0;
      end
    end
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s base=%h n=%0d", what, base, nwords); end
  endtask

  task automatic wait_ready();
    int n = 0;
    @(negedge clk);
    while (!ready && n < 500) begin @(negedge clk); n++; end
    check(ready, "slice becomes ready");
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] first_l, last_l;
    int nreq;
    start = 0; fold = 0; base = 32'h1000; nwords = 1; rd_addr = 32'h1000;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // folded slices: all lines, ascending, once each
    for (int i = 0; i < 60; i++) begin
      base   = 32'h2000 + 32'($urandom_range(0, 255) * 4);
      nwords = 5'($urandom_range(2, 16));
      fold   = 1;
      log_addr.delete();
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      wait_ready();
      first_l = base >> LB;
      last_l  = (base + 32'(nwords) * 4 - 1) >> LB;
      check(log_addr.size() == int'(last_l - first_l + 1), "one request per line of the slice");
      for (int k = 0; k < log_addr.size(); k++)
        check(log_addr[k] == (first_l + 32'(k)) << LB, "lines requested in ascending order");
      for (int w = 0; w < int'(nwords); w++) begin
        rd_addr = base + 32'(4 * w); #1;
        check(rd_instr == word_at(rd_addr), "instruction of the slice reads back");
      end
      // the same slice again: requested again in full, in the same order
      if (i % 4 == 0) begin
        nreq = log_addr.size();
        log_addr.delete();
        @(negedge clk); start = 1; @(negedge clk); start = 0;
        wait_ready();
        check(log_addr.size() == nreq, "buffered lines are fetched again in folded mode");
      end
    end

    // a trap in the middle of a folded sequence
    for (int i = 0; i < 20; i++) begin
      base   = 32'h4000 + 32'($urandom_range(0, 63) * 4);
      nwords = 5'd16;
      fold   = 1;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      repeat ($urandom_range(0, 3)) @(negedge clk);
      log_addr.delete();
      base = 32'h9000 + 32'(i * 64); nwords = 1; fold = 0; rd_addr = base;
      start = 1; @(negedge clk); start = 0;
      wait_ready();
      #1 check(rd_instr == word_at(base), "handler instruction after an abandoned sequence");
      check(log_addr.size() <= 2, "abandoned sequence stops");
    end

    // normal mode: on-demand fetch and reuse
    fold = 0; nwords = 1;
    for (int i = 0; i < 40; i++) begin
      base = 32'h8000 + 32'($urandom_range(0, 63) * 4);
      rd_addr = base;
      log_addr.delete();
      wait_ready();
      #1 check(rd_instr == word_at(base), "normal-mode instruction");
      // another word of the same line is ready without a request
      base = {base[31:LB], 5'b0} + 32'($urandom_range(0, 7) * 4);
      rd_addr = base;
      nreq = log_addr.size();
      #1;
      check(ready, "buffered line is ready at once");
      check(rd_instr == word_at(base), "buffered line reads back");
      @(negedge clk);
      check(log_addr.size() == nreq, "no request for a buffered line");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
