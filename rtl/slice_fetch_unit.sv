// slice_fetch_unit: Libra-aware instruction fetch with an offset-oblivious
// access pattern.
//
// The unit holds a small buffer of instruction-cache lines and makes the
// whole current slice -- the nwords_i instructions from base_i -- available to
// the frontend, which then reads the instruction at its level offset out of
// the buffer (rd_addr_i -> rd_instr_o, combinational).
//
// Two modes:
//  * Folded (fold_i = 1, a slice of more than one instruction): on start_i
//    the buffer is emptied and every line that holds part of the slice is
//    requested, one after the other, in ascending address order, whatever
//    the offset the frontend will later execute. The sequence of line
//    requests therefore depends only on the slice address and size, which is
//    what keeps the level offset -- and with it the secret branch outcome --
//    out of the instruction cache and the prefetcher behind it.
//  * Normal (fold_i = 0): a slice is one instruction; a line that is missing
//    from the buffer is fetched on demand and a buffered line is reused.
//
// The paper states the folded-mode rule ("fetching in a fixed order all cache
// lines including instructions from the current slice"); the buffer, its
// size, the line size and the request handshake are this design's choices.
// Lines are placed in buffer slot (line address mod NSLOT); NSLOT covers the
// longest slice even when it starts at the end of a line, so the lines of one
// slice never collide.
//
// Memory side: a line request (mem_req_valid_o/mem_req_ready_i, line-aligned
// byte address) is answered by exactly one mem_resp_valid_i with the line,
// after any number of cycles; one request is outstanding at a time. The unit
// signals ready_o once all lines of the slice are buffered; in folded mode
// not earlier than the end of the whole fixed sequence. base_i, nwords_i and
// fold_i must stay stable from start_i until ready_o.
module slice_fetch_unit
  import libra_pkg::*;
#(
  parameter int unsigned LINE_BYTES = 32,
  parameter int unsigned MAX_WORDS  = MAX_BBC,
  // slots: enough for the longest slice starting at the last word of a line
  parameter int unsigned NSLOT = 1 << $clog2((MAX_WORDS*4 + LINE_BYTES - 4 + LINE_BYTES - 1) / LINE_BYTES)
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  // slice request from the frontend
  input  logic                    start_i,
  input  logic                    fold_i,
  input  logic [XLEN-1:0]         base_i,
  input  logic [$clog2(MAX_WORDS+1)-1:0] nwords_i,
  output logic                    ready_o,
  // instruction read port
  input  logic [XLEN-1:0]         rd_addr_i,
  output logic [31:0]             rd_instr_o,
  // line interface to the instruction cache
  output logic                    mem_req_valid_o,
  output logic [XLEN-1:0]         mem_req_addr_o,
  input  logic                    mem_req_ready_i,
  input  logic                    mem_resp_valid_i,
  input  logic [LINE_BYTES*8-1:0] mem_resp_data_i
);

  localparam int unsigned LB     = $clog2(LINE_BYTES);
  localparam int unsigned SLOT_W = (NSLOT > 1) ? $clog2(NSLOT) : 1;
  localparam int unsigned LA_W   = XLEN - LB;          // line address width

  typedef enum logic [1:0] {S_IDLE, S_REQ, S_WAIT} state_e;

  state_e                  state_q;
  logic [LINE_BYTES*8-1:0] data_q [NSLOT];
  logic [LA_W-1:0]         tag_q  [NSLOT];
  logic [NSLOT-1:0]        valid_q;
  logic                    fold_busy_q;   // fixed sequence in progress
  logic                    start_pend_q;  // start seen while a request was out
  logic [LA_W-1:0]         cursor_q;      // next line of the fixed sequence
  logic [LA_W-1:0]         seq_last_q;    // its last line
  logic [LA_W-1:0]         req_line_q;

  logic [LA_W-1:0] first_line, last_line;
  logic [XLEN-1:0] last_byte;
  logic            all_hit;
  logic            miss_found;
  logic [LA_W-1:0] miss_line;

  assign last_byte  = base_i + XLEN'({nwords_i, 2'b00}) - XLEN'(1);
  assign first_line = base_i[XLEN-1:LB];
  assign last_line  = last_byte[XLEN-1:LB];

  function automatic logic [SLOT_W-1:0] slot_of(logic [LA_W-1:0] la);
    return SLOT_W'(la % LA_W'(NSLOT));
  endfunction

  // Which lines of the slice are buffered, and the lowest missing one.
  always_comb begin
    logic [LA_W-1:0] la;
    all_hit    = 1'b1;
    miss_found = 1'b0;
    miss_line  = first_line;
    for (int unsigned k = 0; k < NSLOT; k++) begin
      la = first_line + LA_W'(k);
      if (la <= last_line) begin
        if (!(valid_q[slot_of(la)] && tag_q[slot_of(la)] == la)) begin
          all_hit = 1'b0;
          if (!miss_found) begin
            miss_found = 1'b1;
            miss_line  = la;
          end
        end
      end
    end
  end

  assign ready_o = all_hit && !fold_busy_q && !start_pend_q && !start_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q      <= S_IDLE;
      valid_q      <= '0;
      fold_busy_q  <= 1'b0;
      start_pend_q <= 1'b0;
      cursor_q     <= '0;
      seq_last_q   <= '0;
      req_line_q   <= '0;
    end else begin
      if (start_i && fold_i && state_q != S_IDLE) start_pend_q <= 1'b1;
      // an unfolded slice (e.g. a trap handler) abandons a pending sequence
      if (start_i && !fold_i) begin
        fold_busy_q  <= 1'b0;
        start_pend_q <= 1'b0;
      end
      unique case (state_q)
        S_IDLE: begin
          if ((start_i || start_pend_q) && fold_i) begin
            // begin the fixed sequence: forget everything, fetch all lines
            valid_q      <= '0;
            fold_busy_q  <= 1'b1;
            start_pend_q <= 1'b0;
            cursor_q     <= first_line;
            seq_last_q   <= last_line;
          end else if (fold_busy_q && !start_i) begin
            req_line_q <= cursor_q;
            state_q    <= S_REQ;
          end else if (!fold_i && miss_found) begin
            req_line_q <= miss_line;
            state_q    <= S_REQ;
          end
        end
        S_REQ: if (mem_req_ready_i) state_q <= S_WAIT;
        S_WAIT: if (mem_resp_valid_i) begin
          data_q[slot_of(req_line_q)]  <= mem_resp_data_i;
          tag_q[slot_of(req_line_q)]   <= req_line_q;
          valid_q[slot_of(req_line_q)] <= 1'b1;
          if (fold_busy_q) begin
            if (cursor_q == seq_last_q) fold_busy_q <= 1'b0;
            else                       cursor_q    <= cursor_q + LA_W'(1);
          end
          state_q <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign mem_req_valid_o = (state_q == S_REQ);
  assign mem_req_addr_o  = {req_line_q, {LB{1'b0}}};

  // Instruction read: slot by line address, word by line offset.
  logic [LA_W-1:0]         rd_line;
  logic [LINE_BYTES*8-1:0] rd_data;
  assign rd_line    = rd_addr_i[XLEN-1:LB];
  assign rd_data    = data_q[slot_of(rd_line)];
  assign rd_instr_o = rd_data[32*rd_addr_i[LB-1:2] +: 32];

  // The longest slice fits in the slots without collisions.
  initial assert ((MAX_WORDS*4 + LINE_BYTES - 4 + LINE_BYTES - 1) / LINE_BYTES <= NSLOT);
  // A fetched slice must not exceed the supported size.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   start_i |-> (nwords_i >= 1 && 32'(nwords_i) <= MAX_WORDS));
  // A line request is held until the cache accepts it.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   mem_req_valid_o && !mem_req_ready_i |=> mem_req_valid_o);

endmodule
