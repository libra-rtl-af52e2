// libra_pkg: types and constants shared by the Libra frontend blocks.
//
// Libra executes balanced secret-dependent regions in a "folded" layout: the
// basic blocks of one level of the region's control-flow graph are
// interleaved, so that the i-th instructions of all blocks of a level form a
// contiguous "slice" of bbc words. The hardware tracks a Libra context
// (bbc, off): the number of basic blocks of the active level and the offset of
// the active block inside it. A non-control instruction advances the PC by
// bbc words, i.e. to the same offset in the next slice.
//
// The context also carries `rem`, the number of slices left in a terminating
// level entered through tlo.br (0 when not in such a level). This field is
// this design's way of implementing the terminating level-offset branch.
//
// Instruction encoding (this design's choice; the paper only states that the
// two low "prefix" bits of the 32-bit RISC-V encoding are repurposed):
//   instr[1:0] = 2'b11 : standard RV32I instruction
//   instr[1:0] = 2'b01 : branch opcode -> lo.br ; JAL opcode -> lo.call true
//   instr[1:0] = 2'b10 : branch opcode -> tlo.br; JAL opcode -> lo.call false
// The 12 immediate bits of a B-type instruction, F = {instr[31:25],instr[11:7]},
// hold the level-offset operands instead of a branch displacement:
//   lo.br : F[11:8]=offT  F[7:4]=offF  F[3:0]=bbc-1            (16 blocks)
//   tlo.br: F[11:9]=offT  F[8:6]=offF  F[5:3]=bbc-1  F[2:0]=nslices-1 (8 blocks)
// The branch condition is the one of the underlying RISC-V branch (funct3,
// rs1, rs2), e.g. "lo.br secret,0:1:2" is a BNE secret,x0 with prefix 01.
package libra_pkg;

  localparam int unsigned XLEN     = 32;
  localparam int unsigned MAX_BBC  = 16;  // basic blocks per level (lo.br)
  localparam int unsigned MAX_TBBC = 8;   // basic blocks per terminating level
  localparam int unsigned MAX_TSLC = 8;   // slices per terminating level

  localparam int unsigned BBC_W = $clog2(MAX_BBC + 1);  // holds 1..16
  localparam int unsigned OFF_W = $clog2(MAX_BBC);      // holds 0..15
  localparam int unsigned REM_W = $clog2(MAX_TSLC + 1); // holds 0..8

  // RV32I major opcodes, bits [6:2]
  localparam logic [4:0] OPC_BRANCH = 5'b11000;
  localparam logic [4:0] OPC_JAL    = 5'b11011;
  localparam logic [4:0] OPC_JALR   = 5'b11001;
  localparam logic [4:0] OPC_SYSTEM = 5'b11100;

  localparam logic [31:0] MRET_WORD = 32'h3020_0073;

  // CSR through which software saves and restores the caller's Libra context
  // (a number from the custom read/write range). Register format, chosen so
  // that writing zero gives the initial context (1,0):
  //   [3:0] bbc-1   [7:4] off   [11:8] rem
  localparam logic [11:0] CSR_LIBRA_CTX = 12'h7C0;

  localparam logic [1:0] PFX_STD = 2'b11;
  localparam logic [1:0] PFX_LO  = 2'b01;
  localparam logic [1:0] PFX_TLO = 2'b10;

  // Libra context (bbc, off) plus the slices left in a terminating level.
  typedef struct packed {
    logic [BBC_W-1:0] bbc;
    logic [OFF_W-1:0] off;
    logic [REM_W-1:0] rem;
  } libra_ctx_t;

  localparam libra_ctx_t CTX_INIT = '{bbc: BBC_W'(1), off: '0, rem: '0};

  typedef enum logic [3:0] {
    K_OTHER  = 4'd0,  // not a control transfer
    K_BR     = 4'd1,  // ordinary conditional branch
    K_LOBR   = 4'd2,  // level-offset branch
    K_TLOBR  = 4'd3,  // terminating level-offset branch
    K_JAL    = 4'd4,  // direct jump, no link to ra
    K_CALL   = 4'd5,  // direct call (jal ra)
    K_LOCALL = 4'd6,  // level-offset call
    K_JALR   = 4'd7,  // indirect jump, no link to ra
    K_ICALL  = 4'd8,  // indirect call (jalr ra)
    K_RET    = 4'd9,  // return (jalr x0, 0(ra))
    K_ILLEGAL= 4'd10, // reserved prefix combination
    K_XRET   = 4'd11, // return from a trap handler (mret)
    K_CTXCSR = 4'd12  // CSR access to the saved Libra context (serialising)
  } ikind_e;

  typedef struct packed {
    ikind_e           kind;
    logic [XLEN-1:0]  imm;      // branch / jump displacement
    logic [OFF_W-1:0] off_t;    // level offset if the condition holds
    logic [OFF_W-1:0] off_f;    // level offset otherwise
    logic [BBC_W-1:0] bbc;      // block count of the next level
    logic [REM_W-1:0] nslices;  // tlo.br: slices of the next level
    logic             call_real;// lo.call b: 1 = real function (offset 0)
    logic [2:0]       funct3;
    logic [4:0]       rs1;
    logic [4:0]       rs2;
    logic [4:0]       rd;
  } dec_t;

  // A context is "folded" whenever it differs from the initial (1,0) one.
  function automatic logic ctx_folded(libra_ctx_t c);
    return (c.bbc != BBC_W'(1)) || (c.off != '0) || (c.rem != '0);
  endfunction

  function automatic logic [XLEN-1:0] ctx_to_csr(libra_ctx_t c);
    logic [3:0] bm1;
    bm1 = 4'(c.bbc - BBC_W'(1));
    return XLEN'({4'(c.rem), 4'(c.off), bm1});
  endfunction

  function automatic libra_ctx_t csr_to_ctx(logic [XLEN-1:0] v);
    libra_ctx_t c;
    c.bbc = BBC_W'(v[3:0]) + BBC_W'(1);
    c.off = OFF_W'(v[7:4]);
    c.rem = REM_W'(v[11:8]);
    return c;
  endfunction

endpackage
