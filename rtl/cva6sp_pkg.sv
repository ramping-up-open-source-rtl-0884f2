// cva6sp_pkg: types and constants shared by the CVA6S+ issue/execute slice.
//
// The sizes follow the CVA6S+ column of the microarchitecture table: a
// 64-bit datapath, two instructions issued per cycle, an 8-entry scoreboard
// that doubles as reorder buffer, 32 integer and 32 floating-point registers,
// two commits per cycle. The functional-unit and ALU-operation encodings are
// this design's own; they are not given by the published description.
//
// Lint note: when a single module that imports this package is checked on
// its own, constants used only by other modules are reported as unused.
package cva6sp_pkg;

  localparam int unsigned XLEN      = 64;  // datapath width (RV64)
  localparam int unsigned NR_ISSUE  = 2;   // issue and decode width
  localparam int unsigned NR_COMMIT = 2;   // commit width
  localparam int unsigned NR_SB     = 8;   // scoreboard / ROB entries
  localparam int unsigned SB_W      = $clog2(NR_SB);
  localparam int unsigned NR_REGS   = 32;  // per register file
  localparam int unsigned NR_WB     = 4;   // scoreboard write-back ports

  // Write-back port numbering. ALU 1 shares its port with the FPU.
  localparam int unsigned WB_FLU  = 0;     // ALU 0 and branch unit
  localparam int unsigned WB_ALU1 = 1;     // ALU 1 or FPU
  localparam int unsigned WB_LSU  = 2;     // load/store unit
  localparam int unsigned WB_MD   = 3;     // multiplier / divider

  typedef enum logic [3:0] {
    FU_NONE, FU_ALU, FU_BRANCH, FU_LOAD, FU_STORE, FU_MULT, FU_DIV, FU_FPU, FU_FSTORE
  } fu_t;

  typedef enum logic [4:0] {
    ALU_ADD, ALU_SUB, ALU_SLL, ALU_SLT, ALU_SLTU, ALU_XOR, ALU_SRL, ALU_SRA,
    ALU_OR, ALU_AND, ALU_ADDW, ALU_SUBW, ALU_SLLW, ALU_SRLW, ALU_SRAW, ALU_LUI,
    // branch unit operations
    BR_EQ, BR_NE, BR_LT, BR_GE, BR_LTU, BR_GEU, BR_JAL, BR_JALR
  } op_t;

  typedef logic [XLEN-1:0] xlen_t;
  typedef logic [4:0]      reg_t;
  typedef logic [SB_W-1:0] sb_tag_t;

  // A decoded instruction as delivered by the decode stage.
  typedef struct packed {
    xlen_t   pc;
    fu_t     fu;
    op_t     op;
    reg_t    rs1;
    reg_t    rs2;
    reg_t    rs3;
    reg_t    rd;
    logic    rs1_fp;     // source registers read the FP file
    logic    rs2_fp;
    logic    rs3_en;     // third source used (FMA)
    logic    rd_fp;      // destination is an FP register
    logic    rd_we;      // instruction writes rd
    logic    use_imm;    // operand b is the immediate
    logic    use_pc;     // operand a is the pc (auipc)
    xlen_t   imm;
    logic    bp_taken;   // front-end prediction
    xlen_t   bp_target;
  } instr_t;

  // Request to an execution unit outside this slice (LSU, MUL/DIV, FPU).
  typedef struct packed {
    fu_t     fu;
    op_t     op;
    xlen_t   a;
    xlen_t   b;
    xlen_t   c;
    xlen_t   imm;
    sb_tag_t tag;
  } fu_req_t;

  typedef struct packed {
    sb_tag_t tag;
    xlen_t   data;
  } wb_t;

  // Resolved branch, used to train the predictor.
  typedef struct packed {
    logic  valid;
    logic  is_cond;
    xlen_t pc;
    logic  taken;
    xlen_t target;
    logic  mispredict;
  } bp_update_t;

  // Index of the execution units outside the slice.
  localparam int unsigned EXT_LSU = 0;
  localparam int unsigned EXT_MD  = 1;
  localparam int unsigned EXT_FPU = 2;
  localparam int unsigned NR_EXT  = 3;

  // One-cycle event flags, for performance counting.
  typedef struct packed {
    logic dual_issue;   // two instructions issued this cycle
    logic alu_fwd;      // ALU 0 result forwarded into ALU 1
    logic waw;          // an issued instruction re-targets a busy register
    logic pair_block;   // slot 1 held back by a structural rule
    logic wb_conflict;  // slot 1 held back because the FPU owns ALU 1's port
    logic raw_stall;    // slot 0 waits for an operand
    logic sb_full;      // issue held back by a full scoreboard
    logic mispredict;   // branch unit redirected the front end
  } perf_t;

endpackage
