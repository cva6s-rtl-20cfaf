// cva6sp_pkg -- types and constants shared by the dual-issue slice.
//
// The core is the 32-bit configuration (RV32IMAFC plus the Zba, Zbb, Zbc and
// Zbs bit-manipulation extensions), so the integer and floating-point data
// paths are both 32 bits wide.  Instructions reach the issue stage already
// decoded into an `instr_t`; the decoders themselves sit upstream and are not
// part of this package.  Register names carry a bit that selects the integer
// or the floating-point file, so one rename table covers both.
package cva6sp_pkg;

  // Data path width of the 32-bit core.
  parameter int unsigned XLEN = 32;
  // Floating-point register width (single precision, F extension).
  parameter int unsigned FLEN = 32;
  // Width of the opaque operation code handed to the FPU.
  parameter int unsigned FPU_OP_W = 4;

  // Functional unit an instruction is steered to.
  typedef enum logic [0:0] {
    FU_ALU = 1'b0,
    FU_FPU = 1'b1
  } fu_t;

  // ALU operations: RV32I arithmetic/logic, branch comparisons and the
  // Zba / Zbb / Zbc / Zbs bit-manipulation operations.
  typedef enum logic [5:0] {
    // RV32I
    ALU_ADD, ALU_SUB, ALU_XOR, ALU_OR, ALU_AND,
    ALU_SLL, ALU_SRL, ALU_SRA, ALU_SLT, ALU_SLTU,
    // branch comparisons (result = 1 when the branch is taken)
    ALU_EQ, ALU_NE, ALU_LT, ALU_GE, ALU_LTU, ALU_GEU,
    // Zba
    ALU_SH1ADD, ALU_SH2ADD, ALU_SH3ADD,
    // Zbb
    ALU_ANDN, ALU_ORN, ALU_XNOR, ALU_CLZ, ALU_CTZ, ALU_CPOP,
    ALU_MAX, ALU_MAXU, ALU_MIN, ALU_MINU,
    ALU_SEXTB, ALU_SEXTH, ALU_ZEXTH, ALU_ROL, ALU_ROR, ALU_ORCB, ALU_REV8,
    // Zbc
    ALU_CLMUL, ALU_CLMULH, ALU_CLMULR,
    // Zbs
    ALU_BCLR, ALU_BEXT, ALU_BINV, ALU_BSET
  } alu_op_t;

  // Architectural register name: fp selects the floating-point file.
  typedef struct packed {
    logic       fp;
    logic [4:0] idx;
  } reg_t;

  // Decoded instruction as presented to one issue slot.
  typedef struct packed {
    fu_t                 fu;
    alu_op_t             alu_op;
    logic [FPU_OP_W-1:0] fpu_op;
    reg_t                rs1;
    reg_t                rs2;
    reg_t                rd;
    logic                we;          // writes rd
    logic                use_imm;     // ALU operand b is imm instead of rs2
    logic [XLEN-1:0]     imm;
    logic                is_branch;   // conditional branch, alu_op is a comparison
    logic [XLEN-1:0]     pc;
    logic                pred_taken;  // front-end prediction for a branch
  } instr_t;

  // One prediction of the branch history table.
  typedef struct packed {
    logic valid;
    logic taken;
  } bht_pred_t;

  // Resolved conditional branch, used to train the predictor.
  typedef struct packed {
    logic            valid;
    logic [XLEN-1:0] pc;
    logic            taken;
  } bht_update_t;

  // Branch resolution reported to the front end.
  typedef struct packed {
    logic            valid;
    logic [XLEN-1:0] pc;
    logic            taken;
    logic [XLEN-1:0] target;
    logic            mispredict;
  } bp_resolve_t;

  // One-cycle event flags of the issue stage (performance counters).
  typedef struct packed {
    logic issue0;         // slot 0 issued
    logic issue1;         // slot 1 issued in the same cycle (dual issue)
    logic alu_fwd;        // slot 1 took an operand from ALU0 in the same cycle
    logic waw_rename;     // an issued instruction overwrote a pending rename
    logic wb_conflict;    // slot 1 ALU held back because the FPU owns WB port 1
    logic fpu_wb;         // FPU result written back
    logic operand_stall;  // slot 0 waited for an operand
    logic sb_full;        // slot 0 waited for a scoreboard entry
    logic intra_stall;    // slot 1 waited on slot 0 without an ALU-to-ALU path
    logic branch;         // conditional branch resolved
    logic mispredict;     // resolved branch was mispredicted
    logic commit2;        // two instructions committed in one cycle
    logic fetch4;         // a fetch block yielded four instructions
    logic fetch_straddle; // an instruction was joined across two fetch blocks
  } perf_t;

endpackage
