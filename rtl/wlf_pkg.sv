// wlf_pkg: types and constants shared by the warp-level-feature core.
//
// The core holds NUM_WARPS x NUM_THREADS hardware threads (4 x 8 = 32, the
// evaluated configuration). They are kept as NUM_SLICES base warps of
// SLICE_THREADS = 4 threads, each with its own register bank; vx_tile merges
// adjacent slices into larger warps ("groups") or splits them back. The
// execution datapath is NUM_LANES = 32 lanes wide so that a fully merged
// 32-thread group issues in one cycle.
//
// Instruction encodings: the opcode of each new instruction (CUSTOM0/1/2) and
// its format (I, I, R) follow the paper's Table I; the field layout inside the
// immediate and the function codes are this design's choice:
//   vx_vote  CUSTOM0 (0x0B) I-type: funct3 = 0 All, 1 Any, 2 Uni, 3 Ballot,
//            rs1 = predicate value, imm[4:0] = register holding the member mask.
//   vx_shfl  CUSTOM1 (0x2B) I-type: funct3 = 0 Up, 1 Down, 2 Bfly, 3 Idx,
//            rs1 = value, imm[4:0] = register holding the clamp (segment width),
//            imm[11:5] = lane offset.
//   vx_tile  CUSTOM2 (0x5B) R-type: rs1 = group mask, rs2 = thread count.
package wlf_pkg;

  parameter int unsigned XLEN          = 32;
  parameter int unsigned NUM_REGS      = 32;
  parameter int unsigned REG_AW        = 5;
  parameter int unsigned SLICE_THREADS = 4;

  // Opcodes (RISC-V base opcode map).
  parameter logic [6:0] OPC_OP_IMM  = 7'h13;
  parameter logic [6:0] OPC_OP      = 7'h33;
  parameter logic [6:0] OPC_LUI     = 7'h37;
  parameter logic [6:0] OPC_SYSTEM  = 7'h73;
  parameter logic [6:0] OPC_CUSTOM0 = 7'h0B;  // vx_vote
  parameter logic [6:0] OPC_CUSTOM1 = 7'h2B;  // vx_shfl
  parameter logic [6:0] OPC_CUSTOM2 = 7'h5B;  // vx_tile

  // Thread-identity CSRs read with csrrs rd, csr, x0.
  parameter logic [11:0] CSR_THREAD_ID  = 12'hCC0;  // lane rank inside the group
  parameter logic [11:0] CSR_GROUP_ID   = 12'hCC1;  // group index: first thread / group size
  parameter logic [11:0] CSR_GTHREAD_ID = 12'hCC2;  // hardware thread slot
  parameter logic [11:0] CSR_GROUP_SIZE = 12'hCC3;  // threads in the group

  typedef enum logic [2:0] {
    EX_NOP,
    EX_ALU,
    EX_CSR,
    EX_VOTE,
    EX_SHFL,
    EX_TILE,
    EX_HALT
  } ex_unit_e;

  typedef enum logic [3:0] {
    ALU_ADD, ALU_SUB, ALU_SLL, ALU_SLT, ALU_SLTU,
    ALU_XOR, ALU_SRL, ALU_SRA, ALU_OR,  ALU_AND, ALU_LUI
  } alu_op_e;

  typedef enum logic [1:0] {
    VOTE_ALL    = 2'd0,
    VOTE_ANY    = 2'd1,
    VOTE_UNI    = 2'd2,
    VOTE_BALLOT = 2'd3
  } vote_mode_e;

  typedef enum logic [1:0] {
    SHFL_UP   = 2'd0,
    SHFL_DOWN = 2'd1,
    SHFL_BFLY = 2'd2,
    SHFL_IDX  = 2'd3
  } shfl_mode_e;

  typedef struct packed {
    logic              legal;    // a known encoding
    ex_unit_e          unit;
    alu_op_e           alu_op;
    logic              use_imm;  // ALU operand b is the immediate
    logic              wb;       // writes rd
    logic [REG_AW-1:0] rd;
    logic [REG_AW-1:0] rs1;
    logic [REG_AW-1:0] rs2;
    logic [REG_AW-1:0] rs3;      // third read: vote member mask / shfl clamp
    logic [XLEN-1:0]   imm;
    logic [1:0]        mode;     // vote or shuffle mode (funct3[1:0])
    logic [6:0]        lane_off; // shuffle lane offset
    logic [11:0]       csr;
  } dec_t;

endpackage
