// ct_pkg: types and constants shared by the CodeTrolley pipeline.
//
// The pipeline executes the RV32I base integer instruction set on a
// seven-stage pipeline and reverses the outcome of every conditional branch
// whose keyed hash bit is 1 (hardware deobfuscation). This package holds the
// RV32I opcodes, the ALU operation and operand-select encodings, the decoded
// control bundle that travels down the pipeline, the deobfuscation mode and
// the performance-counter bundle. The RV32I encodings follow the RISC-V
// specification; the ALU and select encodings are this design's own.
package ct_pkg;

  localparam int unsigned KEY_W = 64;   // program key width (assumed)

  // RV32I major opcodes (RISC-V unprivileged specification).
  typedef enum logic [6:0] {
    OP_LUI    = 7'b0110111,
    OP_AUIPC  = 7'b0010111,
    OP_JAL    = 7'b1101111,
    OP_JALR   = 7'b1100111,
    OP_BRANCH = 7'b1100011,
    OP_LOAD   = 7'b0000011,
    OP_STORE  = 7'b0100011,
    OP_IMM    = 7'b0010011,
    OP_REG    = 7'b0110011,
    OP_FENCE  = 7'b0001111,
    OP_SYSTEM = 7'b1110011
  } opcode_e;

  // Branch funct3 values.
  localparam logic [2:0] F3_BEQ  = 3'b000;
  localparam logic [2:0] F3_BNE  = 3'b001;
  localparam logic [2:0] F3_BLT  = 3'b100;
  localparam logic [2:0] F3_BGE  = 3'b101;
  localparam logic [2:0] F3_BLTU = 3'b110;
  localparam logic [2:0] F3_BGEU = 3'b111;

  typedef enum logic [3:0] {
    ALU_ADD, ALU_SUB, ALU_SLL, ALU_SLT, ALU_SLTU,
    ALU_XOR, ALU_SRL, ALU_SRA, ALU_OR,  ALU_AND, ALU_PASSB
  } alu_op_e;

  typedef enum logic [1:0] {ASEL_RS1, ASEL_PC, ASEL_ZERO} a_sel_e;
  typedef enum logic [0:0] {BSEL_RS2, BSEL_IMM} b_sel_e;
  typedef enum logic [1:0] {WB_ALU, WB_MEM, WB_LINK} wb_sel_e;

  // Decoded control bundle produced by the control unit in Decode.
  typedef struct packed {
    alu_op_e     alu_op;
    a_sel_e      a_sel;
    b_sel_e      b_sel;
    wb_sel_e     wb_sel;
    logic        reg_write;
    logic        is_branch;   // conditional branch (subject to deobfuscation)
    logic [2:0]  funct3;      // branch condition / load-store size
    logic        is_jal;
    logic        is_jalr;
    logic        mem_read;
    logic        mem_write;
    logic        uses_rs1;
    logic        uses_rs2;
    logic        halt;        // ECALL / EBREAK: stop the core
    logic        illegal;
  } ctrl_t;

  // Deobfuscation configurations of the pipeline. CACHED is the proposed
  // design; BASELINE and STALLED are kept for comparison.
  typedef enum logic [1:0] {
    MODE_BASELINE = 2'd0,   // no hash, branches executed as written
    MODE_STALLED  = 2'd1,   // hash started in Decode, Execute waits for it
    MODE_CACHED   = 2'd2    // as STALLED plus the hash cache
  } deobf_mode_e;

  // Performance counters exposed by the top.
  typedef struct packed {
    logic [31:0] cycles;        // cycles since reset until halt
    logic [31:0] retired;       // instructions written back
    logic [31:0] branches;      // conditional branches resolved
    logic [31:0] inverted;      // branches whose hash bit was 1
    logic [31:0] hash_stall;    // cycles Execute waited for the hash
    logic [31:0] raw_stall;     // cycles Decode waited for an operand
    logic [31:0] cache_hits;    // branches whose bit came from the cache
    logic [31:0] cache_misses;  // branches that needed the hash function
    logic [31:0] redirects;     // taken branches and jumps
  } perf_t;

endpackage
