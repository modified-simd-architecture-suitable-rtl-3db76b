// grape_pkg: types and constants shared by the GRAPE-DR array.
//
// The array is an attached SIMD processor: a host sends one command per
// clock, and every processing element (PE) executes the same instruction.
// This package defines the word (64-bit IEEE-754 double, the 8-byte word
// implied by the architecture's bandwidth figure), the ALU/FPU operation
// codes, the broadcast PE instruction and the host command that carries it.
// The opcode set, the field widths and the command format are choices of
// this implementation; the architecture fixes only the structure (PEs with
// register files and an ALU/FPU, groups with buffer memories, a reduction
// tree over the groups).
package grape_pkg;

  // Machine word: 64 bits, used both as an IEEE-754 double and as an integer.
  localparam int unsigned W = 64;
  typedef logic [W-1:0] word_t;

  // ALU/FPU operations.
  typedef enum logic [3:0] {
    OP_NOP  = 4'd0,   // no write-back
    OP_MOV  = 4'd1,   // y = a
    OP_FADD = 4'd2,   // y = a + b   (double)
    OP_FSUB = 4'd3,   // y = a - b   (double)
    OP_FMUL = 4'd4,   // y = a * b   (double)
    OP_IADD = 4'd5,   // y = a + b   (64-bit integer)
    OP_ISUB = 4'd6,   // y = a - b   (64-bit integer)
    OP_AND  = 4'd7,
    OP_OR   = 4'd8,
    OP_XOR  = 4'd9,
    OP_MOVB = 4'd10   // y = b (copies a buffer-memory word into a register)
  } alu_op_e;

  // Reduction operations of the reduction tree.
  typedef enum logic [0:0] {
    RED_FSUM = 1'b0,  // double-precision sum
    RED_ISUM = 1'b1   // 64-bit integer sum
  } red_op_e;

  // Host command kinds: one command is accepted per clock.
  typedef enum logic [2:0] {
    CMD_NOP      = 3'd0,
    CMD_EXEC     = 3'd1,  // broadcast an instruction to every PE
    CMD_BM_WRITE = 3'd2,  // write input data into one or all buffer memories
    CMD_PE_WRITE = 3'd3,  // write input data into a register of one PE (or all)
    CMD_READ     = 3'd4   // read a register of PE pe_idx in every group, reduce
  } cmd_kind_e;

  // Largest sizes the field widths allow (the RTL parameters must not exceed them).
  localparam int unsigned REG_AW = 8;   // up to 256 registers per PE
  localparam int unsigned BM_AW  = 12;  // up to 4096 words per buffer memory
  localparam int unsigned IDX_W  = 12;  // up to 4096 groups / PEs per group

  // Instruction broadcast to all PEs (and, for its address, to the buffer memories).
  typedef struct packed {
    alu_op_e             op;
    logic [REG_AW-1:0]   dst;      // destination register
    logic [REG_AW-1:0]   src_a;    // operand A register
    logic [REG_AW-1:0]   src_b;    // operand B register (when b_from_bm = 0)
    logic                b_from_bm;// operand B is the buffer-memory word
    logic [BM_AW-1:0]    bm_addr;  // buffer-memory read address
  } instr_t;

  // Host command.
  typedef struct packed {
    cmd_kind_e           kind;
    instr_t              instr;    // CMD_EXEC
    logic                bcast;    // CMD_BM_WRITE / CMD_PE_WRITE: all groups (and all PEs)
    logic [IDX_W-1:0]    grp;      // target group
    logic [IDX_W-1:0]    pe_idx;   // target PE within its group; CMD_READ: PE read in every group
    logic [BM_AW-1:0]    addr;     // CMD_BM_WRITE: buffer-memory address
    logic [REG_AW-1:0]   reg_addr; // CMD_PE_WRITE / CMD_READ: register
    red_op_e             red_op;   // CMD_READ: reduction operation
    word_t               data;     // CMD_BM_WRITE / CMD_PE_WRITE: input data
  } cmd_t;

  // IEEE-754 double fields.
  localparam logic [10:0] EXP_MAX = 11'h7FF;
  localparam word_t QNAN = 64'h7FF8_0000_0000_0000;

endpackage
