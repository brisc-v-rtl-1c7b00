// brisc_pkg: types and constants shared by the core and the cache hierarchy.
//
// Holds the RV32I opcode and ALU-operation encodings used by the decoder, the
// ALU and the pipeline, the MESI state encoding stored with every cache line,
// and the 4-bit message codes that caches and the coherence controller
// exchange on the shared bus. The opcode values follow the RISC-V user ISA;
// the numeric values of the ALU operations, MESI states and bus messages are
// this design's own choice (only the names of some messages and states, and
// their 4-bit width, are fixed by the platform description).
package brisc_pkg;

  // RV32I major opcodes
  localparam logic [6:0] OP_LUI    = 7'b0110111;
  localparam logic [6:0] OP_AUIPC  = 7'b0010111;
  localparam logic [6:0] OP_JAL    = 7'b1101111;
  localparam logic [6:0] OP_JALR   = 7'b1100111;
  localparam logic [6:0] OP_BRANCH = 7'b1100011;
  localparam logic [6:0] OP_LOAD   = 7'b0000011;
  localparam logic [6:0] OP_STORE  = 7'b0100011;
  localparam logic [6:0] OP_IMM    = 7'b0010011;
  localparam logic [6:0] OP_REG    = 7'b0110011;
  localparam logic [6:0] OP_FENCE  = 7'b0001111;
  localparam logic [6:0] OP_SYSTEM = 7'b1110011;

  localparam logic [11:0] CSR_MHARTID = 12'hF14;

  typedef enum logic [3:0] {
    ALU_ADD, ALU_SUB, ALU_SLL, ALU_SLT, ALU_SLTU, ALU_XOR, ALU_SRL, ALU_SRA,
    ALU_OR, ALU_AND, ALU_PASSB
  } alu_op_e;

  typedef enum logic [2:0] {
    BR_NONE, BR_EQ, BR_NE, BR_LT, BR_GE, BR_LTU, BR_GEU, BR_JUMP
  } branch_e;

  // Where the write-back value comes from
  typedef enum logic [1:0] { WB_ALU, WB_MEM, WB_PC4, WB_CSR } wb_sel_e;

  // Decoded control word, carried down the pipeline
  typedef struct packed {
    logic       reg_write;
    logic       mem_read;
    logic       mem_write;
    logic [2:0] mem_funct3;   // LB/LH/LW/LBU/LHU, SB/SH/SW
    alu_op_e    alu_op;
    logic       alu_src_imm;  // operand B is the immediate
    logic       alu_src_pc;   // operand A is the PC (AUIPC)
    branch_e    branch;
    logic       jalr;
    wb_sel_e    wb_sel;
    logic       uses_rs1;
    logic       uses_rs2;
    logic       illegal;
  } ctrl_t;

  // MESI coherence state of a cache line
  typedef enum logic [1:0] { ST_I = 2'd0, ST_S = 2'd1, ST_E = 2'd2, ST_M = 2'd3 } mesi_e;

  // 4-bit messages on the shared bus and between cache levels
  typedef enum logic [3:0] {
    NO_REQ    = 4'd0,   // idle / "you may proceed"
    RD_REQ    = 4'd1,   // read a line
    WB_REQ    = 4'd2,   // write a dirty line back
    FLUSH_REQ = 4'd3,   // flush a line from the whole hierarchy
    INVAL_REQ = 4'd4,   // invalidate a line in the whole hierarchy
    RFO_REQ   = 4'd5,   // read a line with intent to write (write miss)
    UPG_REQ   = 4'd6,   // write to a SHARED line: gain ownership
    RESP_S    = 4'd7,   // line returned, install SHARED
    RESP_E    = 4'd8,   // line returned, install EXCLUSIVE
    RESP_M    = 4'd9,   // line returned, install MODIFIED (ownership granted)
    ACK       = 4'd10   // request without data completed
  } msg_e;

endpackage
