// control_unit: RV32I instruction decoder and immediate select (decode stage).
//
// Combinational. From a 32-bit instruction it produces the register indices,
// the sign-extended immediate (I, S, B, U or J format) and a control word
// (brisc_pkg::ctrl_t) that tells the execute, memory and write-back stages what
// to do. This is the "base control unit" of the single-cycle core; the
// pipeline's stall and bypass logic (hazard_unit) is wrapped around it rather
// than built into it. Supported: all RV32I computational, load/store, branch
// and jump instructions. FENCE, ECALL and EBREAK execute as no-operations.
// The only CSR access decoded is a read of mhartid (CSRRS/CSRRSI with
// rs1/uimm = 0), which a multi-hart program uses to tell harts apart; this
// is a choice of this design, the platform text names no CSR support.
// Unknown opcodes raise `illegal` and otherwise behave as a no-op.
module control_unit
  import brisc_pkg::*;
(
  input  logic [31:0] instr,
  output ctrl_t       ctrl,
  output logic [31:0] imm,
  output logic [4:0]  rs1,
  output logic [4:0]  rs2,
  output logic [4:0]  rd
);
  logic [6:0] opcode;
  logic [2:0] funct3;
  logic [6:0] funct7;

  assign opcode = instr[6:0];
  assign funct3 = instr[14:12];
  assign funct7 = instr[31:25];
  assign rs1    = instr[19:15];
  assign rs2    = instr[24:20];
  assign rd     = instr[11:7];

  always_comb begin
    ctrl            = '0;
    ctrl.alu_op     = ALU_ADD;
    ctrl.branch     = BR_NONE;
    ctrl.wb_sel     = WB_ALU;
    ctrl.mem_funct3 = funct3;
    imm             = '0;
    unique case (opcode)
      OP_LUI: begin
        imm = {instr[31:12], 12'b0};
        ctrl.reg_write = 1'b1; ctrl.alu_op = ALU_PASSB; ctrl.alu_src_imm = 1'b1;
      end
      OP_AUIPC: begin
        imm = {instr[31:12], 12'b0};
        ctrl.reg_write = 1'b1; ctrl.alu_src_imm = 1'b1; ctrl.alu_src_pc = 1'b1;
      end
      OP_JAL: begin
        imm = {{12{instr[31]}}, instr[19:12], instr[20], instr[30:21], 1'b0};
        ctrl.reg_write = 1'b1; ctrl.branch = BR_JUMP; ctrl.wb_sel = WB_PC4;
        ctrl.alu_src_imm = 1'b1; ctrl.alu_src_pc = 1'b1;
      end
      OP_JALR: begin
        imm = {{20{instr[31]}}, instr[31:20]};
        ctrl.reg_write = 1'b1; ctrl.branch = BR_JUMP; ctrl.jalr = 1'b1;
        ctrl.wb_sel = WB_PC4; ctrl.alu_src_imm = 1'b1; ctrl.uses_rs1 = 1'b1;
      end
      OP_BRANCH: begin
        imm = {{20{instr[31]}}, instr[7], instr[30:25], instr[11:8], 1'b0};
        ctrl.alu_src_imm = 1'b1; ctrl.alu_src_pc = 1'b1;
        ctrl.uses_rs1 = 1'b1; ctrl.uses_rs2 = 1'b1;
        unique case (funct3)
          3'b000: ctrl.branch = BR_EQ;
          3'b001: ctrl.branch = BR_NE;
          3'b100: ctrl.branch = BR_LT;
          3'b101: ctrl.branch = BR_GE;
          3'b110: ctrl.branch = BR_LTU;
          3'b111: ctrl.branch = BR_GEU;
          default: ctrl.illegal = 1'b1;
        endcase
      end
      OP_LOAD: begin
        imm = {{20{instr[31]}}, instr[31:20]};
        ctrl.reg_write = 1'b1; ctrl.mem_read = 1'b1; ctrl.wb_sel = WB_MEM;
        ctrl.alu_src_imm = 1'b1; ctrl.uses_rs1 = 1'b1;
      end
      OP_STORE: begin
        imm = {{20{instr[31]}}, instr[31:25], instr[11:7]};
        ctrl.mem_write = 1'b1; ctrl.alu_src_imm = 1'b1;
        ctrl.uses_rs1 = 1'b1; ctrl.uses_rs2 = 1'b1;
      end
      OP_IMM, OP_REG: begin
        imm = {{20{instr[31]}}, instr[31:20]};
        ctrl.reg_write = 1'b1; ctrl.uses_rs1 = 1'b1;
        ctrl.alu_src_imm = (opcode == OP_IMM);
        ctrl.uses_rs2 = (opcode == OP_REG);
        unique case (funct3)
          3'b000: ctrl.alu_op = (opcode == OP_REG && funct7[5]) ? ALU_SUB : ALU_ADD;
          3'b001: ctrl.alu_op = ALU_SLL;
          3'b010: ctrl.alu_op = ALU_SLT;
          3'b011: ctrl.alu_op = ALU_SLTU;
          3'b100: ctrl.alu_op = ALU_XOR;
          3'b101: ctrl.alu_op = funct7[5] ? ALU_SRA : ALU_SRL;
          3'b110: ctrl.alu_op = ALU_OR;
          default: ctrl.alu_op = ALU_AND;
        endcase
      end
      OP_FENCE: ;
      OP_SYSTEM: begin
        if ((funct3 == 3'b010 || funct3 == 3'b110) && instr[31:20] == CSR_MHARTID
            && instr[19:15] == 5'd0) begin
          ctrl.reg_write = 1'b1; ctrl.wb_sel = WB_CSR;
        end
      end
      default: ctrl.illegal = 1'b1;
    endcase
    if (ctrl.reg_write && rd == 5'd0) ctrl.reg_write = 1'b0;
  end
endmodule
