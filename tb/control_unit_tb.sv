// control_unit_tb: decodes one instruction of every RV32I kind, built with
// the testbench assembler, and compares the control word fields, register
// indices and immediate with the values the instruction set defines.
module control_unit_tb;
  import brisc_pkg::*;
  import rv_asm_pkg::*;
  logic [31:0] instr, imm; ctrl_t c; logic [4:0] rs1, rs2, rd;
  int checks = 0, failures = 0;

  control_unit dut (.instr, .ctrl(c), .imm, .rs1, .rs2, .rd);

  task automatic chk(string w, logic [31:0] g, logic [31:0] e);
    checks++; if (g !== e) begin failures++; $display("FAIL %s got %h exp %h", w, g, e); end
  endtask

  initial begin
    instr = ADDI(5, 6, -7); #1;
    chk("addi imm", imm, 32'hFFFFFFF9); chk("addi rd", rd, 5); chk("addi rs1", rs1, 6);
    chk("addi we", c.reg_write, 1); chk("addi op", c.alu_op, ALU_ADD); chk("addi src", c.alu_src_imm, 1);
    instr = SUB(1, 2, 3); #1;
    chk("sub op", c.alu_op, ALU_SUB); chk("sub rs2", rs2, 3); chk("sub src", c.alu_src_imm, 0);
    chk("sub uses rs2", c.uses_rs2, 1);
    instr = SRA(1, 2, 3); #1; chk("sra op", c.alu_op, ALU_SRA);
    instr = SRAI(1, 2, 4); #1; chk("srai op", c.alu_op, ALU_SRA); chk("srai imm", imm[4:0], 4);
    instr = SLTU(1, 2, 3); #1; chk("sltu op", c.alu_op, ALU_SLTU);
    instr = LW(7, 8, 2044); #1;
    chk("lw read", c.mem_read, 1); chk("lw imm", imm, 2044); chk("lw wb", c.wb_sel, WB_MEM);
    instr = LBU(7, 8, -1); #1; chk("lbu f3", c.mem_funct3, 3'b100); chk("lbu imm", imm, 32'hFFFFFFFF);
    instr = SW(9, 10, -2048); #1;
    chk("sw write", c.mem_write, 1); chk("sw imm", imm, 32'hFFFFF800); chk("sw we", c.reg_write, 0);
    chk("sw rs2", rs2, 9); chk("sw rs1", rs1, 10);
    instr = SH(9, 10, 6); #1; chk("sh f3", c.mem_funct3, 3'b001); chk("sh imm", imm, 6);
    instr = BEQ(1, 2, -16); #1;
    chk("beq br", c.branch, BR_EQ); chk("beq imm", imm, 32'hFFFFFFF0); chk("beq pc", c.alu_src_pc, 1);
    instr = BGE(1, 2, 4094); #1; chk("bge br", c.branch, BR_GE); chk("bge imm", imm, 4094);
    instr = BLTU(1, 2, 8); #1; chk("bltu br", c.branch, BR_LTU);
    instr = JAL(1, -1048576); #1;
    chk("jal br", c.branch, BR_JUMP); chk("jal imm", imm, 32'hFFF00000); chk("jal wb", c.wb_sel, WB_PC4);
    instr = JAL(1, 2046); #1; chk("jal imm2", imm, 2046);
    instr = JALR(1, 5, -4); #1; chk("jalr", c.jalr, 1); chk("jalr imm", imm, 32'hFFFFFFFC);
    instr = LUI(3, 20'hABCDE); #1; chk("lui imm", imm, 32'hABCDE000); chk("lui op", c.alu_op, ALU_PASSB);
    instr = AUIPC(3, 20'h00012); #1; chk("auipc imm", imm, 32'h00012000); chk("auipc pc", c.alu_src_pc, 1);
    instr = CSRR_MHARTID(4); #1; chk("csr wb", c.wb_sel, WB_CSR); chk("csr we", c.reg_write, 1);
    instr = ADDI(0, 1, 5); #1; chk("x0 no write", c.reg_write, 0);
    instr = 32'hFFFFFFFF; #1; chk("illegal", c.illegal, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #10000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
