// rv_asm_pkg: a tiny RV32I assembler for testbenches.
//
// Functions return the 32-bit encoding of one instruction from its operands,
// following the RISC-V base instruction formats (R, I, S, B, U, J). Branch
// and jump offsets are byte offsets relative to the instruction itself.
// Testbenches build programs with these and resolve labels in two passes.
package rv_asm_pkg;
  function automatic logic [31:0] r_type(input logic [6:0] f7, input logic [4:0] rs2, rs1,
                                         input logic [2:0] f3, input logic [4:0] rd,
                                         input logic [6:0] op);
    return {f7, rs2, rs1, f3, rd, op};
  endfunction
  function automatic logic [31:0] i_type(input int imm, input logic [4:0] rs1,
                                         input logic [2:0] f3, input logic [4:0] rd,
                                         input logic [6:0] op);
    logic [11:0] i = imm[11:0];
    return {i, rs1, f3, rd, op};
  endfunction
  function automatic logic [31:0] s_type(input int imm, input logic [4:0] rs2, rs1,
                                         input logic [2:0] f3);
    logic [11:0] i = imm[11:0];
    return {i[11:5], rs2, rs1, f3, i[4:0], 7'b0100011};
  endfunction
  function automatic logic [31:0] b_type(input int off, input logic [4:0] rs2, rs1,
                                         input logic [2:0] f3);
    logic [12:0] i = off[12:0];
    return {i[12], i[10:5], rs2, rs1, f3, i[4:1], i[11], 7'b1100011};
  endfunction

  function automatic logic [31:0] ADD (input logic [4:0] rd, rs1, rs2); return r_type(7'h00, rs2, rs1, 3'd0, rd, 7'b0110011); endfunction
  function automatic logic [31:0] SUB (input logic [4:0] rd, rs1, rs2); return r_type(7'h20, rs2, rs1, 3'd0, rd, 7'b0110011); endfunction
  function automatic logic [31:0] SLL (input logic [4:0] rd, rs1, rs2); return r_type(7'h00, rs2, rs1, 3'd1, rd, 7'b0110011); endfunction
  function automatic logic [31:0] SLT (input logic [4:0] rd, rs1, rs2); return r_type(7'h00, rs2, rs1, 3'd2, rd, 7'b0110011); endfunction
  function automatic logic [31:0] SLTU(input logic [4:0] rd, rs1, rs2); return r_type(7'h00, rs2, rs1, 3'd3, rd, 7'b0110011); endfunction
  function automatic logic [31:0] XOR (input logic [4:0] rd, rs1, rs2); return r_type(7'h00, rs2, rs1, 3'd4, rd, 7'b0110011); endfunction
  function automatic logic [31:0] SRL (input logic [4:0] rd, rs1, rs2); return r_type(7'h00, rs2, rs1, 3'd5, rd, 7'b0110011); endfunction
  function automatic logic [31:0] SRA (input logic [4:0] rd, rs1, rs2); return r_type(7'h20, rs2, rs1, 3'd5, rd, 7'b0110011); endfunction
  function automatic logic [31:0] OR  (input logic [4:0] rd, rs1, rs2); return r_type(7'h00, rs2, rs1, 3'd6, rd, 7'b0110011); endfunction
  function automatic logic [31:0] AND (input logic [4:0] rd, rs1, rs2); return r_type(7'h00, rs2, rs1, 3'd7, rd, 7'b0110011); endfunction
  function automatic logic [31:0] ADDI(input logic [4:0] rd, rs1, input int imm); return i_type(imm, rs1, 3'd0, rd, 7'b0010011); endfunction
  function automatic logic [31:0] SLTI(input logic [4:0] rd, rs1, input int imm); return i_type(imm, rs1, 3'd2, rd, 7'b0010011); endfunction
  function automatic logic [31:0] XORI(input logic [4:0] rd, rs1, input int imm); return i_type(imm, rs1, 3'd4, rd, 7'b0010011); endfunction
  function automatic logic [31:0] ANDI(input logic [4:0] rd, rs1, input int imm); return i_type(imm, rs1, 3'd7, rd, 7'b0010011); endfunction
  function automatic logic [31:0] SLLI(input logic [4:0] rd, rs1, input int sh); return i_type(sh & 31, rs1, 3'd1, rd, 7'b0010011); endfunction
  function automatic logic [31:0] SRAI(input logic [4:0] rd, rs1, input int sh); return i_type((sh & 31) | 32'h400, rs1, 3'd5, rd, 7'b0010011); endfunction
  function automatic logic [31:0] LW  (input logic [4:0] rd, rs1, input int imm); return i_type(imm, rs1, 3'd2, rd, 7'b0000011); endfunction
  function automatic logic [31:0] LB  (input logic [4:0] rd, rs1, input int imm); return i_type(imm, rs1, 3'd0, rd, 7'b0000011); endfunction
  function automatic logic [31:0] LBU (input logic [4:0] rd, rs1, input int imm); return i_type(imm, rs1, 3'd4, rd, 7'b0000011); endfunction
  function automatic logic [31:0] LH  (input logic [4:0] rd, rs1, input int imm); return i_type(imm, rs1, 3'd1, rd, 7'b0000011); endfunction
  function automatic logic [31:0] LHU (input logic [4:0] rd, rs1, input int imm); return i_type(imm, rs1, 3'd5, rd, 7'b0000011); endfunction
  function automatic logic [31:0] SW  (input logic [4:0] rs2, rs1, input int imm); return s_type(imm, rs2, rs1, 3'd2); endfunction
  function automatic logic [31:0] SH  (input logic [4:0] rs2, rs1, input int imm); return s_type(imm, rs2, rs1, 3'd1); endfunction
  function automatic logic [31:0] SB  (input logic [4:0] rs2, rs1, input int imm); return s_type(imm, rs2, rs1, 3'd0); endfunction
  function automatic logic [31:0] BEQ (input logic [4:0] rs1, rs2, input int off); return b_type(off, rs2, rs1, 3'd0); endfunction
  function automatic logic [31:0] BNE (input logic [4:0] rs1, rs2, input int off); return b_type(off, rs2, rs1, 3'd1); endfunction
  function automatic logic [31:0] BLT (input logic [4:0] rs1, rs2, input int off); return b_type(off, rs2, rs1, 3'd4); endfunction
  function automatic logic [31:0] BGE (input logic [4:0] rs1, rs2, input int off); return b_type(off, rs2, rs1, 3'd5); endfunction
  function automatic logic [31:0] BLTU(input logic [4:0] rs1, rs2, input int off); return b_type(off, rs2, rs1, 3'd6); endfunction
  function automatic logic [31:0] LUI (input logic [4:0] rd, input int imm20); return {imm20[19:0], rd, 7'b0110111}; endfunction
  function automatic logic [31:0] AUIPC(input logic [4:0] rd, input int imm20); return {imm20[19:0], rd, 7'b0010111}; endfunction
  function automatic logic [31:0] JAL (input logic [4:0] rd, input int off);
    logic [20:0] i = off[20:0];
    return {i[20], i[10:1], i[11], i[19:12], rd, 7'b1101111};
  endfunction
  function automatic logic [31:0] JALR(input logic [4:0] rd, rs1, input int imm); return i_type(imm, rs1, 3'd0, rd, 7'b1100111); endfunction
  function automatic logic [31:0] CSRR_MHARTID(input logic [4:0] rd); return {12'hF14, 5'd0, 3'b010, rd, 7'b1110011}; endfunction
  function automatic logic [31:0] NOP(); return 32'h00000013; endfunction
endpackage
