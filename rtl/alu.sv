// alu: RV32I integer arithmetic/logic unit of the execute stage.
//
// Purely combinational. Computes result = a <op> b for the ten RV32I
// operations (plus PASSB, used for LUI), and evaluates the branch condition
// selected by `branch` on the two register operands ra/rb. `take` is 1 for a
// taken conditional branch or any jump. Signed comparisons (SLT, BLT, BGE) and
// the arithmetic right shift treat operands as two's complement; the platform's
// fault-injection example was precisely a wrong signed operation here.
module alu
  import brisc_pkg::*;
#(
  parameter int DATA_WIDTH = 32
) (
  input  alu_op_e               op,
  input  logic [DATA_WIDTH-1:0] a,
  input  logic [DATA_WIDTH-1:0] b,
  input  branch_e               branch,
  input  logic [DATA_WIDTH-1:0] ra,
  input  logic [DATA_WIDTH-1:0] rb,
  output logic [DATA_WIDTH-1:0] result,
  output logic                  take
);
  localparam int SH = $clog2(DATA_WIDTH);

  always_comb begin
    unique case (op)
      ALU_ADD:   result = a + b;
      ALU_SUB:   result = a - b;
      ALU_SLL:   result = a << b[SH-1:0];
      ALU_SLT:   result = DATA_WIDTH'($signed(a) < $signed(b));
      ALU_SLTU:  result = DATA_WIDTH'(a < b);
      ALU_XOR:   result = a ^ b;
      ALU_SRL:   result = a >> b[SH-1:0];
      ALU_SRA:   result = DATA_WIDTH'($signed(a) >>> b[SH-1:0]);
      ALU_OR:    result = a | b;
      ALU_AND:   result = a & b;
      ALU_PASSB: result = b;
      default:   result = '0;
    endcase
  end

  always_comb begin
    unique case (branch)
      BR_EQ:   take = (ra == rb);
      BR_NE:   take = (ra != rb);
      BR_LT:   take = ($signed(ra) < $signed(rb));
      BR_GE:   take = ($signed(ra) >= $signed(rb));
      BR_LTU:  take = (ra < rb);
      BR_GEU:  take = (ra >= rb);
      BR_JUMP: take = 1'b1;
      default: take = 1'b0;
    endcase
  end
endmodule
