// alu_tb: random and corner-case test of the ALU against a reference model
// written here with SystemVerilog operators, covering every operation and
// every branch condition, with emphasis on signed comparisons and shifts.
module alu_tb;
  import brisc_pkg::*;
  alu_op_e op; branch_e br;
  logic [31:0] a, b, y; logic take;
  int checks = 0, failures = 0;

  alu dut (.op, .a, .b, .branch(br), .ra(a), .rb(b), .result(y), .take);

  function automatic logic [31:0] ref_y(alu_op_e o, logic [31:0] x, logic [31:0] z);
    case (o)
      ALU_ADD: return x + z;        ALU_SUB: return x - z;
      ALU_SLL: return x << z[4:0];  ALU_SRL: return x >> z[4:0];
      ALU_SRA: return 32'($signed(x) >>> z[4:0]);
      ALU_SLT: return {31'b0, $signed(x) < $signed(z)};
      ALU_SLTU: return {31'b0, x < z};
      ALU_XOR: return x ^ z; ALU_OR: return x | z; ALU_AND: return x & z;
      ALU_PASSB: return z;
      default: return 0;
    endcase
  endfunction
  function automatic logic ref_t(branch_e c, logic [31:0] x, logic [31:0] z);
    case (c)
      BR_EQ: return x == z; BR_NE: return x != z;
      BR_LT: return $signed(x) < $signed(z); BR_GE: return $signed(x) >= $signed(z);
      BR_LTU: return x < z; BR_GEU: return x >= z; BR_JUMP: return 1;
      default: return 0;
    endcase
  endfunction

  logic [31:0] corner [6] = '{32'h0, 32'h1, 32'hFFFFFFFF, 32'h80000000, 32'h7FFFFFFF, 32'h1F};
  initial begin
    for (int i = 0; i < 4000; i++) begin
      a  = (i < 36) ? corner[i % 6] : $urandom;
      b  = (i < 36) ? corner[i / 6] : $urandom;
      op = alu_op_e'(i % 11);
      br = branch_e'(i % 8);
      #1;
      checks++;
      if (y !== ref_y(op, a, b)) begin
        failures++; $display("FAIL op=%s a=%h b=%h y=%h", op.name(), a, b, y);
      end
      checks++;
      if (take !== ref_t(br, a, b)) begin
        failures++; $display("FAIL br=%s a=%h b=%h take=%b", br.name(), a, b, take);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
