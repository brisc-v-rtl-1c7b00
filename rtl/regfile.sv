// regfile: the RV32I integer register file of the core's decode stage.
//
// 32 registers of DATA_WIDTH bits, two combinational read ports (rs1, rs2)
// and one write port written at the rising clock edge by the write-back
// stage. Register x0 always reads zero and ignores writes. A read of the
// register being written in the same cycle returns the new value (write-first),
// so the write-back stage needs no separate bypass path. Reset clears all
// registers. The register count and x0 rule follow RV32I; the write-first
// behaviour and reset are this design's choice.
module regfile #(
  parameter int DATA_WIDTH = 32
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic [4:0]            rs1,
  input  logic [4:0]            rs2,
  output logic [DATA_WIDTH-1:0] rdata1,
  output logic [DATA_WIDTH-1:0] rdata2,
  input  logic                  we,
  input  logic [4:0]            rd,
  input  logic [DATA_WIDTH-1:0] wdata
);
  logic [DATA_WIDTH-1:0] regs [32];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < 32; i++) regs[i] <= '0;
    end else if (we && rd != 5'd0) begin
      regs[rd] <= wdata;
    end
  end

  always_comb begin
    rdata1 = (rs1 == 5'd0) ? '0 : (we && rd == rs1) ? wdata : regs[rs1];
    rdata2 = (rs2 == 5'd0) ? '0 : (we && rd == rs2) ? wdata : regs[rs2];
  end
endmodule
