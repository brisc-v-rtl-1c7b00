// hazard_unit: stall and bypass logic wrapped around the decode stage.
//
// Combinational. For each source register of the instruction in decode it
// looks for the youngest older instruction, in Execute, Mem1 or Mem2, that
// will write that register. With FORWARDING = 1 the value is taken from that
// stage (a multiplexer on the decode output, as the platform describes) if the
// stage already holds it; a load whose data has not come back yet (load-use
// hazard) makes `stall` request a bubble instead. With FORWARDING = 0 any
// such dependence stalls (the "stall on hazard" core variant). The write-back
// stage needs no path here: the register file is write-first.
// The stage order and the single-level priority are this design's choice;
// the existence of the two variants follows the platform.
module hazard_unit #(
  parameter int  DATA_WIDTH = 32,
  parameter bit  FORWARDING = 1'b1,
  parameter int  NSTAGES    = 3       // producer stages checked, youngest first
) (
  input  logic [4:0]            rs1,
  input  logic [4:0]            rs2,
  input  logic                  uses_rs1,
  input  logic                  uses_rs2,
  input  logic [DATA_WIDTH-1:0] rf_rdata1,
  input  logic [DATA_WIDTH-1:0] rf_rdata2,
  // producer stages, index 0 = youngest (Execute)
  input  logic [NSTAGES-1:0]    st_writes,   // valid and writes a register
  input  logic [4:0]            st_rd   [NSTAGES],
  input  logic [NSTAGES-1:0]    st_ready,    // value available in that stage
  input  logic [DATA_WIDTH-1:0] st_value[NSTAGES],
  output logic [DATA_WIDTH-1:0] op1,
  output logic [DATA_WIDTH-1:0] op2,
  output logic                  stall,
  output logic                  fwd1,        // a bypass was used (for statistics)
  output logic                  fwd2
);
  logic stall1, stall2;

  always_comb begin
    op1 = rf_rdata1; stall1 = 1'b0; fwd1 = 1'b0;
    if (uses_rs1 && rs1 != 5'd0) begin
      for (int s = NSTAGES-1; s >= 0; s--) begin
        if (st_writes[s] && st_rd[s] == rs1) begin
          if (FORWARDING && st_ready[s]) begin
            op1 = st_value[s]; stall1 = 1'b0; fwd1 = 1'b1;
          end else begin
            op1 = rf_rdata1; stall1 = 1'b1; fwd1 = 1'b0;
          end
        end
      end
    end
  end

  always_comb begin
    op2 = rf_rdata2; stall2 = 1'b0; fwd2 = 1'b0;
    if (uses_rs2 && rs2 != 5'd0) begin
      for (int s = NSTAGES-1; s >= 0; s--) begin
        if (st_writes[s] && st_rd[s] == rs2) begin
          if (FORWARDING && st_ready[s]) begin
            op2 = st_value[s]; stall2 = 1'b0; fwd2 = 1'b1;
          end else begin
            op2 = rf_rdata2; stall2 = 1'b1; fwd2 = 1'b0;
          end
        end
      end
    end
  end

  assign stall = stall1 | stall2;
endmodule
