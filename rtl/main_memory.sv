// main_memory: synchronous on-chip main memory (FPGA block RAM style).
//
// 2**ADDRESS_BITS words of DATA_WIDTH bits. Port A serves the memory
// interface: a write stores at the clock edge; a read returns the word in the
// cycle after the request (`data_out` registered). Port B is a write-only
// program port for loading new software after configuration. The contents
// can be initialised from a Verilog memory hex file named by PROGRAM (an
// empty string leaves it to port B). Both the PROGRAM parameter and the
// program-write port follow the platform; everything else is generic BRAM.
module main_memory #(
  parameter int    DATA_WIDTH   = 32,
  parameter int    ADDRESS_BITS = 16,
  parameter string PROGRAM      = ""
) (
  input  logic                    clk,
  // port A
  input  logic                    read,
  input  logic                    write,
  input  logic [ADDRESS_BITS-1:0] address,
  input  logic [DATA_WIDTH-1:0]   data_in,
  output logic [DATA_WIDTH-1:0]   data_out,
  // port B: program loading
  input  logic                    prog_write,
  input  logic [ADDRESS_BITS-1:0] prog_address,
  input  logic [DATA_WIDTH-1:0]   prog_data
);
  logic [DATA_WIDTH-1:0] mem [1 << ADDRESS_BITS];

  initial begin
    if (PROGRAM != "") $readmemh(PROGRAM, mem);
  end

  always_ff @(posedge clk) begin
    if (write) mem[address] <= data_in;
    if (read)  data_out <= mem[address];
  end

  always_ff @(posedge clk) begin
    if (prog_write) mem[prog_address] <= prog_data;
  end
endmodule
