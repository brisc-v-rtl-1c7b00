// main_memory_interface: adapter between the last-level cache, which moves
// whole lines, and a main memory that moves one word per access.
//
// A line read (`read` held high with a line address) is turned into
// 2**OFFSET_BITS word reads at consecutive word addresses, one issued per
// cycle; the memory answers each one a cycle later (synchronous, BRAM-like)
// and the words are assembled into `data_out`. A line write sends the words
// of `data_in` one per cycle. `done` is high for one cycle when the line is
// complete: a read takes 2**OFFSET_BITS + 1 cycles after the request, a write
// 2**OFFSET_BITS. The cache keeps its request up until `done`, and drops it
// the cycle after. Bridging line and word widths is the platform's stated
// role for this module; the burst-free one-word-per-cycle schedule is this
// design's choice (the platform's on-chip-network attachment is not built).
module main_memory_interface #(
  parameter int DATA_WIDTH   = 32,
  parameter int ADDRESS_BITS = 16,
  parameter int OFFSET_BITS  = 2
) (
  input  logic clk,
  input  logic rst,
  // cache side
  input  logic                                 read,
  input  logic                                 write,
  input  logic [ADDRESS_BITS-OFFSET_BITS-1:0]  address,
  input  logic [(DATA_WIDTH<<OFFSET_BITS)-1:0] data_in,
  output logic [(DATA_WIDTH<<OFFSET_BITS)-1:0] data_out,
  output logic                                 done,
  // memory side (one word per access, read data one cycle later)
  output logic                                 mem_read,
  output logic                                 mem_write,
  output logic [ADDRESS_BITS-1:0]              mem_address,
  output logic [DATA_WIDTH-1:0]                mem_data_out,
  input  logic [DATA_WIDTH-1:0]                mem_data_in
);
  localparam int WORDS = 1 << OFFSET_BITS;
  localparam int CW    = OFFSET_BITS + 1;

  logic [CW-1:0] issued, received;
  logic          busy, rd_pending;
  logic [OFFSET_BITS-1:0] rd_word;

  assign busy         = (read || write) && !done;
  assign mem_read     = read  && !done && (issued < CW'(WORDS));
  assign mem_write    = write && !done && (issued < CW'(WORDS));
  assign mem_address  = {address, issued[OFFSET_BITS-1:0]};
  assign mem_data_out = data_in[issued[OFFSET_BITS-1:0]*DATA_WIDTH +: DATA_WIDTH];

  always_ff @(posedge clk) begin
    if (rst) begin
      issued <= '0; received <= '0; done <= 1'b0; rd_pending <= 1'b0; rd_word <= '0;
      data_out <= '0;
    end else begin
      done <= 1'b0;
      rd_pending <= mem_read;
      rd_word    <= issued[OFFSET_BITS-1:0];
      if (rd_pending) begin
        data_out[rd_word*DATA_WIDTH +: DATA_WIDTH] <= mem_data_in;
        received <= received + 1'b1;
      end
      if (mem_read || mem_write) issued <= issued + 1'b1;
      if (busy && write && issued == CW'(WORDS-1)) begin
        done <= 1'b1; issued <= '0;
      end
      if (busy && read && rd_pending && received == CW'(WORDS-1)) begin
        done <= 1'b1; issued <= '0; received <= '0;
      end
    end
  end
endmodule
