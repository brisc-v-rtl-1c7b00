// replacement_controller: per-set victim selection for a set-associative cache.
//
// REPLACEMENT_MODE = 0 gives true least-recently-used replacement: every set
// keeps one age counter of log2(NUMBER_OF_WAYS) bits per way, forming a
// permutation of 0..NUMBER_OF_WAYS-1. An access to way w of set s (hit or fill,
// `access` high for one cycle) makes w the youngest (age 0) and ages every way
// that was younger than it by one. The victim of a set is the way whose age is
// NUMBER_OF_WAYS-1. REPLACEMENT_MODE = 1 gives random replacement from a
// 16-bit LFSR that advances every cycle. The victim output is combinational
// from `query_index`; updates take effect at the next clock edge. Reset sets
// the ages of every set to 0,1,2,... in way order. Both policies and the true
// LRU storage cost follow the platform; the age-counter form of LRU and the
// LFSR are this design's choice.
module replacement_controller #(
  parameter int NUMBER_OF_WAYS   = 4,
  parameter int INDEX_BITS       = 8,
  parameter int REPLACEMENT_MODE = 0
) (
  input  logic                              clk,
  input  logic                              rst,
  input  logic                              access,
  input  logic [INDEX_BITS-1:0]             access_index,
  input  logic [$clog2(NUMBER_OF_WAYS)-1:0] access_way,
  input  logic [INDEX_BITS-1:0]             query_index,
  output logic [$clog2(NUMBER_OF_WAYS)-1:0] victim_way
);
  localparam int WB   = (NUMBER_OF_WAYS > 1) ? $clog2(NUMBER_OF_WAYS) : 1;
  localparam int SETS = 1 << INDEX_BITS;

  logic [WB-1:0] age [SETS][NUMBER_OF_WAYS];
  logic [15:0]   lfsr;

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int s = 0; s < SETS; s++)
        for (int w = 0; w < NUMBER_OF_WAYS; w++) age[s][w] <= WB'(w);
      lfsr <= 16'hACE1;
    end else begin
      lfsr <= {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
      if (access) begin
        for (int w = 0; w < NUMBER_OF_WAYS; w++) begin
          if (w == int'(access_way))
            age[access_index][w] <= '0;
          else if (age[access_index][w] < age[access_index][access_way])
            age[access_index][w] <= age[access_index][w] + 1'b1;
        end
      end
    end
  end

  always_comb begin
    victim_way = '0;
    if (REPLACEMENT_MODE == 1) begin
      victim_way = lfsr[$clog2(NUMBER_OF_WAYS)-1:0];
    end else begin
      for (int w = 0; w < NUMBER_OF_WAYS; w++)
        if (age[query_index][w] == WB'(NUMBER_OF_WAYS-1)) victim_way = w[$clog2(NUMBER_OF_WAYS)-1:0];
    end
  end
endmodule
