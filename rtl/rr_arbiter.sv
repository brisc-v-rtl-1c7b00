// rr_arbiter: round-robin arbiter.
//
// Combinational grant, registered priority. Among the N request bits it
// grants the first one at or after the priority pointer (`grant` one-hot,
// `grant_idx` its index, `any` if any request). When `advance` is high at a
// clock edge the pointer moves to the position after the granted requester,
// so every requester is served within N grants. Used by the coherence
// controller for the shared bus and by the lower-level cache for its ports.
module rr_arbiter #(
  parameter int N = 4
) (
  input  logic                         clk,
  input  logic                         rst,
  input  logic [N-1:0]                 req,
  input  logic                         advance,
  output logic [N-1:0]                 grant,
  output logic [$clog2(N+1)-1:0]       grant_idx,
  output logic                         any
);
  localparam int IW = $clog2(N+1);
  logic [IW-1:0] ptr;

  always_comb begin
    grant = '0; grant_idx = '0; any = 1'b0;
    for (int k = N-1; k >= 0; k--) begin
      if (req[(int'(ptr) + k) % N]) begin
        grant                      = '0;
        grant[(int'(ptr) + k) % N] = 1'b1;
        grant_idx                  = IW'((int'(ptr) + k) % N);
        any                        = 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) ptr <= '0;
    else if (advance && any) ptr <= (int'(grant_idx) == N-1) ? '0 : grant_idx + 1'b1;
  end
endmodule
