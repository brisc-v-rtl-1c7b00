// main_memory_interface_tb: line reads and writes through the interface into
// a main_memory instance, checked against a shadow copy; also checks that a
// line read completes WORDS+1 cycles after the request and a write WORDS
// cycles after, and that the word order inside a line is correct.
module main_memory_interface_tb;
  logic clk = 0, rst = 1; always #5 clk = ~clk;
  localparam int AB = 10, OB = 2, WORDS = 4;
  logic rd, wr, done; logic [AB-OB-1:0] la; logic [127:0] din, dout;
  logic mr, mw; logic [AB-1:0] ma; logic [31:0] mdo, mdi;
  logic [31:0] shadow [1<<AB];
  int checks = 0, failures = 0;

  main_memory_interface #(.ADDRESS_BITS(AB), .OFFSET_BITS(OB)) dut (.clk, .rst, .read(rd), .write(wr),
    .address(la), .data_in(din), .data_out(dout), .done, .mem_read(mr), .mem_write(mw),
    .mem_address(ma), .mem_data_out(mdo), .mem_data_in(mdi));
  main_memory #(.ADDRESS_BITS(AB)) mem (.clk, .read(mr), .write(mw), .address(ma), .data_in(mdo),
    .data_out(mdi), .prog_write(1'b0), .prog_address('0), .prog_data('0));

  task automatic op(input bit is_wr, input int line);
    int n = 0;
    @(negedge clk);
    la = (AB-OB)'(line); rd = !is_wr; wr = is_wr;
    if (is_wr) begin
      din = {$urandom, $urandom, $urandom, $urandom};
      for (int k = 0; k < WORDS; k++) shadow[line*WORDS + k] = din[k*32 +: 32];
    end
    do begin @(posedge clk); n++; #1; end while (!done);
    checks++;
    if (n != (is_wr ? WORDS : WORDS + 1)) begin
      failures++; $display("FAIL %s latency %0d", is_wr ? "write" : "read", n);
    end
    if (!is_wr)
      for (int k = 0; k < WORDS; k++) begin
        checks++;
        if (dout[k*32 +: 32] !== shadow[line*WORDS + k]) begin
          failures++; $display("FAIL line %0d word %0d got %h exp %h", line, k, dout[k*32 +: 32], shadow[line*WORDS+k]);
        end
      end
    @(negedge clk); rd = 0; wr = 0;
  endtask

  initial begin
    rd = 0; wr = 0; la = 0; din = 0;
    repeat (2) @(posedge clk); rst <= 0;
    for (int l = 0; l < 64; l++) op(1, l);
    for (int i = 0; i < 300; i++) begin
      automatic int l = $urandom_range(0, 63);
      op($urandom_range(0, 2) == 0, l);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
