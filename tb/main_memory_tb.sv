// main_memory_tb: writes random words through both ports and reads them back
// through port A, checking the data and the one-cycle read latency.
module main_memory_tb;
  logic clk = 0; always #5 clk = ~clk;
  logic rd, wr, pw; logic [9:0] a, pa; logic [31:0] di, dout, pd;
  logic [31:0] shadow [1024];
  int checks = 0, failures = 0;

  main_memory #(.ADDRESS_BITS(10)) dut (.clk, .read(rd), .write(wr), .address(a), .data_in(di),
    .data_out(dout), .prog_write(pw), .prog_address(pa), .prog_data(pd));

  initial begin
    rd = 0; wr = 0; pw = 0; a = 0; pa = 0; di = 0; pd = 0;
    for (int i = 0; i < 1024; i++) begin
      @(negedge clk);
      if (i % 2 == 0) begin pw = 1; pa = 10'(i); pd = $urandom; shadow[i] = pd; wr = 0; end
      else begin wr = 1; a = 10'(i); di = $urandom; shadow[i] = di; pw = 0; end
    end
    @(negedge clk); wr = 0; pw = 0;
    for (int i = 0; i < 2000; i++) begin
      automatic int ad = $urandom_range(0, 1023);
      @(negedge clk); rd = 1; a = 10'(ad);
      @(negedge clk); rd = 0; a = 10'($urandom);       // data must already be there
      checks++;
      if (dout !== shadow[ad]) begin failures++; $display("FAIL addr %0d got %h exp %h", ad, dout, shadow[ad]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
