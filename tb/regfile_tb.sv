// regfile_tb: random writes and reads against a shadow array; checks that
// x0 stays zero, that reset clears the file and that a read of the register
// being written returns the new value (write-first).
module regfile_tb;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic [4:0] rs1, rs2, rd; logic we; logic [31:0] wdata, r1, r2;
  logic [31:0] shadow [32];
  int checks = 0, failures = 0;

  regfile dut (.clk, .rst, .rs1, .rs2, .rdata1(r1), .rdata2(r2), .we, .rd, .wdata);

  task automatic chk(string w, logic [31:0] g, logic [31:0] e);
    checks++; if (g !== e) begin failures++; $display("FAIL %s got %h exp %h", w, g, e); end
  endtask

  initial begin
    we = 0; rd = 0; wdata = 0; rs1 = 0; rs2 = 0;
    for (int i = 0; i < 32; i++) shadow[i] = 0;
    @(posedge clk); @(posedge clk); rst <= 0; @(negedge clk);
    for (int i = 0; i < 32; i++) begin rs1 = 5'(i); #1 chk("reset value", r1, 0); end
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      we = $urandom_range(0, 1); rd = 5'($urandom); wdata = $urandom;
      rs1 = 5'($urandom); rs2 = (i % 5 == 0) ? rd : 5'($urandom);
      #1;
      chk("rdata1", r1, (rs1 == 0) ? 0 : (we && rd == rs1) ? wdata : shadow[rs1]);
      chk("rdata2", r2, (rs2 == 0) ? 0 : (we && rd == rs2) ? wdata : shadow[rs2]);
      @(posedge clk);
      if (we && rd != 0) shadow[rd] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
