// hazard_unit_tb: random producer-stage contents against a reference that
// picks the youngest matching stage: forwarded value when it is ready, stall
// when it is not, register-file value when nothing matches. Run for the
// forwarding variant; a second instance checks the stall-only variant.
module hazard_unit_tb;
  logic [4:0] rs1, rs2; logic u1, u2; logic [31:0] rf1, rf2;
  logic [2:0] w, rdy; logic [4:0] srd [3]; logic [31:0] sval [3];
  logic [31:0] op1, op2, op1n, op2n; logic stall, stalln, f1, f2, f1n, f2n;
  int checks = 0, failures = 0;

  hazard_unit #(.FORWARDING(1)) dut  (.rs1, .rs2, .uses_rs1(u1), .uses_rs2(u2),
    .rf_rdata1(rf1), .rf_rdata2(rf2), .st_writes(w), .st_rd(srd), .st_ready(rdy), .st_value(sval),
    .op1, .op2, .stall, .fwd1(f1), .fwd2(f2));
  hazard_unit #(.FORWARDING(0)) dutn (.rs1, .rs2, .uses_rs1(u1), .uses_rs2(u2),
    .rf_rdata1(rf1), .rf_rdata2(rf2), .st_writes(w), .st_rd(srd), .st_ready(rdy), .st_value(sval),
    .op1(op1n), .op2(op2n), .stall(stalln), .fwd1(f1n), .fwd2(f2n));

  task automatic ref_src(input logic [4:0] r, input logic u, input logic [31:0] rf,
                         output logic [31:0] v, output logic s, output logic sn);
    v = rf; s = 0; sn = 0;
    if (u && r != 0)
      for (int k = 0; k < 3; k++)
        if (w[k] && srd[k] == r) begin
          sn = 1;
          if (rdy[k]) v = sval[k]; else s = 1;
          break;
        end
  endtask

  initial begin
    for (int i = 0; i < 5000; i++) begin
      logic [31:0] e1, e2; logic s1, s2, n1, n2;
      rs1 = 5'($urandom_range(0, 4)); rs2 = 5'($urandom_range(0, 4));
      u1 = 1'($urandom); u2 = 1'($urandom); rf1 = $urandom; rf2 = $urandom;
      w = 3'($urandom); rdy = 3'($urandom);
      for (int k = 0; k < 3; k++) begin srd[k] = 5'($urandom_range(0, 4)); sval[k] = $urandom; end
      #1;
      ref_src(rs1, u1, rf1, e1, s1, n1);
      ref_src(rs2, u2, rf2, e2, s2, n2);
      checks += 3;
      if (stall !== (s1 | s2)) begin failures++; $display("FAIL stall %b exp %b", stall, s1|s2); end
      if (!s1 && op1 !== e1) begin failures++; $display("FAIL op1 %h exp %h", op1, e1); end
      if (!s2 && op2 !== e2) begin failures++; $display("FAIL op2 %h exp %h", op2, e2); end
      checks++;
      if (stalln !== (n1 | n2)) begin failures++; $display("FAIL no-forward stall"); end
      if (!(n1 | n2)) begin
        checks++;
        if (op1n !== rf1 && u1 && rs1 != 0) begin failures++; $display("FAIL no-forward op1"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
