// core7_tb: the seven-stage core against a small instruction-set model.
//
// Each round builds a random program: register-register and immediate ALU
// operations whose sources are often the results of the last few
// instructions (to exercise forwarding and load-use stalls), byte, half and
// word loads and stores into a 256-byte data area, forward branches, JAL,
// AUIPC+JALR pairs, LUI and mhartid reads, ending in a `jal x0, 0` loop. The
// same program runs on a reference model written here; every register write
// the core makes (WB probe) must match the model's sequence in order, and the
// data area must match at the end. Even rounds use ideal memories (answer on
// the next cycle, always ready); odd rounds use memories that drop `ready`
// at random and answer after 1-4 cycles with up to two requests in flight.
// In the ideal rounds the final self-loop must retire one instruction every
// four cycles: a taken jump costs three bubbles.
module core7_tb;
  import rv_asm_pkg::*;
  logic clk = 0, rst = 1; always #5 clk = ~clk;
  localparam int AB = 16, NPROG = 300, CID = 3;
  localparam logic [31:0] DBASE = 32'h1000;

  logic i_read, i_ready, i_valid; logic [AB-1:0] i_addr, i_out_addr; logic [31:0] i_rdata;
  logic d_read, d_write, d_ready, d_valid; logic [AB-1:0] d_addr, d_out_addr;
  logic [31:0] d_wdata, d_rdata; logic [3:0] d_be;
  logic ev_retire, ev_load_use, ev_forward, ev_flush, ev_mem_stall, ev_fetch_bubble;
  logic wb_we; logic [4:0] wb_rd; logic [31:0] wb_data;

  core7 #(.CORE_ID(CID), .ADDRESS_BITS(AB)) dut (.*);

  logic [31:0] imem [1 << AB];
  logic [31:0] dmem [1 << AB];
  logic [31:0] ref_dmem [1 << AB];
  int checks = 0, failures = 0;
  bit slow;
  int n_load_use = 0, n_forward = 0, n_flush = 0, n_stall = 0;

  task automatic chk(string w, logic [31:0] g, logic [31:0] e);
    checks++; if (g !== e) begin failures++; $display("%0t FAIL %s got %h exp %h", $time, w, g, e); end
  endtask

  // ---------------- memories ----------------
  typedef struct { logic [AB-1:0] a; logic [31:0] d; longint due; } resp_t;
  resp_t iq [$], dq [$];
  longint cyc = 0;
  always @(posedge clk) begin
    cyc++;
    i_valid <= 0; d_valid <= 0;
    if (rst) begin iq.delete(); dq.delete(); end
    else begin
      if (iq.size() > 0 && iq[0].due <= cyc) begin
        i_valid <= 1; i_out_addr <= iq[0].a; i_rdata <= iq[0].d; void'(iq.pop_front());
      end
      if (dq.size() > 0 && dq[0].due <= cyc) begin
        d_valid <= 1; d_out_addr <= dq[0].a; d_rdata <= dq[0].d; void'(dq.pop_front());
      end
      if (i_read && i_ready) begin
        automatic longint last = iq.size() ? iq[$].due : 0;
        automatic longint due = cyc + (slow ? $urandom_range(1, 4) : 1);
        iq.push_back('{i_addr, imem[i_addr], due > last ? due : last});
      end
      if ((d_read || d_write) && d_ready) begin
        automatic longint last = dq.size() ? dq[$].due : 0;
        automatic longint due = cyc + (slow ? $urandom_range(1, 4) : 1);
        if (d_write)
          for (int b = 0; b < 4; b++) if (d_be[b]) dmem[d_addr][8*b +: 8] = d_wdata[8*b +: 8];
        dq.push_back('{d_addr, dmem[d_addr], due > last ? due : last});
      end
    end
    i_ready <= !slow || (iq.size() < 2 && $urandom_range(0, 3) != 0);
    d_ready <= !slow || (dq.size() < 2 && $urandom_range(0, 3) != 0);
    n_load_use += ev_load_use; n_forward += ev_forward; n_flush += ev_flush; n_stall += ev_mem_stall;
  end

  // ---------------- reference model ----------------
  typedef struct { logic [4:0] rd; logic [31:0] v; } wr_t;
  wr_t exp_q [$];

  function automatic logic [31:0] sx(logic [31:0] v, int bits);
    return 32'($signed(v << (32 - bits)) >>> (32 - bits));
  endfunction

  task automatic run_model();
    logic [31:0] x [32], pc = 0;
    for (int r = 0; r < 32; r++) x[r] = 0;
    for (int steps = 0; steps < 5000; steps++) begin
      automatic logic [31:0] in = imem[pc[AB+1:2]], rs1v, rs2v, res, ea, w, nxt;
      automatic logic [6:0] op = in[6:0];
      automatic logic [2:0] f3 = in[14:12];
      automatic logic [4:0] rd = in[11:7];
      automatic logic [31:0] ii = sx({20'b0, in[31:20]}, 12);
      automatic logic [31:0] si = sx({20'b0, in[31:25], in[11:7]}, 12);
      automatic logic [31:0] bi = sx({19'b0, in[31], in[7], in[30:25], in[11:8], 1'b0}, 13);
      automatic logic [31:0] ji = sx({11'b0, in[31], in[19:12], in[20], in[30:21], 1'b0}, 21);
      automatic bit wr = 1;
      if (in == JAL(0, 0)) return;
      rs1v = x[in[19:15]]; rs2v = x[in[24:20]];
      nxt = pc + 4;
      case (op)
        7'b0110011: case (f3)
          0: res = in[30] ? rs1v - rs2v : rs1v + rs2v;
          1: res = rs1v << rs2v[4:0];
          2: res = 32'($signed(rs1v) < $signed(rs2v));
          3: res = 32'(rs1v < rs2v);
          4: res = rs1v ^ rs2v;
          5: res = in[30] ? 32'($signed(rs1v) >>> rs2v[4:0]) : rs1v >> rs2v[4:0];
          6: res = rs1v | rs2v;
          7: res = rs1v & rs2v;
        endcase
        7'b0010011: case (f3)
          0: res = rs1v + ii;
          1: res = rs1v << in[24:20];
          2: res = 32'($signed(rs1v) < $signed(ii));
          3: res = 32'(rs1v < ii);
          4: res = rs1v ^ ii;
          5: res = in[30] ? 32'($signed(rs1v) >>> in[24:20]) : rs1v >> in[24:20];
          6: res = rs1v | ii;
          7: res = rs1v & ii;
        endcase
        7'b0000011: begin
          ea = rs1v + ii; w = ref_dmem[ea[AB+1:2]] >> (8 * ea[1:0]);
          case (f3)
            0: res = sx(w, 8);  1: res = sx(w, 16); 2: res = w;
            4: res = w & 32'hFF; 5: res = w & 32'hFFFF;
          endcase
        end
        7'b0100011: begin
          wr = 0; ea = rs1v + si;
          for (int b = 0; b < (1 << f3); b++)
            ref_dmem[ea[AB+1:2]][8*(ea[1:0]+b) +: 8] = rs2v[8*b +: 8];
        end
        7'b1100011: begin
          automatic bit t;
          wr = 0;
          case (f3)
            0: t = rs1v == rs2v; 1: t = rs1v != rs2v;
            4: t = $signed(rs1v) < $signed(rs2v); 5: t = $signed(rs1v) >= $signed(rs2v);
            6: t = rs1v < rs2v; 7: t = rs1v >= rs2v; default: t = 0;
          endcase
          if (t) nxt = pc + bi;
        end
        7'b1101111: begin res = pc + 4; nxt = pc + ji; end
        7'b1100111: begin res = pc + 4; nxt = (rs1v + ii) & ~32'd1; end
        7'b0110111: res = {in[31:12], 12'b0};
        7'b0010111: res = pc + {in[31:12], 12'b0};
        7'b1110011: res = CID;
        default: wr = 0;
      endcase
      if (wr && rd != 0) begin x[rd] = res; exp_q.push_back('{rd, res}); end
      pc = nxt;
    end
    failures++; $display("FAIL model did not reach the end loop pc=%h in=%h", pc, imem[pc[AB+1:2]]);
  endtask

  // ---------------- program generator ----------------
  logic [4:0] recent [3];
  function automatic logic [4:0] src();
    return ($urandom_range(0, 1) == 0) ? recent[$urandom_range(0, 2)] : 5'($urandom_range(0, 29));
  endfunction
  function automatic logic [4:0] dst();
    automatic logic [4:0] r = 5'($urandom_range(1, 29));
    recent[2] = recent[1]; recent[1] = recent[0]; recent[0] = r;
    return r;
  endfunction

  task automatic gen_program();
    int i = 0;
    bit is_target [NPROG + 8];
    for (int a = 0; a < 1024; a++) imem[a] = NOP();
    for (int a = 0; a < NPROG + 8; a++) is_target[a] = 0;
    recent = '{1, 2, 3};
    imem[i++] = LUI(31, DBASE >> 12);
    while (i < NPROG) begin
      automatic int k = $urandom_range(0, 99);
      automatic int room = NPROG - i;
      if (k < 35) begin
        automatic logic [4:0] a = src(), b = src();
        case ($urandom_range(0, 9))
          0: imem[i] = ADD(dst(), a, b);  1: imem[i] = SUB(dst(), a, b);
          2: imem[i] = SLL(dst(), a, b);  3: imem[i] = SLT(dst(), a, b);
          4: imem[i] = SLTU(dst(), a, b); 5: imem[i] = XOR(dst(), a, b);
          6: imem[i] = SRL(dst(), a, b);  7: imem[i] = SRA(dst(), a, b);
          8: imem[i] = OR(dst(), a, b);   default: imem[i] = AND(dst(), a, b);
        endcase
        i++;
      end else if (k < 50) begin
        automatic logic [4:0] a = src();
        automatic int im = $urandom_range(0, 4095) - 2048;
        case ($urandom_range(0, 5))
          0: imem[i] = ADDI(dst(), a, im); 1: imem[i] = SLTI(dst(), a, im);
          2: imem[i] = XORI(dst(), a, im); 3: imem[i] = ANDI(dst(), a, im);
          4: imem[i] = SLLI(dst(), a, im); default: imem[i] = SRAI(dst(), a, im);
        endcase
        i++;
      end else if (k < 65) begin
        case ($urandom_range(0, 4))
          0: imem[i] = LW(dst(), 31, 4 * $urandom_range(0, 63));
          1: imem[i] = LH(dst(), 31, 2 * $urandom_range(0, 127));
          2: imem[i] = LHU(dst(), 31, 2 * $urandom_range(0, 127));
          3: imem[i] = LB(dst(), 31, $urandom_range(0, 255));
          default: imem[i] = LBU(dst(), 31, $urandom_range(0, 255));
        endcase
        i++;
      end else if (k < 77) begin
        case ($urandom_range(0, 2))
          0: imem[i] = SW(src(), 31, 4 * $urandom_range(0, 63));
          1: imem[i] = SH(src(), 31, 2 * $urandom_range(0, 127));
          default: imem[i] = SB(src(), 31, $urandom_range(0, 255));
        endcase
        i++;
      end else if (k < 87) begin
        automatic int off = 4 * $urandom_range(1, room < 6 ? room : 6);
        automatic logic [4:0] a = src(), b = src();
        case ($urandom_range(0, 5))
          0: imem[i] = BEQ(a, b, off); 1: imem[i] = BNE(a, b, off);
          2: imem[i] = BLT(a, b, off); 3: imem[i] = BGE(a, b, off);
          4: imem[i] = BLTU(a, b, off); default: imem[i] = b_type(off, b, a, 3'd7);
        endcase
        is_target[i + off / 4] = 1;
        i++;
      end else if (k < 91) begin
        automatic int off = 4 * $urandom_range(1, room < 5 ? room : 5);
        imem[i] = JAL(dst(), off); is_target[i + off / 4] = 1; i++;
      end else if (k < 94 && room >= 3 && !is_target[i + 1]) begin
        // a jump never lands between the AUIPC and its JALR
        automatic int off = 4 * $urandom_range(2, room < 6 ? room : 6);
        imem[i++] = AUIPC(30, 0);
        imem[i] = JALR(dst(), 30, off); is_target[i - 1 + off / 4] = 1; i++;
      end else if (k < 97) begin
        imem[i++] = LUI(dst(), $urandom);
      end else begin
        imem[i++] = CSRR_MHARTID(dst());
      end
    end
    imem[NPROG] = JAL(0, 0);
  endtask

  // ---------------- checker of the register write stream ----------------
  bit running;
  always @(posedge clk) if (running && !rst && wb_we && wb_rd != 0) begin
    if (exp_q.size() == 0) begin
      failures++; checks++; $display("%0t FAIL extra write x%0d", $time, wb_rd);
    end else begin
      automatic wr_t e = exp_q.pop_front();
      chk($sformatf("write register"), {27'b0, wb_rd}, {27'b0, e.rd});
      chk($sformatf("write value x%0d", e.rd), wb_data, e.v);
    end
  end

  initial begin
    for (int a = 0; a < (1 << AB); a++) dmem[a] = 0;
    for (int round = 0; round < 16; round++) begin
      int retires;
      slow = round[0];
      rst = 1; running = 0;
      gen_program();
      for (int a = 0; a < 64; a++) begin
        dmem[(DBASE >> 2) + a] = $urandom; ref_dmem[(DBASE >> 2) + a] = dmem[(DBASE >> 2) + a];
      end
      exp_q.delete();
      run_model();
      repeat (3) @(posedge clk);
      #1 rst = 0; running = 1;
      fork
        wait (exp_q.size() == 0);
        begin repeat (20000) @(posedge clk); failures++; $display("FAIL round %0d stuck", round); end
      join_any
      disable fork;
      repeat (30) @(posedge clk);
      retires = 0;
      repeat (40) begin @(posedge clk); retires += ev_retire; end
      if (!slow) chk("self-loop retires per 40 cycles (3-bubble jump)", retires, 10);
      for (int a = 0; a < 64; a++)
        chk($sformatf("data word %0d", a), dmem[(DBASE >> 2) + a], ref_dmem[(DBASE >> 2) + a]);
    end
    checks++;
    if (n_load_use == 0 || n_forward == 0 || n_flush == 0 || n_stall == 0) begin
      failures++; $display("FAIL coverage");
    end
    $display("load-use stalls=%0d forwards=%0d flushes=%0d memory stalls=%0d",
             n_load_use, n_forward, n_flush, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
