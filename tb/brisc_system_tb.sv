// brisc_system_tb: end-to-end test of the multi-core system at its default
// size (four cores, full L1/L2/main-memory sizes).
//
// A parallel prime-counting program, like the platform's multi-core
// benchmark, is assembled here and written into main memory through the
// program port while the system is in reset. Hart h counts the primes
// n = h+2, h+2+N, ... below LIMIT by trial division (remainders by repeated
// subtraction, since RV32I has no divide), stores its count and a done flag
// in shared lines, and hart 0 waits for all flags and adds the counts: this
// moves lines between caches (ownership requests, write-backs of MODIFIED
// copies found by snooping, SHARED responses). Hart 0 then writes eight lines
// that all map to one L1 set and one L2 set, forcing L1 victim write-backs,
// L2 evictions and back-flushes of L1 copies, reads them back, and checks
// byte and halfword accesses. Expected values are computed by the testbench
// itself. Register results are tracked from the cores' write-back probes.
// Every mechanism (load-use stall, forwarding, branch flush, memory stall,
// fetch bubble, L1 and L2 misses, L2 eviction, snoop write-back, shared
// response) must occur at least once.
`timescale 1ns/1ps
module brisc_system_tb;
  import rv_asm_pkg::*;

  localparam int N     = 4;     // must match brisc_system's default N_CORES
  localparam int LIMIT = 60;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic        prog_write;
  logic [15:0] prog_address;
  logic [31:0] prog_data;
  logic [N-1:0] ev_retire, ev_load_use, ev_forward, ev_flush, ev_mem_stall, ev_fetch_bubble, wb_we;
  logic [4:0]  wb_rd   [N];
  logic [31:0] wb_data [N];
  logic [2*N-1:0] ev_l1_hit, ev_l1_miss;
  logic ev_l2_hit, ev_l2_miss, ev_l2_evict, ev_snoop_wb, ev_back_flush, ev_shared_resp;

  brisc_system dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d (0x%08h), expected %0d (0x%08h)", what, got, got, exp, exp);
    end
  endtask

  // ---------------- program ----------------
  logic [31:0] prog [256];
  int          lbl  [32];
  int          pc;
  task automatic emit(input logic [31:0] w); prog[pc/4] = w; pc += 4; endtask
  function automatic int off(input int k); return lbl[k] - pc; endfunction

  localparam int L_OUTER=0, L_D=1, L_SUB=2, L_CHK=3, L_PRIME=4, L_NEXT=5, L_DONE=6,
                 L_WAIT=7, L_ST=8, L_LD=9, L_SPIN=10;

  task automatic build();
    pc = 0;
    emit(CSRR_MHARTID(10));
    emit(ADDI(11, 10, 2));                // n = hart + 2
    emit(ADDI(12, 0, LIMIT));
    emit(ADDI(13, 0, 0));                 // count
    lbl[L_OUTER] = pc;
    emit(BGE(11, 12, off(L_DONE)));
    emit(ADDI(14, 0, 2));                 // d = 2
    lbl[L_D] = pc;
    emit(BGE(14, 11, off(L_PRIME)));
    emit(ADD(15, 11, 0));                 // r = n
    lbl[L_SUB] = pc;
    emit(BLT(15, 14, off(L_CHK)));
    emit(SUB(15, 15, 14));
    emit(JAL(0, off(L_SUB)));
    lbl[L_CHK] = pc;
    emit(BEQ(15, 0, off(L_NEXT)));
    emit(ADDI(14, 14, 1));
    emit(JAL(0, off(L_D)));
    lbl[L_PRIME] = pc;
    emit(ADDI(13, 13, 1));
    lbl[L_NEXT] = pc;
    emit(ADDI(11, 11, N));
    emit(JAL(0, off(L_OUTER)));
    lbl[L_DONE] = pc;
    emit(SLLI(16, 10, 2));
    emit(SW(13, 16, 12'h400));            // count[hart]
    emit(ADDI(17, 0, 1));
    emit(SW(17, 16, 12'h440));            // flag[hart]
    emit(BNE(10, 0, off(L_SPIN)));
    emit(ADDI(18, 0, 0));
    emit(ADDI(19, 0, 4*N));
    emit(ADDI(20, 0, 0));
    lbl[L_WAIT] = pc;
    emit(LW(21, 18, 12'h440));
    emit(BEQ(21, 0, off(L_WAIT)));
    emit(LW(22, 18, 12'h400));
    emit(ADD(20, 20, 22));                // load-use
    emit(ADDI(18, 18, 4));
    emit(BLT(18, 19, off(L_WAIT)));
    emit(SW(20, 0, 12'h480));
    // eight lines 8 kB apart: same L1 set and same L2 set
    emit(LUI(26, 2));
    emit(NOP());
    emit(LUI(23, 1));
    emit(ADDI(24, 0, 1));
    emit(ADDI(25, 0, 9));
    lbl[L_ST] = pc;
    emit(SW(24, 23, 0));
    emit(ADD(23, 23, 26));
    emit(ADDI(24, 24, 1));
    emit(BLT(24, 25, off(L_ST)));
    emit(LUI(23, 1));
    emit(ADDI(24, 0, 1));
    emit(ADDI(27, 0, 0));
    lbl[L_LD] = pc;
    emit(LW(28, 23, 0));
    emit(ADD(27, 27, 28));
    emit(ADD(23, 23, 26));
    emit(ADDI(24, 24, 1));
    emit(BLT(24, 25, off(L_LD)));
    // byte and halfword accesses
    emit(SW(0, 0, 12'h488));
    emit(ADDI(29, 0, -128));
    emit(SB(29, 0, 12'h489));
    emit(LB(30, 0, 12'h489));
    emit(LBU(31, 0, 12'h489));
    emit(SH(29, 0, 12'h48A));
    emit(LHU(5, 0, 12'h48A));
    emit(LW(6, 0, 12'h488));
    emit(LW(8, 0, 12'h480));              // total, read back through the cache
    emit(ADDI(7, 0, 12'h5A5));            // completion marker
    lbl[L_SPIN] = pc;
    emit(JAL(0, 0));
  endtask

  // ---------------- independent reference ----------------
  function automatic bit is_prime(input int n);
    for (int d = 2; d < n; d++) if (n % d == 0) return 0;
    return 1;
  endfunction

  // ---------------- register shadows and event counters ----------------
  logic [31:0] regs [N][32];
  longint cycles = 0;
  int c_load_use, c_forward, c_flush, c_mem_stall, c_fetch_bubble, c_l1_miss, c_l2_miss,
      c_l2_evict, c_snoop_wb, c_back_flush, c_shared, c_retire;
  bit done = 0;

  always @(posedge clk) if (!rst) begin
    cycles++;
    for (int c = 0; c < N; c++) begin
      if (wb_we[c]) regs[c][wb_rd[c]] <= wb_data[c];
      if (wb_we[c] && c == 0 && wb_rd[c] == 5'd7 && wb_data[c] == 32'h5A5) done = 1;
    end
    c_load_use     += $countones(ev_load_use);
    c_forward      += $countones(ev_forward);
    c_flush        += $countones(ev_flush);
    c_mem_stall    += $countones(ev_mem_stall);
    c_fetch_bubble += $countones(ev_fetch_bubble);
    c_retire       += $countones(ev_retire);
    c_l1_miss      += $countones(ev_l1_miss);
    c_l2_miss      += int'(ev_l2_miss);
    c_l2_evict     += int'(ev_l2_evict);
    c_snoop_wb     += int'(ev_snoop_wb);
    c_back_flush   += int'(ev_back_flush);
    c_shared       += int'(ev_shared_resp);
  end

  task automatic seen(input string what, input int n);
    checks++;
    if (n == 0) begin failures++; $display("FAIL mechanism never happened: %s", what); end
    else $display("  %-22s %0d", what, n);
  endtask

  initial begin
    for (int c = 0; c < N; c++) for (int r = 0; r < 32; r++) regs[c][r] = '0;
    prog_write = 0; prog_address = '0; prog_data = '0;
    build();   // first pass: labels
    build();   // second pass: offsets
    repeat (3) @(posedge clk);
    for (int i = 0; i < pc/4; i++) begin
      prog_write <= 1; prog_address <= 16'(i); prog_data <= prog[i];
      @(posedge clk);
    end
    // clear the data area the program uses
    for (int i = 16'h100; i < 16'h140; i++) begin
      prog_write <= 1; prog_address <= 16'(i); prog_data <= '0;
      @(posedge clk);
    end
    prog_write <= 0;
    @(posedge clk);
    rst <= 0;
    wait (done);
    repeat (20) @(posedge clk);

    begin
      automatic int total = 0;
      for (int h = 0; h < N; h++) begin
        automatic int cnt = 0;
        for (int n = h + 2; n < LIMIT; n += N) cnt += int'(is_prime(n));
        total += cnt;
        check($sformatf("hart %0d prime count", h), regs[h][13], 32'(cnt));
        check($sformatf("hart %0d mhartid", h), regs[h][10], 32'(h));
      end
      check("total primes (hart 0 sum)", regs[0][20], 32'(total));
      check("total read back", regs[0][8], 32'(total));
      check("sum over conflicting lines", regs[0][27], 32'd36);
      check("LB sign extension", regs[0][30], 32'hFFFFFF80);
      check("LBU zero extension", regs[0][31], 32'h00000080);
      check("LHU", regs[0][5], 32'h0000FF80);
      check("word after SB/SH", regs[0][6], 32'hFF808000);
    end
    $display("cycles=%0d retired=%0d", cycles, c_retire);
    seen("load-use stall", c_load_use);
    seen("forwarding", c_forward);
    seen("branch/jump flush", c_flush);
    seen("memory stall", c_mem_stall);
    seen("fetch bubble", c_fetch_bubble);
    seen("L1 miss", c_l1_miss);
    seen("L2 miss", c_l2_miss);
    seen("L2 eviction", c_l2_evict);
    seen("back-flush", c_back_flush);
    seen("snoop write-back", c_snoop_wb);
    seen("shared response", c_shared);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
