// prime_run: one multi-core system running the parallel prime-counting
// program, for the core-count scaling testbench.
//
// The system is built with NC cores and otherwise default sizes. The
// program, assembled here, has hart h test the odd numbers 3+2h, 3+2h+2NC,
// ... below LIMIT by trial division (remainder by repeated subtraction),
// store its count and a flag in shared lines; hart 0 waits for every flag,
// adds the counts plus one (for the prime 2) and writes the total to x20,
// then 0x5A5 to x7. Outputs: `done`, the total and the cycle count from
// reset release to completion. The program is written into main memory
// through the program port while the system is held in reset.
module prime_run
  import rv_asm_pkg::*;
#(
  parameter int NC    = 1,
  parameter int LIMIT = 300
) (
  input  logic        clk,
  output logic        done,
  output logic [31:0] total,
  output int          cycles
);
  logic        rst = 1;
  logic        prog_write;
  logic [15:0] prog_address;
  logic [31:0] prog_data;
  logic [NC-1:0] ev_retire, ev_load_use, ev_forward, ev_flush, ev_mem_stall, ev_fetch_bubble, wb_we;
  logic [4:0]  wb_rd   [NC];
  logic [31:0] wb_data [NC];
  logic [2*NC-1:0] ev_l1_hit, ev_l1_miss;
  logic ev_l2_hit, ev_l2_miss, ev_l2_evict, ev_snoop_wb, ev_back_flush, ev_shared_resp;

  brisc_system #(.N_CORES(NC)) sys (.*);

  logic [31:0] prog [128];
  int          lbl  [16];
  int          pc;
  task automatic emit(input logic [31:0] w); prog[pc/4] = w; pc += 4; endtask
  function automatic int off(input int k); return lbl[k] - pc; endfunction
  localparam int L_OUTER=0, L_D=1, L_SUB=2, L_CHK=3, L_PRIME=4, L_NEXT=5, L_DONE=6,
                 L_WAIT=7, L_SPIN=8;

  task automatic build();
    pc = 0;
    emit(CSRR_MHARTID(10));
    emit(SLLI(11, 10, 1));
    emit(ADDI(11, 11, 3));                // n = 3 + 2*hart
    emit(ADDI(12, 0, LIMIT));
    emit(ADDI(13, 0, 0));
    lbl[L_OUTER] = pc;
    emit(BGE(11, 12, off(L_DONE)));
    emit(ADDI(14, 0, 2));
    lbl[L_D] = pc;
    emit(BGE(14, 11, off(L_PRIME)));
    emit(ADD(15, 11, 0));
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
    emit(ADDI(11, 11, 2 * NC));
    emit(JAL(0, off(L_OUTER)));
    lbl[L_DONE] = pc;
    emit(SLLI(16, 10, 2));
    emit(SW(13, 16, 12'h400));            // count[hart]
    emit(ADDI(17, 0, 1));
    emit(SW(17, 16, 12'h440));            // flag[hart]
    emit(BNE(10, 0, off(L_SPIN)));
    emit(ADDI(18, 0, 0));
    emit(ADDI(19, 0, 4 * NC));
    emit(ADDI(20, 0, 1));                 // the prime 2
    lbl[L_WAIT] = pc;
    emit(LW(21, 18, 12'h440));
    emit(BEQ(21, 0, off(L_WAIT)));
    emit(LW(22, 18, 12'h400));
    emit(ADD(20, 20, 22));
    emit(ADDI(18, 18, 4));
    emit(BLT(18, 19, off(L_WAIT)));
    emit(ADDI(7, 0, 12'h5A5));
    lbl[L_SPIN] = pc;
    emit(JAL(0, 0));
  endtask

  always @(posedge clk) if (!rst && !done) begin
    cycles++;
    if (wb_we[0] && wb_rd[0] == 5'd20) total <= wb_data[0];
    if (wb_we[0] && wb_rd[0] == 5'd7 && wb_data[0] == 32'h5A5) done <= 1;
  end

  initial begin
    done = 0; total = 0; cycles = 0;
    prog_write = 0; prog_address = '0; prog_data = '0;
    build();
    build();
    repeat (3) @(posedge clk);
    for (int i = 0; i < pc / 4; i++) begin
      prog_write <= 1; prog_address <= 16'(i); prog_data <= prog[i];
      @(posedge clk);
    end
    for (int i = 16'h100; i < 16'h120; i++) begin
      prog_write <= 1; prog_address <= 16'(i); prog_data <= '0;
      @(posedge clk);
    end
    prog_write <= 0;
    @(posedge clk);
    rst <= 0;
  end
endmodule
