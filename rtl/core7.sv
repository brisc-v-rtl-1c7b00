// core7: seven-stage pipelined RV32I core with data forwarding.
//
// Stages: Fetch1 (PC, next-PC select, instruction request), Fetch2 (wait for
// the instruction memory; "I-Valid" compares the returned address with the
// PC), Decode (control unit, register file, immediate select, bypass mux),
// Execute (ALU, branch/jump resolution), Mem1 (data request), Mem2 (wait for
// data; "D-Valid" compares the returned address with the request) and WB.
// The registers between the memory address inputs and data outputs are what
// let a synchronous memory or a cache hit answer without inserted NOPs.
//
// Memory interfaces (instruction and data alike): a request (read/write,
// word address, data, byte enables) is accepted on a clock edge where
// `ready` is high; the answer comes later as `valid` with the word and its
// address. Normally that is the next cycle; on a cache miss `valid` stays low
// and the core waits. A missing instruction turns into bubbles; a missing data
// word freezes the whole pipeline until it arrives.
//
// Hazards: values are forwarded to Decode from Execute, Mem1 and Mem2
// (hazard_unit); a load-use dependence stalls Decode until the load's data
// reaches Mem2. There is no branch predictor: fetch continues at PC+4 and a
// taken branch or jump, resolved in Execute, squashes Fetch2 and Decode and
// requests the target in the same cycle, so it costs three bubbles, as the
// platform states for its seven-stage core. Stage names and the valid-check structure follow the
// platform's seven-stage diagram; the exact stall/hold registers, the byte
// enables on the data interface and the mhartid read are this design's own.
// Addresses on the memory ports are word addresses of ADDRESS_BITS bits.
module core7
  import brisc_pkg::*;
#(
  parameter int          CORE_ID      = 0,
  parameter int          ADDRESS_BITS = 16,
  parameter logic [31:0] RESET_PC     = 32'h0,
  parameter bit          FORWARDING   = 1'b1
) (
  input  logic                    clk,
  input  logic                    rst,
  // instruction memory interface
  output logic                    i_read,
  output logic [ADDRESS_BITS-1:0] i_addr,
  input  logic                    i_ready,
  input  logic                    i_valid,
  input  logic [31:0]             i_rdata,
  input  logic [ADDRESS_BITS-1:0] i_out_addr,
  // data memory interface
  output logic                    d_read,
  output logic                    d_write,
  output logic [ADDRESS_BITS-1:0] d_addr,
  output logic [31:0]             d_wdata,
  output logic [3:0]              d_be,
  input  logic                    d_ready,
  input  logic                    d_valid,
  input  logic [31:0]             d_rdata,
  input  logic [ADDRESS_BITS-1:0] d_out_addr,
  // event pulses, one per cycle in which they happen
  output logic                    ev_retire,
  output logic                    ev_load_use,
  output logic                    ev_forward,
  output logic                    ev_flush,
  output logic                    ev_mem_stall,
  output logic                    ev_fetch_bubble,
  // architectural state probe (register write port)
  output logic                    wb_we,
  output logic [4:0]              wb_rd,
  output logic [31:0]             wb_data
);
  // ---------------- pipeline registers ----------------
  logic [31:0] pc;
  logic        f2_valid, f2_have;
  logic [31:0] f2_pc, f2_instr;
  logic        d_valid_q;
  logic [31:0] d_pc, d_instr;
  logic        e_valid;
  logic [31:0] e_pc, e_imm, e_op1, e_op2;
  ctrl_t       e_ctrl;
  logic [4:0]  e_rd;
  logic        m1_valid;
  ctrl_t       m1_ctrl;
  logic [31:0] m1_result, m1_store;
  logic [4:0]  m1_rd;
  logic        m2_valid, m2_have;
  ctrl_t       m2_ctrl;
  logic [31:0] m2_result, m2_data;
  logic [4:0]  m2_rd;
  logic        w_valid;

  // ---------------- control signals ----------------
  logic freeze, hz_stall, d_move, f2_move, f2_free, flush, issue_i;
  logic [31:0] fetch_pc;

  // ---------------- Fetch 2 ----------------
  logic        f2_match, f2_avail;
  logic [31:0] f2_cur;
  assign f2_match = f2_valid && i_valid && (i_out_addr == f2_pc[ADDRESS_BITS+1:2]);
  assign f2_avail = f2_valid && (f2_have || f2_match);
  assign f2_cur   = f2_have ? f2_instr : i_rdata;

  // ---------------- Decode ----------------
  ctrl_t       dc_ctrl;
  logic [31:0] dc_imm, rf1, rf2, op1, op2;
  logic [4:0]  dc_rs1, dc_rs2, dc_rd;
  logic        fwd1, fwd2;

  control_unit u_ctrl (.instr(d_instr), .ctrl(dc_ctrl), .imm(dc_imm),
                       .rs1(dc_rs1), .rs2(dc_rs2), .rd(dc_rd));

  regfile u_rf (.clk, .rst, .rs1(dc_rs1), .rs2(dc_rs2), .rdata1(rf1), .rdata2(rf2),
                .we(wb_we), .rd(wb_rd), .wdata(wb_data));

  // ---------------- Execute ----------------
  logic [31:0] alu_a, alu_b, alu_y, e_result, e_target;
  logic        alu_take, take;

  assign alu_a = e_ctrl.alu_src_pc  ? e_pc  : e_op1;
  assign alu_b = e_ctrl.alu_src_imm ? e_imm : e_op2;

  alu u_alu (.op(e_ctrl.alu_op), .a(alu_a), .b(alu_b), .branch(e_ctrl.branch),
             .ra(e_op1), .rb(e_op2), .result(alu_y), .take(alu_take));

  always_comb begin
    unique case (e_ctrl.wb_sel)
      WB_PC4:  e_result = e_pc + 32'd4;
      WB_CSR:  e_result = 32'(CORE_ID);
      default: e_result = alu_y;
    endcase
  end
  assign e_target = e_ctrl.jalr ? {alu_y[31:1], 1'b0} : alu_y;
  assign take     = e_valid && alu_take;

  // ---------------- Mem 2 ----------------
  logic        m2_mem, m2_match, m2_done, m2_wait;
  logic [31:0] m2_word, m2_load, m2_final;
  assign m2_mem   = m2_valid && (m2_ctrl.mem_read || m2_ctrl.mem_write);
  assign m2_match = d_valid && (d_out_addr == m2_result[ADDRESS_BITS+1:2]);
  assign m2_done  = !m2_mem || m2_have || m2_match;
  assign m2_wait  = m2_mem && !m2_done;
  assign m2_word  = m2_have ? m2_data : d_rdata;

  always_comb begin
    logic [31:0] sh;
    sh = m2_word >> {m2_result[1:0], 3'b000};
    unique case (m2_ctrl.mem_funct3)
      3'b000:  m2_load = {{24{sh[7]}},  sh[7:0]};
      3'b001:  m2_load = {{16{sh[15]}}, sh[15:0]};
      3'b100:  m2_load = {24'b0, sh[7:0]};
      3'b101:  m2_load = {16'b0, sh[15:0]};
      default: m2_load = m2_word;
    endcase
  end
  assign m2_final = m2_ctrl.mem_read ? m2_load : m2_result;

  // ---------------- Mem 1: data request ----------------
  logic m1_mem;
  assign m1_mem  = m1_valid && (m1_ctrl.mem_read || m1_ctrl.mem_write);
  assign d_read  = m1_valid && m1_ctrl.mem_read  && !m2_wait;
  assign d_write = m1_valid && m1_ctrl.mem_write && !m2_wait;
  assign d_addr  = m1_result[ADDRESS_BITS+1:2];
  assign d_wdata = m1_store << {m1_result[1:0], 3'b000};
  always_comb begin
    unique case (m1_ctrl.mem_funct3[1:0])
      2'b00:   d_be = 4'b0001 << m1_result[1:0];
      2'b01:   d_be = m1_result[1] ? 4'b1100 : 4'b0011;
      default: d_be = 4'b1111;
    endcase
  end

  // ---------------- hazards ----------------
  logic [2:0]  st_writes, st_ready;
  logic [4:0]  st_rd   [3];
  logic [31:0] st_value[3];
  assign st_writes = {m2_valid && m2_ctrl.reg_write, m1_valid && m1_ctrl.reg_write,
                      e_valid && e_ctrl.reg_write};
  assign st_ready  = {!m2_ctrl.mem_read || m2_have || m2_match, !m1_ctrl.mem_read,
                      !e_ctrl.mem_read};
  assign st_rd     = '{e_rd, m1_rd, m2_rd};
  assign st_value  = '{e_result, m1_result, m2_final};

  logic hz_raw;
  hazard_unit #(.FORWARDING(FORWARDING)) u_hz (
    .rs1(dc_rs1), .rs2(dc_rs2), .uses_rs1(dc_ctrl.uses_rs1), .uses_rs2(dc_ctrl.uses_rs2),
    .rf_rdata1(rf1), .rf_rdata2(rf2), .st_writes, .st_rd, .st_ready, .st_value,
    .op1, .op2, .stall(hz_raw), .fwd1, .fwd2);

  assign hz_stall = d_valid_q && hz_raw;
  assign freeze   = m2_wait || (m1_mem && !d_ready);
  assign flush    = take && !freeze;
  assign d_move   = !freeze && !hz_stall;
  assign f2_move  = d_move && f2_avail && !flush;
  assign f2_free  = !f2_valid || f2_move || flush;
  assign issue_i  = f2_free && i_ready;
  // on a taken branch/jump the target is requested in the same cycle
  assign fetch_pc = flush ? e_target : pc;

  assign i_read = issue_i;
  assign i_addr = fetch_pc[ADDRESS_BITS+1:2];

  // ---------------- sequential ----------------
  always_ff @(posedge clk) begin
    if (rst) begin
      pc <= RESET_PC;
      f2_valid <= 1'b0; f2_have <= 1'b0; f2_pc <= '0; f2_instr <= '0;
      d_valid_q <= 1'b0; d_pc <= '0; d_instr <= 32'h00000013;
      e_valid <= 1'b0; e_pc <= '0; e_imm <= '0; e_op1 <= '0; e_op2 <= '0;
      e_ctrl <= '0; e_rd <= '0;
      m1_valid <= 1'b0; m1_ctrl <= '0; m1_result <= '0; m1_store <= '0; m1_rd <= '0;
      m2_valid <= 1'b0; m2_have <= 1'b0; m2_ctrl <= '0; m2_result <= '0;
      m2_data <= '0; m2_rd <= '0;
      w_valid <= 1'b0; wb_we <= 1'b0; wb_rd <= '0; wb_data <= '0;
    end else begin
      // Fetch 1 / Fetch 2
      if (issue_i) begin
        pc <= fetch_pc + 32'd4;
        f2_valid <= 1'b1; f2_have <= 1'b0; f2_pc <= fetch_pc;
      end else if (flush) begin
        pc <= e_target;
        f2_valid <= 1'b0; f2_have <= 1'b0;
      end else if (f2_move) begin
        f2_valid <= 1'b0; f2_have <= 1'b0;
      end else if (f2_match && !f2_have) begin
        f2_have <= 1'b1; f2_instr <= i_rdata;
      end

      // Decode
      if (flush) begin
        d_valid_q <= 1'b0;
      end else if (d_move) begin
        d_valid_q <= f2_avail;
        d_pc      <= f2_pc;
        d_instr   <= f2_avail ? f2_cur : 32'h00000013;
      end

      // Execute
      if (!freeze) begin
        e_valid <= d_valid_q && !hz_stall && !flush;
        e_pc    <= d_pc;
        e_ctrl  <= dc_ctrl;
        e_imm   <= dc_imm;
        e_op1   <= op1;
        e_op2   <= op2;
        e_rd    <= dc_rd;
      end

      // Mem 1
      if (!freeze) begin
        m1_valid  <= e_valid;
        m1_ctrl   <= e_ctrl;
        m1_result <= e_result;
        m1_store  <= e_op2;
        m1_rd     <= e_rd;
      end

      // Mem 2
      if (!freeze) begin
        m2_valid  <= m1_valid;
        m2_ctrl   <= m1_ctrl;
        m2_result <= m1_result;
        m2_rd     <= m1_rd;
        m2_have   <= 1'b0;
      end else if (m2_mem && !m2_have && m2_match) begin
        m2_have <= 1'b1;
        m2_data <= d_rdata;
      end

      // Write back
      w_valid <= !freeze && m2_valid;
      wb_we   <= !freeze && m2_valid && m2_ctrl.reg_write;
      wb_rd   <= m2_rd;
      wb_data <= m2_final;
    end
  end

  // ---------------- events ----------------
  assign ev_retire       = w_valid;
  assign ev_load_use     = hz_stall && !freeze;
  assign ev_forward      = d_valid_q && !hz_stall && !freeze && (fwd1 || fwd2);
  assign ev_flush        = flush;
  assign ev_mem_stall    = freeze;
  assign ev_fetch_bubble = d_move && !f2_avail && !flush;

  // A data request is never issued while the previous one is still unanswered.
  assert property (@(posedge clk) disable iff (rst) (d_read || d_write) |-> !m2_wait);
endmodule
