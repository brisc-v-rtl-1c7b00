// brisc_system: coherent multi-core RV32I system.
//
// N_CORES seven-stage pipelined cores (core7), each with a private L1
// instruction cache and L1 data cache (l1cache). All 2*N_CORES L1 caches
// share one bus to a shared, inclusive L2 cache (lxcache); the coherence
// controller owns that bus and keeps the L1 data copies coherent with MESI
// by snooping. Below the L2 a main_memory_interface turns line transfers into
// word accesses on an on-chip synchronous main memory (main_memory), which is
// initialised from PROGRAM and can also be written through the program port
// while the system is held in reset.
//
// Cache i*2 is core i's instruction cache, cache i*2+1 its data cache. All
// cores start at address 0; a program tells harts apart by reading mhartid.
// Default sizes are those of the platform's multi-core evaluation: 16 kB
// 4-way L1 caches (256 sets of four lines of four 32-bit words), a 32 kB
// 4-way shared L2 (512 sets) and a 256 kB main memory (2**16 words). Flush and invalidate
// requests exist on every L1 cache but RV32I has no instruction that issues
// them, so here they are tied off.
//
// Outputs are per-core event pulses and register-write probes, for counting
// and checking; the whole design is clocked by `clk` with synchronous,
// active-high `rst`.
module brisc_system
  import brisc_pkg::*;
#(
  parameter int    N_CORES         = 4,
  parameter int    ADDRESS_BITS    = 16,
  parameter int    L1_INDEX_BITS   = 8,
  parameter int    L1_WAYS         = 4,
  parameter int    L2_INDEX_BITS   = 9,
  parameter int    L2_WAYS         = 4,
  parameter int    OFFSET_BITS     = 2,
  parameter int    REPLACEMENT     = 0,
  parameter string PROGRAM         = ""
) (
  input  logic                    clk,
  input  logic                    rst,
  // program port of the main memory
  input  logic                    prog_write,
  input  logic [ADDRESS_BITS-1:0] prog_address,
  input  logic [31:0]             prog_data,
  // per-core probes
  output logic [N_CORES-1:0]      ev_retire,
  output logic [N_CORES-1:0]      ev_load_use,
  output logic [N_CORES-1:0]      ev_forward,
  output logic [N_CORES-1:0]      ev_flush,
  output logic [N_CORES-1:0]      ev_mem_stall,
  output logic [N_CORES-1:0]      ev_fetch_bubble,
  output logic [N_CORES-1:0]      wb_we,
  output logic [4:0]              wb_rd   [N_CORES],
  output logic [31:0]             wb_data [N_CORES],
  // cache and bus probes
  output logic [2*N_CORES-1:0]    ev_l1_hit,
  output logic [2*N_CORES-1:0]    ev_l1_miss,
  output logic                    ev_l2_hit,
  output logic                    ev_l2_miss,
  output logic                    ev_l2_evict,
  output logic                    ev_snoop_wb,
  output logic                    ev_back_flush,
  output logic                    ev_shared_resp
);
  localparam int NC    = 2 * N_CORES;
  localparam int LINE  = 32 << OFFSET_BITS;
  localparam int LADDR = ADDRESS_BITS - OFFSET_BITS;

  // ---------------- L1 <-> bus ----------------
  msg_e             l1_req_msg  [NC];
  logic [LADDR-1:0] l1_req_addr [NC];
  logic [LINE-1:0]  l1_req_data [NC];
  msg_e             l1_resp_msg [NC];
  logic [LINE-1:0]  l1_resp_data;
  msg_e             sn_msg      [NC];
  logic [LADDR-1:0] sn_addr;
  logic [NC-1:0]    sn_ack, sn_had, sn_dirty;
  logic [LINE-1:0]  sn_data     [NC];

  for (genvar c = 0; c < N_CORES; c++) begin : g_core
    logic                    i_read, i_ready, i_valid;
    logic [ADDRESS_BITS-1:0] i_addr, i_out_addr;
    logic [31:0]             i_rdata;
    logic                    d_read, d_write, d_ready, d_valid;
    logic [ADDRESS_BITS-1:0] d_addr, d_out_addr;
    logic [31:0]             d_wdata, d_rdata;
    logic [3:0]              d_be;

    core7 #(.CORE_ID(c), .ADDRESS_BITS(ADDRESS_BITS)) u_core (
      .clk, .rst,
      .i_read, .i_addr, .i_ready, .i_valid, .i_rdata, .i_out_addr,
      .d_read, .d_write, .d_addr, .d_wdata, .d_be, .d_ready, .d_valid, .d_rdata, .d_out_addr,
      .ev_retire(ev_retire[c]), .ev_load_use(ev_load_use[c]), .ev_forward(ev_forward[c]),
      .ev_flush(ev_flush[c]), .ev_mem_stall(ev_mem_stall[c]),
      .ev_fetch_bubble(ev_fetch_bubble[c]),
      .wb_we(wb_we[c]), .wb_rd(wb_rd[c]), .wb_data(wb_data[c]));

    l1cache #(.ADDRESS_BITS(ADDRESS_BITS), .INDEX_BITS(L1_INDEX_BITS),
              .OFFSET_BITS(OFFSET_BITS), .NUMBER_OF_WAYS(L1_WAYS),
              .REPLACEMENT_MODE(REPLACEMENT)) u_icache (
      .clk, .rst, .read(i_read), .write(1'b0), .flush(1'b0), .invalidate(1'b0),
      .address_in(i_addr), .data_in('0), .byte_en('0),
      .data_out(i_rdata), .out_address(i_out_addr), .valid(i_valid), .ready(i_ready),
      .mem_msg_out(l1_req_msg[2*c]), .mem_address_out(l1_req_addr[2*c]),
      .mem_data_out(l1_req_data[2*c]), .mem_msg_in(l1_resp_msg[2*c]),
      .mem_data_in(l1_resp_data),
      .snoop_msg_in(sn_msg[2*c]), .snoop_address_in(sn_addr), .snoop_ack(sn_ack[2*c]),
      .snoop_had_copy(sn_had[2*c]), .snoop_dirty(sn_dirty[2*c]), .snoop_data_out(sn_data[2*c]),
      .ev_hit(ev_l1_hit[2*c]), .ev_miss(ev_l1_miss[2*c]));

    l1cache #(.ADDRESS_BITS(ADDRESS_BITS), .INDEX_BITS(L1_INDEX_BITS),
              .OFFSET_BITS(OFFSET_BITS), .NUMBER_OF_WAYS(L1_WAYS),
              .REPLACEMENT_MODE(REPLACEMENT)) u_dcache (
      .clk, .rst, .read(d_read), .write(d_write), .flush(1'b0), .invalidate(1'b0),
      .address_in(d_addr), .data_in(d_wdata), .byte_en(d_be),
      .data_out(d_rdata), .out_address(d_out_addr), .valid(d_valid), .ready(d_ready),
      .mem_msg_out(l1_req_msg[2*c+1]), .mem_address_out(l1_req_addr[2*c+1]),
      .mem_data_out(l1_req_data[2*c+1]), .mem_msg_in(l1_resp_msg[2*c+1]),
      .mem_data_in(l1_resp_data),
      .snoop_msg_in(sn_msg[2*c+1]), .snoop_address_in(sn_addr), .snoop_ack(sn_ack[2*c+1]),
      .snoop_had_copy(sn_had[2*c+1]), .snoop_dirty(sn_dirty[2*c+1]),
      .snoop_data_out(sn_data[2*c+1]),
      .ev_hit(ev_l1_hit[2*c+1]), .ev_miss(ev_l1_miss[2*c+1]));
  end

  // ---------------- coherence controller / shared bus ----------------
  msg_e             l2_req_msg  [1];
  logic [LADDR-1:0] l2_req_addr [1];
  logic [LINE-1:0]  l2_req_data [1];
  msg_e             l2_resp_msg [1];
  logic [LINE-1:0]  l2_resp_data;
  logic             bf_req, bf_done, bf_dirty;
  logic [LADDR-1:0] bf_addr;
  logic [LINE-1:0]  bf_data;

  coherence_controller #(.N_CACHES(NC), .LADDR(LADDR), .LINE(LINE)) u_cc (
    .clk, .rst,
    .l1_msg_in(l1_req_msg), .l1_address_in(l1_req_addr), .l1_data_in(l1_req_data),
    .l1_msg_out(l1_resp_msg), .l1_data_out(l1_resp_data),
    .snoop_msg(sn_msg), .snoop_address(sn_addr), .snoop_ack(sn_ack),
    .snoop_had_copy(sn_had), .snoop_dirty(sn_dirty), .snoop_data(sn_data),
    .l2_msg_out(l2_req_msg[0]), .l2_address_out(l2_req_addr[0]), .l2_data_out(l2_req_data[0]),
    .l2_msg_in(l2_resp_msg[0]), .l2_data_in(l2_resp_data),
    .bf_req, .bf_address(bf_addr), .bf_done, .bf_dirty, .bf_data,
    .ev_snoop_wb, .ev_back_flush, .ev_shared_resp);

  // ---------------- shared L2 ----------------
  logic             mm_read, mm_write, mm_done;
  logic [LADDR-1:0] mm_addr;
  logic [LINE-1:0]  mm_wdata, mm_rdata;

  lxcache #(.ADDRESS_BITS(ADDRESS_BITS), .INDEX_BITS(L2_INDEX_BITS), .OFFSET_BITS(OFFSET_BITS),
            .NUMBER_OF_WAYS(L2_WAYS), .REPLACEMENT_MODE(REPLACEMENT), .NUM_PORTS(1)) u_l2 (
    .clk, .rst,
    .msg_in(l2_req_msg), .address_in(l2_req_addr), .data_in(l2_req_data),
    .msg_out(l2_resp_msg), .data_out(l2_resp_data),
    .bf_req, .bf_address(bf_addr), .bf_done, .bf_dirty, .bf_data,
    .mem_read(mm_read), .mem_write(mm_write), .mem_address(mm_addr),
    .mem_data_out(mm_wdata), .mem_done(mm_done), .mem_data_in(mm_rdata),
    .ev_hit(ev_l2_hit), .ev_miss(ev_l2_miss), .ev_evict(ev_l2_evict));

  // ---------------- main memory ----------------
  logic                    w_read, w_write;
  logic [ADDRESS_BITS-1:0] w_addr;
  logic [31:0]             w_wdata, w_rdata;

  main_memory_interface #(.ADDRESS_BITS(ADDRESS_BITS), .OFFSET_BITS(OFFSET_BITS)) u_mmi (
    .clk, .rst, .read(mm_read), .write(mm_write), .address(mm_addr), .data_in(mm_wdata),
    .data_out(mm_rdata), .done(mm_done),
    .mem_read(w_read), .mem_write(w_write), .mem_address(w_addr), .mem_data_out(w_wdata),
    .mem_data_in(w_rdata));

  main_memory #(.ADDRESS_BITS(ADDRESS_BITS), .PROGRAM(PROGRAM)) u_mem (
    .clk, .read(w_read), .write(w_write), .address(w_addr), .data_in(w_wdata),
    .data_out(w_rdata), .prog_write, .prog_address, .prog_data);
endmodule
