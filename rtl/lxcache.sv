// lxcache: lower-level (L2 or below) inclusive write-back cache with a
// round-robin multi-port front end.
//
// Organisation as in the L1: 2**INDEX_BITS sets of NUMBER_OF_WAYS ways,
// lines of 2**OFFSET_BITS words, a valid and a dirty bit per line, victims
// from replacement_controller (invalid ways first). NUM_PORTS request ports
// are served one request at a time, chosen round robin.
//
// Port protocol: a port drives a message (RD_REQ, WB_REQ, FLUSH_REQ,
// INVAL_REQ), a line address and line data and holds them until the cache
// answers with one cycle of RESP_E plus the line (RD) or ACK (others).
// RD and WB allocate on a miss; a WB carries a whole line, so it is installed
// without reading memory. FLUSH writes a dirty line to memory and drops it;
// INVAL drops it. Timing: one cycle to arbitrate, one to look up, then the
// memory traffic a miss needs, then one response cycle.
//
// Inclusion: before a valid victim is replaced, the cache asks the level
// above for a back-flush of that line (`bf_req` with `bf_address`, held until
// `bf_done`); copies above are invalidated and a dirty one comes back with
// `bf_dirty`/`bf_data` and is merged. A dirty victim is then written to
// memory. The memory side talks in whole lines to main_memory_interface.
//
// Follows the platform: same parameters as the L1, round-robin ports,
// inclusion with L2-issued flushes to the L1s on eviction, write-back with
// write-allocate. This design's own: the back-flush on every eviction of a
// valid line (no record is kept of which L1s hold it), and the hand-shakes.
module lxcache
  import brisc_pkg::*;
#(
  parameter int DATA_WIDTH       = 32,
  parameter int ADDRESS_BITS     = 16,
  parameter int INDEX_BITS       = 9,
  parameter int OFFSET_BITS      = 2,
  parameter int NUMBER_OF_WAYS   = 4,
  parameter int REPLACEMENT_MODE = 0,
  parameter int NUM_PORTS        = 1
) (
  input  logic clk,
  input  logic rst,
  // ports from the level above
  input  msg_e                                 msg_in     [NUM_PORTS],
  input  logic [ADDRESS_BITS-OFFSET_BITS-1:0]  address_in [NUM_PORTS],
  input  logic [(DATA_WIDTH<<OFFSET_BITS)-1:0] data_in    [NUM_PORTS],
  output msg_e                                 msg_out    [NUM_PORTS],
  output logic [(DATA_WIDTH<<OFFSET_BITS)-1:0] data_out,
  // back-flush towards the level above
  output logic                                 bf_req,
  output logic [ADDRESS_BITS-OFFSET_BITS-1:0]  bf_address,
  input  logic                                 bf_done,
  input  logic                                 bf_dirty,
  input  logic [(DATA_WIDTH<<OFFSET_BITS)-1:0] bf_data,
  // memory side (whole lines)
  output logic                                 mem_read,
  output logic                                 mem_write,
  output logic [ADDRESS_BITS-OFFSET_BITS-1:0]  mem_address,
  output logic [(DATA_WIDTH<<OFFSET_BITS)-1:0] mem_data_out,
  input  logic                                 mem_done,
  input  logic [(DATA_WIDTH<<OFFSET_BITS)-1:0] mem_data_in,
  // statistics
  output logic                                 ev_hit,
  output logic                                 ev_miss,
  output logic                                 ev_evict
);
  localparam int LINE     = DATA_WIDTH << OFFSET_BITS;
  localparam int SETS     = 1 << INDEX_BITS;
  localparam int LADDR    = ADDRESS_BITS - OFFSET_BITS;
  localparam int TAG_BITS = LADDR - INDEX_BITS;
  localparam int WAYB     = $clog2(NUMBER_OF_WAYS);
  localparam int PW       = $clog2(NUM_PORTS+1);

  logic [LINE-1:0]     data_arr [NUMBER_OF_WAYS][SETS];
  logic [TAG_BITS-1:0] tag_arr  [NUMBER_OF_WAYS][SETS];
  logic                vld_arr  [NUMBER_OF_WAYS][SETS];
  logic                dty_arr  [NUMBER_OF_WAYS][SETS];

  typedef enum logic [2:0] { X_IDLE, X_LOOKUP, X_BFLUSH, X_EVICT, X_FILL, X_FLUSH_WR, X_RESP }
    lx_state_e;
  lx_state_e st;

  logic [PW-1:0]    cur;
  msg_e             cur_msg;
  logic [LADDR-1:0] cur_addr;
  logic [LINE-1:0]  cur_data, resp_line, vic_line;
  logic [WAYB-1:0]  way;
  logic             resp_ack;

  logic [INDEX_BITS-1:0] idx;
  logic [TAG_BITS-1:0]   tag;
  assign idx = cur_addr[INDEX_BITS-1:0];
  assign tag = cur_addr[LADDR-1 -: TAG_BITS];

  // ---------------- arbitration ----------------
  logic [NUM_PORTS-1:0] reqv;
  logic [PW-1:0]        gidx;
  logic                 gany;
  always_comb for (int i = 0; i < NUM_PORTS; i++) reqv[i] = (msg_in[i] != NO_REQ);
  rr_arbiter #(.N(NUM_PORTS)) u_arb (.clk, .rst, .req(reqv), .advance(st == X_IDLE),
                                     .grant(), .grant_idx(gidx), .any(gany));

  // ---------------- lookup ----------------
  logic            hit, have_inv;
  logic [WAYB-1:0] hit_way, inv_way, lru_way, victim;
  always_comb begin
    hit = 1'b0; hit_way = '0; have_inv = 1'b0; inv_way = '0;
    for (int w = 0; w < NUMBER_OF_WAYS; w++)
      if (vld_arr[w][idx] && tag_arr[w][idx] == tag) begin hit = 1'b1; hit_way = WAYB'(w); end
    for (int w = NUMBER_OF_WAYS-1; w >= 0; w--)
      if (!vld_arr[w][idx]) begin have_inv = 1'b1; inv_way = WAYB'(w); end
  end
  assign victim = have_inv ? inv_way : lru_way;

  logic lookup_alloc;   // RD or WB hit, or the fill of a miss
  replacement_controller #(.NUMBER_OF_WAYS(NUMBER_OF_WAYS), .INDEX_BITS(INDEX_BITS),
                           .REPLACEMENT_MODE(REPLACEMENT_MODE)) u_repl (
    .clk, .rst, .access(lookup_alloc), .access_index(idx),
    .access_way(st == X_LOOKUP ? hit_way : way), .query_index(idx), .victim_way(lru_way));
  assign lookup_alloc = (st == X_LOOKUP && hit && (cur_msg == RD_REQ || cur_msg == WB_REQ))
                     || (st == X_FILL && (cur_msg == WB_REQ || mem_done));

  // ---------------- outputs ----------------
  assign bf_req     = (st == X_BFLUSH);
  assign bf_address = {tag_arr[way][idx], idx};

  assign mem_read     = (st == X_FILL) && cur_msg == RD_REQ;
  assign mem_write    = (st == X_EVICT) || (st == X_FLUSH_WR);
  assign mem_address  = (st == X_EVICT) ? {tag_arr[way][idx], idx} : cur_addr;
  assign mem_data_out = vic_line;

  always_comb begin
    for (int i = 0; i < NUM_PORTS; i++) msg_out[i] = NO_REQ;
    if (st == X_RESP) msg_out[cur] = resp_ack ? ACK : RESP_E;
  end
  assign data_out = resp_line;

  assign ev_hit   = (st == X_LOOKUP) && hit;
  assign ev_miss  = (st == X_LOOKUP) && !hit && (cur_msg == RD_REQ || cur_msg == WB_REQ);
  assign ev_evict = (st == X_BFLUSH) && bf_done;

  always_ff @(posedge clk) begin
    if (rst) begin
      st <= X_IDLE; cur <= '0; cur_msg <= NO_REQ; cur_addr <= '0; cur_data <= '0;
      resp_line <= '0; vic_line <= '0; way <= '0; resp_ack <= 1'b0;
      for (int w = 0; w < NUMBER_OF_WAYS; w++)
        for (int s = 0; s < SETS; s++) begin
          vld_arr[w][s] <= 1'b0; dty_arr[w][s] <= 1'b0; tag_arr[w][s] <= '0;
        end
    end else begin
      unique case (st)
        X_IDLE: if (gany) begin
          cur <= gidx; cur_msg <= msg_in[gidx]; cur_addr <= address_in[gidx];
          cur_data <= data_in[gidx]; st <= X_LOOKUP;
        end
        X_LOOKUP: begin
          resp_ack <= (cur_msg != RD_REQ);
          if (hit) begin
            way <= hit_way;
            unique case (cur_msg)
              RD_REQ: begin resp_line <= data_arr[hit_way][idx]; st <= X_RESP; end
              WB_REQ: begin
                data_arr[hit_way][idx] <= cur_data; dty_arr[hit_way][idx] <= 1'b1;
                st <= X_RESP;
              end
              FLUSH_REQ: begin
                vic_line <= data_arr[hit_way][idx];
                vld_arr[hit_way][idx] <= 1'b0;
                st <= dty_arr[hit_way][idx] ? X_FLUSH_WR : X_RESP;
              end
              default: begin vld_arr[hit_way][idx] <= 1'b0; st <= X_RESP; end
            endcase
          end else if (cur_msg == RD_REQ || cur_msg == WB_REQ) begin
            way      <= victim;
            vic_line <= data_arr[victim][idx];
            st       <= vld_arr[victim][idx] ? X_BFLUSH : X_FILL;
          end else begin
            st <= X_RESP;                        // flush/invalidate of an absent line
          end
        end
        X_BFLUSH: if (bf_done) begin
          if (bf_dirty) vic_line <= bf_data;
          vld_arr[way][idx] <= 1'b0;
          st <= (dty_arr[way][idx] || bf_dirty) ? X_EVICT : X_FILL;
        end
        X_EVICT: if (mem_done) st <= X_FILL;
        X_FILL: begin
          if (cur_msg == WB_REQ) begin
            data_arr[way][idx] <= cur_data; tag_arr[way][idx] <= tag;
            vld_arr[way][idx] <= 1'b1; dty_arr[way][idx] <= 1'b1;
            st <= X_RESP;
          end else if (mem_done) begin
            data_arr[way][idx] <= mem_data_in; tag_arr[way][idx] <= tag;
            vld_arr[way][idx] <= 1'b1; dty_arr[way][idx] <= 1'b0;
            resp_line <= mem_data_in;
            st <= X_RESP;
          end
        end
        X_FLUSH_WR: if (mem_done) st <= X_RESP;
        X_RESP: st <= X_IDLE;
        default: st <= X_IDLE;
      endcase
    end
  end
endmodule
