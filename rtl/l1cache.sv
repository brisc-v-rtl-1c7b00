// l1cache: level-1 cache between a core and the shared bus, with MESI
// coherence and an independent snooper.
//
// Organisation: 2**INDEX_BITS sets of NUMBER_OF_WAYS ways; each line holds
// 2**OFFSET_BITS words of DATA_WIDTH bits, a tag and a 2-bit MESI state.
// Policy: write-back with write-allocate; victims chosen by
// replacement_controller (true LRU or random), invalid ways first.
//
// Processor side: read, write, flush and invalidate requests with a word
// address, write data and byte enables are accepted on a clock edge where
// `ready` is high. The lookup happens in the following cycle; on a hit
// `valid` rises in that cycle with the word and its address (`out_address`)
// and, if nothing blocks, `ready` stays high so a new request is accepted in
// the same cycle: two requests are in flight in the pipelined fashion the
// platform describes, one being looked up, one being accepted. On a miss
// `ready` falls until the line is installed; the lookup is then repeated and
// completes as a hit. Writes also answer with `valid`. A flush or invalidate
// removes the line containing the address from every cache in the system (a
// flush writes a dirty copy back first) and answers with `valid`.
//
// Bus side (towards the coherence controller and L2): the cache drives a
// request message, line address and line data, and holds them until the
// controller answers with a response message (RESP_S/E/M with the line, or
// ACK). Requests: WB_REQ (dirty victim), RD_REQ (read miss), RFO_REQ (write
// miss, ownership), UPG_REQ (write to a SHARED line), FLUSH_REQ, INVAL_REQ.
//
// Snooper: when the controller broadcasts a message and line address on the
// snoop inputs (one cycle), the snooper looks the line up through its own
// read port, answers in the same cycle (ack, whether it held the line, and the
// line if it was MODIFIED) and updates the state at the clock edge: a read
// turns MODIFIED/EXCLUSIVE into SHARED, every other message invalidates.
// A snoop has priority: a processor access is not completed in a cycle with
// a snoop. If a snoop takes a MODIFIED line whose write-back (victim or
// flush) is waiting for the bus, the snooper's copy is the one that reaches
// the L2 and the waiting write-back is dropped, so stale data never
// overwrites newer data. Storage is written as arrays, one per way (BRAM-like, with a
// second read port for the snooper).
//
// Follows the platform: parameter names, MESI, write-back/write-allocate,
// the message kinds, snooper priority, the valid/ready processor interface.
// This design's own: the message encodings, the hand-shake with the
// controller, the byte enables, the retry-after-fill miss flow, and answering
// an ownership request with the line (UPG is served like RFO, which keeps it
// correct if the SHARED copy is invalidated while the request waits).
module l1cache
  import brisc_pkg::*;
#(
  parameter int DATA_WIDTH       = 32,
  parameter int ADDRESS_BITS     = 16,
  parameter int INDEX_BITS       = 8,
  parameter int OFFSET_BITS      = 2,
  parameter int NUMBER_OF_WAYS   = 4,
  parameter int REPLACEMENT_MODE = 0
) (
  input  logic                    clk,
  input  logic                    rst,
  // processor side
  input  logic                    read,
  input  logic                    write,
  input  logic                    flush,
  input  logic                    invalidate,
  input  logic [ADDRESS_BITS-1:0] address_in,
  input  logic [DATA_WIDTH-1:0]   data_in,
  input  logic [DATA_WIDTH/8-1:0] byte_en,
  output logic [DATA_WIDTH-1:0]   data_out,
  output logic [ADDRESS_BITS-1:0] out_address,
  output logic                    valid,
  output logic                    ready,
  // bus side: request and response
  output msg_e                                         mem_msg_out,
  output logic [ADDRESS_BITS-OFFSET_BITS-1:0]          mem_address_out,
  output logic [(DATA_WIDTH<<OFFSET_BITS)-1:0]         mem_data_out,
  input  msg_e                                         mem_msg_in,
  input  logic [(DATA_WIDTH<<OFFSET_BITS)-1:0]         mem_data_in,
  // snooper
  input  msg_e                                         snoop_msg_in,
  input  logic [ADDRESS_BITS-OFFSET_BITS-1:0]          snoop_address_in,
  output logic                                         snoop_ack,
  output logic                                         snoop_had_copy,
  output logic                                         snoop_dirty,
  output logic [(DATA_WIDTH<<OFFSET_BITS)-1:0]         snoop_data_out,
  // statistics
  output logic                                         ev_hit,
  output logic                                         ev_miss
);
  localparam int LINE     = DATA_WIDTH << OFFSET_BITS;
  localparam int SETS     = 1 << INDEX_BITS;
  localparam int TAG_BITS = ADDRESS_BITS - INDEX_BITS - OFFSET_BITS;
  localparam int WAYB     = $clog2(NUMBER_OF_WAYS);
  localparam int LADDR    = ADDRESS_BITS - OFFSET_BITS;
  localparam int NBYTES   = DATA_WIDTH / 8;

  logic [LINE-1:0]     data_arr  [NUMBER_OF_WAYS][SETS];
  logic [TAG_BITS-1:0] tag_arr   [NUMBER_OF_WAYS][SETS];
  mesi_e               state_arr [NUMBER_OF_WAYS][SETS];

  typedef enum logic [2:0] { S_IDLE, S_WB, S_FETCH, S_FL_WB, S_FL_SEND } l1_state_e;
  l1_state_e st;

  // pending processor request (lookup stage)
  logic                    p_valid, p_read, p_write, p_flush, p_inval;
  logic [ADDRESS_BITS-1:0] p_addr;
  logic [DATA_WIDTH-1:0]   p_data;
  logic [NBYTES-1:0]       p_be;

  logic [INDEX_BITS-1:0]  p_idx;
  logic [TAG_BITS-1:0]    p_tag;
  logic [OFFSET_BITS-1:0] p_off;
  assign p_off = p_addr[OFFSET_BITS-1:0];
  assign p_idx = p_addr[OFFSET_BITS +: INDEX_BITS];
  assign p_tag = p_addr[ADDRESS_BITS-1 -: TAG_BITS];

  // ---------------- processor-side lookup ----------------
  logic            hit;
  logic [WAYB-1:0] hit_way;
  mesi_e           hit_state;
  always_comb begin
    hit = 1'b0; hit_way = '0;
    for (int w = 0; w < NUMBER_OF_WAYS; w++)
      if (state_arr[w][p_idx] != ST_I && tag_arr[w][p_idx] == p_tag) begin
        hit = 1'b1; hit_way = WAYB'(w);
      end
  end
  assign hit_state = state_arr[hit_way][p_idx];

  logic            have_inv;
  logic [WAYB-1:0] inv_way, lru_way, victim;
  always_comb begin
    have_inv = 1'b0; inv_way = '0;
    for (int w = NUMBER_OF_WAYS-1; w >= 0; w--)
      if (state_arr[w][p_idx] == ST_I) begin have_inv = 1'b1; inv_way = WAYB'(w); end
  end
  assign victim = have_inv ? inv_way : lru_way;

  logic            repl_access;
  logic [WAYB-1:0] repl_way;
  replacement_controller #(.NUMBER_OF_WAYS(NUMBER_OF_WAYS), .INDEX_BITS(INDEX_BITS),
                           .REPLACEMENT_MODE(REPLACEMENT_MODE)) u_repl (
    .clk, .rst, .access(repl_access), .access_index(p_idx), .access_way(repl_way),
    .query_index(p_idx), .victim_way(lru_way));

  logic [WAYB-1:0] m_way;   // way being refilled or written back

  // ---------------- snooper lookup (second read port) ----------------
  logic                   sn_active, sn_hit;
  logic [WAYB-1:0]        sn_way;
  logic [INDEX_BITS-1:0]  sn_idx;
  logic [TAG_BITS-1:0]    sn_tag;
  assign sn_active = (snoop_msg_in != NO_REQ);
  assign sn_idx    = snoop_address_in[INDEX_BITS-1:0];
  assign sn_tag    = snoop_address_in[LADDR-1 -: TAG_BITS];
  always_comb begin
    sn_hit = 1'b0; sn_way = '0;
    for (int w = 0; w < NUMBER_OF_WAYS; w++)
      if (state_arr[w][sn_idx] != ST_I && tag_arr[w][sn_idx] == sn_tag) begin
        sn_hit = 1'b1; sn_way = WAYB'(w);
      end
  end
  // A snoop that finds the line this cache is about to write back
  // (victim or flushed line) takes its data itself; the queued WB is dropped.
  logic sn_on_victim;
  assign sn_on_victim = sn_active && sn_hit && sn_way == m_way && sn_idx == p_idx &&
                        state_arr[sn_way][sn_idx] == ST_M;
  assign snoop_ack      = sn_active;
  assign snoop_had_copy = sn_active && sn_hit;
  assign snoop_dirty    = sn_active && sn_hit && state_arr[sn_way][sn_idx] == ST_M;
  assign snoop_data_out = data_arr[sn_way][sn_idx];

  // ---------------- request completion in IDLE ----------------
  logic do_read_hit, do_write_hit, start_miss, start_flush, complete, p_flush_done;
  always_comb begin
    do_read_hit  = 1'b0; do_write_hit = 1'b0; start_miss = 1'b0; start_flush = 1'b0;
    if (st == S_IDLE && p_valid && !sn_active) begin
      if (p_flush || p_inval)           start_flush  = 1'b1;
      else if (hit && p_read)           do_read_hit  = 1'b1;
      else if (hit && p_write && (hit_state == ST_M || hit_state == ST_E))
                                        do_write_hit = 1'b1;
      else                              start_miss   = 1'b1;
    end
  end
  assign complete = do_read_hit || do_write_hit;
  assign ready    = (st == S_IDLE) && (!p_valid || complete);

  logic [LINE-1:0] hit_line;
  assign hit_line    = data_arr[hit_way][p_idx];
  assign data_out    = hit_line[p_off*DATA_WIDTH +: DATA_WIDTH];
  assign out_address = p_addr;
  assign p_flush_done = (st == S_FL_SEND) && (mem_msg_in == ACK);
  assign valid        = complete || p_flush_done;

  assign repl_access = complete;
  assign repl_way    = hit_way;
  assign ev_hit      = complete;
  assign ev_miss     = start_miss;

  // line with the pending write merged in
  logic [LINE-1:0] merged;
  always_comb begin
    merged = hit_line;
    for (int b = 0; b < NBYTES; b++)
      if (p_be[b]) merged[p_off*DATA_WIDTH + b*8 +: 8] = p_data[b*8 +: 8];
  end

  // ---------------- miss bookkeeping ----------------
  msg_e             m_msg;
  logic [LADDR-1:0] wb_addr;
  logic [LINE-1:0]  wb_data;

  always_comb begin
    mem_msg_out = NO_REQ; mem_address_out = p_addr[ADDRESS_BITS-1:OFFSET_BITS];
    mem_data_out = wb_data;
    unique case (st)
      S_WB, S_FL_WB: begin mem_msg_out = WB_REQ; mem_address_out = wb_addr; end
      S_FETCH:       mem_msg_out = m_msg;
      S_FL_SEND:     mem_msg_out = p_flush ? FLUSH_REQ : INVAL_REQ;
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      st <= S_IDLE;
      p_valid <= 1'b0; p_read <= 1'b0; p_write <= 1'b0; p_flush <= 1'b0; p_inval <= 1'b0;
      p_addr <= '0; p_data <= '0; p_be <= '0;
      m_way <= '0; m_msg <= NO_REQ; wb_addr <= '0; wb_data <= '0;
      for (int w = 0; w < NUMBER_OF_WAYS; w++)
        for (int s = 0; s < SETS; s++) begin
          state_arr[w][s] <= ST_I;
          tag_arr[w][s]   <= '0;
        end
    end else begin
      // accept a new processor request
      if (ready) begin
        p_valid <= read || write || flush || invalidate;
        p_read  <= read;  p_write <= write; p_flush <= flush; p_inval <= invalidate;
        p_addr  <= address_in; p_data <= data_in; p_be <= byte_en;
      end else if (p_flush_done) begin
        p_valid <= 1'b0;
      end

      if (do_write_hit) begin
        data_arr[hit_way][p_idx]  <= merged;
        state_arr[hit_way][p_idx] <= ST_M;
      end

      unique case (st)
        S_IDLE: begin
          if (start_miss) begin
            if (hit) begin                       // write to a SHARED line
              m_way <= hit_way; m_msg <= UPG_REQ; st <= S_FETCH;
            end else begin
              m_way   <= victim;
              m_msg   <= p_write ? RFO_REQ : RD_REQ;
              wb_addr <= {tag_arr[victim][p_idx], p_idx};
              wb_data <= data_arr[victim][p_idx];
              st      <= (state_arr[victim][p_idx] == ST_M) ? S_WB : S_FETCH;
            end
          end else if (start_flush) begin
            m_way   <= hit_way;
            wb_addr <= p_addr[ADDRESS_BITS-1:OFFSET_BITS];
            wb_data <= hit_line;
            if (hit && hit_state == ST_M && p_flush) begin
              st <= S_FL_WB;                     // stays MODIFIED until written back
            end else begin
              if (hit) state_arr[hit_way][p_idx] <= ST_I;
              st <= S_FL_SEND;
            end
          end
        end
        S_WB: if (mem_msg_in == ACK) begin
          state_arr[m_way][p_idx] <= ST_I;       // victim now lives below
          st <= S_FETCH;
        end else if (sn_on_victim) begin
          st <= S_FETCH;                         // snooper already wrote it back
        end
        S_FETCH: if (mem_msg_in == RESP_S || mem_msg_in == RESP_E || mem_msg_in == RESP_M) begin
          data_arr[m_way][p_idx]  <= mem_data_in;
          tag_arr[m_way][p_idx]   <= p_tag;
          state_arr[m_way][p_idx] <= (mem_msg_in == RESP_S) ? ST_S :
                                     (mem_msg_in == RESP_E) ? ST_E : ST_M;
          st <= S_IDLE;                          // lookup repeats and hits
        end
        S_FL_WB: if (mem_msg_in == ACK || sn_on_victim) begin
          state_arr[m_way][p_idx] <= ST_I;
          st <= S_FL_SEND;
        end
        S_FL_SEND: if (mem_msg_in == ACK) st <= S_IDLE;
        default:   st <= S_IDLE;
      endcase

      // snooper updates last: coherence operations take priority
      if (sn_active && sn_hit) begin
        if (snoop_msg_in == RD_REQ) state_arr[sn_way][sn_idx] <= ST_S;
        else                        state_arr[sn_way][sn_idx] <= ST_I;
      end
    end
  end

  // A response only arrives for an outstanding request.
  assert property (@(posedge clk) disable iff (rst)
                   (mem_msg_in != NO_REQ) |-> (mem_msg_out != NO_REQ));
endmodule
