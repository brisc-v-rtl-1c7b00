// coherence_controller: owner of the shared bus between the L1 caches and
// the shared L2, carrying out MESI coherence transactions one at a time.
//
// Each cycle in IDLE it grants one pending L1 request (round robin) and
// latches it. Requests that need coherence (RD, RFO, UPG, FLUSH, INVAL) are
// first broadcast on the snoop lines of every other L1 for one cycle; all
// snoopers answer in that cycle (ack, had-a-copy, dirty line). A dirty copy
// is written back to the L2 before the transaction goes on, so the requester
// and the L2 both get the current line. The request is then passed to the L2
// (RD for RD/RFO/UPG, WB, FLUSH or INVAL) and, once the L2 answers, the
// requester receives RESP_S (another cache kept a copy), RESP_E (no other
// copy), RESP_M (ownership for RFO/UPG) or ACK for requests without data.
// While it waits for the L2, the L2 may ask for a back-flush of a line it is
// evicting (inclusion): the controller broadcasts FLUSH_REQ for that line to
// all L1s and hands any dirty copy back to the L2. One idle cycle separates
// a response from the next snoop, so a filled line is used once before it
// can be taken away again.
//
// Follows the platform: a single controller serving any number of L1s and
// the L2, snoop broadcast, collection of all responses before the requester
// may proceed, L2-initiated flushes on eviction. This design's own: the
// one-transaction-at-a-time bus, the message codes and hand-shakes, and the
// write-back-then-read order for dirty copies.
module coherence_controller
  import brisc_pkg::*;
#(
  parameter int N_CACHES = 8,
  parameter int LADDR    = 14,     // line address bits
  parameter int LINE     = 128     // line width in bits
) (
  input  logic             clk,
  input  logic             rst,
  // L1 request / response
  input  msg_e             l1_msg_in     [N_CACHES],
  input  logic [LADDR-1:0] l1_address_in [N_CACHES],
  input  logic [LINE-1:0]  l1_data_in    [N_CACHES],
  output msg_e             l1_msg_out    [N_CACHES],
  output logic [LINE-1:0]  l1_data_out,
  // snoop broadcast
  output msg_e             snoop_msg     [N_CACHES],
  output logic [LADDR-1:0] snoop_address,
  input  logic [N_CACHES-1:0] snoop_ack,
  input  logic [N_CACHES-1:0] snoop_had_copy,
  input  logic [N_CACHES-1:0] snoop_dirty,
  input  logic [LINE-1:0]  snoop_data    [N_CACHES],
  // L2 port
  output msg_e             l2_msg_out,
  output logic [LADDR-1:0] l2_address_out,
  output logic [LINE-1:0]  l2_data_out,
  input  msg_e             l2_msg_in,
  input  logic [LINE-1:0]  l2_data_in,
  // L2 back-flush channel
  input  logic             bf_req,
  input  logic [LADDR-1:0] bf_address,
  output logic             bf_done,
  output logic             bf_dirty,
  output logic [LINE-1:0]  bf_data,
  // statistics
  output logic             ev_snoop_wb,
  output logic             ev_back_flush,
  output logic             ev_shared_resp
);
  localparam int IW = $clog2(N_CACHES+1);

  typedef enum logic [2:0] { C_IDLE, C_SNOOP, C_SNOOP_WB, C_L2, C_RESP } cc_state_e;
  cc_state_e st;

  localparam int SW = (N_CACHES > 1) ? $clog2(N_CACHES) : 1;   // array index width
  logic [IW-1:0]    cur;
  msg_e             cur_msg;
  logic [LADDR-1:0] cur_addr;
  logic [LINE-1:0]  cur_data, line_buf, dirty_buf;
  logic             shared;

  // ---------------- arbitration ----------------
  logic [N_CACHES-1:0] reqv;
  logic [IW-1:0]       gidx;
  logic                gany;
  always_comb for (int i = 0; i < N_CACHES; i++) reqv[i] = (l1_msg_in[i] != NO_REQ);
  rr_arbiter #(.N(N_CACHES)) u_arb (.clk, .rst, .req(reqv), .advance(st == C_IDLE),
                                    .grant(), .grant_idx(gidx), .any(gany));

  // ---------------- snoop collection ----------------
  logic            bf_active, any_dirty;
  logic [LINE-1:0] dirty_line;
  assign bf_active = (st == C_L2 || st == C_SNOOP_WB) && bf_req;
  always_comb begin
    any_dirty = 1'b0; dirty_line = '0;
    for (int i = 0; i < N_CACHES; i++)
      if (snoop_dirty[i]) begin any_dirty = 1'b1; dirty_line = snoop_data[i]; end
  end

  always_comb begin
    snoop_address = bf_active ? bf_address : cur_addr;
    for (int i = 0; i < N_CACHES; i++) begin
      snoop_msg[i] = NO_REQ;
      if (st == C_SNOOP && IW'(i) != cur) snoop_msg[i] = cur_msg;
      if (bf_active)                      snoop_msg[i] = FLUSH_REQ;
    end
  end
  assign bf_done  = bf_active && (&snoop_ack);
  assign bf_dirty = bf_done && any_dirty;
  assign bf_data  = dirty_line;

  // all caches other than the requester have answered
  logic all_acked;
  always_comb begin
    all_acked = 1'b1;
    for (int i = 0; i < N_CACHES; i++)
      if (IW'(i) != cur && !snoop_ack[i]) all_acked = 1'b0;
  end

  // ---------------- L2 request ----------------
  always_comb begin
    l2_msg_out = NO_REQ; l2_address_out = cur_addr; l2_data_out = cur_data;
    if (st == C_SNOOP_WB) begin
      l2_msg_out = WB_REQ; l2_data_out = dirty_buf;
    end else if (st == C_L2) begin
      unique case (cur_msg)
        RD_REQ, RFO_REQ, UPG_REQ: l2_msg_out = RD_REQ;
        default:                  l2_msg_out = cur_msg;
      endcase
    end
  end

  // ---------------- response to the requester ----------------
  always_comb begin
    for (int i = 0; i < N_CACHES; i++) l1_msg_out[i] = NO_REQ;
    if (st == C_RESP) begin
      unique case (cur_msg)
        RD_REQ:           l1_msg_out[cur[SW-1:0]] = shared ? RESP_S : RESP_E;
        RFO_REQ, UPG_REQ: l1_msg_out[cur[SW-1:0]] = RESP_M;
        default:          l1_msg_out[cur[SW-1:0]] = ACK;
      endcase
    end
  end
  assign l1_data_out = line_buf;

  always_ff @(posedge clk) begin
    if (rst) begin
      st <= C_IDLE; cur <= '0; cur_msg <= NO_REQ; cur_addr <= '0; cur_data <= '0;
      line_buf <= '0; dirty_buf <= '0; shared <= 1'b0;
    end else begin
      unique case (st)
        C_IDLE: if (gany) begin
          cur      <= gidx;
          cur_msg  <= l1_msg_in[gidx[SW-1:0]];
          cur_addr <= l1_address_in[gidx[SW-1:0]];
          cur_data <= l1_data_in[gidx[SW-1:0]];
          shared   <= 1'b0;
          st       <= (l1_msg_in[gidx[SW-1:0]] == WB_REQ) ? C_L2 : C_SNOOP;
        end
        C_SNOOP: if (all_acked) begin
          shared    <= |(snoop_had_copy & ~(N_CACHES'(1) << cur));
          dirty_buf <= dirty_line;
          st        <= any_dirty ? C_SNOOP_WB : C_L2;
        end
        C_SNOOP_WB: if (l2_msg_in == ACK) st <= C_L2;
        C_L2: if (l2_msg_in != NO_REQ) begin
          line_buf <= l2_data_in;
          st       <= C_RESP;
        end
        C_RESP: st <= C_IDLE;
        default: st <= C_IDLE;
      endcase
    end
  end

  assign ev_snoop_wb    = (st == C_SNOOP) && all_acked && any_dirty;
  assign ev_back_flush  = bf_done;
  assign ev_shared_resp = (st == C_RESP) && cur_msg == RD_REQ && shared;

  // At most one cache may hold a line MODIFIED, so at most one dirty answer.
  assert property (@(posedge clk) disable iff (rst) $onehot0(snoop_dirty));
endmodule
