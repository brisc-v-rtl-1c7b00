// coherence_controller_tb: the coherence controller with three modelled L1
// caches and a modelled L2.
//
// Each modelled cache keeps a MESI state and a data value per line, issues
// random requests (RD or RFO when Invalid, UPG when Shared, WB when
// Modified), writes new values into lines it holds Exclusive or Modified,
// and answers snoops the way the L1 snooper does. The L2 model answers after
// a random delay and sometimes asks for a back-flush of another line first, as an L2 evicting
// a victim does.
// Checked against a golden value per line (the last value written anywhere):
// every line returned to a requester holds the golden value; RD answers
// SHARED exactly when another cache held the line; RFO/UPG answer MODIFIED;
// a back-flush leaves no copy above and returns dirty data when a copy was
// MODIFIED; and at every cycle no line is MODIFIED in one cache while valid
// in another.
module coherence_controller_tb;
  import brisc_pkg::*;
  logic clk = 0, rst = 1; always #5 clk = ~clk;
  localparam int NC = 3, LADDR = 3, LINE = 32, NL = 1 << LADDR;

  msg_e l1_in [NC], l1_out [NC], sn_msg [NC], l2_out, l2_in;
  logic [LADDR-1:0] l1_addr [NC], sn_addr, l2_addr, bf_addr;
  logic [LINE-1:0] l1_data [NC], l1_resp, sn_data [NC], l2_dout, l2_din, bf_data;
  logic [NC-1:0] sn_ack, sn_had, sn_dirty;
  logic bf_req, bf_done, bf_dirty, e1, e2, e3;

  coherence_controller #(.N_CACHES(NC), .LADDR(LADDR), .LINE(LINE)) dut (
    .clk, .rst, .l1_msg_in(l1_in), .l1_address_in(l1_addr), .l1_data_in(l1_data),
    .l1_msg_out(l1_out), .l1_data_out(l1_resp), .snoop_msg(sn_msg), .snoop_address(sn_addr),
    .snoop_ack(sn_ack), .snoop_had_copy(sn_had), .snoop_dirty(sn_dirty), .snoop_data(sn_data),
    .l2_msg_out(l2_out), .l2_address_out(l2_addr), .l2_data_out(l2_dout), .l2_msg_in(l2_in),
    .l2_data_in(l2_din), .bf_req, .bf_address(bf_addr), .bf_done, .bf_dirty, .bf_data,
    .ev_snoop_wb(e1), .ev_back_flush(e2), .ev_shared_resp(e3));

  mesi_e       st  [NC][NL];
  logic [31:0] dat [NC][NL];
  logic [31:0] mem [NL];
  logic [31:0] golden [NL];
  int checks = 0, failures = 0, n_resp = 0, n_shared = 0, n_bf = 0, n_bf_dirty = 0, n_upg = 0;
  int next_val = 1000;

  task automatic chk(string w, logic [31:0] g, logic [31:0] e);
    checks++; if (g !== e) begin failures++; $display("%0t FAIL %s got %0d exp %0d", $time, w, g, e); end
  endtask

  // snoopers answer combinationally, as the L1 snooper does
  always_comb for (int c = 0; c < NC; c++) begin
    sn_ack[c]   = (sn_msg[c] != NO_REQ);
    sn_had[c]   = sn_ack[c] && st[c][sn_addr] != ST_I;
    sn_dirty[c] = sn_ack[c] && st[c][sn_addr] == ST_M;
    sn_data[c]  = dat[c][sn_addr];
  end

  // the request a cache had outstanding before this edge
  msg_e pend [NC];
  int   l2_delay = 0;
  bit   bf_pending = 0;

  always @(posedge clk) if (!rst) begin
    // ---- L2 model (uses values from before the edge) ----
    logic [31:0] mem_next [NL];
    mem_next = mem;
    if (bf_pending && bf_done) begin
      n_bf++;
      if (bf_dirty) begin mem_next[bf_addr] = bf_data; n_bf_dirty++; end
      bf_pending = 0;
    end
    // ---- responses to caches ----
    for (int c = 0; c < NC; c++) if (l1_out[c] != NO_REQ) begin
      automatic int l = l1_addr[c];
      n_resp++;
      l1_in[c] <= NO_REQ;
      if (l1_out[c] == RESP_S || l1_out[c] == RESP_E || l1_out[c] == RESP_M)
        chk($sformatf("data to cache %0d line %0d", c, l), l1_resp, golden[l]);
      unique case (pend[c])
        RD_REQ: begin
          automatic bit others = 0;
          for (int o = 0; o < NC; o++) if (o != c && st[o][l] != ST_I) others = 1;
          chk("RD answer SHARED iff another copy", l1_out[c] == RESP_S, others);
          if (l1_out[c] == RESP_S) n_shared++;
          st[c][l] <= (l1_out[c] == RESP_S) ? ST_S : ST_E; dat[c][l] <= l1_resp;
        end
        RFO_REQ, UPG_REQ: begin
          chk("ownership answer", l1_out[c], RESP_M);
          st[c][l] <= ST_M; dat[c][l] <= next_val; golden[l] = next_val; next_val++;
          if (pend[c] == UPG_REQ) n_upg++;
        end
        default: begin chk("WB answer", l1_out[c], ACK); st[c][l] <= ST_I; end
      endcase
    end
    // ---- snoop effects ----
    for (int c = 0; c < NC; c++) if (sn_msg[c] != NO_REQ && st[c][sn_addr] != ST_I) begin
      if (sn_msg[c] == RD_REQ) st[c][sn_addr] <= ST_S; else st[c][sn_addr] <= ST_I;
    end
    // ---- L2 answers ----
    l2_in <= NO_REQ;
    if (l2_out != NO_REQ && l2_in == NO_REQ && !bf_pending) begin
      if (l2_out == WB_REQ) begin
        // a write-back is the golden value unless a newer copy exists above
        mem_next[l2_addr] = l2_dout;
        l2_in <= ACK;
      end else if (l2_delay == 0) begin
        l2_delay = $urandom_range(1, 3);
        if ($urandom_range(0, 3) == 0) begin
          bf_pending = 1; bf_addr <= l2_addr + LADDR'($urandom_range(1, NL-1)); bf_req <= 1;
        end
      end else if (--l2_delay == 0) begin
        l2_in <= RESP_E; l2_din <= mem[l2_addr];
      end
    end
    if (bf_done) bf_req <= 0;
    mem = mem_next;
  end

  // back-flush must leave no copy above
  always @(negedge clk) if (!rst && bf_req && bf_done) begin
    checks++;
    begin
      automatic bit m = 0;
      for (int c = 0; c < NC; c++) if (st[c][bf_addr] == ST_M) m = 1;
      if (bf_dirty != m) begin failures++; $display("FAIL back-flush dirty flag"); end
    end
  end

  // invariant: MODIFIED is exclusive
  always @(negedge clk) if (!rst) for (int l = 0; l < NL; l++) begin
    automatic int nm = 0, nv = 0;
    for (int c = 0; c < NC; c++) begin
      if (st[c][l] == ST_M) nm++;
      if (st[c][l] != ST_I) nv++;
    end
    checks++;
    if (nm > 1 || (nm == 1 && nv > 1)) begin failures++; $display("%0t FAIL MESI invariant line %0d", $time, l); end
  end

  // cache-side request generators and local writes
  always @(negedge clk) if (!rst) for (int c = 0; c < NC; c++) begin
    if (l1_in[c] != NO_REQ) begin
      // keep holding; but drop a WB whose line a snoop already took
      if (l1_in[c] == WB_REQ && st[c][l1_addr[c]] != ST_M) l1_in[c] = NO_REQ;
      pend[c] = l1_in[c];
    end else begin
      automatic int l = $urandom_range(0, NL-1);
      l1_in[c] = NO_REQ;
      if ($urandom_range(0, 2) == 0) begin
        unique case (st[c][l])
          ST_I: l1_in[c] = $urandom_range(0, 1) ? RD_REQ : RFO_REQ;
          ST_S: l1_in[c] = UPG_REQ;
          ST_M: begin
            if ($urandom_range(0, 1)) l1_in[c] = WB_REQ;
            else begin dat[c][l] = next_val; golden[l] = next_val; next_val++; end
          end
          default: begin st[c][l] = ST_M; dat[c][l] = next_val; golden[l] = next_val; next_val++; end
        endcase
      end
      l1_addr[c] = LADDR'(l); l1_data[c] = dat[c][l];
      pend[c] = l1_in[c];
    end
  end

  initial begin
    for (int l = 0; l < NL; l++) begin
      mem[l] = l; golden[l] = l;
      for (int c = 0; c < NC; c++) begin st[c][l] = ST_I; dat[c][l] = 0; end
    end
    for (int c = 0; c < NC; c++) begin l1_in[c] = NO_REQ; l1_addr[c] = 0; l1_data[c] = 0; pend[c] = NO_REQ; end
    l2_in = NO_REQ; l2_din = 0; bf_req = 0; bf_addr = 0;
    repeat (3) @(posedge clk); rst <= 0;
    repeat (20000) @(posedge clk);
    checks++;
    if (n_shared == 0 || n_bf == 0 || n_bf_dirty == 0 || n_upg == 0 || e1 === 1'bx) begin
      failures++; $display("FAIL coverage shared=%0d bf=%0d bf_dirty=%0d upg=%0d", n_shared, n_bf, n_bf_dirty, n_upg);
    end
    $display("responses=%0d shared=%0d back-flushes=%0d dirty=%0d upg=%0d", n_resp, n_shared, n_bf, n_bf_dirty, n_upg);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (30000) @(posedge clk); failures++; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
