// lxcache_tb: a two-port lower-level cache with a modelled main memory and
// a modelled level above.
//
// Directed part: both ports keep requesting and the answers must alternate
// between them (round robin); a WB followed by INVAL must lose the written
// data (the next RD returns what memory holds); a FLUSH of a dirty line must
// put the line in memory. Random part: the ports read and write back random
// lines of a small cache so that lines are evicted often. Lines read by a
// port may be taken "dirty" by the modelled level above, which returns them
// either by a port WB or when the cache asks for a back-flush. Every RD must
// return the current value of the line; every write of a victim to memory
// must follow a back-flush of that same line (inclusion).
module lxcache_tb;
  import brisc_pkg::*;
  logic clk = 0, rst = 1; always #5 clk = ~clk;
  localparam int AB = 8, IB = 2, OB = 2, W = 2, NP = 2, LA = AB - OB, NL = 1 << LA;

  msg_e mi [NP], mo [NP]; logic [LA-1:0] port_addr [NP]; logic [127:0] di [NP], dout;
  logic bf_req, bf_done, bf_dirty; logic [LA-1:0] bf_addr; logic [127:0] bf_data;
  logic mr, mw, mdone; logic [LA-1:0] ma; logic [127:0] mdo, mdi; logic eh, em, ee;

  lxcache #(.ADDRESS_BITS(AB), .INDEX_BITS(IB), .OFFSET_BITS(OB), .NUMBER_OF_WAYS(W),
            .NUM_PORTS(NP)) dut (
    .clk, .rst, .msg_in(mi), .address_in(port_addr), .data_in(di), .msg_out(mo), .data_out(dout),
    .bf_req, .bf_address(bf_addr), .bf_done, .bf_dirty, .bf_data,
    .mem_read(mr), .mem_write(mw), .mem_address(ma), .mem_data_out(mdo), .mem_done(mdone),
    .mem_data_in(mdi), .ev_hit(eh), .ev_miss(em), .ev_evict(ee));

  logic [127:0] mem [NL], cur [NL], upper_data [NL];
  bit upper_dirty [NL], busy [NL];
  int checks = 0, failures = 0, n_bf = 0, n_bf_dirty = 0, n_evict_wr = 0;
  logic [LA-1:0] last_bf;

  task automatic chk(string w, logic [127:0] g, logic [127:0] e);
    checks++; if (g !== e) begin failures++; $display("%0t FAIL %s got %h exp %h", $time, w, g, e); end
  endtask

  // ---------------- memory model ----------------
  int mdelay = 0;
  always @(posedge clk) begin
    mdone <= 0;
    if ((mr || mw) && !mdone) begin
      if (mdelay == 0) mdelay = $urandom_range(2, 6);
      else if (--mdelay == 0) begin
        mdone <= 1;
        if (mr) mdi <= mem[ma];
        if (mw) begin
          mem[ma] <= mdo;
          if (dut.cur_msg == RD_REQ || dut.cur_msg == WB_REQ) begin
            n_evict_wr++;
            chk("evicted line was back-flushed first", 128'(ma), 128'(last_bf));
          end
        end
      end
    end
  end

  // ---------------- level-above model: back-flush answers ----------------
  always_comb begin
    bf_done  = bf_req;
    bf_dirty = bf_req && upper_dirty[bf_addr];
    bf_data  = upper_data[bf_addr];
  end
  always @(posedge clk) if (bf_req) begin
    n_bf++; last_bf <= bf_addr;
    if (upper_dirty[bf_addr]) begin n_bf_dirty++; cur[bf_addr] = upper_data[bf_addr]; end
    upper_dirty[bf_addr] = 0;
  end

  // ---------------- port transactions ----------------
  task automatic xact(input int p, input msg_e m, input logic [LA-1:0] a,
                      input logic [127:0] d, output logic [127:0] r);
    @(negedge clk);
    mi[p] = m; port_addr[p] = a; di[p] = d;
    do @(negedge clk); while (mo[p] == NO_REQ);
    r = dout;
    chk("answer kind", 128'(mo[p]), 128'((m == RD_REQ) ? RESP_E : ACK));
    @(posedge clk); #1 mi[p] = NO_REQ;
  endtask

  task automatic port_random(input int p, input int n);
    for (int i = 0; i < n; i++) begin
      automatic logic [LA-1:0] a = LA'($urandom);
      automatic logic [127:0] r, d = {$urandom, $urandom, $urandom, $urandom};
      while (busy[a]) a = LA'($urandom);   // one port at a time per line
      busy[a] = 1;
      if (upper_dirty[a]) begin
        // the coherence layer would write the dirty copy back first
        d = upper_data[a]; upper_dirty[a] = 0; cur[a] = d;
        xact(p, WB_REQ, a, d, r);
      end else if ($urandom_range(0, 2) == 0) begin
        cur[a] = d;
        xact(p, WB_REQ, a, d, r);
      end else begin
        xact(p, RD_REQ, a, '0, r);
        if (!upper_dirty[a]) chk($sformatf("RD line %0d", a), r, cur[a]);
        if ($urandom_range(0, 2) == 0) begin
          upper_dirty[a] = 1; upper_data[a] = {$urandom, $urandom, $urandom, $urandom};
        end
      end
      busy[a] = 0;
    end
  endtask

  int order [$];
  always @(negedge clk) for (int p = 0; p < NP; p++) if (mo[p] != NO_REQ) order.push_back(p);

  initial begin
    logic [127:0] r;
    for (int l = 0; l < NL; l++) begin
      mem[l] = {4{32'(l)}}; cur[l] = mem[l]; upper_dirty[l] = 0; upper_data[l] = 0;
    end
    for (int p = 0; p < NP; p++) begin mi[p] = NO_REQ; port_addr[p] = 0; di[p] = 0; end
    mdi = 0;
    repeat (2) @(posedge clk); rst <= 0;

    // round robin: both ports read the same line repeatedly
    fork
      for (int i = 0; i < 6; i++) begin logic [127:0] x; xact(0, RD_REQ, 6'd1, '0, x); end
      for (int i = 0; i < 6; i++) begin logic [127:0] x; xact(1, RD_REQ, 6'd1, '0, x); end
    join
    for (int i = 2; i < order.size(); i++) begin
      checks++;
      if (order[i] == order[i-1]) begin failures++; $display("FAIL round robin order"); end
    end

    // WB then INVAL loses the data
    xact(0, WB_REQ, 6'd5, {4{32'hDEAD}}, r);
    xact(0, INVAL_REQ, 6'd5, '0, r);
    xact(1, RD_REQ, 6'd5, '0, r);
    chk("RD after INVAL returns memory", r, mem[5]);

    // FLUSH of a dirty line reaches memory
    xact(1, WB_REQ, 6'd6, {4{32'hBEEF}}, r);
    xact(0, FLUSH_REQ, 6'd6, '0, r);
    chk("FLUSH wrote memory", mem[6], {4{32'hBEEF}});
    cur[6] = mem[6];
    for (int l = 0; l < NL; l++) cur[l] = (l == 5) ? mem[5] : cur[l];

    fork port_random(0, 1500); port_random(1, 1500); join

    checks++;
    if (n_bf_dirty == 0 || n_evict_wr == 0) begin failures++; $display("FAIL coverage"); end
    $display("back-flushes=%0d dirty=%0d evictions written=%0d", n_bf, n_bf_dirty, n_evict_wr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (200000) @(posedge clk); failures++; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
