// l1cache_tb: one L1 cache with the bus, the L2 and the other caches of the
// system modelled here.
//
// The model answers bus requests after a random delay from a flat line
// memory (RD: randomly SHARED or EXCLUSIVE; RFO/UPG: MODIFIED; WB, FLUSH and
// INVAL: ACK, WB updating the line memory) and, while the bus is otherwise
// idle, injects random snoops (read, ownership, flush). A processor model
// issues random reads and writes (with byte enables) whenever `ready` is
// high, keeping up to two in flight, and checks every answer in order
// against a shadow of what the processor has written. The testbench also
// tracks which lines must be MODIFIED in the cache and checks the snooper's
// dirty answers against that. Directed parts check the one-cycle hit latency
// and back-to-back hits, the UPG request on a write to a SHARED line, and a
// flush of a dirty line (write-back, then FLUSH_REQ, then `valid`).
module l1cache_tb;
  import brisc_pkg::*;
  logic clk = 0, rst = 1; always #5 clk = ~clk;
  localparam int AB = 8, IB = 2, OB = 2, W = 2, LINES = 1 << (AB - OB);

  logic rd, wr, fl, inv, valid, ready; logic [AB-1:0] ain, aout; logic [31:0] din, dout;
  logic [3:0] be;
  msg_e mo, mi, smi; logic [AB-OB-1:0] mao, sai; logic [127:0] mdo, mdi, sdo;
  logic sack, shad, sdirty, eh, em;

  l1cache #(.ADDRESS_BITS(AB), .INDEX_BITS(IB), .OFFSET_BITS(OB), .NUMBER_OF_WAYS(W)) dut (
    .clk, .rst, .read(rd), .write(wr), .flush(fl), .invalidate(inv), .address_in(ain),
    .data_in(din), .byte_en(be), .data_out(dout), .out_address(aout), .valid, .ready,
    .mem_msg_out(mo), .mem_address_out(mao), .mem_data_out(mdo), .mem_msg_in(mi), .mem_data_in(mdi),
    .snoop_msg_in(smi), .snoop_address_in(sai), .snoop_ack(sack), .snoop_had_copy(shad),
    .snoop_dirty(sdirty), .snoop_data_out(sdo), .ev_hit(eh), .ev_miss(em));

  logic [127:0] lower [LINES];
  logic [31:0]  shadow [1 << AB];
  bit           exp_m [LINES];
  int checks = 0, failures = 0;
  int n_wb = 0, n_snoop_dirty = 0, n_upg = 0, n_rfo = 0;
  bit snoop_enable = 0;
  msg_e rd_grant = RESP_E;   // directed tests may force SHARED

  task automatic chk(string w, logic [31:0] g, logic [31:0] e);
    checks++; if (g !== e) begin failures++; $display("FAIL %s got %h exp %h", w, g, e); end
  endtask

  // ---------------- bus / L2 / other-caches model ----------------
  int delay = 0;
  always @(negedge clk) if (!rst) begin
    mi  = NO_REQ; smi = NO_REQ;
    if (mo != NO_REQ) begin
      if (delay == 0) delay = $urandom_range(1, 4);
      else if (--delay == 0) begin
        mdi = lower[mao];
        unique case (mo)
          RD_REQ:  mi = (rd_grant == RESP_S || $urandom_range(0, 1)) ? RESP_S : RESP_E;
          RFO_REQ: begin mi = RESP_M; exp_m[mao] = 1; n_rfo++; end
          UPG_REQ: begin mi = RESP_M; exp_m[mao] = 1; n_upg++; end
          WB_REQ:  begin mi = ACK; lower[mao] = mdo; exp_m[mao] = 0; n_wb++; end
          default: mi = ACK;
        endcase
        if (mo == FLUSH_REQ || mo == INVAL_REQ) exp_m[mao] = 0;
      end
    end
    if (mi == NO_REQ && snoop_enable && $urandom_range(0, 5) == 0) begin
      sai = (AB-OB)'($urandom);
      smi = ($urandom_range(0, 2) == 0) ? RD_REQ : ($urandom_range(0, 1) == 0) ? RFO_REQ : FLUSH_REQ;
      #1;
      chk("snoop ack", sack, 1);
      chk($sformatf("snoop dirty line %0d", sai), sdirty, exp_m[sai]);
      if (sdirty) begin lower[sai] = sdo; n_snoop_dirty++; end
      exp_m[sai] = 0;
    end
  end

  // ---------------- processor model ----------------
  typedef struct { bit is_wr; bit is_fl; logic [AB-1:0] a; } req_t;
  req_t q[$];

  // check answers in order
  always @(negedge clk) if (!rst) begin
    #2;
    if (valid) begin
      if (q.size() == 0) begin checks++; failures++; $display("FAIL unexpected valid"); end
      else begin
        automatic req_t r = q.pop_front();
        chk("out_address", aout, r.a);
        if (r.is_wr) exp_m[r.a >> OB] = 1;     // a completed write leaves the line MODIFIED
        if (!r.is_wr && !r.is_fl) chk($sformatf("read data @%0d", r.a), dout, shadow[r.a]);
      end
    end
  end

  task automatic issue(input bit is_wr, input logic [AB-1:0] a, input logic [3:0] bmask,
                       input bit is_fl = 0);
    logic [31:0] d = $urandom;
    forever begin
      @(negedge clk);
      if (q.size() < 2) begin
        rd = !is_wr && !is_fl; wr = is_wr; fl = is_fl; ain = a; din = d; be = bmask;
        #4;                       // sample ready once the cycle has settled
        if (ready) break;
      end
    end
    @(posedge clk);
    q.push_back('{is_wr, is_fl, a});
    if (is_wr) for (int b = 0; b < 4; b++) if (bmask[b]) shadow[a][b*8 +: 8] = d[b*8 +: 8];
    #1 rd = 0; wr = 0; fl = 0;
  endtask

  initial begin
    rd = 0; wr = 0; fl = 0; inv = 0; ain = 0; din = 0; be = 0; mi = NO_REQ; smi = NO_REQ;
    sai = 0; mdi = 0;
    for (int l = 0; l < LINES; l++) begin
      lower[l] = {$urandom, $urandom, $urandom, $urandom}; exp_m[l] = 0;
      for (int k = 0; k < 4; k++) shadow[l*4 + k] = lower[l][k*32 +: 32];
    end
    repeat (2) @(posedge clk); rst <= 0;

    // directed: miss, then back-to-back hits one cycle apart
    issue(0, 8'd20, 4'hF);
    wait (q.size() == 0);
    @(negedge clk);
    rd = 1; ain = 8'd21; @(posedge clk); q.push_back('{0, 0, 8'd21});
    #1 chk("ready during hit", ready, 1);
    chk("hit valid one cycle after request", valid, 1); chk("hit data", dout, shadow[21]);
    ain = 8'd22; @(posedge clk); q.push_back('{0, 0, 8'd22});
    #1 chk("back-to-back hit valid", valid, 1); chk("back-to-back hit data", dout, shadow[22]);
    rd = 0;
    wait (q.size() == 0);
    @(negedge clk);

    // directed: write to a SHARED line must ask for ownership (UPG)
    rd_grant = RESP_S;
    issue(0, 8'd40, 4'hF); wait (q.size() == 0);
    issue(1, 8'd41, 4'hF); wait (q.size() == 0);
    chk("UPG on write to SHARED", n_upg, 1);
    rd_grant = RESP_E;

    // directed: flush of a dirty line writes it back
    begin
      automatic int wb0 = n_wb;
      issue(1, 8'd60, 4'hF); wait (q.size() == 0);
      issue(0, 8'd60, 4'h0, 1); wait (q.size() == 0);
      chk("flush wrote dirty line back", n_wb - wb0, 1);
      chk("flushed data reached memory", lower[8'd60 >> 2][0 +: 32], shadow[60]);
    end

    // random traffic with snoops
    snoop_enable = 1;
    for (int i = 0; i < 4000; i++) begin
      automatic logic [AB-1:0] a = AB'($urandom_range(0, 63));
      issue($urandom_range(0, 2) == 0, a, 4'($urandom) | 4'b0001);
    end
    wait (q.size() == 0);
    checks++; if (n_wb == 0 || n_snoop_dirty == 0 || n_rfo == 0) begin
      failures++; $display("FAIL coverage wb=%0d snoop_dirty=%0d rfo=%0d", n_wb, n_snoop_dirty, n_rfo);
    end
    $display("wb=%0d snoop_dirty=%0d rfo=%0d upg=%0d", n_wb, n_snoop_dirty, n_rfo, n_upg);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (200000) @(posedge clk); failures++; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
