// tb_dp_network_adapter: self-checking testbench of the diagnosis processor
// network adapter.
//
// The DMA port is served by a testbench memory that acknowledges after a
// random delay; the register port is driven by a testbench CPU task; the NoC
// side is fed packets and its output has random backpressure. Checked:
//  * DMA: every event packet lands in a slot as {flit count, flit pairs},
//    including a 70-flit packet truncated to the slot size;
//  * run queue order and RUNQ = 0 when empty;
//  * DISCARDQ frees slots, invalid addresses are ignored (STATUS free count);
//  * overload: 18 packets with no CPU service keep 16 and drop 2 (STATUS
//    and configuration register 2 both report it);
//  * TX writes appear on the NoC as packets, unchanged, in order;
//  * configuration reads over the NoC (type, free slots).
// Inputs change 2 ns after the rising edge; handshakes are sampled on the
// falling edge. A watchdog ends a hang with a failure.
module tb_dp_network_adapter;
  import diasys_pkg::*;
  localparam logic [7:0] ME = 8'd1, HOST = 8'd0;
  localparam int unsigned NUM_SLOTS = 16, SLOT_WORDS = 32;
  localparam logic [31:0] SLOT_BASE = 32'h7000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  flit_t rx_flit, tx_flit;
  logic rx_valid, rx_ready, tx_valid, tx_ready;
  wb_m2s_t dma_m2s, reg_m2s;
  wb_s2m_t dma_s2m, reg_s2m;
  int checks = 0, failures = 0;

  dp_network_adapter #(.ADDR(ME)) dut (
    .clk, .rst_n, .rx_flit, .rx_valid, .rx_ready, .tx_flit, .tx_valid, .tx_ready,
    .dma_m2s, .dma_s2m, .reg_m2s, .reg_s2m);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // DMA slave memory with random ack delay
  logic [31:0] mem [logic [31:0]];
  int dly = 0;
  always @(posedge clk) begin
    dma_s2m.ack <= 0;
    if (dma_m2s.cyc && dma_m2s.stb && !dma_s2m.ack) begin
      if (dly == 0) begin
        dma_s2m.ack <= 1;
        if (dma_m2s.we) mem[dma_m2s.adr] = dma_m2s.dat;
        dly <= $urandom_range(2);
      end else dly <= dly - 1;
    end
  end
  assign dma_s2m.dat = '0;

  // NoC output collection with random backpressure
  typedef logic [16:0] pkt_t [$];
  pkt_t pkts [$];
  pkt_t cur;
  bit bp = 0;
  always begin @(posedge clk); #1; tx_ready = bp ? 1'($urandom) : 1'b1; end
  initial forever begin
    @(negedge clk);
    if (tx_valid && tx_ready) begin
      cur.push_back({tx_flit.last, tx_flit.data});
      if (tx_flit.last) begin pkts.push_back(cur); cur = {}; end
    end
  end

  task automatic send(input logic [15:0] f [$]);
    #2;
    foreach (f[i]) begin
      rx_flit.data = f[i]; rx_flit.last = (i == f.size() - 1); rx_valid = 1;
      forever begin @(negedge clk); if (rx_ready) break; end
      @(posedge clk); #2;
    end
    rx_valid = 0;
  endtask

  task automatic cpu(input bit we, input logic [3:0] off, input logic [31:0] dat,
                     output logic [31:0] rdat);
    #2;
    reg_m2s = '{cyc: 1'b1, stb: 1'b1, we: we, adr: 32'h8000_0000 | 32'(off), dat: dat, sel: 4'hF};
    forever begin @(negedge clk); if (reg_s2m.ack) break; end
    rdat = reg_s2m.dat;
    @(posedge clk); #2;
    reg_m2s = '0;
    @(posedge clk);
  endtask

  function automatic logic [15:0] q_at(logic [15:0] f [$], int i);
    return (i < f.size()) ? f[i] : 16'h0;
  endfunction

  task automatic check_slot(input logic [31:0] a, input logic [15:0] f [$], input string what);
    int n = f.size();
    int stored = (n < 2 * (SLOT_WORDS - 1)) ? n : 2 * (SLOT_WORDS - 1);
    bit ok = mem.exists(a) && mem[a] == 32'(n);
    for (int w = 0; w < (stored + 1) / 2; w++) begin
      logic [31:0] e = {f[2*w], q_at(f, 2*w+1)};
      if (2*w + 1 >= stored) e[15:0] = (2*w + 1 < n) ? f[2*w+1] : 16'h0;
      if (!mem.exists(a + 4 + 4*w) || mem[a + 4 + 4*w] !== e) ok = 0;
    end
    chk(ok, $sformatf("%s: slot %h contents (len %0d)", what, a, n));
  endtask

  task automatic wait_pkts(input int n);
    int t = 0;
    while (pkts.size() < n && t < 2000) begin @(posedge clk); t++; end
    chk(pkts.size() >= n, $sformatf("%0d packets expected, have %0d", n, pkts.size()));
  endtask

  typedef logic [15:0] fl_t [$];
  fl_t sent [$];

  function automatic fl_t mk_event(int len);
    fl_t f;
    f.push_back(hdr_flit(PKT_EVENT, ME));
    f.push_back(16'($urandom_range(2, 5)));
    for (int i = 2; i < len; i++) f.push_back(16'($urandom));
    return f;
  endfunction

  initial begin
    logic [31:0] r, a;
    fl_t f;
    pkt_t p;
    int n;
    rx_valid = 0; rx_flit = '0; reg_m2s = '0; tx_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    cpu(0, NAREG_RUNQ, 0, r);
    chk(r == 0, "RUNQ empty reads 0");
    cpu(0, NAREG_STATUS, 0, r);
    chk(r == 32'(NUM_SLOTS), $sformatf("initial STATUS %h", r));

    // 1. packets of random length, served one at a time
    for (int k = 0; k < 30; k++) begin
      f = mk_event((k == 7) ? 70 : $urandom_range(3, 20));
      send(f);
      repeat (3 + f.size()) @(posedge clk);
      cpu(0, NAREG_RUNQ, 0, a);
      chk(a >= SLOT_BASE && a < SLOT_BASE + NUM_SLOTS * SLOT_WORDS * 4, $sformatf("RUNQ address %h", a));
      check_slot(a, f, "single");
      mem.delete();
      cpu(1, NAREG_DISCARDQ, a, r);
    end

    // 2. overload: 18 packets without service
    for (int k = 0; k < 18; k++) begin f = mk_event($urandom_range(3, 12)); sent.push_back(f); send(f); end
    repeat (30) @(posedge clk);
    cpu(0, NAREG_STATUS, 0, r);
    chk(r == {16'd2, 16'd0}, $sformatf("STATUS after overload %h", r));
    send('{hdr_flit(PKT_REG_READ, ME), 16'(HOST), 16'd2});
    wait_pkts(1);
    p = pkts.pop_front();
    chk(p.size() == 4 && p[0][15:0] == hdr_flit(PKT_REG_RESP, HOST) && p[1][15:0] == 16'(ME) &&
        p[3] == {1'b1, 16'd2}, "config register 2 reports the drops");
    cpu(1, NAREG_DISCARDQ, 32'h7004, r);              // not a slot start: ignored
    cpu(1, NAREG_DISCARDQ, 32'h0000_0100, r);         // outside the buffer: ignored
    cpu(0, NAREG_STATUS, 0, r);
    chk(r[15:0] == 0, "invalid DISCARDQ addresses ignored");
    for (int k = 0; k < 16; k++) begin
      cpu(0, NAREG_RUNQ, 0, a);
      check_slot(a, sent[k], "overload order");
      cpu(1, NAREG_DISCARDQ, a, r);
    end
    cpu(0, NAREG_RUNQ, 0, a);
    chk(a == 0, "RUNQ empty after draining");
    repeat (3) @(posedge clk);
    cpu(0, NAREG_STATUS, 0, r);
    chk(r == {16'd2, 16'd16}, $sformatf("all slots free again %h", r));

    // 3. transmit path with backpressure
    bp = 1;
    sent.delete();
    for (int k = 0; k < 10; k++) begin
      f = mk_event($urandom_range(3, 40));
      f[0] = hdr_flit(PKT_EVENT, HOST);
      sent.push_back(f);
      foreach (f[i]) cpu(1, NAREG_TX, {15'b0, i == f.size() - 1, f[i]}, r);
    end
    wait_pkts(10);
    for (int k = 0; k < 10; k++) begin
      bit ok;
      p = pkts.pop_front();
      ok = p.size() == sent[k].size();
      if (ok) foreach (p[i]) if (p[i] != {i == p.size() - 1, sent[k][i]}) ok = 0;
      chk(ok, $sformatf("TX packet %0d", k));
    end
    send('{hdr_flit(PKT_REG_READ, ME), 16'(HOST), 16'd0});
    wait_pkts(1);
    p = pkts.pop_front();
    chk(p.size() == 4 && p[3] == {1'b1, MODTYPE_DP}, "config register 0 is the module type");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5ms;
    failures++;
    $display("TIMEOUT");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
