// tb_lock_profile: lock contention profile on the full diagnosis system.
//
// All four observed cores repeatedly call a mutex lock function and spend a
// random 12 to 60 cycles inside it (the contention). An event generator holds
// one snapshot at a time, so an entry event must have left (5 + 2n cycles)
// before the return can be captured; shorter calls would lose the return. The host configures
// every event generator with one trigger on the lock function's first
// instruction, with both an entry event (payload R3, the mutex address) and
// a return event that carries only its timestamp (CTRL ret_bare), sent to
// the diagnosis processor. A bus-master model of the
// diagnosis processor's CPU runs two chained actors on the events in its
// run queue: a time-difference actor pairs each core's entry and return
// events and computes the lock acquisition time from the two timestamps, and
// a statistics actor accumulates, per mutex, the number of calls and the
// total time. At the end it sends one summary packet per mutex to the host:
//   {hdr, src 1, 0x0100 + mutex index, calls, total[31:16], total[15:0]}.
// The test checks the summaries against the acquisition times known from
// the driven program (cycle distance between the function's entry and the
// return to its caller), and that no event was lost on any generator or in
// the diagnosis processor. Runs at the default parameters. The four-core
// size is this design's; the original profile was taken with 16 threads on
// a software model. Stimulus changes 2 ns after the rising edge; handshakes
// are sampled on the falling edge. A watchdog ends a hang with a failure.
module tb_lock_profile;
  import diasys_pkg::*;
  localparam int unsigned NUM_CPUS = 4;
  localparam int unsigned NCALLS = 8;         // lock calls per core
  localparam int unsigned NMUTEX = 3;
  localparam logic [31:0] PC_LOCK = 32'h0000_5000;
  localparam logic [31:0] NOP = 32'h1500_0000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  cpu_trace_t [NUM_CPUS-1:0] trace;
  cpu_trace_t tr [NUM_CPUS];
  logic [15:0] host_in_data, host_out_data;
  logic host_in_valid, host_in_ready, host_out_valid, host_out_ready;
  wb_m2s_t cpu_m2s;
  wb_s2m_t cpu_s2m;
  int checks = 0, failures = 0;
  longint cycle = 0;

  always_comb for (int c = 0; c < NUM_CPUS; c++) trace[c] = tr[c];
  always @(posedge clk) cycle <= cycle + 1;

  diasys_top dut (.clk, .rst_n, .trace, .host_in_data, .host_in_valid, .host_in_ready,
                  .host_out_data, .host_out_valid, .host_out_ready, .cpu_m2s, .cpu_s2m);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ---------------- host side ----------------
  typedef logic [15:0] fl_t [$];
  fl_t host_pkts [$];
  fl_t hcur;
  int hleft = -1;
  always begin @(posedge clk); #1; host_out_ready = ($urandom % 3) != 0; end
  initial forever begin
    @(negedge clk);
    if (host_out_valid && host_out_ready) begin
      if (hleft < 0) hleft = host_out_data;
      else begin hcur.push_back(host_out_data); hleft--; end
      if (hleft == 0) begin host_pkts.push_back(hcur); hcur = {}; hleft = -1; end
    end
  end

  task automatic host_frame(input fl_t f);
    fl_t w = f;
    w.push_front(16'(f.size()));
    #2;
    foreach (w[i]) begin
      host_in_data = w[i]; host_in_valid = 1;
      forever begin @(negedge clk); if (host_in_ready) break; end
      @(posedge clk); #2;
    end
    host_in_valid = 0;
  endtask

  task automatic reg_read(input logic [7:0] node, input logic [15:0] a, output logic [15:0] d);
    int t = 0;
    host_frame('{hdr_flit(PKT_REG_READ, node), 16'd0, a});
    d = 16'hDEAD;
    while (t < 3000) begin
      @(posedge clk); t++;
      foreach (host_pkts[k]) begin
        if (host_pkts[k].size() == 4 && host_pkts[k][0] == hdr_flit(PKT_REG_RESP, 8'd0) &&
            host_pkts[k][1] == 16'(node) && host_pkts[k][2] == a) begin
          d = host_pkts[k][3];
          host_pkts.delete(k);
          return;
        end
      end
    end
    chk(0, $sformatf("no response to read of node %0d register %h", node, a));
  endtask

  // ---------------- observed cores ----------------
  task automatic ex(input int c, input logic [31:0] pc, input bit wb = 0,
                    input logic [4:0] r = 0, input logic [31:0] d = 0);
    @(posedge clk); #2;
    tr[c] = '{valid: 1'b1, pc: pc, insn: NOP, wb_en: wb, wb_reg: r, wb_data: d};
    @(posedge clk); #2;
    tr[c] = '0;
  endtask

  function automatic logic [31:0] mutex_addr(int m);
    return 32'h0001_0000 + 32'(m) * 32'h40;
  endfunction

  longint ref_calls [NMUTEX];
  longint ref_total [NMUTEX];

  task automatic worker(input int c);
    longint t_entry;
    for (int k = 0; k < NCALLS; k++) begin
      automatic int m = $urandom_range(NMUTEX - 1);
      automatic int wait_cycles = $urandom_range(12, 60);
      automatic logic [31:0] site = 32'h800 + 32'(c) * 32'h100 + 32'(k % 4) * 32'h10;
      ex(c, site - 4, 1, 5'd3, mutex_addr(m));        // R3 = mutex
      ex(c, site, 1, 5'd9, site + 8);                 // l.jal pthread_mutex_lock
      @(posedge clk); #2;
      tr[c] = '{valid: 1'b1, pc: PC_LOCK, insn: NOP, wb_en: 1'b0, wb_reg: '0, wb_data: '0};
      t_entry = cycle;
      @(posedge clk); #2;
      tr[c] = '0;
      repeat (wait_cycles) begin                      // spinning on the lock
        @(posedge clk); #2;
        tr[c] = '{valid: 1'b1, pc: PC_LOCK + 32'h10, insn: NOP, wb_en: 1'b1, wb_reg: 5'd13, wb_data: 32'(k)};
      end
      @(posedge clk); #2;
      tr[c] = '{valid: 1'b1, pc: site + 8, insn: NOP, wb_en: 1'b0, wb_reg: '0, wb_data: '0};
      ref_calls[m]++;
      ref_total[m] += cycle - t_entry;
      @(posedge clk); #2;
      tr[c] = '0;
      repeat ($urandom_range(150, 300)) @(posedge clk);
    end
  endtask

  // ---------------- actors on the diagnosis processor ----------------
  task automatic bus(input bit we, input logic [31:0] adr, input logic [31:0] dat,
                     output logic [31:0] rdat);
    #2;
    cpu_m2s = '{cyc: 1'b1, stb: 1'b1, we: we, adr: adr, dat: dat, sel: 4'hF};
    forever begin @(negedge clk); if (cpu_s2m.ack) break; end
    rdat = cpu_s2m.dat;
    @(posedge clk); #2;
    cpu_m2s = '0;
    @(posedge clk);
  endtask

  bit stop_actor = 0, actor_done = 0;
  int n_events = 0, n_pairs = 0;
  longint stat_calls [NMUTEX];
  longint stat_total [NMUTEX];

  initial begin : actors
    logic [31:0] a, len, w1, w2, w3, w4, r, ts, mtx;
    logic [15:0] etype;
    logic [31:0] call_ts [logic [7:0]];
    logic [31:0] call_mtx [logic [7:0]];
    logic [7:0] src;
    cpu_m2s = '0;
    wait (rst_n);
    while (!stop_actor) begin
      bus(0, 32'h8000_0000, 0, a);
      if (a == 0) continue;
      n_events++;
      bus(0, a, 0, len);
      bus(0, a + 4, 0, w1);
      bus(0, a + 8, 0, w2);
      bus(0, a + 12, 0, w3);
      bus(0, a + 16, 0, w4);
      bus(1, 32'h8000_0004, a, r);
      src   = w1[7:0];
      etype = w2[31:16];
      ts    = {w2[15:0], w3[31:16]};
      mtx   = {w3[15:0], w4[31:16]};
      chk(len == (etype[4] ? 5 : 7) && etype[15:8] == src && etype[3:0] == 4'd0,
          $sformatf("event format len %0d type %h", len, etype));
      if (!etype[4]) begin                           // TA_DIFF: entry
        call_ts[src]  = ts;
        call_mtx[src] = mtx;
      end else if (call_ts.exists(src)) begin        // TA_DIFF: return, then TA_STAT
        automatic int m = int'((call_mtx[src] - 32'h0001_0000) / 32'h40);
        n_pairs++;
        if (m >= 0 && m < int'(NMUTEX)) begin
          stat_calls[m]++;
          stat_total[m] += ts - call_ts[src];
        end
        call_ts.delete(src);
      end
    end
    for (int m = 0; m < int'(NMUTEX); m++) begin    // the aggregated profile
      bus(1, 32'h8000_0008, {16'h0, hdr_flit(PKT_EVENT, 8'd0)}, r);
      bus(1, 32'h8000_0008, {16'h0, 16'd1}, r);
      bus(1, 32'h8000_0008, {16'h0, 16'h0100 + 16'(m)}, r);
      bus(1, 32'h8000_0008, {16'h0, 16'(stat_calls[m])}, r);
      bus(1, 32'h8000_0008, {16'h0, 16'(stat_total[m] >> 16)}, r);
      bus(1, 32'h8000_0008, {15'h0, 1'b1, 16'(stat_total[m])}, r);
    end
    actor_done = 1;
  end

  initial begin
    logic [15:0] d;
    int found;
    for (int c = 0; c < NUM_CPUS; c++) tr[c] = '0;
    for (int m = 0; m < int'(NMUTEX); m++) begin ref_calls[m] = 0; ref_total[m] = 0; stat_calls[m] = 0; stat_total[m] = 0; end
    host_in_valid = 0; host_in_data = 0;
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);
    for (int c = 0; c < NUM_CPUS; c++) begin
      automatic logic [7:0] node = 8'(c + 2);
      host_frame('{hdr_flit(PKT_REG_WRITE, node), 16'd0, EGREG_DEST, 16'd1});
      host_frame('{hdr_flit(PKT_REG_WRITE, node), 16'd0, EGREG_TRIGBASE + 16'd0, 16'h0007});
      host_frame('{hdr_flit(PKT_REG_WRITE, node), 16'd0, EGREG_TRIGBASE + 16'd1, PC_LOCK[15:0]});
      host_frame('{hdr_flit(PKT_REG_WRITE, node), 16'd0, EGREG_TRIGBASE + 16'd2, PC_LOCK[31:16]});
      host_frame('{hdr_flit(PKT_REG_WRITE, node), 16'd0, EGREG_TRIGBASE + 16'd3, 16'((1 << 5) | 3)});
    end
    repeat (50) @(posedge clk);
    fork
      worker(0);
      worker(1);
      worker(2);
      worker(3);
    join
    repeat (1000) @(posedge clk);
    stop_actor = 1;
    wait (actor_done);
    repeat (500) @(posedge clk);

    chk(n_events == 2 * NUM_CPUS * NCALLS, $sformatf("%0d events reached the actor", n_events));
    chk(n_pairs == NUM_CPUS * NCALLS, $sformatf("%0d entry/return pairs", n_pairs));
    for (int c = 0; c < NUM_CPUS; c++) begin
      reg_read(8'(c + 2), EGREG_DROPPED, d);
      chk(d == 0, $sformatf("event generator %0d lost %0d events", c, d));
    end
    reg_read(8'd1, 16'd2, d);
    chk(d == 0, "diagnosis processor dropped no packets");
    for (int m = 0; m < int'(NMUTEX); m++) begin
      found = 0;
      foreach (host_pkts[k]) begin
        if (host_pkts[k].size() == 6 && host_pkts[k][1] == 16'd1 && host_pkts[k][2] == 16'h0100 + 16'(m)) begin
          found = 1;
          chk(host_pkts[k][3] == 16'(ref_calls[m]), $sformatf("mutex %0d calls %0d exp %0d", m, host_pkts[k][3], ref_calls[m]));
          chk({host_pkts[k][4], host_pkts[k][5]} == 32'(ref_total[m]),
              $sformatf("mutex %0d total time %0d exp %0d", m, {host_pkts[k][4], host_pkts[k][5]}, ref_total[m]));
        end
      end
      chk(found == 1, $sformatf("profile line for mutex %0d", m));
      $display("mutex %0d: calls %0d total %0d cycles", m, ref_calls[m], ref_total[m]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #3ms;
    failures++;
    $display("TIMEOUT");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
