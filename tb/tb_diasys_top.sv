// tb_diasys_top: end-to-end testbench of the diagnosis system, at the
// default size (4 event generators, 6-node ring, 7680-word RAM).
//
// It runs the race-condition hypothesis test: core 0 runs a `bank` task
// whose get_balance(src) and set_balance(src) functions are called for two
// ATM clients. The host configures event generator 0 over the off-chip link:
// an event on entry to get_balance carrying R3 (the request source) and an
// event on return from set_balance carrying the stack word the function
// spilled R3 to. Both go to the diagnosis processor, where a bus-master
// model of its CPU runs the transaction-checking actor: poll the run queue,
// read the event from RAM, track the transaction owner and send a
// race-detected event to the host when another client's access falls
// inside an open transaction; then free the slot. Some transactions are
// interleaved on purpose; the expected race count comes from the same rule
// applied to the known call sequence. Cores 1 and 2 run untriggered code.
// Core 3 fires a 14-word trigger every other cycle with events routed to
// the host, which overloads its event generator; the host reads the drop
// counter back. Each mechanism is counted and one that never happened is a
// failure: configuration writes and reads, call triggers, return triggers
// (return-address stack), stack-argument capture, DMA into event slots and
// slot reuse, race detection, overload drops, host output and NoC
// back-pressure. Stimulus changes 2 ns after the rising edge; handshakes
// are sampled on the falling edge. A watchdog ends a hang with a failure.
module tb_diasys_top;
  import diasys_pkg::*;
  localparam int unsigned NUM_CPUS = 4;
  localparam logic [15:0] EV_RACE_DETECTED = 16'h00FF;
  localparam logic [31:0] PC_GET = 32'h0000_1000, PC_SET = 32'h0000_1100, PC_HOT = 32'h0000_3000;
  localparam logic [31:0] NOP = 32'h1500_0000;
  localparam int unsigned NTRANS = 30;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  cpu_trace_t [NUM_CPUS-1:0] trace;
  cpu_trace_t tr [NUM_CPUS];
  logic [15:0] host_in_data, host_out_data;
  logic host_in_valid, host_in_ready, host_out_valid, host_out_ready;
  wb_m2s_t cpu_m2s;
  wb_s2m_t cpu_s2m;
  int checks = 0, failures = 0;

  always_comb for (int c = 0; c < NUM_CPUS; c++) trace[c] = tr[c];

  diasys_top dut (.clk, .rst_n, .trace, .host_in_data, .host_in_valid, .host_in_ready,
                  .host_out_data, .host_out_valid, .host_out_ready, .cpu_m2s, .cpu_s2m);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ---------------- mechanism counters ----------------
  int n_cfg_wr = 0, n_cfg_rd = 0, n_call_ev = 0, n_ret_ev = 0, n_stack_ok = 0;
  int n_dma = 0, n_slot_reuse = 0, n_race = 0, n_host_ev = 0, n_noc_stall = 0, n_drop = 0;

  always @(negedge clk) if (rst_n) n_noc_stall += $countones(dut.inj_valid & ~dut.inj_ready);

  // ---------------- host side ----------------
  typedef logic [15:0] fl_t [$];
  fl_t host_pkts [$];
  fl_t hcur;
  int hleft = -1;
  always begin @(posedge clk); #1; host_out_ready = ($urandom % 4) != 0; end
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

  task automatic reg_write(input logic [7:0] node, input logic [15:0] a, input logic [15:0] d);
    host_frame('{hdr_flit(PKT_REG_WRITE, node), 16'd0, a, d});
    n_cfg_wr++;
  endtask

  task automatic reg_read(input logic [7:0] node, input logic [15:0] a, output logic [15:0] d);
    int t = 0;
    fl_t p;
    host_frame('{hdr_flit(PKT_REG_READ, node), 16'd0, a});
    d = 16'hDEAD;
    while (t < 3000) begin
      @(posedge clk); t++;
      foreach (host_pkts[k]) begin
        p = host_pkts[k];
        if (p.size() == 4 && p[0] == hdr_flit(PKT_REG_RESP, 8'd0) && p[1] == 16'(node) && p[2] == a) begin
          d = p[3];
          host_pkts.delete(k);
          n_cfg_rd++;
          return;
        end
      end
    end
    chk(0, $sformatf("no response to read of node %0d register %h", node, a));
  endtask

  // ---------------- observed CPUs ----------------
  task automatic ex(input int c, input logic [31:0] pc, input logic [31:0] insn = NOP,
                    input bit wb = 0, input logic [4:0] r = 0, input logic [31:0] d = 0);
    @(posedge clk); #2;
    tr[c] = '{valid: 1'b1, pc: pc, insn: insn, wb_en: wb, wb_reg: r, wb_data: d};
    @(posedge clk); #2;
    tr[c] = '0;
  endtask

  // l.sw I(rA), rB
  function automatic logic [31:0] sw(input logic [4:0] ra, input logic [4:0] rb, input logic [15:0] imm);
    return {OR1K_OP_SW, imm[15:11], ra, rb, imm[10:0]};
  endfunction

  task automatic gap(input int n); repeat (n) @(posedge clk); endtask

  // the bank task on core 0: call site at `site`, link register R9
  task automatic get_balance(input logic [31:0] src, input logic [31:0] site);
    ex(0, site - 4, NOP, 1, 5'd3, src);             // R3 = request source
    ex(0, site, NOP, 1, 5'd9, site + 8);            // l.jal get_balance, R9 = return address
    ex(0, PC_GET);                                  // function entry: call trigger
    ex(0, PC_GET + 4, NOP, 1, 5'd11, 32'd100);      // load balance into R11
    ex(0, site + 8);                                // return
    gap(30);
  endtask

  task automatic set_balance(input logic [31:0] src, input logic [31:0] site);
    ex(0, site - 4, NOP, 1, 5'd3, src);
    ex(0, site, NOP, 1, 5'd9, site + 8);
    ex(0, PC_SET);                                  // entry: pushes the return address
    ex(0, PC_SET + 4, sw(5'd1, 5'd3, 16'd0));       // l.sw 0(r1), r3: spill the argument
    ex(0, PC_SET + 8, NOP, 1, 5'd3, 32'h0);         // R3 reused inside the function
    ex(0, site + 8);                                // return: return trigger
    gap(30);
  endtask

  // ---------------- transformation actor on the diagnosis processor ----------------
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

  // the checking rule, shared by the actor and by the reference
  typedef struct { bit in_tr; logic [31:0] owner; } ta_state_t;
  function automatic bit ta_step(inout ta_state_t s, input bit is_get, input logic [31:0] src);
    if (s.in_tr && s.owner != src) return 1;
    if (is_get) begin s.in_tr = 1; s.owner = src; end
    else s.in_tr = 0;
    return 0;
  endfunction

  bit stop_actor = 0;
  int ev_expected = 0;
  logic [31:0] seen_slots [$];
  logic [31:0] truth_src [$];      // source of each bank event, in program order
  bit          truth_get [$];

  initial begin : actor
    logic [31:0] a, len, w1, w2, w3, w4, r;
    logic [15:0] etype;
    logic [31:0] src;
    bit is_get, race;
    ta_state_t st = '{in_tr: 0, owner: 0};
    cpu_m2s = '0;
    wait (rst_n);
    while (!stop_actor) begin
      bus(0, 32'h8000_0000, 0, a);
      if (a == 0) continue;
      n_dma++;
      if (a inside {seen_slots}) n_slot_reuse++;
      else seen_slots.push_back(a);
      bus(0, a, 0, len);
      bus(0, a + 4, 0, w1);
      bus(0, a + 8, 0, w2);
      bus(0, a + 12, 0, w3);
      bus(0, a + 16, 0, w4);
      etype  = w2[31:16];
      src    = {w3[15:0], w4[31:16]};
      is_get = !etype[4];
      chk(len == 7 && w1 == {hdr_flit(PKT_EVENT, 8'd1), 16'd2} && etype[15:8] == 8'd2,
          $sformatf("event in slot %h: len %0d hdr %h type %h", a, len, w1, etype));
      if (is_get) n_call_ev++; else n_ret_ev++;
      if (!is_get && truth_src.size() > 0 && ev_expected < truth_src.size() &&
          src == truth_src[ev_expected]) n_stack_ok++;
      chk(ev_expected < truth_src.size() && src == truth_src[ev_expected] && is_get == truth_get[ev_expected],
          $sformatf("event %0d: src %h get %0d", ev_expected, src, is_get));
      ev_expected++;
      race = ta_step(st, is_get, src);
      if (race) begin
        bus(1, 32'h8000_0008, {16'h0, hdr_flit(PKT_EVENT, 8'd0)}, r);
        bus(1, 32'h8000_0008, {16'h0, 16'd1}, r);
        bus(1, 32'h8000_0008, {15'h0, 1'b1, EV_RACE_DETECTED}, r);
      end
      bus(1, 32'h8000_0004, a, r);
    end
  end

  // ---------------- test sequence ----------------
  initial begin
    logic [15:0] d;
    int exp_race = 0, got_race = 0, hot_events = 0;
    ta_state_t ref_st = '{in_tr: 0, owner: 0};
    for (int c = 0; c < NUM_CPUS; c++) tr[c] = '0;
    host_in_valid = 0; host_in_data = 0;
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);

    // configuration from the host
    reg_read(8'd2, EGREG_MODTYPE, d);
    chk(d == MODTYPE_EG, "event generator 0 identifies itself");
    reg_read(8'd1, 16'd0, d);
    chk(d == MODTYPE_DP, "diagnosis processor identifies itself");
    reg_write(8'd2, EGREG_DEST, 16'd1);
    reg_write(8'd2, EGREG_TRIGBASE + 0, 16'h0001);                 // trigger 0: call
    reg_write(8'd2, EGREG_TRIGBASE + 1, PC_GET[15:0]);
    reg_write(8'd2, EGREG_TRIGBASE + 2, PC_GET[31:16]);
    reg_write(8'd2, EGREG_TRIGBASE + 3, 16'((1 << 5) | 3));         // R3
    reg_write(8'd2, EGREG_TRIGBASE + 4, 16'h0002);                 // trigger 1: return
    reg_write(8'd2, EGREG_TRIGBASE + 5, PC_SET[15:0]);
    reg_write(8'd2, EGREG_TRIGBASE + 6, PC_SET[31:16]);
    reg_write(8'd2, EGREG_TRIGBASE + 7, 16'(1 << 8));              // stack word 0
    reg_write(8'd5, EGREG_DEST, 16'd0);                            // core 3 -> host
    reg_write(8'd5, EGREG_TRIGBASE + 0, 16'h0001);
    reg_write(8'd5, EGREG_TRIGBASE + 1, PC_HOT[15:0]);
    reg_write(8'd5, EGREG_TRIGBASE + 2, PC_HOT[31:16]);
    reg_write(8'd5, EGREG_TRIGBASE + 3, 16'((7 << 8) | (7 << 5) | 4));
    reg_read(8'd2, EGREG_TRIGBASE + 3, d);
    chk(d == 16'((1 << 5) | 3), "payload register read back");

    ex(0, 32'h100, NOP, 1, 5'd1, 32'h0000_8000);   // stack pointer
    fork
      // bank on core 0, clients 0xA0 and 0xA1
      for (int k = 0; k < NTRANS; k++) begin
        automatic logic [31:0] a = 32'hA0 + 32'(k % 2), b = 32'hA0 + 32'(1 - k % 2);
        if (k % 4 == 3) begin                        // interleaved read-modify-write
          truth_src.push_back(a); truth_get.push_back(1); get_balance(a, 32'h400);
          truth_src.push_back(b); truth_get.push_back(1); get_balance(b, 32'h440);
          truth_src.push_back(a); truth_get.push_back(0); set_balance(a, 32'h480);
          truth_src.push_back(b); truth_get.push_back(0); set_balance(b, 32'h4C0);
        end else begin
          truth_src.push_back(a); truth_get.push_back(1); get_balance(a, 32'h400);
          truth_src.push_back(a); truth_get.push_back(0); set_balance(a, 32'h480);
        end
      end
      // atm clients on cores 1 and 2: untriggered code
      for (int k = 0; k < 300; k++) begin
        ex(1, 32'h2000 + 32'(4 * (k % 16)), NOP, 1, 5'(k % 31 + 1), 32'(k));
        ex(2, 32'h2400 + 32'(4 * (k % 16)), sw(5'd1, 5'd4, 16'd8));
      end
      // core 3: hot loop overloading its event generator
      for (int k = 0; k < 40; k++) begin
        ex(3, PC_HOT);
        ex(3, PC_HOT + 4, NOP, 1, 5'd4, 32'(k));
      end
    join
    repeat (2000) @(posedge clk);
    stop_actor = 1;
    reg_read(8'd5, EGREG_DROPPED, d);
    n_drop = d;
    reg_read(8'd1, 16'd3, d);
    chk(d == 16'd16, $sformatf("all event slots free at the end (%0d)", d));

    foreach (truth_src[i]) if (ta_step(ref_st, truth_get[i], truth_src[i])) exp_race++;
    foreach (host_pkts[k]) begin
      if (host_pkts[k].size() == 3 && host_pkts[k][1] == 16'd1 && host_pkts[k][2] == EV_RACE_DETECTED) got_race++;
      if (host_pkts[k].size() >= 5 && host_pkts[k][1] == 16'd5) begin
        hot_events++;
        chk(host_pkts[k].size() == 5 + 2 * 14 && host_pkts[k][2] == {8'd5, 8'h00},
            "overload event carries 7 registers and 7 stack words");
      end
    end
    n_race = got_race;
    n_host_ev = hot_events;
    chk(ev_expected == truth_src.size(), $sformatf("actor saw %0d of %0d events", ev_expected, truth_src.size()));
    chk(got_race == exp_race, $sformatf("races reported %0d expected %0d", got_race, exp_race));
    chk(hot_events + n_drop == 40, $sformatf("hot events %0d + dropped %0d = 40", hot_events, n_drop));

    $display("mechanisms: cfg_wr=%0d cfg_rd=%0d call=%0d ret=%0d stack=%0d dma=%0d reuse=%0d race=%0d host_ev=%0d drop=%0d noc_stall=%0d",
             n_cfg_wr, n_cfg_rd, n_call_ev, n_ret_ev, n_stack_ok, n_dma, n_slot_reuse, n_race, n_host_ev, n_drop, n_noc_stall);
    chk(n_cfg_wr > 0, "configuration write happened");
    chk(n_cfg_rd > 0, "configuration read happened");
    chk(n_call_ev > 0, "call trigger happened");
    chk(n_ret_ev > 0, "return trigger happened");
    chk(n_stack_ok > 0, "stack argument capture happened");
    chk(n_dma > 0, "DMA into event slot happened");
    chk(n_slot_reuse > 0, "event slot reuse happened");
    chk(n_race > 0, "race detection happened");
    chk(n_host_ev > 0, "event to host happened");
    chk(n_drop > 0, "overload drop happened");
    chk(n_noc_stall > 0, "NoC back-pressure happened");
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
