// tb_cpu_event_gen: self-checking test of the complete CPU event generator.
//
// Configures the event generator over its NoC port (destination, two
// triggers with payload selections) and replays a short OR1K-like program
// trace: writebacks of argument registers, stores of stack arguments, a
// call of a function with call and return events, and a call of a
// return-only function. Checks every event packet flit (header, source,
// type, timestamp distance, payload words), the register read-back path,
// and that a burst of triggers faster than the NoC port drains is counted
// as dropped events.
module tb_cpu_event_gen;
  import diasys_pkg::*;
  localparam logic [7:0] ME = 8'd4, DST = 8'd1, HOST = 8'd0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cpu_trace_t trace;
  flit_t rx_flit, tx_flit;
  logic rx_valid, rx_ready, tx_valid, tx_ready;

  cpu_event_gen #(.ADDR(ME)) dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // collect transmitted packets
  typedef logic [15:0] pkt_t [$];
  pkt_t pkts [$];
  pkt_t cur;
  initial forever begin
    @(negedge clk);
    if (tx_valid && tx_ready) begin
      cur.push_back(tx_flit.data);
      if (tx_flit.last) begin pkts.push_back(cur); cur = {}; end
    end
  end

  task automatic send(input logic [15:0] f [$]);
    #2;  // never change inputs on a clock edge
    foreach (f[i]) begin
      rx_flit.data = f[i]; rx_flit.last = (i == f.size() - 1); rx_valid = 1;
      forever begin @(negedge clk); if (rx_ready) break; end
      @(posedge clk); #2;
    end
    rx_valid = 0;
  endtask

  task automatic wr(input logic [15:0] a, input logic [15:0] d);
    send('{hdr_flit(PKT_REG_WRITE, ME), 16'(HOST), a, d});
  endtask

  task automatic exec(input logic [31:0] pc, input logic [31:0] insn = 32'h1500_0000,
                      input bit wb = 0, input logic [4:0] r = 0, input logic [31:0] d = 0);
    trace.valid = 1; trace.pc = pc; trace.insn = insn;
    trace.wb_en = wb; trace.wb_reg = r; trace.wb_data = d;
    @(posedge clk); #2;
    trace = '0;
  endtask

  function automatic logic [31:0] sw_insn(input logic [4:0] ra, input logic [4:0] rb, input logic [15:0] imm);
    return {OR1K_OP_SW, imm[15:11], ra, rb, imm[10:0]};
  endfunction

  task automatic wait_pkts(input int n);
    int t = 0;
    while (pkts.size() < n && t < 500) begin @(posedge clk); t++; end
    chk(pkts.size() >= n, $sformatf("%0d packets expected, have %0d", n, pkts.size()));
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] ts_call;

  initial begin
    pkt_t p;
    trace = '0; rx_valid = 0; rx_flit = '0; tx_ready = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #2;
    // configuration: events to DST
    wr(EGREG_DEST, 16'(DST));
    // trigger 2: function at 0x0000_2000, call + return events,
    // payload R3..R4 and two stack words
    wr(EGREG_TRIGBASE + 16'd8 + 16'd1, 16'h2000);
    wr(EGREG_TRIGBASE + 16'd8 + 16'd2, 16'h0000);
    wr(EGREG_TRIGBASE + 16'd8 + 16'd3, {5'b0, 3'd2, 3'd2, 5'd3});
    wr(EGREG_TRIGBASE + 16'd8 + 16'd0, 16'h0003);
    // trigger 7: function at 0x0001_3000, return event only, payload R11
    wr(EGREG_TRIGBASE + 16'd28 + 16'd1, 16'h3000);
    wr(EGREG_TRIGBASE + 16'd28 + 16'd2, 16'h0001);
    wr(EGREG_TRIGBASE + 16'd28 + 16'd3, {5'b0, 3'd0, 3'd1, 5'd11});
    wr(EGREG_TRIGBASE + 16'd28 + 16'd0, 16'h0002);
    // read back one register
    send('{hdr_flit(PKT_REG_READ, ME), 16'(HOST), EGREG_TRIGBASE + 16'd8 + 16'd3});
    wait_pkts(1);
    p = pkts.pop_front();
    chk(p.size() == 4 && p[0] == hdr_flit(PKT_REG_RESP, HOST) && p[3] == {5'b0, 3'd2, 3'd2, 5'd3}, "register read-back");

    // program: set up arguments and stack, then call 0x2000 from 0x1000
    exec(32'h0ff0, 32'h1500_0000, 1, 5'd3, 32'hAAAA_0003);
    exec(32'h0ff4, 32'h1500_0000, 1, 5'd4, 32'hAAAA_0004);
    exec(32'h0ff8, 32'h1500_0000, 1, 5'd12, 32'h5555_0000);
    exec(32'h0ffc, sw_insn(5'd1, 5'd12, 16'd0));
    exec(32'h1000, 32'h1500_0000, 1, 5'd13, 32'h6666_0000);
    exec(32'h1004, sw_insn(5'd1, 5'd13, 16'd4), 1, 5'd9, 32'h0000_1008); // jal writes R9
    exec(32'h2000);                                                      // function entry
    ts_call = dut.tstamp;
    repeat (20) @(posedge clk); #2;
    exec(32'h2004, 32'h1500_0000, 1, 5'd3, 32'h0);                       // R3 overwritten
    // nested call of 0x13000 (return-only trigger) from 0x2008
    exec(32'h2008, 32'h1500_0000, 1, 5'd9, 32'h0000_2010);
    exec(32'h13000, 32'h1500_0000, 1, 5'd11, 32'hBEEF_0011);
    exec(32'h13004);
    exec(32'h2010);                                                      // returns to 0x2010
    repeat (20) @(posedge clk); #2;
    exec(32'h2014);
    exec(32'h1008);                                                      // returns to 0x1008
    wait_pkts(3);
    // call event of trigger 2
    p = pkts.pop_front();
    chk(p.size() == 13, $sformatf("call event length %0d", p.size()));
    if (p.size() == 13) begin
      chk(p[0] == hdr_flit(PKT_EVENT, DST) && p[1] == 16'(ME), "call event header");
      chk(p[2] == {ME, 3'b000, 1'b0, 4'd2}, "call event type");
      chk({p[3], p[4]} == ts_call, $sformatf("call timestamp %h exp %h", {p[3], p[4]}, ts_call));
      chk({p[5], p[6]} == 32'hAAAA_0003 && {p[7], p[8]} == 32'hAAAA_0004, "register arguments");
      chk({p[9], p[10]} == 32'h5555_0000 && {p[11], p[12]} == 32'h6666_0000, "stack arguments");
    end
    p = pkts.pop_front();
    chk(p.size() == 7 && p[2] == {ME, 3'b000, 1'b1, 4'd7} && {p[5], p[6]} == 32'hBEEF_0011, "return event of trigger 7");
    p = pkts.pop_front();
    chk(p.size() == 13 && p[2] == {ME, 3'b000, 1'b1, 4'd2}, "return event of trigger 2");
    if (p.size() == 13) chk({p[5], p[6]} == 32'h0, "return event sees current R3");

    // overload: stall the NoC and trigger 5 times in a row
    @(posedge clk); #2; tx_ready = 0;
    for (int i = 0; i < 5; i++) exec(32'h2000);
    repeat (5) @(posedge clk);
    #2; tx_ready = 1;
    wait_pkts(1);
    repeat (40) @(posedge clk);
    chk(pkts.size() == 1, $sformatf("only one event survives the burst, got %0d", pkts.size()));
    pkts.delete();
    send('{hdr_flit(PKT_REG_READ, ME), 16'(HOST), EGREG_DROPPED});
    wait_pkts(1);
    p = pkts.pop_front();
    chk(p.size() == 4 && p[3] == 16'd4, $sformatf("dropped counter %0d", p.size() == 4 ? p[3] : 16'hFFFF));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
