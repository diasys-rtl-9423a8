// tb_eg_trigger: self-checking test of the event generator trigger unit.
//
// Configures three triggers: a call-only trigger, a trigger with call and
// return events, and a return-only trigger. Drives a sequence of executed
// PCs with nested and recursive calls and checks every produced event
// (index, call/return flag, one-cycle latency), the return address stack
// push/pop behaviour, priority of a return over a call in one cycle, and
// the overflow report when the stack is full.
module tb_eg_trigger;
  import diasys_pkg::*;
  localparam int NT = 12;
  localparam int RD = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cpu_trace_t trace;
  logic [31:0] link_addr;
  logic [NT-1:0] call_en, ret_en;
  logic [NT-1:0][31:0] trig_pc;
  logic trig_valid, trig_ret, lost, ras_overflow, ras_push, ras_pop;
  logic [3:0] trig_idx;

  eg_trigger #(.NUM_TRIGGERS(NT), .RAS_DEPTH(RD)) dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // execute one instruction at pc with link register value lr, then check
  // the registered trigger output in the next cycle
  task automatic exec(input logic [31:0] pc, input logic [31:0] lr,
                      input bit exp_v, input int exp_idx = 0, input bit exp_ret = 0);
    trace = '0;
    trace.valid = 1'b1;
    trace.pc = pc;
    link_addr = lr;
    @(posedge clk); #1;
    trace.valid = 1'b0;
    chk(trig_valid == exp_v, $sformatf("pc %h valid %0d exp %0d", pc, trig_valid, exp_v));
    if (exp_v) begin
      chk(trig_idx == 4'(exp_idx), $sformatf("pc %h idx %0d exp %0d", pc, trig_idx, exp_idx));
      chk(trig_ret == exp_ret, $sformatf("pc %h ret %0d exp %0d", pc, trig_ret, exp_ret));
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    trace = '0; link_addr = '0; call_en = '0; ret_en = '0; trig_pc = '0;
    // trigger 0: call event at 0x1000
    trig_pc[0] = 32'h1000; call_en[0] = 1;
    // trigger 5: call + return events for function at 0x2000
    trig_pc[5] = 32'h2000; call_en[5] = 1; ret_en[5] = 1;
    // trigger 11: return only, function at 0x3000
    trig_pc[11] = 32'h3000; ret_en[11] = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;

    exec(32'h0100, 0, 0);
    exec(32'h1000, 0, 1, 0, 0);            // PC trigger
    exec(32'h2000, 32'h0500, 1, 5, 0);     // call event, push 0x500
    exec(32'h2004, 0, 0);
    exec(32'h3000, 32'h2010, 0);           // nested, push 0x2010 silently
    exec(32'h3004, 0, 0);
    exec(32'h0500, 0, 0);                  // not top of stack: no event
    exec(32'h2010, 0, 1, 11, 1);           // return from 0x3000
    exec(32'h2010, 0, 0);                  // already popped
    exec(32'h0500, 0, 1, 5, 1);            // return from 0x2000
    exec(32'h0500, 0, 0);                  // stack empty

    // recursion: three nested calls of 0x2000 from different sites
    exec(32'h2000, 32'h0600, 1, 5, 0);
    exec(32'h2000, 32'h2100, 1, 5, 0);
    exec(32'h2000, 32'h2100, 1, 5, 0);
    exec(32'h2100, 0, 1, 5, 1);
    exec(32'h2100, 0, 1, 5, 1);
    exec(32'h0600, 0, 1, 5, 1);

    // return hit and call match in one cycle: return wins, call is lost
    exec(32'h3000, 32'h1000, 0);           // push return 0x1000 for trigger 11
    trace = '0; trace.valid = 1; trace.pc = 32'h1000;
    @(posedge clk); #1; trace.valid = 0;
    chk(trig_valid && trig_ret && trig_idx == 4'd11, "return has priority");
    chk(lost, "lost call reported");

    // overflow: fill the 4-entry stack, the fifth push is reported
    for (int i = 0; i < RD; i++) exec(32'h3000, 32'h4000 + 32'(i*16), 0);
    chk(!ras_overflow, "no overflow while filling");
    exec(32'h3000, 32'h5000, 0);
    chk(ras_overflow, "overflow on fifth push");
    // entries come back in LIFO order
    for (int i = RD - 1; i >= 0; i--) exec(32'h4000 + 32'(i*16), 0, 1, 11, 1);
    exec(32'h5000, 0, 0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
