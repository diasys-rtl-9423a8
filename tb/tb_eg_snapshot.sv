// tb_eg_snapshot: self-checking test of the snapshot correlation module.
//
// Fills the register and stack copies with known values, configures random
// payload selections per trigger and fires triggers. Checks the latched
// event type, timestamp, word count and every payload word against a
// reference computed here, that the snapshot stays valid until accepted,
// and that a trigger arriving while a snapshot waits is dropped and
// reported.
module tb_eg_snapshot;
  import diasys_pkg::*;
  localparam int NT = 12;
  localparam int SW = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [ADDR_W-1:0] src_addr = 8'h23;
  logic [31:0] tstamp;
  logic trig_valid, trig_ret, snap_valid, snap_ready, dropped;
  logic [3:0] trig_idx;
  payload_cfg_t [NT-1:0] payload_cfg;
  logic [31:0][31:0] gpr;
  logic [SW-1:0][31:0] stack;
  snapshot_t snap;

  eg_snapshot #(.NUM_TRIGGERS(NT), .STACK_WORDS(SW)) dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    trig_valid = 0; trig_ret = 0; trig_idx = 0; snap_ready = 0; tstamp = 0;
    for (int i = 0; i < 32; i++) gpr[i] = 32'h1000_0000 + 32'(i);
    for (int i = 0; i < SW; i++) stack[i] = 32'h5000_0000 + 32'(i);
    for (int i = 0; i < NT; i++) begin
      payload_cfg[i].gpr_first = 5'($urandom_range(0, 31));
      payload_cfg[i].gpr_cnt   = 3'($urandom_range(0, 7));
      payload_cfg[i].stk_cnt   = 3'($urandom_range(0, 7));
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int n = 0; n < 40; n++) begin
      int t; bit r; payload_cfg_t c;
      t = $urandom_range(0, NT - 1); r = 1'($urandom_range(0, 1));
      c = payload_cfg[t];
      tstamp = $urandom;
      trig_valid = 1; trig_idx = 4'(t); trig_ret = r;
      @(posedge clk); #1;
      trig_valid = 0;
      chk(snap_valid, "snapshot valid after trigger");
      chk(snap.etype == {src_addr, 3'b000, r, 4'(t)}, "event type");
      chk(snap.nwords == 4'(c.gpr_cnt) + 4'(c.stk_cnt), "word count");
      for (int k = 0; k < int'(c.gpr_cnt); k++)
        chk(snap.words[k] == 32'h1000_0000 + 32'(5'(c.gpr_first + 5'(k))), $sformatf("gpr word %0d", k));
      for (int k = 0; k < int'(c.stk_cnt); k++)
        chk(snap.words[int'(c.gpr_cnt) + k] == 32'h5000_0000 + 32'(k), $sformatf("stack word %0d", k));
      // a second trigger while the first is not accepted is dropped
      if (n % 4 == 0) begin
        logic [31:0] keep_ts;
        keep_ts = snap.tstamp;
        trig_valid = 1; trig_idx = 4'((t + 1) % NT); tstamp = tstamp + 1;
        @(posedge clk); #1;
        trig_valid = 0;
        chk(dropped, "second trigger dropped");
        chk(snap_valid && snap.tstamp == keep_ts, "first snapshot kept");
      end
      repeat ($urandom_range(0, 3)) begin
        @(posedge clk); #1;
        chk(snap_valid, "snapshot held until accepted");
      end
      snap_ready = 1;
      @(posedge clk); #1;
      snap_ready = 0;
      chk(!snap_valid, "snapshot released");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
