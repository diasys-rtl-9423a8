// tb_eg_state_capture: self-checking test of the GPR and stack collectors.
//
// Drives random register writebacks and keeps a reference register file,
// then executes l.sw instructions: stores through R1 with offsets 0..28
// must update the stack copy with the value of rB (including a value
// written back in the same cycle), while stores through another base
// register, with a negative or unaligned offset, or beyond the kept words
// must be ignored. Compares every register and stack word.
module tb_eg_state_capture;
  import diasys_pkg::*;
  localparam int SW = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cpu_trace_t trace;
  logic [31:0][31:0] gpr;
  logic [SW-1:0][31:0] stack;
  logic stack_wr;

  eg_state_capture #(.STACK_WORDS(SW)) dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic [31:0] ref_gpr [32];
  logic [31:0] ref_stk [SW];

  function automatic logic [31:0] sw_insn(input logic [4:0] ra, input logic [4:0] rb, input logic [15:0] imm);
    return {OR1K_OP_SW, imm[15:11], ra, rb, imm[10:0]};
  endfunction

  task automatic step(input bit v, input logic [31:0] insn, input bit wb, input logic [4:0] r, input logic [31:0] d);
    trace = '0;
    trace.valid = v; trace.insn = insn; trace.pc = 32'h100;
    trace.wb_en = wb; trace.wb_reg = r; trace.wb_data = d;
    @(posedge clk); #1;
    trace = '0;
  endtask

  task automatic compare_all();
    for (int i = 0; i < 32; i++) chk(gpr[i] == ref_gpr[i], $sformatf("gpr r%0d %h exp %h", i, gpr[i], ref_gpr[i]));
    for (int i = 0; i < SW; i++) chk(stack[i] == ref_stk[i], $sformatf("stack %0d %h exp %h", i, stack[i], ref_stk[i]));
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    trace = '0;
    foreach (ref_gpr[i]) ref_gpr[i] = '0;
    foreach (ref_stk[i]) ref_stk[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    // random writebacks (writes to r0 ignored)
    for (int n = 0; n < 200; n++) begin
      logic [4:0] r; logic [31:0] d;
      r = 5'($urandom_range(0, 31)); d = $urandom;
      step(0, '0, 1, r, d);
      if (r != 0) ref_gpr[r] = d;
    end
    compare_all();
    // stores to the caller's frame
    for (int k = 0; k < SW; k++) begin
      logic [4:0] rb;
      rb = 5'($urandom_range(2, 31));
      step(1, sw_insn(5'd1, rb, 16'(4*k)), 0, 0, 0);
      ref_stk[k] = ref_gpr[rb];
    end
    compare_all();
    // store with a same-cycle writeback of rB
    step(1, sw_insn(5'd1, 5'd7, 16'd8), 1, 5'd7, 32'hCAFE_0007);
    ref_gpr[7] = 32'hCAFE_0007; ref_stk[2] = 32'hCAFE_0007;
    // ignored stores
    step(1, sw_insn(5'd2, 5'd3, 16'd0), 0, 0, 0);          // base is not R1
    step(1, sw_insn(5'd1, 5'd3, 16'hFFFC), 0, 0, 0);       // negative offset
    step(1, sw_insn(5'd1, 5'd3, 16'd6), 0, 0, 0);          // unaligned
    step(1, sw_insn(5'd1, 5'd3, 16'(4*SW)), 0, 0, 0);      // beyond kept words
    step(0, sw_insn(5'd1, 5'd3, 16'd4), 0, 0, 0);          // not executed
    step(1, {6'h15, 26'h0}, 0, 0, 0);                      // not a store
    compare_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
