// eg_state_capture: GPR collector and stack argument collector.
//
// GPR collector: a copy of the CPU's 32 general-purpose registers, kept up
// to date from the register writeback port (R0 stays zero). The copy is
// visible on gpr one cycle after the writeback.
// Stack argument collector: every executed l.sw I(rA),rB with rA = R1 (the
// stack pointer) and a word-aligned offset 0 <= I < 4*STACK_WORDS writes the
// value of rB into stack[I/4]. These are the words a caller leaves for the
// arguments that do not fit into registers. A writeback to rB in the same
// cycle is forwarded into the store copy. Both mechanisms are the paper's;
// the number of stack words and the forwarding are this design's choices.
module eg_state_capture
  import diasys_pkg::*;
#(
  parameter int unsigned STACK_WORDS = 8
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  cpu_trace_t                    trace,
  output logic [31:0][31:0]             gpr,
  output logic [STACK_WORDS-1:0][31:0]  stack,
  output logic                          stack_wr
);
  logic [5:0]  opcode;
  logic [4:0]  ra, rb;
  logic [15:0] imm;
  logic [31:0] rb_val;
  logic        is_sp_store;

  assign opcode = trace.insn[31:26];
  assign ra     = trace.insn[20:16];
  assign rb     = trace.insn[15:11];
  assign imm    = {trace.insn[25:21], trace.insn[10:0]};
  assign rb_val = (trace.wb_en && trace.wb_reg == rb && rb != 5'd0) ? trace.wb_data : gpr[rb];

  assign is_sp_store = trace.valid && opcode == OR1K_OP_SW && ra == 5'(OR1K_SP) &&
                       !imm[15] && imm[1:0] == 2'b00 &&
                       (32'(imm[15:2]) < STACK_WORDS);
  assign stack_wr = is_sp_store;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gpr   <= '0;
      stack <= '0;
    end else begin
      if (trace.wb_en && trace.wb_reg != 5'd0) gpr[trace.wb_reg] <= trace.wb_data;
      if (is_sp_store) stack[imm[15:2]] <= rb_val;
    end
  end
endmodule
