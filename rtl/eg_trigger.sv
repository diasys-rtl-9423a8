// eg_trigger: trigger unit of the CPU event generator.
//
// Program counter monitor: NUM_TRIGGERS comparators check the PC of every
// executed instruction against the configured addresses. A matching trigger
// with call_en set produces a "call" event at once. A matching trigger with
// ret_en set pushes the current link address (R9 on OR1K) and its own index
// onto the return address stack.
// Function return monitor: when an executed PC equals the address on top of
// the stack, the entry is popped and a "return" event is produced for the
// stored trigger index. This handles functions with many call sites and
// many exits, as the paper describes.
// At most one event leaves per cycle (trig_valid, registered, one cycle after
// the instruction); a return hit wins over a call match, and the lowest
// matching trigger index wins among calls. Events that lose are reported on
// lost, and a push into a full stack is discarded and reported on
// ras_overflow. The comparators and the return address stack are the
// paper's; the stack depth, the priorities and overflow handling are this
// design's choices.
module eg_trigger
  import diasys_pkg::*;
#(
  parameter int unsigned NUM_TRIGGERS = 12,
  parameter int unsigned RAS_DEPTH    = 16
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  cpu_trace_t                   trace,
  input  logic [31:0]                  link_addr,
  input  logic [NUM_TRIGGERS-1:0]      call_en,
  input  logic [NUM_TRIGGERS-1:0]      ret_en,
  input  logic [NUM_TRIGGERS-1:0][31:0] trig_pc,
  output logic                         trig_valid,
  output logic [3:0]                   trig_idx,
  output logic                         trig_ret,
  output logic                         lost,
  output logic                         ras_overflow,
  output logic                         ras_push,
  output logic                         ras_pop
);
  localparam int unsigned RW = $clog2(RAS_DEPTH + 1);
  localparam int unsigned PW = (RAS_DEPTH > 1) ? $clog2(RAS_DEPTH) : 1;

  typedef struct packed {
    logic [31:0] addr;
    logic [3:0]  idx;
  } ras_entry_t;

  ras_entry_t ras [RAS_DEPTH];
  logic [RW-1:0] ras_cnt;

  logic [NUM_TRIGGERS-1:0] pc_match;
  logic       call_hit, push_hit, ret_hit;
  logic [3:0] call_idx, push_idx;
  ras_entry_t ras_top;

  logic [PW-1:0] top_ptr, push_ptr;
  assign top_ptr  = PW'(ras_cnt - 1'b1);
  assign push_ptr = PW'(ras_cnt);
  assign ras_top  = (ras_cnt != '0) ? ras[top_ptr] : '0;

  always_comb begin
    for (int i = 0; i < NUM_TRIGGERS; i++) begin
      pc_match[i] = trace.valid && (trace.pc == trig_pc[i]);
    end
    call_hit = 1'b0;
    push_hit = 1'b0;
    call_idx = '0;
    push_idx = '0;
    for (int i = NUM_TRIGGERS - 1; i >= 0; i--) begin
      if (pc_match[i] && call_en[i]) begin
        call_hit = 1'b1;
        call_idx = 4'(i);
      end
      if (pc_match[i] && ret_en[i]) begin
        push_hit = 1'b1;
        push_idx = 4'(i);
      end
    end
    ret_hit = trace.valid && (ras_cnt != '0) && (trace.pc == ras_top.addr);
  end

  assign ras_pop  = ret_hit;
  assign ras_push = push_hit;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ras_cnt      <= '0;
      trig_valid   <= 1'b0;
      trig_idx     <= '0;
      trig_ret     <= 1'b0;
      lost         <= 1'b0;
      ras_overflow <= 1'b0;
    end else begin
      trig_valid   <= ret_hit || call_hit;
      trig_idx     <= ret_hit ? ras_top.idx : call_idx;
      trig_ret     <= ret_hit;
      lost         <= ret_hit && call_hit;
      ras_overflow <= 1'b0;
      // pop first, then push into the freed or next place
      if (ret_hit && push_hit) begin
        ras[top_ptr] <= '{addr: link_addr, idx: push_idx};
      end else if (ret_hit) begin
        ras_cnt <= ras_cnt - 1'b1;
      end else if (push_hit) begin
        if (ras_cnt == RW'(RAS_DEPTH)) begin
          ras_overflow <= 1'b1;
        end else begin
          ras[push_ptr] <= '{addr: link_addr, idx: push_idx};
          ras_cnt      <= ras_cnt + 1'b1;
        end
      end
    end
  end
endmodule
