// eg_snapshot: snapshot data correlation module of the CPU event generator.
//
// When the trigger unit fires, this module pairs the trigger with the state
// captured at that moment: it latches the event type, the timestamp and the
// payload words that the trigger's configuration selects (gpr_cnt registers
// starting at gpr_first, then stk_cnt stack words from offset 0 upwards).
// The snapshot is offered to the packetizer with a valid/ready handshake.
// While a snapshot is still waiting, new triggers are discarded and reported
// on `dropped`, so the observed CPU is never stalled. The event type is
// {source address, 3'b000, return flag, trigger index}, unique per event
// generator and trigger. The paper only names this module; the selection
// scheme, event type layout and drop policy are this design's choices.
module eg_snapshot
  import diasys_pkg::*;
#(
  parameter int unsigned NUM_TRIGGERS = 12,
  parameter int unsigned STACK_WORDS  = 8
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic [ADDR_W-1:0]                  src_addr,
  input  logic [31:0]                        tstamp,
  input  logic                               trig_valid,
  input  logic [3:0]                         trig_idx,
  input  logic                               trig_ret,
  input  payload_cfg_t [NUM_TRIGGERS-1:0]    payload_cfg,
  input  logic [31:0][31:0]                  gpr,
  input  logic [STACK_WORDS-1:0][31:0]       stack,
  output snapshot_t                          snap,
  output logic                               snap_valid,
  input  logic                               snap_ready,
  output logic                               dropped
);
  payload_cfg_t cfg;
  snapshot_t    next;

  assign cfg = payload_cfg[trig_idx];

  always_comb begin
    next        = '0;
    next.etype  = {src_addr, 3'b000, trig_ret, trig_idx};
    next.tstamp = tstamp;
    next.nwords = 4'(cfg.gpr_cnt) + 4'(cfg.stk_cnt);
    for (int k = 0; k < int'(MAX_GPR_WORDS); k++) begin
      if (k < int'(cfg.gpr_cnt)) next.words[k] = gpr[5'(cfg.gpr_first + 5'(k))];
    end
    for (int k = 0; k < int'(MAX_STACK_WORDS); k++) begin
      if (k < int'(cfg.stk_cnt) && k < int'(STACK_WORDS)) begin
        next.words[int'(cfg.gpr_cnt) + k] = stack[k];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      snap       <= '0;
      snap_valid <= 1'b0;
      dropped    <= 1'b0;
    end else begin
      dropped <= 1'b0;
      if (snap_valid && snap_ready) snap_valid <= 1'b0;
      if (trig_valid) begin
        if (!snap_valid || snap_ready) begin
          snap       <= next;
          snap_valid <= 1'b1;
        end else begin
          dropped <= 1'b1;
        end
      end
    end
  end
endmodule
