// cpu_event_gen: CPU event generator, attached to one observed CPU core.
//
// Watches the CPU's executed program counters, instruction words and
// register writebacks (cpu_trace_t) without influencing the CPU. When one of
// NUM_TRIGGERS configured conditions holds (a PC is reached, or a function
// entered through such a PC returns to its caller), it sends one primary
// event over the diagnosis NoC to the node named in register EVENT_DEST:
//   hdr, src, type, timestamp (2 flits), payload words (2 flits each).
// The payload is a snapshot of selected CPU registers (e.g. function
// arguments R3..R8) and of words the caller stored into its stack frame.
//
// Sub-blocks: eg_trigger (PC monitor + function return monitor),
// eg_state_capture (GPR + stack argument collectors), eg_snapshot
// (correlation), eg_packetizer, noc_config_if (registers) and a packet
// arbiter merging events and register responses onto the NoC.
//
// Registers (16 bit): 0 module type, 1 version, 2 EVENT_DEST, 3 events lost
// to overload, 4 return-stack overflows; trigger i at 0x100+4i:
// +0 CTRL {ret_bare, ret_en, call_en}, +1 PC[15:0], +2 PC[31:16],
// +3 PAYLOAD {stk_cnt[10:8], gpr_cnt[7:5], gpr_first[4:0]}.
// Timing: an event's first flit is offered two cycles after the triggering
// instruction. The trigger count of 12 and the monitored mechanisms are the
// paper's; registers, packet layout and the 32-bit cycle-count timestamp
// are this design's choices.
module cpu_event_gen
  import diasys_pkg::*;
#(
  parameter logic [ADDR_W-1:0] ADDR         = 8'd2,
  parameter int unsigned       NUM_TRIGGERS = 12,
  parameter int unsigned       RAS_DEPTH    = 16,
  parameter int unsigned       STACK_WORDS  = 8
) (
  input  logic       clk,
  input  logic       rst_n,
  input  cpu_trace_t trace,
  // from the diagnosis NoC
  input  flit_t      rx_flit,
  input  logic       rx_valid,
  output logic       rx_ready,
  // to the diagnosis NoC
  output flit_t      tx_flit,
  output logic       tx_valid,
  input  logic       tx_ready
);
  // ---------------- configuration registers ----------------
  logic [ADDR_W-1:0]                dest;
  logic [15:0]                      cnt_dropped, cnt_rasovf;
  logic [NUM_TRIGGERS-1:0]          call_en, ret_en;
  logic [NUM_TRIGGERS-1:0]          ret_bare;   // return events without payload
  payload_cfg_t [NUM_TRIGGERS-1:0]  snap_cfg;
  logic [NUM_TRIGGERS-1:0][31:0]    trig_pc;
  payload_cfg_t [NUM_TRIGGERS-1:0]  payload_cfg;
  logic [31:0]                      tstamp;

  logic [15:0] reg_addr, reg_wdata, reg_rdata;
  logic        reg_we, reg_re;

  // trigger register decode
  wire        is_trig_reg = (reg_addr >= EGREG_TRIGBASE) &&
                            (reg_addr < EGREG_TRIGBASE + 16'(4 * NUM_TRIGGERS));
  wire [15:0] trig_off    = reg_addr - EGREG_TRIGBASE;
  wire [3:0]  rt          = 4'(trig_off >> 2);
  wire [1:0]  rf          = trig_off[1:0];

  always_comb begin
    reg_rdata = '0;
    if (is_trig_reg) begin
      unique case (rf)
        2'd0: reg_rdata = {13'b0, ret_bare[rt], ret_en[rt], call_en[rt]};
        2'd1: reg_rdata = trig_pc[rt][15:0];
        2'd2: reg_rdata = trig_pc[rt][31:16];
        default: reg_rdata = {5'b0, payload_cfg[rt]};
      endcase
    end else begin
      unique case (reg_addr)
        EGREG_MODTYPE: reg_rdata = MODTYPE_EG;
        EGREG_VERSION: reg_rdata = MOD_VERSION;
        EGREG_DEST:    reg_rdata = 16'(dest);
        EGREG_DROPPED: reg_rdata = cnt_dropped;
        EGREG_RASOVF:  reg_rdata = cnt_rasovf;
        default:       reg_rdata = '0;
      endcase
    end
  end

  logic trig_lost, snap_dropped, ras_overflow;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dest        <= '0;
      call_en     <= '0;
      ret_en      <= '0;
      ret_bare    <= '0;
      trig_pc     <= '0;
      payload_cfg <= '0;
      cnt_dropped <= '0;
      cnt_rasovf  <= '0;
      tstamp      <= '0;
    end else begin
      tstamp <= tstamp + 1'b1;
      if (trig_lost || snap_dropped) cnt_dropped <= cnt_dropped + 1'b1;
      if (ras_overflow)              cnt_rasovf  <= cnt_rasovf + 1'b1;
      if (reg_we) begin
        if (is_trig_reg) begin
          unique case (rf)
            2'd0: begin
              call_en[rt] <= reg_wdata[0];
              ret_en[rt]  <= reg_wdata[1];
              ret_bare[rt] <= reg_wdata[2];
            end
            2'd1: trig_pc[rt][15:0]  <= reg_wdata;
            2'd2: trig_pc[rt][31:16] <= reg_wdata;
            default: payload_cfg[rt] <= payload_cfg_t'(reg_wdata[10:0]);
          endcase
        end else if (reg_addr == EGREG_DEST) begin
          dest <= reg_wdata[ADDR_W-1:0];
        end
      end
    end
  end

  // ---------------- trigger and state capture ----------------
  logic                         trig_valid, trig_ret, ras_push, ras_pop, stack_wr;
  logic [3:0]                   trig_idx;
  logic [31:0][31:0]            gpr;
  logic [STACK_WORDS-1:0][31:0] stack;

  eg_trigger #(.NUM_TRIGGERS(NUM_TRIGGERS), .RAS_DEPTH(RAS_DEPTH)) u_trigger (
    .clk, .rst_n,
    .trace,
    .link_addr   (gpr[OR1K_LR]),
    .call_en, .ret_en, .trig_pc,
    .trig_valid, .trig_idx, .trig_ret,
    .lost        (trig_lost),
    .ras_overflow,
    .ras_push, .ras_pop
  );

  eg_state_capture #(.STACK_WORDS(STACK_WORDS)) u_capture (
    .clk, .rst_n, .trace, .gpr, .stack, .stack_wr
  );

  // ---------------- correlation and packetizer ----------------
  snapshot_t snap;
  logic      snap_valid, snap_ready;

  // a return event of a trigger with ret_bare set carries the timestamp only
  always_comb begin
    for (int i = 0; i < NUM_TRIGGERS; i++) begin
      snap_cfg[i] = (trig_ret && ret_bare[i]) ? '0 : payload_cfg[i];
    end
  end

  eg_snapshot #(.NUM_TRIGGERS(NUM_TRIGGERS), .STACK_WORDS(STACK_WORDS)) u_snapshot (
    .clk, .rst_n,
    .src_addr (ADDR),
    .tstamp,
    .trig_valid, .trig_idx, .trig_ret,
    .payload_cfg(snap_cfg), .gpr, .stack,
    .snap, .snap_valid, .snap_ready,
    .dropped  (snap_dropped)
  );

  flit_t [1:0] arb_flit;
  logic  [1:0] arb_valid, arb_ready;

  eg_packetizer u_packetizer (
    .clk, .rst_n,
    .dest, .src(ADDR),
    .snap, .snap_valid, .snap_ready,
    .tx_flit (arb_flit[0]),
    .tx_valid(arb_valid[0]),
    .tx_ready(arb_ready[0])
  );

  noc_config_if #(.ADDR(ADDR)) u_config (
    .clk, .rst_n,
    .rx_flit, .rx_valid, .rx_ready,
    .tx_flit (arb_flit[1]),
    .tx_valid(arb_valid[1]),
    .tx_ready(arb_ready[1]),
    .reg_addr, .reg_wdata, .reg_we, .reg_re, .reg_rdata
  );

  noc_arbiter #(.N(2)) u_tx_arb (
    .clk, .rst_n,
    .in_flit  (arb_flit),
    .in_valid (arb_valid),
    .in_ready (arb_ready),
    .out_flit (tx_flit),
    .out_valid(tx_valid),
    .out_ready(tx_ready)
  );
endmodule
