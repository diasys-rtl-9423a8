// dp_network_adapter: network adapter of the diagnosis processor.
//
// Connects the diagnosis processor to the diagnosis NoC so that the CPU
// never has to copy or wait for event packets:
//  * DMA: an incoming event packet is written by a Wishbone master straight
//    into a free slot of the event buffer in RAM (NUM_SLOTS slots of
//    SLOT_WORDS 32-bit words from SLOT_BASE). Word 0 of the slot holds the
//    number of flits; flits follow two per word, the earlier flit in bits
//    31:16. Flits beyond the slot are not stored. A packet that finds no
//    free slot is discarded and counted.
//  * Run queue: when a packet is complete, its slot address is queued. The
//    CPU reads RUNQ to get the next event to process (0 when none); the read
//    removes it, so events are handled run-to-completion without interrupts.
//  * Discard queue: the CPU writes a processed event's address to DISCARDQ;
//    the scheduler pops one entry per cycle and marks the slot free again.
//  * Transmit: each CPU write to TX ({last[16], flit[15:0]}) queues one flit
//    for the NoC; the write waits while the queue is full.
//  * Configuration: register packets from the NoC are served by
//    noc_config_if (0 type, 1 version, 2 dropped packets, 3 free slots).
// Register slave: byte offsets RUNQ 0x0, DISCARDQ 0x4, TX 0x8, STATUS 0xC
// ({dropped[15:0], free slots[15:0]}); every access is acknowledged one
// cycle after stb (later for a TX or DISCARDQ write to a full queue).
// The DMA, run queue and discard queue are the paper's; slot layout,
// register map and the transmit path are this design's choices.
// Assertions check that the run queue never overflows and that the DMA
// holds each write until it is acknowledged.
module dp_network_adapter
  import diasys_pkg::*;
#(
  parameter logic [ADDR_W-1:0] ADDR       = 8'd1,
  parameter int unsigned       NUM_SLOTS  = 16,
  parameter int unsigned       SLOT_WORDS = 32,
  parameter logic [31:0]       SLOT_BASE  = 32'h0000_7000,
  parameter int unsigned       TX_DEPTH   = 32
) (
  input  logic    clk,
  input  logic    rst_n,
  // diagnosis NoC
  input  flit_t   rx_flit,
  input  logic    rx_valid,
  output logic    rx_ready,
  output flit_t   tx_flit,
  output logic    tx_valid,
  input  logic    tx_ready,
  // DMA Wishbone master
  output wb_m2s_t dma_m2s,
  input  wb_s2m_t dma_s2m,
  // register Wishbone slave
  input  wb_m2s_t reg_m2s,
  output wb_s2m_t reg_s2m
);
  localparam int unsigned SW = $clog2(NUM_SLOTS);
  localparam int unsigned CW = $clog2(NUM_SLOTS + 1);
  localparam int unsigned SLOT_BYTES = 4 * SLOT_WORDS;

  // ---------------- class split and configuration ----------------
  flit_t ev_flit, cfg_flit;
  logic  ev_valid, ev_ready, cfg_valid, cfg_ready;

  noc_class_demux u_demux (
    .clk, .rst_n,
    .in_flit(rx_flit), .in_valid(rx_valid), .in_ready(rx_ready),
    .ev_flit, .ev_valid, .ev_ready,
    .cfg_flit, .cfg_valid, .cfg_ready
  );

  flit_t [1:0] arb_flit;
  logic  [1:0] arb_valid, arb_ready;
  logic [15:0] cr_addr, cr_wdata, cr_rdata;
  logic        cr_we, cr_re;
  logic [15:0] cnt_dropped;
  logic [NUM_SLOTS-1:0] slot_free;
  logic [CW-1:0]        free_cnt;

  noc_config_if #(.ADDR(ADDR)) u_config (
    .clk, .rst_n,
    .rx_flit(cfg_flit), .rx_valid(cfg_valid), .rx_ready(cfg_ready),
    .tx_flit(arb_flit[1]), .tx_valid(arb_valid[1]), .tx_ready(arb_ready[1]),
    .reg_addr(cr_addr), .reg_wdata(cr_wdata), .reg_we(cr_we), .reg_re(cr_re),
    .reg_rdata(cr_rdata)
  );

  always_comb begin
    unique case (cr_addr)
      16'd0:   cr_rdata = MODTYPE_DP;
      16'd1:   cr_rdata = MOD_VERSION;
      16'd2:   cr_rdata = cnt_dropped;
      16'd3:   cr_rdata = 16'(free_cnt);
      default: cr_rdata = '0;
    endcase
  end

  always_comb begin
    free_cnt = '0;
    for (int i = 0; i < NUM_SLOTS; i++) free_cnt += CW'(slot_free[i]);
  end

  // ---------------- queues ----------------
  logic          runq_push, runq_pop, runq_full, runq_empty;
  logic [SW-1:0] runq_wdata, runq_rdata;
  logic          discq_push, discq_pop, discq_full, discq_empty;
  logic [SW-1:0] discq_wdata, discq_rdata;
  logic          txq_push, txq_full, txq_empty;
  logic [16:0]   txq_rdata;
  logic [CW-1:0] runq_count, discq_count;
  logic [$clog2(TX_DEPTH+1)-1:0] txq_count;

  sync_fifo #(.WIDTH(SW), .DEPTH(NUM_SLOTS)) u_runq (
    .clk, .rst_n, .push(runq_push), .wdata(runq_wdata), .pop(runq_pop),
    .rdata(runq_rdata), .full(runq_full), .empty(runq_empty), .count(runq_count)
  );
  sync_fifo #(.WIDTH(SW), .DEPTH(NUM_SLOTS)) u_discq (
    .clk, .rst_n, .push(discq_push), .wdata(discq_wdata), .pop(discq_pop),
    .rdata(discq_rdata), .full(discq_full), .empty(discq_empty), .count(discq_count)
  );
  sync_fifo #(.WIDTH(17), .DEPTH(TX_DEPTH)) u_txq (
    .clk, .rst_n, .push(txq_push), .wdata(reg_m2s.dat[16:0]), .pop(arb_valid[0] && arb_ready[0]),
    .rdata(txq_rdata), .full(txq_full), .empty(txq_empty), .count(txq_count)
  );

  assign arb_flit[0]  = flit_t'(txq_rdata);
  assign arb_valid[0] = !txq_empty;

  noc_arbiter #(.N(2)) u_tx_arb (
    .clk, .rst_n,
    .in_flit(arb_flit), .in_valid(arb_valid), .in_ready(arb_ready),
    .out_flit(tx_flit), .out_valid(tx_valid), .out_ready(tx_ready)
  );

  // ---------------- DMA into the event buffer ----------------
  typedef enum logic [2:0] {D_IDLE, D_COLLECT, D_WRITE, D_LEN, D_DROP} dma_state_e;
  dma_state_e    dstate;
  logic [SW-1:0] slot;
  logic [15:0]   fcnt;        // flits received of the current packet
  logic [15:0]   hi_flit;
  logic          pkt_done;
  logic [31:0]   wr_word;
  logic [15:0]   wr_idx;

  logic          have_free;
  logic [SW-1:0] free_idx;
  always_comb begin
    have_free = 1'b0;
    free_idx  = '0;
    for (int i = NUM_SLOTS - 1; i >= 0; i--) begin
      if (slot_free[i]) begin
        have_free = 1'b1;
        free_idx  = SW'(i);
      end
    end
  end

  function automatic logic [31:0] slot_addr(logic [SW-1:0] s);
    return SLOT_BASE + 32'(s) * 32'(SLOT_BYTES);
  endfunction

  assign ev_ready = (dstate == D_IDLE) || (dstate == D_COLLECT) || (dstate == D_DROP);
  wire ev_fire = ev_valid && ev_ready;

  always_comb begin
    dma_m2s     = '0;
    dma_m2s.sel = 4'hF;
    dma_m2s.we  = 1'b1;
    if (dstate == D_WRITE || dstate == D_LEN) begin
      dma_m2s.cyc = 1'b1;
      dma_m2s.stb = 1'b1;
      dma_m2s.adr = slot_addr(slot) + ((dstate == D_LEN) ? 32'd0 : 32'(wr_idx) << 2);
      dma_m2s.dat = (dstate == D_LEN) ? 32'(fcnt) : wr_word;
    end
  end

  assign runq_push  = (dstate == D_LEN) && dma_s2m.ack;
  assign runq_wdata = slot;

  // the flit just received completes a word when it is odd-numbered or last
  wire [15:0] fidx      = (dstate == D_IDLE) ? 16'd0 : fcnt;
  wire        word_done = fidx[0] || ev_flit.last;
  wire [15:0] word_idx  = 16'd1 + (fidx >> 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dstate      <= D_IDLE;
      slot        <= '0;
      fcnt        <= '0;
      hi_flit     <= '0;
      pkt_done    <= 1'b0;
      wr_word     <= '0;
      wr_idx      <= '0;
      cnt_dropped <= '0;
      slot_free   <= '1;
    end else begin
      if (discq_pop) slot_free[discq_rdata] <= 1'b1;
      unique case (dstate)
        D_IDLE, D_COLLECT: if (ev_fire) begin
          if (dstate == D_IDLE && !have_free) begin
            cnt_dropped <= cnt_dropped + 1'b1;
            dstate      <= ev_flit.last ? D_IDLE : D_DROP;
          end else begin
            if (dstate == D_IDLE) begin
              slot                <= free_idx;
              slot_free[free_idx] <= 1'b0;
            end
            fcnt     <= fidx + 1'b1;
            pkt_done <= ev_flit.last;
            if (!fidx[0]) hi_flit <= ev_flit.data;
            if (word_done) begin
              wr_word <= fidx[0] ? {hi_flit, ev_flit.data} : {ev_flit.data, 16'h0};
              wr_idx  <= word_idx;
              if (32'(word_idx) < SLOT_WORDS) dstate <= D_WRITE;
              else dstate <= ev_flit.last ? D_LEN : D_COLLECT;
            end else begin
              dstate <= D_COLLECT;
            end
          end
        end
        D_WRITE: if (dma_s2m.ack) dstate <= pkt_done ? D_LEN : D_COLLECT;
        D_LEN:   if (dma_s2m.ack) dstate <= D_IDLE;
        D_DROP:  if (ev_fire && ev_flit.last) dstate <= D_IDLE;
        default: dstate <= D_IDLE;
      endcase
    end
  end

  // ---------------- register slave ----------------
  wire        reg_req  = reg_m2s.cyc && reg_m2s.stb && !reg_s2m.ack;
  wire [3:0]  reg_off  = reg_m2s.adr[3:0];
  wire [31:0] disc_rel = reg_m2s.dat - SLOT_BASE;
  wire        disc_ok  = (reg_m2s.dat >= SLOT_BASE) &&
                         (disc_rel < 32'(NUM_SLOTS * SLOT_BYTES)) &&
                         (disc_rel % 32'(SLOT_BYTES) == 0);
  logic       reg_go;

  always_comb begin
    reg_go = reg_req;
    if (reg_req && reg_m2s.we && reg_off == NAREG_TX       && txq_full)   reg_go = 1'b0;
    if (reg_req && reg_m2s.we && reg_off == NAREG_DISCARDQ && discq_full) reg_go = 1'b0;
  end

  assign txq_push    = reg_go && reg_m2s.we && reg_off == NAREG_TX;
  assign discq_push  = reg_go && reg_m2s.we && reg_off == NAREG_DISCARDQ && disc_ok;
  assign discq_wdata = SW'(disc_rel / 32'(SLOT_BYTES));
  assign discq_pop   = !discq_empty;
  assign runq_pop    = reg_go && !reg_m2s.we && reg_off == NAREG_RUNQ && !runq_empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      reg_s2m <= '0;
    end else begin
      reg_s2m.ack <= reg_go;
      if (reg_go && !reg_m2s.we) begin
        unique case (reg_off)
          NAREG_RUNQ:   reg_s2m.dat <= runq_empty ? 32'd0 : slot_addr(runq_rdata);
          NAREG_STATUS: reg_s2m.dat <= {cnt_dropped, 16'(free_cnt)};
          default:      reg_s2m.dat <= '0;
        endcase
      end
    end
  end

  // one run-queue entry per slot, so the run queue can never overflow
  a_runq_room: assert property (@(posedge clk) disable iff (!rst_n) !(runq_push && runq_full));
  // the DMA holds its write until the bus acknowledges it
  a_dma_hold: assert property (@(posedge clk) disable iff (!rst_n)
    dma_m2s.stb && !dma_s2m.ack |=> dma_m2s.stb && $stable(dma_m2s.adr) && $stable(dma_m2s.dat));
endmodule
