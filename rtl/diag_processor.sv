// diag_processor: the diagnosis processor, a programmable processing node.
//
// A processor tile dedicated to running transformation actors on events:
// network adapter (DMA, run/discard queues, transmit queue, configuration),
// a shared Wishbone bus and RAM_WORDS x 32 bit of program and data memory.
// The CPU core (a mor1kx in the paper) is not part of this RTL: its bus
// attaches through cpu_m2s/cpu_s2m. Its software loops: read RUNQ
// (0x8000_0000); if non-zero, process the event stored at that address,
// send any output event flit by flit through TX (0x8000_0008), then write
// the address to DISCARDQ (0x8000_0004). RAM is at address 0.
// The composition follows the paper's block diagram; the address map is
// this design's choice.
module diag_processor
  import diasys_pkg::*;
#(
  parameter logic [ADDR_W-1:0] ADDR      = 8'd1,
  parameter int unsigned       RAM_WORDS = 7680,
  parameter int unsigned       NUM_SLOTS = 16
) (
  input  logic    clk,
  input  logic    rst_n,
  input  flit_t   rx_flit,
  input  logic    rx_valid,
  output logic    rx_ready,
  output flit_t   tx_flit,
  output logic    tx_valid,
  input  logic    tx_ready,
  input  wb_m2s_t cpu_m2s,
  output wb_s2m_t cpu_s2m
);
  wb_m2s_t [1:0] m_m2s, s_m2s;
  wb_s2m_t [1:0] m_s2m, s_s2m;

  assign m_m2s[1] = cpu_m2s;
  assign cpu_s2m  = m_s2m[1];

  dp_network_adapter #(.ADDR(ADDR), .NUM_SLOTS(NUM_SLOTS)) u_na (
    .clk, .rst_n,
    .rx_flit, .rx_valid, .rx_ready,
    .tx_flit, .tx_valid, .tx_ready,
    .dma_m2s(m_m2s[0]), .dma_s2m(m_s2m[0]),
    .reg_m2s(s_m2s[1]), .reg_s2m(s_s2m[1])
  );

  wb_interconnect u_bus (
    .clk, .rst_n,
    .m_m2s, .m_s2m, .s_m2s, .s_s2m
  );

  dp_ram #(.WORDS(RAM_WORDS)) u_ram (
    .clk, .rst_n,
    .wb_m2s(s_m2s[0]), .wb_s2m(s_s2m[0])
  );
endmodule
