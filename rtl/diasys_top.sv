// diasys_top: on-chip part of the diagnosis system for a multi-core SoC.
//
// NUM_CPUS CPU event generators (one per observed CPU), one diagnosis
// processor and the off-chip interface, joined by the unidirectional 16-bit
// diagnosis NoC ring. Node addresses: 0 off-chip interface, 1 diagnosis
// processor, 2+i event generator of CPU i; the ring visits them in that
// order. Everything the host does - writing trigger configuration, choosing
// where events go (host or diagnosis processor), reading results - travels
// as packets through host_in/host_out.
// Ports: trace[i] is the execution state of observed CPU i; cpu_m2s/cpu_s2m
// is the Wishbone bus of the diagnosis processor's CPU core, which is not
// part of this RTL. The set of components is the paper's prototype; the
// addresses and ring order are this design's choices.
module diasys_top
  import diasys_pkg::*;
#(
  parameter int unsigned NUM_CPUS = 4
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  cpu_trace_t [NUM_CPUS-1:0] trace,
  input  logic [15:0]               host_in_data,
  input  logic                      host_in_valid,
  output logic                      host_in_ready,
  output logic [15:0]               host_out_data,
  output logic                      host_out_valid,
  input  logic                      host_out_ready,
  input  wb_m2s_t                   cpu_m2s,
  output wb_s2m_t                   cpu_s2m
);
  localparam int unsigned NODES = NUM_CPUS + 2;

  flit_t [NODES-1:0] inj_flit, ej_flit;
  logic  [NODES-1:0] inj_valid, inj_ready, ej_valid, ej_ready;

  diag_ring #(.NODES(NODES)) u_noc (
    .clk, .rst_n,
    .local_in_flit  (inj_flit),
    .local_in_valid (inj_valid),
    .local_in_ready (inj_ready),
    .local_out_flit (ej_flit),
    .local_out_valid(ej_valid),
    .local_out_ready(ej_ready)
  );

  offchip_if u_offchip (
    .clk, .rst_n,
    .host_in_data, .host_in_valid, .host_in_ready,
    .host_out_data, .host_out_valid, .host_out_ready,
    .rx_flit(ej_flit[0]), .rx_valid(ej_valid[0]), .rx_ready(ej_ready[0]),
    .tx_flit(inj_flit[0]), .tx_valid(inj_valid[0]), .tx_ready(inj_ready[0])
  );

  diag_processor #(.ADDR(8'd1)) u_dp (
    .clk, .rst_n,
    .rx_flit(ej_flit[1]), .rx_valid(ej_valid[1]), .rx_ready(ej_ready[1]),
    .tx_flit(inj_flit[1]), .tx_valid(inj_valid[1]), .tx_ready(inj_ready[1]),
    .cpu_m2s, .cpu_s2m
  );

  for (genvar i = 0; i < NUM_CPUS; i++) begin : g_eg
    cpu_event_gen #(.ADDR(ADDR_W'(i + 2))) u_eg (
      .clk, .rst_n,
      .trace   (trace[i]),
      .rx_flit (ej_flit[i+2]), .rx_valid(ej_valid[i+2]), .rx_ready(ej_ready[i+2]),
      .tx_flit (inj_flit[i+2]), .tx_valid(inj_valid[i+2]), .tx_ready(inj_ready[i+2])
    );
  end
endmodule
