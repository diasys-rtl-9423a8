// diag_ring: the diagnosis NoC, a unidirectional ring of NODES routers.
//
// Router i has address i and sends to router (i+1) mod NODES. Every node
// gets an inject port (local_in_*) and an eject port (local_out_*); a packet
// travels around the ring until it reaches the router whose address matches
// its destination, taking one cycle per hop. Packets may be at most MAX_PKT
// flits long (see ring_router for the deadlock-avoidance rule). Flits are 16 bits wide as in
// the paper; the node order and the per-flit valid/ready flow control are
// this design's choices.
module diag_ring
  import diasys_pkg::*;
#(
  parameter int unsigned NODES      = 6,
  parameter int unsigned MAX_PKT    = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  flit_t [NODES-1:0] local_in_flit,
  input  logic  [NODES-1:0] local_in_valid,
  output logic  [NODES-1:0] local_in_ready,
  output flit_t [NODES-1:0] local_out_flit,
  output logic  [NODES-1:0] local_out_valid,
  input  logic  [NODES-1:0] local_out_ready
);
  flit_t [NODES-1:0] link_flit;   // link_* [i] is the output of router i
  logic  [NODES-1:0] link_valid, link_ready;

  for (genvar i = 0; i < NODES; i++) begin : g_node
    localparam int unsigned PREV = (i + NODES - 1) % NODES;
    ring_router #(.ADDR(ADDR_W'(i)), .MAX_PKT(MAX_PKT)) u_router (
      .clk, .rst_n,
      .ring_in_flit   (link_flit[PREV]),
      .ring_in_valid  (link_valid[PREV]),
      .ring_in_ready  (link_ready[PREV]),
      .ring_out_flit  (link_flit[i]),
      .ring_out_valid (link_valid[i]),
      .ring_out_ready (link_ready[i]),
      .local_in_flit  (local_in_flit[i]),
      .local_in_valid (local_in_valid[i]),
      .local_in_ready (local_in_ready[i]),
      .local_out_flit (local_out_flit[i]),
      .local_out_valid(local_out_valid[i]),
      .local_out_ready(local_out_ready[i])
    );
  end
endmodule
