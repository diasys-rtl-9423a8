// ring_router: one node of the unidirectional diagnosis ring.
//
// A packet arriving on the ring input is ejected to the local port when the
// destination in its first flit equals ADDR, and forwarded otherwise. The
// ring output is shared by forwarded traffic and packets injected by the
// local node; a packet-level round-robin arbiter keeps packets whole.
// A FIFO of 2*MAX_PKT flits on the ring output registers the link, which
// keeps the ready path from closing a combinational loop around the ring.
// Deadlock freedom follows the bubble rule for rings: the first flit of a
// forwarded packet may enter the FIFO only when it has room for a whole
// packet (MAX_PKT flits), and the first flit of an injected packet only when
// it has room for two. A packet that has started therefore never waits for
// space, and one packet-sized gap always remains in the ring. Packets must
// not be longer than MAX_PKT flits.
// Latency: one cycle per hop through the output FIFO. Routing by
// destination address on a 16-bit ring is what the paper describes; the
// arbitration, buffering and bubble rule are this design's own choices.
module ring_router
  import diasys_pkg::*;
#(
  parameter logic [ADDR_W-1:0] ADDR       = '0,
  parameter int unsigned       MAX_PKT    = 64
) (
  input  logic  clk,
  input  logic  rst_n,
  // ring
  input  flit_t ring_in_flit,
  input  logic  ring_in_valid,
  output logic  ring_in_ready,
  output flit_t ring_out_flit,
  output logic  ring_out_valid,
  input  logic  ring_out_ready,
  // local node
  input  flit_t local_in_flit,
  input  logic  local_in_valid,
  output logic  local_in_ready,
  output flit_t local_out_flit,
  output logic  local_out_valid,
  input  logic  local_out_ready
);
  // route of the ring-input packet in flight
  logic in_pkt, eject_q, eject;
  assign eject = in_pkt ? eject_q : (ring_in_flit.data[ADDR_W-1:0] == ADDR);

  flit_t [1:0] arb_flit;
  logic  [1:0] arb_valid, arb_ready;
  flit_t       merged_flit;
  logic        merged_valid, merged_ready;

  assign local_out_flit  = ring_in_flit;
  assign local_out_valid = ring_in_valid && eject;

  localparam int unsigned DEPTH = 2 * MAX_PKT;
  logic [$clog2(DEPTH+1)-1:0] free;
  logic loc_pkt;   // local packet in flight (its first flit has been taken)

  assign arb_flit[0]  = ring_in_flit;
  assign arb_valid[0] = ring_in_valid && !eject && (in_pkt || free >= ($clog2(DEPTH+1))'(MAX_PKT));
  assign arb_flit[1]  = local_in_flit;
  assign arb_valid[1] = local_in_valid && (loc_pkt || free == ($clog2(DEPTH+1))'(DEPTH));
  assign local_in_ready = arb_valid[1] && arb_ready[1];

  assign ring_in_ready = eject ? local_out_ready : (arb_valid[0] && arb_ready[0]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_pkt  <= 1'b0;
      eject_q <= 1'b0;
      loc_pkt <= 1'b0;
    end else begin
      if (ring_in_valid && ring_in_ready) begin
        in_pkt  <= !ring_in_flit.last;
        eject_q <= eject;
      end
      if (local_in_valid && local_in_ready) loc_pkt <= !local_in_flit.last;
    end
  end

  noc_arbiter #(.N(2)) u_arb (
    .clk, .rst_n,
    .in_flit  (arb_flit),
    .in_valid (arb_valid),
    .in_ready (arb_ready),
    .out_flit (merged_flit),
    .out_valid(merged_valid),
    .out_ready(merged_ready)
  );

  flit_fifo #(.DEPTH(DEPTH)) u_out_fifo (
    .clk, .rst_n,
    .in_flit  (merged_flit),
    .in_valid (merged_valid),
    .in_ready (merged_ready),
    .out_flit (ring_out_flit),
    .out_valid(ring_out_valid),
    .out_ready(ring_out_ready),
    .free
  );
endmodule
