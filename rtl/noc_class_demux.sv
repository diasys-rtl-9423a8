// noc_class_demux: splits one flit stream by packet class.
//
// The class field of the first flit (bits 15:14) decides the output: event
// packets go to output 0 (ev_*), register packets (read, write, response) to
// output 1 (cfg_*). The decision is held until the flit marked `last` has
// passed. Purely combinational data path; one register holds the routing of
// the packet in flight. Splitting by class is this design's choice.
module noc_class_demux
  import diasys_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  flit_t in_flit,
  input  logic  in_valid,
  output logic  in_ready,
  output flit_t ev_flit,
  output logic  ev_valid,
  input  logic  ev_ready,
  output flit_t cfg_flit,
  output logic  cfg_valid,
  input  logic  cfg_ready
);
  logic in_pkt, route_cfg_q;
  logic route_cfg;

  assign route_cfg = in_pkt ? route_cfg_q
                            : (pkt_class_e'(in_flit.data[15:14]) != PKT_EVENT);

  assign ev_flit   = in_flit;
  assign cfg_flit  = in_flit;
  assign ev_valid  = in_valid && !route_cfg;
  assign cfg_valid = in_valid &&  route_cfg;
  assign in_ready  = route_cfg ? cfg_ready : ev_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_pkt      <= 1'b0;
      route_cfg_q <= 1'b0;
    end else if (in_valid && in_ready) begin
      in_pkt      <= !in_flit.last;
      route_cfg_q <= route_cfg;
    end
  end
endmodule
