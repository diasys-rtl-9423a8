// eg_packetizer: NoC packetizer of the CPU event generator.
//
// Turns one snapshot into one event packet of 16-bit flits:
//   hdr(EVENT, dest), src, event type, timestamp[31:16], timestamp[15:0],
//   then every payload word as high half, low half.
// The flit carrying the last half-word (or the low timestamp half for an
// event without payload) is marked last. The snapshot is accepted
// (snap_ready) in the cycle its final flit leaves, so a back-to-back
// snapshot starts on the next cycle; a packet of n payload words takes
// 5 + 2n cycles when the NoC does not stall. The flit order is this
// design's choice; the paper names the packetizer only.
// An assertion checks that an offered flit stays stable until it is taken.
module eg_packetizer
  import diasys_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic [ADDR_W-1:0] dest,
  input  logic [ADDR_W-1:0] src,
  input  snapshot_t         snap,
  input  logic              snap_valid,
  output logic              snap_ready,
  output flit_t             tx_flit,
  output logic              tx_valid,
  input  logic              tx_ready
);
  logic [5:0] cnt;       // index of the flit being sent
  logic [5:0] last_cnt;
  logic [3:0] widx;

  assign last_cnt = 6'd4 + {snap.nwords, 1'b0};
  assign widx     = 4'((cnt - 6'd5) >> 1);

  always_comb begin
    tx_valid = snap_valid;
    tx_flit  = '0;
    unique case (cnt)
      6'd0: tx_flit.data = hdr_flit(PKT_EVENT, dest);
      6'd1: tx_flit.data = FLIT_W'(src);
      6'd2: tx_flit.data = snap.etype;
      6'd3: tx_flit.data = snap.tstamp[31:16];
      6'd4: tx_flit.data = snap.tstamp[15:0];
      default: tx_flit.data = cnt[0] ? snap.words[widx][31:16] : snap.words[widx][15:0];
    endcase
    tx_flit.last = (cnt == last_cnt);
    snap_ready   = tx_valid && tx_ready && tx_flit.last;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0;
    end else if (tx_valid && tx_ready) begin
      cnt <= tx_flit.last ? '0 : cnt + 1'b1;
    end
  end

  // handshake rule: an offered flit stays unchanged until it is taken
  a_tx_stable: assert property (@(posedge clk) disable iff (!rst_n)
    tx_valid && !tx_ready |=> tx_valid && $stable(tx_flit));
endmodule
