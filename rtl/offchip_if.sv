// offchip_if: off-chip interface between the diagnosis NoC and the host.
//
// The host link is modelled as two 16-bit word streams with valid/ready, as
// offered by a USB 2.0 FIFO controller. Both directions carry packets as a
// length word followed by that many flits:
//  * host -> chip: the length word is consumed, then `length` words are
//    forwarded as flits, the last one marked last (a zero length is ignored).
//  * chip -> host: a packet from the NoC is stored in a MAX_PKT-flit buffer
//    until its last flit arrives, then its length and its flits are sent.
//    Flits beyond MAX_PKT are discarded but counted in the length only up to
//    MAX_PKT. One packet is buffered at a time.
// The paper names a USB 2.0 off-chip interface only; the framing and
// buffering are this design's choices.
module offchip_if
  import diasys_pkg::*;
#(
  parameter int unsigned MAX_PKT = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  // host link
  input  logic [15:0] host_in_data,
  input  logic        host_in_valid,
  output logic        host_in_ready,
  output logic [15:0] host_out_data,
  output logic        host_out_valid,
  input  logic        host_out_ready,
  // diagnosis NoC
  input  flit_t       rx_flit,
  input  logic        rx_valid,
  output logic        rx_ready,
  output flit_t       tx_flit,
  output logic        tx_valid,
  input  logic        tx_ready
);
  localparam int unsigned BW = $clog2(MAX_PKT + 1);
  localparam int unsigned PW = $clog2(MAX_PKT);

  // ---------------- host -> NoC ----------------
  logic        in_active;
  logic [15:0] in_left;

  assign tx_flit.data  = host_in_data;
  assign tx_flit.last  = (in_left == 16'd1);
  assign tx_valid      = in_active && host_in_valid;
  assign host_in_ready = in_active ? tx_ready : 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_active <= 1'b0;
      in_left   <= '0;
    end else if (host_in_valid && host_in_ready) begin
      if (!in_active) begin
        in_left   <= host_in_data;
        in_active <= (host_in_data != 16'd0);
      end else begin
        in_left   <= in_left - 1'b1;
        in_active <= (in_left != 16'd1);
      end
    end
  end

  // ---------------- NoC -> host ----------------
  typedef enum logic [1:0] {O_COLLECT, O_LEN, O_DATA} out_state_e;
  out_state_e    ostate;
  logic [15:0]   buf_mem [MAX_PKT];
  logic [BW-1:0] wr_cnt, rd_cnt;

  assign rx_ready = (ostate == O_COLLECT);

  always_comb begin
    host_out_valid = (ostate != O_COLLECT);
    host_out_data  = (ostate == O_LEN) ? 16'(wr_cnt) : buf_mem[PW'(rd_cnt)];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ostate <= O_COLLECT;
      wr_cnt <= '0;
      rd_cnt <= '0;
    end else begin
      unique case (ostate)
        O_COLLECT: if (rx_valid) begin
          if (wr_cnt != BW'(MAX_PKT)) wr_cnt <= wr_cnt + 1'b1;
          if (rx_flit.last) ostate <= O_LEN;
        end
        O_LEN: if (host_out_ready) begin
          rd_cnt <= '0;
          ostate <= O_DATA;
        end
        O_DATA: if (host_out_ready) begin
          rd_cnt <= rd_cnt + 1'b1;
          if (rd_cnt + 1'b1 == wr_cnt) begin
            ostate <= O_COLLECT;
            wr_cnt <= '0;
          end
        end
        default: ostate <= O_COLLECT;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (ostate == O_COLLECT && rx_valid && wr_cnt != BW'(MAX_PKT)) begin
      buf_mem[PW'(wr_cnt)] <= rx_flit.data;
    end
  end
endmodule
