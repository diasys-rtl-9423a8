// noc_config_if: configuration module of a diagnosis NoC node.
//
// Every node on the diagnosis NoC exposes 16-bit configuration registers
// through this module. It accepts register packets from the NoC:
//   read : {hdr(REG_READ, me), src, addr}
//   write: {hdr(REG_WRITE, me), src, addr, data}
// A write drives one cycle of reg_we; a read drives one cycle of reg_re,
// samples reg_rdata in that same cycle and answers the sender with
//   {hdr(REG_RESP, src), ADDR, addr, data}.
// Writes are not acknowledged. Packets of any other class, and flits after
// the expected ones, are consumed and ignored. The receive side is stalled
// only while a response is being sent. That a common configuration module
// exposes registers over the NoC is from the paper; the packet format and
// timing are this design's choices.
module noc_config_if
  import diasys_pkg::*;
#(
  parameter logic [ADDR_W-1:0] ADDR = '0
) (
  input  logic        clk,
  input  logic        rst_n,
  // packets from the NoC
  input  flit_t       rx_flit,
  input  logic        rx_valid,
  output logic        rx_ready,
  // responses to the NoC
  output flit_t       tx_flit,
  output logic        tx_valid,
  input  logic        tx_ready,
  // register bus
  output logic [15:0] reg_addr,
  output logic [15:0] reg_wdata,
  output logic        reg_we,
  output logic        reg_re,
  input  logic [15:0] reg_rdata
);
  typedef enum logic [2:0] {S_HDR, S_SRC, S_ADR, S_DAT, S_DRAIN, S_RESP} state_e;

  state_e             state;
  pkt_class_e         cls;
  logic [ADDR_W-1:0]  src;
  logic [15:0]        addr_q, rdata_q;
  logic               resp_pending;
  logic [1:0]         tx_cnt;

  wire rx_fire = rx_valid && rx_ready;

  assign rx_ready  = (state != S_RESP);
  assign reg_addr  = (state == S_ADR) ? rx_flit.data : addr_q;
  assign reg_wdata = rx_flit.data;
  assign reg_re    = rx_fire && (state == S_ADR) && (cls == PKT_REG_READ);
  assign reg_we    = rx_fire && (state == S_DAT);

  always_comb begin
    tx_valid = (state == S_RESP);
    tx_flit  = '0;
    unique case (tx_cnt)
      2'd0: tx_flit.data = hdr_flit(PKT_REG_RESP, src);
      2'd1: tx_flit.data = FLIT_W'(ADDR);
      2'd2: tx_flit.data = addr_q;
      default: begin
        tx_flit.data = rdata_q;
        tx_flit.last = 1'b1;
      end
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_HDR;
      cls          <= PKT_EVENT;
      src          <= '0;
      addr_q       <= '0;
      rdata_q      <= '0;
      resp_pending <= 1'b0;
      tx_cnt       <= '0;
    end else begin
      unique case (state)
        S_HDR: if (rx_fire) begin
          cls   <= pkt_class_e'(rx_flit.data[15:14]);
          state <= rx_flit.last ? S_HDR : S_SRC;
        end
        S_SRC: if (rx_fire) begin
          src   <= rx_flit.data[ADDR_W-1:0];
          state <= rx_flit.last ? S_HDR : S_ADR;
        end
        S_ADR: if (rx_fire) begin
          addr_q <= rx_flit.data;
          if (cls == PKT_REG_READ) begin
            rdata_q <= reg_rdata;
            if (rx_flit.last) begin
              state <= S_RESP;
            end else begin
              resp_pending <= 1'b1;
              state        <= S_DRAIN;
            end
          end else if (cls == PKT_REG_WRITE) begin
            state <= rx_flit.last ? S_HDR : S_DAT;
          end else begin
            state <= rx_flit.last ? S_HDR : S_DRAIN;
          end
        end
        S_DAT: if (rx_fire) begin
          state <= rx_flit.last ? S_HDR : S_DRAIN;
        end
        S_DRAIN: if (rx_fire && rx_flit.last) begin
          state        <= resp_pending ? S_RESP : S_HDR;
          resp_pending <= 1'b0;
        end
        S_RESP: if (tx_ready) begin
          tx_cnt <= tx_cnt + 1'b1;
          if (tx_cnt == 2'd3) state <= S_HDR;
        end
        default: state <= S_HDR;
      endcase
    end
  end
endmodule
