// tb_noc_config_if: self-checking test of the NoC configuration module.
//
// A small register file in the testbench answers the register bus. The
// test sends write packets and read packets (also with extra trailing
// flits and interleaved event packets that must be ignored) and checks the
// register bus strobes and the four-flit read responses, with random
// back-pressure on the response side.
module tb_noc_config_if;
  import diasys_pkg::*;
  localparam logic [7:0] ME = 8'h05;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  flit_t rx_flit, tx_flit;
  logic rx_valid, rx_ready, tx_valid, tx_ready;
  logic [15:0] reg_addr, reg_wdata, reg_rdata;
  logic reg_we, reg_re;

  noc_config_if #(.ADDR(ME)) dut (.*);

  logic [15:0] regs [16];
  assign reg_rdata = regs[reg_addr[3:0]] ^ 16'h5A00;
  int n_we = 0, n_re = 0;
  always_ff @(posedge clk) begin
    if (reg_we) begin regs[reg_addr[3:0]] <= reg_wdata; n_we++; end
    if (reg_re) n_re++;
  end

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  flit_t rxq [$];
  always @(negedge clk) if (tx_valid && tx_ready) rxq.push_back(tx_flit);
  always begin @(posedge clk); #1; tx_ready = 1'($urandom_range(0, 3) != 0); end

  task automatic send(input logic [15:0] f [$]);
    foreach (f[i]) begin
      rx_flit.data = f[i]; rx_flit.last = (i == f.size() - 1); rx_valid = 1;
      forever begin @(negedge clk); if (rx_ready) break; end
      @(posedge clk); #2;
    end
    rx_valid = 0;
  endtask

  task automatic expect_resp(input logic [7:0] to, input logic [15:0] a, input logic [15:0] d);
    int t = 0;
    while (rxq.size() < 4 && t < 200) begin @(posedge clk); t++; end
    chk(rxq.size() == 4, "response has four flits");
    if (rxq.size() == 4) begin
      chk(rxq[0].data == hdr_flit(PKT_REG_RESP, to), "resp header");
      chk(rxq[1].data == 16'(ME), "resp source");
      chk(rxq[2].data == a, "resp address");
      chk(rxq[3].data == d && rxq[3].last, $sformatf("resp data %h exp %h", rxq[3].data, d));
    end
    rxq.delete();
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] model [16];
    rx_valid = 0; rx_flit = '0; tx_ready = 0;
    foreach (regs[i]) begin regs[i] = '0; model[i] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int n = 0; n < 40; n++) begin
      logic [3:0] a; logic [15:0] d; logic [7:0] who;
      a = 4'($urandom); d = 16'($urandom); who = 8'($urandom_range(0, 15));
      send('{hdr_flit(PKT_REG_WRITE, ME), 16'(who), 16'(a), d});
      model[a] = d;
      if (n % 5 == 0) send('{hdr_flit(PKT_EVENT, ME), 16'(who), 16'h1234, 16'hFFFF}); // ignored
      a = 4'($urandom);
      if (n % 3 == 0) send('{hdr_flit(PKT_REG_READ, ME), 16'(who), 16'(a), 16'hDEAD}); // trailing flit
      else            send('{hdr_flit(PKT_REG_READ, ME), 16'(who), 16'(a)});
      expect_resp(who, 16'(a), model[a] ^ 16'h5A00);
    end
    chk(n_we == 40, $sformatf("write strobes %0d", n_we));
    chk(n_re == 40, $sformatf("read strobes %0d", n_re));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
