// tb_diag_processor: self-checking testbench of the diagnosis processor tile.
//
// A testbench bus master stands in for the CPU core and runs the
// run-to-completion loop of a transformation actor: poll RUNQ, read the
// event from RAM through the shared bus (while the DMA may be writing the
// next one), compute an output event (the 16-bit sum of the input's flits),
// send it through TX and free the slot through DISCARDQ. Event packets
// arrive on the NoC side at random times. Checked: every event is read back
// exactly as sent and in order, every output packet appears on the NoC with
// the right contents, CPU data in low RAM is not disturbed by the DMA, and
// the free-slot count returns to 16. Inputs change 2 ns after the rising
// edge; handshakes are sampled on the falling edge. Includes a watchdog.
module tb_diag_processor;
  import diasys_pkg::*;
  localparam logic [7:0] ME = 8'd1, HOST = 8'd0;
  localparam int unsigned NEV = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  flit_t rx_flit, tx_flit;
  logic rx_valid, rx_ready, tx_valid, tx_ready;
  wb_m2s_t cpu_m2s;
  wb_s2m_t cpu_s2m;
  int checks = 0, failures = 0;

  diag_processor dut (.clk, .rst_n, .rx_flit, .rx_valid, .rx_ready, .tx_flit, .tx_valid,
                      .tx_ready, .cpu_m2s, .cpu_s2m);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  typedef logic [15:0] fl_t [$];
  fl_t got [$];
  fl_t cur;
  always begin @(posedge clk); #1; tx_ready = ($urandom % 3) != 0; end
  initial forever begin
    @(negedge clk);
    if (tx_valid && tx_ready) begin
      cur.push_back(tx_flit.data);
      if (tx_flit.last) begin got.push_back(cur); cur = {}; end
    end
  end

  task automatic bus(input bit we, input logic [31:0] adr, input logic [31:0] dat,
                     output logic [31:0] rdat);
    #2;
    cpu_m2s = '{cyc: 1'b1, stb: 1'b1, we: we, adr: adr, dat: dat, sel: 4'hF};
    forever begin @(negedge clk); if (cpu_s2m.ack) break; end
    rdat = cpu_s2m.dat;
    @(posedge clk); #2;
    cpu_m2s = '0;
    @(posedge clk);
  endtask

  fl_t sent [$];
  fl_t expect_out [$];
  int handled = 0;

  initial begin
    rx_valid = 0; rx_flit = '0; cpu_m2s = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    fork
      // event source on the NoC
      for (int k = 0; k < NEV; k++) begin
        automatic fl_t f;
        automatic int n = $urandom_range(3, 24);
        f.push_back(hdr_flit(PKT_EVENT, ME));
        f.push_back(16'($urandom_range(2, 5)));
        for (int i = 2; i < n; i++) f.push_back(16'($urandom));
        sent.push_back(f);
        #2;
        foreach (f[i]) begin
          rx_flit.data = f[i]; rx_flit.last = (i == n - 1); rx_valid = 1;
          forever begin @(negedge clk); if (rx_ready) break; end
          @(posedge clk); #2;
        end
        rx_valid = 0;
        repeat ($urandom_range(60)) @(posedge clk);
      end
      // CPU: scratch data in low RAM plus the actor loop
      begin
        logic [31:0] r, a, len, w;
        logic [15:0] sum;
        automatic int polls = 0;
        for (int i = 0; i < 64; i++) bus(1, 32'(i * 4), 32'hC0DE_0000 | 32'(i), r);
        while (handled < NEV && polls < 20000) begin
          bus(0, 32'h8000_0000, 0, a);
          polls++;
          if (a == 0) continue;
          bus(0, a, 0, len);
          chk(len == 32'(sent[handled].size()), $sformatf("event %0d length %0d", handled, len));
          sum = 0;
          for (int i = 0; i < (len + 1) / 2; i++) begin
            bus(0, a + 4 + 4 * i, 0, w);
            chk(w[31:16] == sent[handled][2*i], $sformatf("event %0d flit %0d", handled, 2*i));
            sum += w[31:16];
            if (2 * i + 1 < len) begin
              chk(w[15:0] == sent[handled][2*i+1], $sformatf("event %0d flit %0d", handled, 2*i+1));
              sum += w[15:0];
            end
          end
          expect_out.push_back('{hdr_flit(PKT_EVENT, HOST), 16'(ME), 16'hA5A5, sum});
          bus(1, 32'h8000_0008, {15'b0, 1'b0, hdr_flit(PKT_EVENT, HOST)}, r);
          bus(1, 32'h8000_0008, {15'b0, 1'b0, 16'(ME)}, r);
          bus(1, 32'h8000_0008, {15'b0, 1'b0, 16'hA5A5}, r);
          bus(1, 32'h8000_0008, {15'b0, 1'b1, sum}, r);
          bus(1, 32'h8000_0004, a, r);
          handled++;
        end
        for (int i = 0; i < 64; i++) begin
          bus(0, 32'(i * 4), 0, r);
          chk(r == (32'hC0DE_0000 | 32'(i)), "CPU data in RAM intact");
        end
      end
    join
    repeat (100) @(posedge clk);
    chk(handled == NEV, $sformatf("handled %0d events", handled));
    chk(got.size() == NEV, $sformatf("%0d output packets", got.size()));
    foreach (got[k]) if (k < expect_out.size()) chk(got[k] == expect_out[k], $sformatf("output packet %0d", k));
    begin
      logic [31:0] r;
      bus(0, 32'h8000_000C, 0, r);
      chk(r == 32'd16, $sformatf("STATUS at end %h", r));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5ms;
    failures++;
    $display("TIMEOUT");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
